// mat_pe: one multiply-accumulate cell of the MAT systolic array.
//
// Output-stationary cell: the operand coming from the left (a row element of
// A) and the operand coming from above (a column element of B) are
// multiplied as signed integers and added into a local accumulator when
// in_valid is high. Both operands and the valid flag are registered and
// passed on to the right and downward neighbours one cycle later, which is
// what makes the grid systolic. clear zeroes the accumulator (it has priority
// over an accumulate in the same cycle). The integer operand and accumulator
// widths are this design's choice; the paper does not give the arithmetic
// format of MAT.
module mat_pe #(
  parameter int unsigned IN_W  = 8,
  parameter int unsigned ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  a_in,
  input  logic signed [IN_W-1:0]  b_in,
  output logic                    out_valid,
  output logic signed [IN_W-1:0]  a_out,
  output logic signed [IN_W-1:0]  b_out,
  output logic signed [ACC_W-1:0] acc
);

  logic signed [2*IN_W-1:0] prod;
  assign prod = a_in * b_in;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      a_out     <= '0;
      b_out     <= '0;
      acc       <= '0;
    end else begin
      out_valid <= in_valid;
      a_out     <= a_in;
      b_out     <= b_in;
      if (clear)         acc <= '0;
      else if (in_valid) acc <= acc + ACC_W'(prod);
    end
  end

endmodule
