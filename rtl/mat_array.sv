// mat_array: the N x N output-stationary systolic array of MAT (N = 4).
//
// Each cycle with in_valid high delivers one rank-1 step k of C = A * B:
// a_col[i] = A[i][k] for the N rows and b_row[j] = B[k][j] for the N columns.
// Edge registers skew the inputs so that row i enters i cycles late and
// column j enters j cycles late; inside the grid every cell passes its A
// operand right and its B operand down with one register each, so cell (i,j)
// sees A[i][k] and B[k][j] together at cycle k + i + j and accumulates their
// product. After the last step has been presented, the results c[i][j] are
// complete 2*(N-1)+1 clock edges later (LATENCY) and stay put until the next
// clear. clear zeroes all accumulators. The grid size follows the paper's
// "4x4 systolic array"; the output-stationary dataflow, the edge skew and
// the signed integer format are this design's choices.
module mat_array #(
  parameter int unsigned N     = 4,
  parameter int unsigned IN_W  = 8,
  parameter int unsigned ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  a_col [N],
  input  logic signed [IN_W-1:0]  b_row [N],
  output logic signed [ACC_W-1:0] c     [N][N]
);


  // Skew delay lines: element i of a (and of b, and of valid) is delayed i cycles.
  logic signed [IN_W-1:0] a_skew [N][N];
  logic signed [IN_W-1:0] b_skew [N][N];
  logic                   v_skew [N][N];

  for (genvar i = 0; i < N; i++) begin : g_skew
    assign a_skew[i][0] = a_col[i];
    assign b_skew[i][0] = b_row[i];
    assign v_skew[i][0] = in_valid;
    for (genvar d = 1; d < N; d++) begin : g_dly
      if (d <= i) begin : g_reg
        always_ff @(posedge clk or negedge rst_n) begin
          if (!rst_n) begin
            a_skew[i][d] <= '0;
            b_skew[i][d] <= '0;
            v_skew[i][d] <= 1'b0;
          end else begin
            a_skew[i][d] <= a_skew[i][d-1];
            b_skew[i][d] <= b_skew[i][d-1];
            v_skew[i][d] <= v_skew[i][d-1];
          end
        end
      end else begin : g_none
        assign a_skew[i][d] = '0;
        assign b_skew[i][d] = '0;
        assign v_skew[i][d] = 1'b0;
      end
    end
  end

  // Grid wiring: a/valid flow left to right, b flows top to bottom.
  logic signed [IN_W-1:0] a_h [N][N+1];
  logic                   v_h [N][N+1];
  logic signed [IN_W-1:0] b_v [N+1][N];

  for (genvar i = 0; i < N; i++) begin : g_row
    assign a_h[i][0] = a_skew[i][i];
    assign v_h[i][0] = v_skew[i][i];
    assign b_v[0][i] = b_skew[i][i];
    for (genvar j = 0; j < N; j++) begin : g_col
      mat_pe #(.IN_W(IN_W), .ACC_W(ACC_W)) u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .clear    (clear),
        .in_valid (v_h[i][j]),
        .a_in     (a_h[i][j]),
        .b_in     (b_v[i][j]),
        .out_valid(v_h[i][j+1]),
        .a_out    (a_h[i][j+1]),
        .b_out    (b_v[i+1][j]),
        .acc      (c[i][j])
      );
    end
  end

endmodule
