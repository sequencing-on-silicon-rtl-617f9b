// gpio: general-purpose I/O pins under software control.
//
// Each of the WIDTH pins has an output value bit (OUT) and an output enable
// bit (OE), both held in registers and driven to the pad ring; the pin inputs
// are brought into the clock domain through a two-flip-flop synchroniser and
// read through IN. A write to SET or CLR sets or clears the OUT bits whose
// write-data bits are 1, so single pins can be changed without a
// read-modify-write. Register map (byte offsets): 0x000 OUT, 0x004 OE,
// 0x008 IN (read only), 0x00C SET (write only), 0x010 CLR (write only).
// The paper only names a GPIO block on the floorplan; width, reset values
// (all outputs disabled and low) and registers are this design's choice.
module gpio
  import soc_pkg::*;
#(
  parameter int unsigned WIDTH = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  reg_req_t         req,
  output reg_rsp_t         rsp,
  input  logic [WIDTH-1:0] gpio_i,
  output logic [WIDTH-1:0] gpio_o,
  output logic [WIDTH-1:0] gpio_oe
);

  logic [WIDTH-1:0] sync1, sync2;
  logic             wr;
  assign wr = req.valid && req.we;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gpio_o  <= '0;
      gpio_oe <= '0;
      sync1   <= '0;
      sync2   <= '0;
    end else begin
      sync1 <= gpio_i;
      sync2 <= sync1;
      if (wr) begin
        unique case (req.addr)
          12'h000: gpio_o  <= req.wdata[WIDTH-1:0];
          12'h004: gpio_oe <= req.wdata[WIDTH-1:0];
          12'h00C: gpio_o  <= gpio_o |  req.wdata[WIDTH-1:0];
          12'h010: gpio_o  <= gpio_o & ~req.wdata[WIDTH-1:0];
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    rsp = '0;
    if (req.valid) begin
      unique case (req.addr)
        12'h000:          rsp.rdata = 32'(gpio_o);
        12'h004:          rsp.rdata = 32'(gpio_oe);
        12'h008:          rsp.rdata = 32'(sync2);
        12'h00C, 12'h010: rsp.rdata = '0;
        default:          rsp.err   = 1'b1;
      endcase
    end
  end

endmodule
