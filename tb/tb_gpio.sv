// tb_gpio: self-checking test of the GPIO block.
//
// Checks the reset state (outputs low and disabled), writes and reads back
// OUT and OE, the SET and CLR registers, the two-cycle synchroniser delay on
// the inputs (IN shows a new pin value two clocks after it is applied, not
// one) and the error response of an unmapped offset.
module tb_gpio;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [31:0] gpio_i = '0, gpio_o, gpio_oe;
  reg_req_t req;
  reg_rsp_t rsp;
  int checks = 0, failures = 0;

  gpio dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr32(input logic [11:0] a, input logic [31:0] d);
    req = '{valid: 1'b1, we: 1'b1, addr: a, wdata: d};
    @(negedge clk);
    req = '0;
  endtask

  task automatic rd32(input logic [11:0] a, output logic [31:0] d, output logic e);
    req = '{valid: 1'b1, we: 1'b0, addr: a, wdata: '0};
    #1;
    d = rsp.rdata;
    e = rsp.err;
    @(negedge clk);
    req = '0;
  endtask

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got 0x%08h expected 0x%08h", what, got, exp);
    end
  endtask

  initial begin
    logic [31:0] d, v, model;
    logic e;
    req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check("reset out", gpio_o, 32'd0);
    check("reset oe", gpio_oe, 32'd0);
    model = '0;
    for (int t = 0; t < 8; t++) begin
      v = $urandom;
      wr32(12'h000, v); model = v;
      check("OUT pins", gpio_o, model);
      rd32(12'h000, d, e);
      check("OUT readback", d, model);
      v = $urandom;
      wr32(12'h00C, v); model |= v;
      check("SET", gpio_o, model);
      v = $urandom;
      wr32(12'h010, v); model &= ~v;
      check("CLR", gpio_o, model);
      v = $urandom;
      wr32(12'h004, v);
      check("OE pins", gpio_oe, v);
      rd32(12'h004, d, e);
      check("OE readback", d, v);
    end
    for (int t = 0; t < 8; t++) begin
      v = $urandom;
      gpio_i = v;
      @(negedge clk);
      rd32(12'h008, d, e);          // sampled after one edge: still old
      checks++;
      if (d === v && t > 0) begin failures++; $display("FAIL IN not synchronised"); end
      rd32(12'h008, d, e);
      check("IN after two edges", d, v);
    end
    rd32(12'h014, d, e);
    check("unmapped error", 32'(e), 32'd1);
    rd32(12'h008, d, e);
    check("mapped no error", 32'(e), 32'd0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
