// tb_uart: self-checking test of the UART.
//
// Runs with a divisor of 16 clocks per bit. The transmitter is checked by a
// receiver model here that samples txd in the middle of each bit and also
// checks the bit timing (start edge to middle of stop bit = 9.5 bit times). The receiver is driven by a
// serialiser model here with random bytes; its valid flag, the clear-on-read
// behaviour, the overrun flag and the framing-error flag are checked. The
// divisor register is then changed to 8 at run time and one byte is sent in
// each direction again.
module tb_uart;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic rxd = 1, txd;
  reg_req_t req;
  reg_rsp_t rsp;
  int checks = 0, failures = 0;
  int div = 16;

  uart #(.CLK_DIV(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr32(input logic [11:0] a, input logic [31:0] d);
    req = '{valid: 1'b1, we: 1'b1, addr: a, wdata: d};
    @(negedge clk);
    req = '0;
  endtask

  task automatic rd32(input logic [11:0] a, output logic [31:0] d);
    req = '{valid: 1'b1, we: 1'b0, addr: a, wdata: '0};
    #1;
    d = rsp.rdata;
    @(negedge clk);
    req = '0;
  endtask

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got 0x%0h expected 0x%0h", what, got, exp);
    end
  endtask

  // Receive one frame from txd; returns the byte and the frame length in clocks
  task automatic catch_tx(output logic [7:0] b, output int len);
    int t0;
    while (txd) @(posedge clk);
    t0 = 0;
    repeat (div / 2) begin @(posedge clk); t0++; end
    for (int i = 0; i < 8; i++) begin
      repeat (div) begin @(posedge clk); t0++; end
      b[i] = txd;
    end
    repeat (div) begin @(posedge clk); t0++; end
    checks++;
    if (txd !== 1'b1) begin failures++; $display("FAIL stop bit"); end
    // t0 is now the time from the start edge to the middle of the stop bit
    len = t0;
  endtask

  task automatic send_rx(input logic [7:0] b, input bit stop);
    rxd = 0; repeat (div) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; repeat (div) @(posedge clk); end
    rxd = stop; repeat (div) @(posedge clk);
    rxd = 1; repeat (2) @(posedge clk);
  endtask

  initial begin
    logic [31:0] d;
    logic [7:0] b, got;
    int len;
    req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    rd32(12'h00C, d);
    check("DIV reset value", d, 32'd16);
    // transmit
    for (int t = 0; t < 6; t++) begin
      b = 8'($urandom);
      if (t == 0) b = 8'h00;
      if (t == 1) b = 8'hFF;
      fork
        catch_tx(got, len);
        begin wr32(12'h000, 32'(b)); rd32(12'h008, d); check("tx busy", 32'(d[0]), 32'(1'b1)); end
      join
      check("tx byte", 32'(got), 32'(b));
      checks++;
      if (len != div * 19 / 2) begin
        failures++; $display("FAIL frame timing %0d", len);
      end
      // the transmitter frees itself within the second half of the stop bit
      repeat (div / 2 + 2) @(negedge clk);
      rd32(12'h008, d);
      check("tx idle", 32'(d[0]), 32'(1'b0));
    end
    // receive
    for (int t = 0; t < 6; t++) begin
      b = 8'($urandom);
      send_rx(b, 1'b1);
      @(negedge clk);
      rd32(12'h004, d);
      check("rx byte and valid", 32'(d[8:0]), {23'd0, 1'b1, b});
      rd32(12'h004, d);
      check("rx valid cleared by read", 32'(d[8]), 32'(1'b0));
    end
    // overrun: two bytes without reading
    send_rx(8'h5A, 1'b1);
    send_rx(8'hA5, 1'b1);
    @(negedge clk);
    rd32(12'h008, d);
    check("overrun flag", 32'(d[3:1]), 32'(3'b011));
    rd32(12'h004, d);
    check("newest byte kept", 32'(d[8:0]), {23'd0, 1'b1, 8'hA5});
    wr32(12'h008, 32'd0);
    rd32(12'h008, d);
    check("flags cleared", 32'(d[3:1]), 32'(3'b000));
    // framing error: stop bit low
    send_rx(8'h3C, 1'b0);
    @(negedge clk);
    rd32(12'h008, d);
    check("framing error", 32'(d[3:1]), 32'(3'b100));
    wr32(12'h008, 32'd0);
    // change the divisor at run time
    wr32(12'h00C, 32'd8);
    div = 8;
    rd32(12'h00C, d);
    check("DIV written", d, 32'd8);
    fork
      catch_tx(got, len);
      wr32(12'h000, 32'h96);
    join
    repeat (div) @(negedge clk);
    check("tx byte at DIV 8", 32'(got), 32'h96);
    send_rx(8'h69, 1'b1);
    @(negedge clk);
    rd32(12'h004, d);
    check("rx byte at DIV 8", 32'(d[8:0]), {23'd0, 1'b1, 8'h69});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
