// tb_pathogen_scan: pathogen detection by scanning a viral-size genome with
// ED through the SoC's AXI4 port, the way core software would drive it.
//
// A random 30,000-base genome (the size of a large RNA virus such as
// SARS-CoV-2) is generated here. A 100-base read is cut from a random
// position and given substitutions and one insertion, as a noisy basecalled
// read would have. Software slides a 100-base window along the genome with a
// stride of 10 bases (so the best window is at most 5 bases off the read's
// origin); for each window it loads the 7 reference words, starts
// ED and reads the distance. The query (the read) is loaded once. Every
// window's distance is compared with a Levenshtein distance computed here,
// and the best window must lie within one stride of the read's true origin
// with a distance far below that of unrelated windows. A second, unrelated
// random read must not be detected anywhere.
module tb_pathogen_scan;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [31:0] s_awaddr = '0, s_wdata = '0, s_araddr = '0, s_rdata;
  logic [3:0]  s_wstrb = 4'hF;
  logic s_awvalid = 0, s_awready, s_wvalid = 0, s_wready, s_bvalid, s_bready = 0;
  logic s_arvalid = 0, s_arready, s_rvalid, s_rready = 0;
  logic [1:0] s_bresp, s_rresp;
  logic [3:0] s_awid = '0, s_arid = '0, s_bid, s_rid;
  logic [7:0] s_awlen = '0, s_arlen = '0;          // single beats unless a burst task sets them
  logic [2:0] s_awsize = 3'd2, s_arsize = 3'd2;    // 32-bit beats
  logic [1:0] s_awburst = 2'b01, s_arburst = 2'b01; // INCR
  logic s_wlast = 1'b1, s_rlast;
  logic mat_irq, ed_irq;
  logic uart_rxd = 1, uart_txd;
  logic [31:0] gpio_i = '0, gpio_o, gpio_oe;
  int checks = 0, failures = 0;

  soc_top dut (.*);

  always #2 clk = ~clk;

  localparam int G = 30000, L = 100, STRIDE = 10, THRESH = 30;
  localparam int NWIN = (G - L) / STRIDE + 1;

  initial begin
    repeat (80000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr_ok(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk);
    s_awaddr = a; s_wdata = d; s_wstrb = 4'hF; s_awvalid = 1; s_wvalid = 1; s_bready = 1;
    #1;
    while (!s_awready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_awvalid = 0;
    #1;
    while (!s_wready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_wvalid = 0;
    while (!s_bvalid) @(negedge clk);
    if (s_bresp != AXI_OKAY) begin failures++; $display("FAIL write 0x%0h", a); end
    @(negedge clk);                // handshake completes on this edge
    s_bready = 0;
  endtask

  task automatic rd_ok(input logic [31:0] a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1; s_rready = 1;
    #1;
    while (!s_arready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_arvalid = 0;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    if (s_rresp != AXI_OKAY) begin failures++; $display("FAIL read 0x%0h", a); end
    @(negedge clk);
    s_rready = 0;
  endtask

  byte unsigned genome [G];
  int read_q [L];
  int win_r [L];

  function automatic int ref_ed();
    int prev [L+1];
    int cur  [L+1];
    for (int j = 0; j <= L; j++) prev[j] = j;
    for (int i = 1; i <= L; i++) begin
      cur[0] = i;
      for (int j = 1; j <= L; j++) begin
        int v;
        v = prev[j-1] + ((read_q[i-1] != win_r[j-1]) ? 1 : 0);
        if (prev[j] + 1 < v) v = prev[j] + 1;
        if (cur[j-1] + 1 < v) v = cur[j-1] + 1;
        cur[j] = v;
      end
      prev = cur;
    end
    return prev[L];
  endfunction

  task automatic load_words(input logic [31:0] base, input int s [L]);
    logic [31:0] w;
    for (int wi = 0; wi < (L + 15) / 16; wi++) begin
      w = '0;
      for (int b = 0; b < 16; b++) if (wi * 16 + b < L) w[2*b +: 2] = 2'(s[wi * 16 + b]);
      wr_ok(base + 32'(4 * wi), w);
    end
  endtask

  // Scan the whole genome with the current query; returns best window and distance
  task automatic scan(output int best_pos, output int best_d, output int second_d, input int origin);
    logic [31:0] d;
    best_d = 1 << 30; second_d = 1 << 30; best_pos = -1;
    load_words(32'h1400, read_q);
    wr_ok(32'h1008, {16'(L), 16'(L)});
    for (int wdx = 0; wdx < NWIN; wdx++) begin
      for (int j = 0; j < L; j++) win_r[j] = int'(genome[wdx * STRIDE + j]);
      load_words(32'h1800, win_r);
      wr_ok(32'h1000, 32'd1);
      while (!ed_irq) @(negedge clk);
      rd_ok(32'h1010, d);
      checks++;
      if (int'(d) != ref_ed()) begin
        failures++;
        $display("FAIL window %0d: ED %0d, expected %0d", wdx, d, ref_ed());
      end
      if (int'(d) < best_d) begin best_d = int'(d); best_pos = wdx * STRIDE; end
      // best distance among windows that do not overlap the true origin
      if ((wdx * STRIDE + L <= origin || wdx * STRIDE >= origin + L) && int'(d) < second_d)
        second_d = int'(d);
    end
  endtask

  initial begin
    int p, best_pos, best_d, other_d;
    longint t0;
    logic [31:0] d;
    repeat (4) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < G; i++) genome[i] = byte'($urandom % 4);

    // ---- a read from the genome, with errors
    p = 1000 + $urandom % (G - 2000);
    for (int i = 0; i < L; i++) read_q[i] = int'(genome[p + i]);
    for (int x = 0; x < 5; x++) read_q[$urandom % L] = $urandom % 4;
    for (int i = L - 1; i > 40; i--) read_q[i] = read_q[i - 1];   // one inserted base
    read_q[40] = $urandom % 4;
    t0 = $time;
    scan(best_pos, best_d, other_d, p);
    $display("read from %0d: best window %0d, distance %0d; best unrelated window %0d; %0d windows in %0d cycles",
             p, best_pos, best_d, other_d, NWIN, longint'($time - t0) / 4);
    checks++;
    if (best_pos < p - STRIDE || best_pos > p + STRIDE) begin
      failures++; $display("FAIL best window %0d not near origin %0d", best_pos, p);
    end
    checks++;
    if (best_d > THRESH || other_d <= THRESH) begin
      failures++; $display("FAIL detection threshold: best %0d, unrelated %0d", best_d, other_d);
    end
    rd_ok(32'h100C, d);
    checks++;
    if (d != 32'(L * (L + 1) + 2)) begin failures++; $display("FAIL ED cycles %0d", d); end

    // ---- an unrelated read: no window should pass the threshold
    for (int i = 0; i < L; i++) read_q[i] = $urandom % 4;
    scan(best_pos, best_d, other_d, -10 * L);
    $display("unrelated read: best distance %0d", best_d);
    checks++;
    if (best_d <= THRESH) begin failures++; $display("FAIL unrelated read detected (%0d)", best_d); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
