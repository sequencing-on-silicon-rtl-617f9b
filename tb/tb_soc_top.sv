// tb_soc_top: end-to-end test of the SoC uncore at its default parameters.
//
// A bus-master model here plays the part of the cores: it drives the top's
// AXI4 port and runs one complete pathogen-detection style operation:
//  * MAT: a basecaller layer tile, a 4 x 256 by 256 x 4 int8 matrix product
//    (the full scratchpad depth), checked against an integer product here;
//  * ED:  a 100-base read against a 100-base reference carrying
//    substitutions and an indel, checked against a full-matrix Levenshtein
//    distance here, with the paper's 900 K bases/s at 250 MHz as cycle bound;
//  * MAT and ED running at the same time, each finishing on its own
//    completion line;
//  * UART transmit and receive at a divisor set through its register,
//    with a serial model here, and GPIO output, enable and input;
//  * error responses (no device, unmapped register, partial strobe) and a
//    start written to a busy accelerator;
//  * AXI4 bursts: the MAT A scratchpad is filled by one 256-beat INCR write
//    burst and the 16 results are read back by one INCR read burst.
// Each of these mechanisms is counted, and one that never happened counts
// as a failure.
module tb_soc_top;
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

  always #2 clk = ~clk;   // 250 MHz

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam logic [31:0] MAT = 32'h0000, ED = 32'h1000, UART = 32'h2000, GPIO = 32'h3000;

  // mechanism counters
  int n_mat_job = 0, n_ed_job = 0, n_overlap = 0, n_irq = 0, n_busy_start = 0;
  int n_uart_tx = 0, n_uart_rx = 0, n_gpio_out = 0, n_gpio_in = 0;
  int n_decerr = 0, n_slverr = 0;


  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got 0x%0h (%0d) expected 0x%0h (%0d)", what, got, $signed(got), exp, $signed(exp));
    end
  endtask

  task automatic wr(input logic [31:0] a, input logic [31:0] d, output logic [1:0] resp,
                    input logic [3:0] strb = 4'hF);
    @(negedge clk);
    s_awaddr = a; s_wdata = d; s_wstrb = strb; s_awvalid = 1; s_wvalid = 1; s_bready = 1;
    #1;
    while (!s_awready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_awvalid = 0;
    #1;
    while (!s_wready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_wvalid = 0;
    while (!s_bvalid) @(negedge clk);
    resp = s_bresp;
    @(negedge clk);                // handshake completes on this edge
    s_bready = 0;
  endtask

  task automatic wr_ok(input logic [31:0] a, input logic [31:0] d);
    logic [1:0] resp;
    wr(a, d, resp);
    if (resp != AXI_OKAY) begin failures++; $display("FAIL write 0x%0h resp %0d", a, resp); end
  endtask

  task automatic rd(input logic [31:0] a, output logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1; s_rready = 1;
    #1;
    while (!s_arready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_arvalid = 0;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata; resp = s_rresp;
    @(negedge clk);
    s_rready = 0;
  endtask

  task automatic rd_ok(input logic [31:0] a, output logic [31:0] d);
    logic [1:0] resp;
    rd(a, d, resp);
    if (resp != AXI_OKAY) begin failures++; $display("FAIL read 0x%0h resp %0d", a, resp); end
  endtask

  // INCR bursts of n 32-bit words from/to bw[]
  logic [31:0] bw [256];
  int n_wr_burst = 0, n_rd_burst = 0;

  task automatic wr_burst(input logic [31:0] a, input int n);
    @(negedge clk);
    s_awaddr = a; s_awlen = 8'(n - 1); s_awid = 4'd7; s_awvalid = 1; s_bready = 1;
    #1;
    while (!s_awready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_awvalid = 0; s_awlen = '0; s_awid = '0;
    for (int i = 0; i < n; i++) begin
      s_wdata = bw[i]; s_wstrb = 4'hF; s_wlast = (i == n - 1); s_wvalid = 1;
      #1;
      while (!s_wready) begin @(negedge clk); #1; end
      @(negedge clk);
    end
    s_wvalid = 0; s_wlast = 1;
    while (!s_bvalid) @(negedge clk);
    check("burst BRESP", 32'(s_bresp), 32'(AXI_OKAY));
    check("burst BID", 32'(s_bid), 32'd7);
    @(negedge clk);                // handshake completes on this edge
    s_bready = 0;
    n_wr_burst++;
  endtask

  task automatic rd_burst(input logic [31:0] a, input int n);
    int i;
    @(negedge clk);
    s_araddr = a; s_arlen = 8'(n - 1); s_arid = 4'd9; s_arvalid = 1; s_rready = 1;
    #1;
    while (!s_arready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_arvalid = 0; s_arlen = '0; s_arid = '0;
    i = 0;
    while (i < n) begin
      if (s_rvalid) begin
        bw[i] = s_rdata;
        check("burst RRESP", 32'(s_rresp), 32'(AXI_OKAY));
        check("burst RLAST", 32'(s_rlast), 32'(i == n - 1));
        check("burst RID", 32'(s_rid), 32'd9);
        i++;
      end
      @(negedge clk);
    end
    s_rready = 0;
    n_rd_burst++;
  endtask

  // ---------------- MAT ----------------
  localparam int N = 4, K = 256;
  int A [N][K];
  int B [K][N];

  task automatic mat_load();
    logic [31:0] w;
    // A in one 256-beat burst, B word by word
    for (int k = 0; k < K; k++) begin
      w = '0;
      for (int i = 0; i < N; i++) begin A[i][k] = int'($signed(8'($urandom))); w[8*i +: 8] = 8'(A[i][k]); end
      bw[k] = w;
    end
    wr_burst(MAT + 32'h400, K);
    for (int k = 0; k < K; k++) begin
      w = '0;
      for (int j = 0; j < N; j++) begin B[k][j] = int'($signed(8'($urandom))); w[8*j +: 8] = 8'(B[k][j]); end
      wr_ok(MAT + 32'h800 + 32'(4 * k), w);
    end
    wr_ok(MAT + 32'h008, 32'(K));
  endtask

  task automatic mat_check();
    logic [31:0] d;
    int ref_c;
    rd_ok(MAT + 32'h00C, d);
    check("MAT cycles", d, 32'(K + 2 * N));
    rd_burst(MAT + 32'h100, N * N);          // all of C in one burst
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      ref_c = 0;
      for (int k = 0; k < K; k++) ref_c += A[i][k] * B[k][j];
      check($sformatf("MAT C[%0d][%0d]", i, j), bw[N * i + j], 32'(ref_c));
    end
    n_mat_job++;
  endtask

  // ---------------- ED ----------------
  localparam int L = 100;
  int q [L];
  int r [L];

  function automatic int ref_ed(input int m, input int n);
    int D [L+1][L+1];
    for (int i = 0; i <= m; i++) D[i][0] = i;
    for (int j = 0; j <= n; j++) D[0][j] = j;
    for (int i = 1; i <= m; i++)
      for (int j = 1; j <= n; j++) begin
        int v;
        v = D[i-1][j-1] + ((q[i-1] != r[j-1]) ? 1 : 0);
        if (D[i-1][j] + 1 < v) v = D[i-1][j] + 1;
        if (D[i][j-1] + 1 < v) v = D[i][j-1] + 1;
        D[i][j] = v;
      end
    return D[m][n];
  endfunction

  task automatic ed_load();
    logic [31:0] w;
    for (int i = 0; i < L; i++) begin q[i] = $urandom % 4; r[i] = q[i]; end
    for (int x = 0; x < 6; x++) r[$urandom % L] = $urandom % 4;   // substitutions
    for (int i = 60; i < L - 1; i++) r[i] = r[i + 1];               // deletion
    for (int i = L - 1; i > 20; i--) r[i] = r[i - 1];               // insertion
    r[20] = $urandom % 4;
    for (int wi = 0; wi < (L + 15) / 16; wi++) begin
      w = '0;
      for (int b = 0; b < 16; b++) if (wi * 16 + b < L) w[2*b +: 2] = 2'(q[wi * 16 + b]);
      wr_ok(ED + 32'h400 + 32'(4 * wi), w);
      w = '0;
      for (int b = 0; b < 16; b++) if (wi * 16 + b < L) w[2*b +: 2] = 2'(r[wi * 16 + b]);
      wr_ok(ED + 32'h800 + 32'(4 * wi), w);
    end
    wr_ok(ED + 32'h008, {16'(L), 16'(L)});
  endtask

  task automatic ed_check();
    logic [31:0] d;
    rd_ok(ED + 32'h010, d);
    check("ED distance", d, 32'(ref_ed(L, L)));
    rd_ok(ED + 32'h00C, d);
    check("ED cycles", d, 32'(L * (L + 1) + 2));
    checks++;
    if (d > 27777) begin failures++; $display("FAIL ED slower than 900 K bases/s at 250 MHz"); end
    n_ed_job++;
  endtask

  // ---------------- UART serial model ----------------
  task automatic uart_catch(input int div, output logic [7:0] b);
    while (uart_txd) @(posedge clk);
    repeat (div / 2) @(posedge clk);
    for (int i = 0; i < 8; i++) begin repeat (div) @(posedge clk); b[i] = uart_txd; end
    repeat (div) @(posedge clk);
    check("UART stop bit", {31'd0, uart_txd}, 32'd1);
  endtask

  task automatic uart_send(input int div, input logic [7:0] b);
    uart_rxd = 0; repeat (div) @(posedge clk);
    for (int i = 0; i < 8; i++) begin uart_rxd = b[i]; repeat (div) @(posedge clk); end
    uart_rxd = 1; repeat (div + 2) @(posedge clk);
  endtask

  initial begin
    logic [31:0] d;
    logic [1:0] resp;
    logic [7:0] b;
    repeat (4) @(negedge clk);
    rst_n = 1;

    // --- MAT alone
    mat_load();
    wr_ok(MAT, 32'd1);
    wr(MAT, 32'd1, resp);                    // start while busy: ignored
    rd_ok(MAT + 32'h004, d);
    if (d[0]) n_busy_start++;
    while (!mat_irq) @(negedge clk);
    n_irq++;
    mat_check();

    // --- ED alone
    ed_load();
    wr_ok(ED, 32'd1);
    while (!ed_irq) @(negedge clk);
    n_irq++;
    ed_check();

    // --- MAT and ED together, as a core would overlap basecalling and comparison
    mat_load();
    ed_load();
    wr_ok(ED, 32'd1);
    wr_ok(MAT, 32'd1);
    check("MAT irq cleared by start", {31'd0, mat_irq}, 32'd0);
    begin
      logic [31:0] sm, se;
      rd_ok(MAT + 32'h004, sm);
      rd_ok(ED + 32'h004, se);
      if (sm[0] && se[0]) n_overlap++;       // both accelerators busy at once
    end
    fork
      begin while (!mat_irq) @(negedge clk); n_irq++; end
      begin while (!ed_irq)  @(negedge clk); n_irq++; end
    join
    mat_check();
    ed_check();

    // --- UART
    wr_ok(UART + 32'h00C, 32'd8);
    fork
      uart_catch(8, b);
      wr_ok(UART + 32'h000, 32'h47);         // 'G'
    join
    check("UART tx byte", 32'(b), 32'h47);
    n_uart_tx++;
    uart_send(8, 8'h54);                     // 'T'
    rd_ok(UART + 32'h004, d);
    check("UART rx byte", 32'(d[8:0]), {23'd0, 1'b1, 8'h54});
    n_uart_rx++;

    // --- GPIO
    wr_ok(GPIO + 32'h004, 32'h0000_FFFF);
    wr_ok(GPIO + 32'h000, 32'h0000_A5A5);
    check("GPIO out", gpio_o, 32'h0000_A5A5);
    check("GPIO oe", gpio_oe, 32'h0000_FFFF);
    n_gpio_out++;
    gpio_i = 32'h1234_0000;
    repeat (3) @(negedge clk);
    rd_ok(GPIO + 32'h008, d);
    check("GPIO in", d, 32'h1234_0000);
    n_gpio_in++;

    // --- error responses
    rd(32'h0000_9000, d, resp);
    check("DECERR", 32'(resp), 32'(AXI_DECERR));
    if (resp == AXI_DECERR) n_decerr++;
    rd(ED + 32'h0F0, d, resp);
    check("SLVERR unmapped", 32'(resp), 32'(AXI_SLVERR));
    if (resp == AXI_SLVERR) n_slverr++;
    wr(GPIO + 32'h000, 32'hFFFF_FFFF, resp, 4'h1);
    check("SLVERR strobe", 32'(resp), 32'(AXI_SLVERR));
    check("partial write not performed", gpio_o, 32'h0000_A5A5);
    if (resp == AXI_SLVERR) n_slverr++;

    $display("mechanisms: mat_job=%0d ed_job=%0d overlap=%0d irq=%0d busy_start=%0d uart_tx=%0d uart_rx=%0d gpio_out=%0d gpio_in=%0d decerr=%0d slverr=%0d wr_burst=%0d rd_burst=%0d",
             n_mat_job, n_ed_job, n_overlap, n_irq, n_busy_start, n_uart_tx, n_uart_rx,
             n_gpio_out, n_gpio_in, n_decerr, n_slverr, n_wr_burst, n_rd_burst);
    check("mechanism mat_job",    32'(n_mat_job > 0), 1);
    check("mechanism ed_job",     32'(n_ed_job > 0), 1);
    check("mechanism overlap",    32'(n_overlap > 0), 1);
    check("mechanism irq",        32'(n_irq > 0), 1);
    check("mechanism busy_start", 32'(n_busy_start > 0), 1);
    check("mechanism uart_tx",    32'(n_uart_tx > 0), 1);
    check("mechanism uart_rx",    32'(n_uart_rx > 0), 1);
    check("mechanism gpio_out",   32'(n_gpio_out > 0), 1);
    check("mechanism gpio_in",    32'(n_gpio_in > 0), 1);
    check("mechanism decerr",     32'(n_decerr > 0), 1);
    check("mechanism slverr",     32'(n_slverr > 0), 1);
    check("mechanism wr_burst",   32'(n_wr_burst > 0), 1);
    check("mechanism rd_burst",   32'(n_rd_burst > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
