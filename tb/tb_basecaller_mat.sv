// tb_basecaller_mat: a six-layer convolutional basecaller run on MAT through
// the SoC's AXI4 port, the way core software would drive it.
//
// The basecaller this SoC targets is a stack of six 1-D convolutions
// separated by ReLU activations. Only its depth is known, not its layer
// shapes, so this test uses six layers of its own choosing with that
// structure, kept small so the run is short:
//   channels 1 -> 8 -> 16 -> 16 -> 16 -> 8 -> 4, kernels 9, 5, 5, 5, 5, 3,
// all with "same" zero padding over T = 32 time steps. Between layers the
// software applies ReLU and requantises to the int8 operand range
// (arithmetic right shift, clip to 0..127); the last layer's raw int32
// scores are kept. Each layer is lowered to matrix products in im2col form:
// a 4 x K slice of weights (4 output channels, K = input channels x taps)
// times a K x 4 slice of the unfolded input (4 time steps) gives one 4x4
// output tile, i.e. one MAT job, with K up to 80 here. That is
// (C_out / 4) x (T / 4) jobs per layer, 136 in all. Every layer's output is
// compared with a direct convolution computed here without im2col, from
// the reference output of the layer before.
module tb_basecaller_mat;
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

  initial begin
    repeat (2000000) @(posedge clk);
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

  localparam int T = 32;
  localparam int NL = 6;                       // layers
  localparam int CMAX = 16, KMAX = 9;
  localparam int CH [NL+1] = '{1, 8, 16, 16, 16, 8, 4};
  localparam int KS [NL]   = '{9, 5, 5, 5, 5, 3};
  localparam int SHIFT = 5;

  int w   [NL][CMAX][CMAX][KMAX];
  int act [NL+1][CMAX][T];      // layer inputs/outputs computed through MAT
  int ref_a [NL+1][CMAX][T];    // the same, computed directly
  int n_jobs = 0, n_relu = 0, n_clip = 0, n_params = 0;

  function automatic int requant(input int v);
    int q;
    if (v < 0) return 0;        // ReLU
    q = v >>> SHIFT;
    return q > 127 ? 127 : q;
  endfunction

  // One MAT job: Ct[i][j] = sum_k Wt[i][k] * Xt[k][j]
  int Wt [4][CMAX*KMAX];
  int Xt [CMAX*KMAX][4];
  int Ct [4][4];
  task automatic mat_job(input int K);
    logic [31:0] wd, d;
    for (int k = 0; k < K; k++) begin
      wd = '0;
      for (int i = 0; i < 4; i++) wd[8*i +: 8] = 8'(Wt[i][k]);
      wr_ok(32'h0400 + 32'(4 * k), wd);
      wd = '0;
      for (int j = 0; j < 4; j++) wd[8*j +: 8] = 8'(Xt[k][j]);
      wr_ok(32'h0800 + 32'(4 * k), wd);
    end
    wr_ok(32'h0008, 32'(K));
    wr_ok(32'h0000, 32'd1);
    while (!mat_irq) @(negedge clk);
    for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
      rd_ok(32'h0100 + 32'(4 * (4 * i + j)), d);
      Ct[i][j] = int'($signed(d));
    end
    n_jobs++;
  endtask

  initial begin
    int acc, tt, cin, cout, ks;
    bit last;
    repeat (4) @(negedge clk);
    rst_n = 1;
    // random signal and weights (5-bit weights keep sums in a readable range)
    for (int t = 0; t < T; t++) begin
      act[0][0][t] = int'($signed(8'($urandom)));
      ref_a[0][0][t] = act[0][0][t];
    end
    for (int l = 0; l < NL; l++)
      for (int o = 0; o < CH[l+1]; o++) for (int c = 0; c < CH[l]; c++) for (int k = 0; k < KS[l]; k++) begin
        w[l][o][c][k] = int'($signed(5'($urandom)));
        n_params++;
      end

    for (int l = 0; l < NL; l++) begin
      cin = CH[l]; cout = CH[l+1]; ks = KS[l]; last = (l == NL - 1);
      // direct reference from the reference input
      for (int o = 0; o < cout; o++) for (int t = 0; t < T; t++) begin
        acc = 0;
        for (int c = 0; c < cin; c++) for (int k = 0; k < ks; k++) begin
          tt = t + k - ks / 2;
          if (tt >= 0 && tt < T) acc += w[l][o][c][k] * ref_a[l][c][tt];
        end
        ref_a[l+1][o][t] = last ? acc : requant(acc);
      end
      // the layer on MAT, tile by tile
      for (int og = 0; og < cout; og += 4)
        for (int tg = 0; tg < T; tg += 4) begin
          for (int i = 0; i < 4; i++) for (int c = 0; c < cin; c++) for (int k = 0; k < ks; k++)
            Wt[i][c * ks + k] = w[l][og + i][c][k];
          for (int c = 0; c < cin; c++) for (int k = 0; k < ks; k++) for (int j = 0; j < 4; j++) begin
            tt = tg + j + k - ks / 2;
            Xt[c * ks + k][j] = (tt >= 0 && tt < T) ? act[l][c][tt] : 0;
          end
          mat_job(cin * ks);
          for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
            if (!last && Ct[i][j] < 0) n_relu++;
            if (!last && (Ct[i][j] >>> SHIFT) > 127) n_clip++;
            act[l+1][og + i][tg + j] = last ? Ct[i][j] : requant(Ct[i][j]);
          end
        end
      for (int o = 0; o < cout; o++) for (int t = 0; t < T; t++) begin
        checks++;
        if (act[l+1][o][t] != ref_a[l+1][o][t]) begin
          failures++;
          $display("FAIL layer %0d [%0d][%0d]: %0d vs %0d", l + 1, o, t, act[l+1][o][t], ref_a[l+1][o][t]);
        end
      end
    end

    $display("basecaller: %0d layers, %0d weights, MAT jobs=%0d, zeroed by ReLU=%0d, clipped=%0d",
             NL, n_params, n_jobs, n_relu, n_clip);
    checks++;
    if (n_jobs != 136) begin failures++; $display("FAIL job count %0d", n_jobs); end
    checks++;
    if (n_relu == 0) begin failures++; $display("FAIL ReLU never active"); end
    checks++;
    if (n_clip == 0) begin failures++; $display("FAIL requantisation never clipped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
