// tb_axi_bridge: self-checking test of the AXI4 slave bridge.
//
// Four device models (64 words of storage each; offsets from 0x100 answer
// with an error) hang on the register buses. A master model here issues
// random single-beat and burst transactions (INCR, FIXED and WRAP, up to 16
// beats, random IDs), with random gaps between W beats and with BREADY and
// RREADY held low for random times, and checks against a shadow copy of the
// devices whose beat addresses are computed here from the AXI4 rules.
// Checked: read data, RLAST, RID/BID echo, OKAY/SLVERR/DECERR (the worst
// over a write burst), write beats with partial strobes refused while the
// other beats of the burst are performed, narrow transfers refused, exactly
// one device access per performed beat, one beat per clock on a streaming
// burst in each direction, and that simultaneous AW and AR are taken in
// alternating order.
module tb_axi_bridge;
  import soc_pkg::*;
  localparam int ID_W = 4;
  logic clk = 0, rst_n = 0;
  logic [ID_W-1:0] s_awid = '0, s_arid = '0, s_bid, s_rid;
  logic [31:0] s_awaddr = '0, s_wdata = '0, s_araddr = '0, s_rdata;
  logic [7:0]  s_awlen = '0, s_arlen = '0;
  logic [2:0]  s_awsize = 3'd2, s_arsize = 3'd2;
  logic [1:0]  s_awburst = 2'b01, s_arburst = 2'b01;
  logic [3:0]  s_wstrb = '0;
  logic s_wlast = 0, s_rlast;
  logic s_awvalid = 0, s_awready, s_wvalid = 0, s_wready, s_bvalid, s_bready = 0;
  logic s_arvalid = 0, s_arready, s_rvalid, s_rready = 0;
  logic [1:0] s_bresp, s_rresp;
  reg_req_t dev_req [N_DEV];
  reg_rsp_t dev_rsp [N_DEV];
  int checks = 0, failures = 0;

  axi_bridge dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Device models
  logic [31:0] mem [N_DEV][64];
  int accesses = 0;
  for (genvar d = 0; d < N_DEV; d++) begin : g_dev
    always_comb begin
      dev_rsp[d] = '0;
      if (dev_req[d].valid) begin
        if (dev_req[d].addr >= 12'h100) dev_rsp[d].err = 1'b1;
        else if (!dev_req[d].we) dev_rsp[d].rdata = mem[d][dev_req[d].addr[7:2]];
      end
    end
    always_ff @(posedge clk) begin
      if (dev_req[d].valid && dev_req[d].we && dev_req[d].addr < 12'h100)
        mem[d][dev_req[d].addr[7:2]] <= dev_req[d].wdata;
    end
  end

  // device accesses that were served (offsets below 0x100)
  always_ff @(posedge clk) begin
    int n;
    n = 0;
    for (int d = 0; d < N_DEV; d++)
      if (dev_req[d].valid && dev_req[d].addr < 12'h100) n++;
    accesses <= accesses + n;
  end

  logic [31:0] shadow [N_DEV][64];

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got 0x%0h expected 0x%0h", what, got, exp);
    end
  endtask

  // Beat address per the AXI4 rules (32-bit beats)
  function automatic int beat_addr(input int start, input int burst, input int len, input int i);
    int n, bound;
    n = len + 1;
    if (burst == 0) return start;
    if (burst == 2) begin
      bound = (start / (n * 4)) * (n * 4);
      return bound + ((start - bound + 4 * i) % (n * 4));
    end
    return start + 4 * i;
  endfunction

  // Expected response of one beat
  function automatic int exp_resp(input int a, input int size, input bit full_strb);
    if (((a >> 12) & 15) >= N_DEV) return 3;
    if (size != 2 || !full_strb) return 2;
    if ((a & 32'hFFF) >= 32'h100) return 2;
    return 0;
  endfunction

  logic [31:0] wbeats [16];
  logic [3:0]  wstrbs [16];

  task automatic axi_write(input int a, input int burst, input int len, input int size,
                           input int id, input bit gaps, output int resp, output int cyc);
    int t0;
    @(negedge clk);
    s_awid = ID_W'(id); s_awaddr = 32'(a); s_awlen = 8'(len); s_awsize = 3'(size);
    s_awburst = 2'(burst); s_awvalid = 1;
    #1;
    while (!s_awready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_awvalid = 0;
    t0 = 0;
    for (int i = 0; i <= len; i++) begin
      if (gaps && $urandom % 3 == 0) begin s_wvalid = 0; @(negedge clk); t0++; end
      s_wdata = wbeats[i]; s_wstrb = wstrbs[i]; s_wlast = (i == len); s_wvalid = 1;
      #1;
      while (!s_wready) begin @(negedge clk); t0++; #1; end
      @(negedge clk); t0++;
    end
    s_wvalid = 0; s_wlast = 0;
    cyc = t0;
    if (gaps) repeat ($urandom % 4) @(negedge clk);
    s_bready = 1;
    while (!s_bvalid) @(negedge clk);
    resp = int'(s_bresp);
    check("BID", 32'(s_bid), 32'(id & 15));
    @(negedge clk);
    s_bready = 0;
  endtask

  logic [31:0] rbeats [16];
  int rresps [16];

  task automatic axi_read(input int a, input int burst, input int len, input int size,
                          input int id, input bit gaps, output int cyc);
    int i, t0;
    @(negedge clk);
    s_arid = ID_W'(id); s_araddr = 32'(a); s_arlen = 8'(len); s_arsize = 3'(size);
    s_arburst = 2'(burst); s_arvalid = 1;
    #1;
    while (!s_arready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_arvalid = 0;
    i = 0; t0 = 0;
    while (i <= len) begin
      s_rready = gaps ? ($urandom % 2 == 0) : 1'b1;
      #1;
      if (s_rvalid && s_rready) begin
        rbeats[i] = s_rdata; rresps[i] = int'(s_rresp);
        check("RID", 32'(s_rid), 32'(id & 15));
        check("RLAST", 32'(s_rlast), 32'(i == len));
        i++;
      end
      @(negedge clk); t0++;
    end
    s_rready = 0;
    cyc = t0;
  endtask

  task automatic do_write(input int a, input int burst, input int len, input int size, input bit gaps);
    int resp, worst, ba, er, id, cyc, n0;
    id = $urandom % 16;
    worst = 0;
    for (int i = 0; i <= len; i++) begin
      wbeats[i] = $urandom;
      wstrbs[i] = ($urandom % 8 == 0) ? 4'b0111 : 4'hF;
    end
    n0 = accesses;
    axi_write(a, burst, len, size, id, gaps, resp, cyc);
    begin
      int performed = 0;
      for (int i = 0; i <= len; i++) begin
        ba = beat_addr(a, burst, len, i);
        er = exp_resp(ba, size, wstrbs[i] == 4'hF);
        if (er == 3 || worst == 3) worst = 3; else if (er == 2) worst = 2;
        if (er == 0) begin shadow[(ba >> 12) & 3][(ba >> 2) & 63] = wbeats[i]; performed++; end
      end
      check("BRESP", 32'(resp), 32'(worst));
      @(negedge clk);
      check("one served access per performed write beat", 32'(accesses - n0), 32'(performed));
    end
  endtask

  task automatic do_read(input int a, input int burst, input int len, input int size, input bit gaps);
    int ba, er, cyc, id;
    id = $urandom % 16;
    axi_read(a, burst, len, size, id, gaps, cyc);
    for (int i = 0; i <= len; i++) begin
      ba = beat_addr(a, burst, len, i);
      er = exp_resp(ba, size, 1'b1);
      check("RRESP", 32'(rresps[i]), 32'(er));
      if (er == 0) check("RDATA", rbeats[i], shadow[(ba >> 12) & 3][(ba >> 2) & 63]);
    end
  endtask

  int n_incr = 0, n_fixed = 0, n_wrap = 0;

  initial begin
    int a, len, burst, dv, cyc, resp;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // initialise every device word with an INCR burst of 16, four per device
    for (int d = 0; d < N_DEV; d++)
      for (int blk = 0; blk < 4; blk++) begin
        for (int i = 0; i < 16; i++) begin wbeats[i] = $urandom; wstrbs[i] = 4'hF; end
        axi_write((d << 12) | (blk * 64), 1, 15, 2, d, 0, resp, cyc);
        for (int i = 0; i < 16; i++) shadow[d][blk * 16 + i] = wbeats[i];
        check("init BRESP", 32'(resp), 0);
      end
    // streaming rate: 16-beat bursts with no gaps move one beat per clock
    for (int i = 0; i < 16; i++) begin wbeats[i] = $urandom; wstrbs[i] = 4'hF; end
    axi_write(32'h1040, 1, 15, 2, 3, 0, resp, cyc);
    for (int i = 0; i < 16; i++) shadow[1][16 + i] = wbeats[i];
    check("write burst beats/clock", 32'(cyc), 32'd16);
    axi_read(32'h1040, 1, 15, 2, 5, 0, cyc);
    check("read burst beats/clock", 32'(cyc), 32'd17);   // one cycle of latency
    for (int i = 0; i < 16; i++) check("streamed data", rbeats[i], shadow[1][16 + i]);

    for (int t = 0; t < 300; t++) begin
      dv = $urandom % N_DEV;
      burst = $urandom % 3;
      case (burst)
        0: begin len = $urandom % 4; n_fixed++; end
        2: begin len = (1 << (1 + $urandom % 4)) - 1; n_wrap++; end   // 2,4,8,16 beats
        default: begin len = $urandom % 16; n_incr++; end
      endcase
      a = (dv << 12) | (4 * ($urandom % 64));
      if ($urandom % 10 == 0) a = a + 32'h100 - 4 * ($urandom % 4);     // runs into unmapped offsets
      if ($urandom % 20 == 0) a = (5 + $urandom % 10) << 12;            // no device
      if (burst == 1 && ((a & 32'hFFF) + 4 * (len + 1)) > 32'h1000) len = 0;
      if ($urandom % 2 == 1) do_write(a, burst, len, ($urandom % 15 == 0) ? 1 : 2, $urandom % 2 == 1);
      else                   do_read(a, burst, len, ($urandom % 15 == 0) ? 0 : 2, $urandom % 2 == 1);
    end
    checks++;
    if (n_fixed == 0 || n_wrap == 0 || n_incr == 0) begin failures++; $display("FAIL burst mix"); end

    // AW and AR together: alternate priority
    @(negedge clk);
    s_awid = 1; s_awaddr = 32'h2000; s_awlen = 0; s_awsize = 2; s_awburst = 1; s_awvalid = 1;
    s_arid = 2; s_araddr = 32'h2000; s_arlen = 0; s_arsize = 2; s_arburst = 1; s_arvalid = 1;
    #1;
    // the last transaction above decides; whichever is taken, the other must follow next
    begin
      bit took_w;
      took_w = s_awready;
      check("one of AW/AR taken", 32'(s_awready ^ s_arready), 32'd1);
      @(negedge clk);
      if (took_w) begin
        s_awvalid = 0;
        s_wdata = 32'h600D_F00D; s_wstrb = 4'hF; s_wlast = 1; s_wvalid = 1;
        @(negedge clk); s_wvalid = 0; s_wlast = 0; s_bready = 1;
        while (!s_bvalid) @(negedge clk);
        @(negedge clk); s_bready = 0;
        #1;
        check("AR taken after the write", 32'(s_arready), 32'd1);
        @(negedge clk); s_arvalid = 0; s_rready = 1;
        while (!s_rvalid) @(negedge clk);
        check("read sees write", s_rdata, 32'h600D_F00D);
        @(negedge clk); s_rready = 0;
      end else begin
        s_arvalid = 0; s_rready = 1;
        while (!s_rvalid) @(negedge clk);
        @(negedge clk); s_rready = 0;
        #1;
        check("AW taken after the read", 32'(s_awready), 32'd1);
        @(negedge clk); s_awvalid = 0;
        s_wdata = 32'h600D_F00D; s_wstrb = 4'hF; s_wlast = 1; s_wvalid = 1;
        @(negedge clk); s_wvalid = 0; s_wlast = 0; s_bready = 1;
        while (!s_bvalid) @(negedge clk);
        @(negedge clk); s_bready = 0;
      end
    end
    $display("bursts: incr=%0d fixed=%0d wrap=%0d", n_incr, n_fixed, n_wrap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
