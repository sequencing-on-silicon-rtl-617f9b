// tb_ed_engine: self-checking test of the ED edit distance engine.
//
// Loads query and reference sequences (16 bases per word) through the
// register bus, runs jobs and compares DIST with a full-matrix Levenshtein
// distance computed here. Cases: identical sequences, pure substitutions,
// an insertion, a deletion, empty sequences, random pairs of random lengths,
// mutated copies, and the paper's workload size of two 100-base sequences.
// Every job's cycle count must equal M*(N+1) + 2, and the 100 x 100 job must
// beat the paper's 900 K bases per second at 250 MHz, i.e. take at most
// 250e6 / 9e5 * 100 = 27,777 cycles.
module tb_ed_engine;
  import soc_pkg::*;
  localparam int L = 100;

  logic clk = 0, rst_n = 0, done;
  reg_req_t req;
  reg_rsp_t rsp;
  int checks = 0, failures = 0;

  ed_engine dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr32(input logic [11:0] a, input logic [31:0] d);
    req = '{valid: 1'b1, we: 1'b1, addr: a, wdata: d};
    @(negedge clk);
    req = '0;
  endtask

  task automatic rd32(input logic [11:0] a, output logic [31:0] d, output logic err);
    req = '{valid: 1'b1, we: 1'b0, addr: a, wdata: '0};
    #1;
    d = rsp.rdata;
    err = rsp.err;
    @(negedge clk);
    req = '0;
  endtask

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

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

  task automatic load(input int m, input int n);
    logic [31:0] w;
    for (int wi = 0; wi < (L + 15) / 16; wi++) begin
      w = '0;
      for (int b = 0; b < 16; b++) if (wi * 16 + b < L) w[2*b +: 2] = 2'(q[wi * 16 + b]);
      wr32(12'h400 + 12'(4 * wi), w);
      w = '0;
      for (int b = 0; b < 16; b++) if (wi * 16 + b < L) w[2*b +: 2] = 2'(r[wi * 16 + b]);
      wr32(12'h800 + 12'(4 * wi), w);
    end
    wr32(12'h008, {16'(n), 16'(m)});
  endtask

  int max_cycles_100 = 0;

  task automatic job(input string name, input int m, input int n);
    logic [31:0] d;
    logic e;
    int n_cyc, exp;
    load(m, n);
    exp = ref_ed(m, n);
    wr32(12'h000, 32'd1);
    n_cyc = 1;
    while (!done) begin @(negedge clk); n_cyc++; end
    rd32(12'h010, d, e);
    check({name, " distance"}, d, 32'(exp));
    check({name, " observed cycles"}, 32'(n_cyc), 32'(m * (n + 1) + 2));
    rd32(12'h00C, d, e);
    check({name, " CYCLES register"}, d, 32'(m * (n + 1) + 2));
    if (m == 100 && n == 100 && n_cyc > max_cycles_100) max_cycles_100 = n_cyc;
  endtask

  initial begin
    logic [31:0] d;
    logic e;
    int m, n;
    req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < L; i++) begin q[i] = $urandom % 4; r[i] = q[i]; end
    job("identical 100", 100, 100);
    for (int i = 0; i < L; i += 10) r[i] = (q[i] + 1) % 4;
    job("10 substitutions", 100, 100);
    for (int i = 0; i < L; i++) r[i] = q[i];
    for (int i = 50; i < L - 1; i++) r[i] = q[i + 1];        // one base deleted
    job("deletion", 100, 99);
    for (int i = 0; i < L; i++) r[i] = q[i];
    for (int i = L - 1; i > 30; i--) r[i] = r[i - 1];
    r[30] = (q[30] + 2) % 4;                                 // one base inserted
    job("insertion", 99, 100);
    job("empty query", 0, 17);
    job("empty reference", 23, 0);
    job("both empty", 0, 0);
    for (int t = 0; t < 10; t++) begin
      m = $urandom % (L + 1);
      n = $urandom % (L + 1);
      for (int i = 0; i < L; i++) begin q[i] = $urandom % 4; r[i] = $urandom % 4; end
      job($sformatf("random %0dx%0d", m, n), m, n);
    end
    for (int t = 0; t < 4; t++) begin
      for (int i = 0; i < L; i++) begin q[i] = $urandom % 4; r[i] = q[i]; end
      for (int x = 0; x < 8; x++) r[$urandom % L] = $urandom % 4;
      job("mutated 100", 100, 100);
    end
    // paper rate: 900 K bases/s at 250 MHz for 100-base comparisons
    checks++;
    if (max_cycles_100 == 0 || max_cycles_100 > 27777) begin
      failures++;
      $display("FAIL 100x100 rate: %0d cycles", max_cycles_100);
    end
    // length clipping and error response
    wr32(12'h008, {16'd500, 16'd300});
    rd32(12'h008, d, e);
    check("length clip", d, {16'd100, 16'd100});
    rd32(12'h014, d, e);
    check("unmapped offset error", 32'(e), 32'd1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
