// tb_mat_accel: self-checking test of the MAT accelerator through its
// register bus.
//
// Loads random A and B slices into the scratchpads, starts jobs of several K
// (1, 4, 64 and the full K_MAX = 256 of the default configuration), polls
// STATUS and compares all 16 results with an integer product computed here.
// It checks the job latency (CYCLES = K + 2*N and the number of clock cycles
// observed from start to done), that a start while busy is ignored, that K
// is clipped to 1..K_MAX and that unmapped offsets answer with an error.
module tb_mat_accel;
  import soc_pkg::*;
  localparam int N = 4;
  localparam int KMAX = 256;

  logic clk = 0, rst_n = 0, done;
  reg_req_t req;
  reg_rsp_t rsp;
  int checks = 0, failures = 0;

  mat_accel dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
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
      $display("FAIL %s: got %0d (0x%08h) expected %0d", what, $signed(got), got, $signed(exp));
    end
  endtask

  int A [N][KMAX];
  int B [KMAX][N];

  task automatic job(input int K);
    logic [31:0] d, w;
    logic e;
    int ref_c, n_cyc;
    for (int k = 0; k < K; k++) begin
      w = '0;
      for (int i = 0; i < N; i++) begin A[i][k] = int'($signed(8'($urandom))); w[8*i +: 8] = 8'(A[i][k]); end
      wr32(12'h400 + 12'(4 * k), w);
      w = '0;
      for (int j = 0; j < N; j++) begin B[k][j] = int'($signed(8'($urandom))); w[8*j +: 8] = 8'(B[k][j]); end
      wr32(12'h800 + 12'(4 * k), w);
    end
    wr32(12'h008, 32'(K));
    wr32(12'h000, 32'd1);
    n_cyc = 1;
    // a second start while busy must be ignored
    wr32(12'h000, 32'd1);
    n_cyc++;
    while (!done) begin @(negedge clk); n_cyc++; end
    check($sformatf("K=%0d observed cycles", K), 32'(n_cyc), 32'(K + 2 * N));
    rd32(12'h00C, d, e);
    check($sformatf("K=%0d CYCLES register", K), d, 32'(K + 2 * N));
    rd32(12'h004, d, e);
    check("STATUS done", d, 32'd2);
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      ref_c = 0;
      for (int k = 0; k < K; k++) ref_c += A[i][k] * B[k][j];
      rd32(12'h100 + 12'(4 * (N * i + j)), d, e);
      check($sformatf("K=%0d C[%0d][%0d]", K, i, j), d, 32'(ref_c));
    end
  endtask

  initial begin
    logic [31:0] d;
    logic e;
    req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    rd32(12'h004, d, e);
    check("STATUS after reset", d, 32'd0);
    job(1);
    job(4);
    job(64);
    job(KMAX);
    for (int t = 0; t < 4; t++) job(1 + $urandom % 32);
    // K clipping
    wr32(12'h008, 32'd0);
    rd32(12'h008, d, e);
    check("K clipped up to 1", d, 32'd1);
    wr32(12'h008, 32'd5000);
    rd32(12'h008, d, e);
    check("K clipped down to K_MAX", d, 32'(KMAX));
    // error response on an unmapped offset
    rd32(12'h020, d, e);
    check("unmapped offset error", 32'(e), 32'd1);
    rd32(12'h004, d, e);
    check("mapped offset no error", 32'(e), 32'd0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
