// tb_mat_array: self-checking test of the 4x4 systolic array.
//
// Feeds random signed 8-bit A (4 x K) and B (K x 4) slices, one rank-1 step
// per cycle, for several K (including gaps with in_valid low), and compares
// every c[i][j] with a product computed here in plain integer arithmetic.
// It also checks the timing contract: the results are complete exactly
// 2*(N-1)+1 clock edges after the last step was presented, and not one edge
// earlier.
module tb_mat_array;
  localparam int N = 4;
  localparam int LAT = 2 * (N - 1) + 1;
  localparam int KMAX = 40;

  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  logic signed [7:0]  a_col [N];
  logic signed [7:0]  b_row [N];
  logic signed [31:0] c [N][N];
  int checks = 0, failures = 0;

  mat_array dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int A [N][KMAX];
  int B [KMAX][N];
  int ref_c [N][N];

  task automatic run(input int K, input bit gaps);
    int last_ok;
    for (int i = 0; i < N; i++) for (int k = 0; k < K; k++) A[i][k] = int'($signed(8'($urandom)));
    for (int k = 0; k < K; k++) for (int j = 0; j < N; j++) B[k][j] = int'($signed(8'($urandom)));
    if (K > 0) begin A[0][0] = -128; B[0][0] = -128; end
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      ref_c[i][j] = 0;
      for (int k = 0; k < K; k++) ref_c[i][j] += A[i][k] * B[k][j];
    end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int k = 0; k < K; k++) begin
      if (gaps && ($urandom % 3 == 0)) begin in_valid = 0; @(negedge clk); end
      in_valid = 1;
      for (int i = 0; i < N; i++) a_col[i] = 8'(A[i][k]);
      for (int j = 0; j < N; j++) b_row[j] = 8'(B[k][j]);
      @(negedge clk);
    end
    in_valid = 0;
    for (int i = 0; i < N; i++) begin a_col[i] = 8'($urandom); b_row[i] = 8'($urandom); end
    // The last step was sampled on the edge just passed (edge 1 of LAT).
    repeat (LAT - 2) @(negedge clk);
    // One edge before completion the corner cell must still lack its last term
    // (unless that term is zero).
    checks++;
    if (K > 0 && A[N-1][K-1] * B[K-1][N-1] != 0 && c[N-1][N-1] == ref_c[N-1][N-1]) begin
      failures++;
      $display("FAIL K=%0d: corner result complete too early", K);
    end
    @(negedge clk);
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      checks++;
      if (c[i][j] !== ref_c[i][j]) begin
        failures++;
        $display("FAIL K=%0d c[%0d][%0d]=%0d expected %0d", K, i, j, c[i][j], ref_c[i][j]);
      end
    end
    // Results hold while idle
    repeat (5) @(negedge clk);
    checks++;
    if (c[0][0] !== ref_c[0][0]) begin failures++; $display("FAIL result not held"); end
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin a_col[i] = 0; b_row[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1, 0);
    run(4, 0);
    run(16, 0);
    run(KMAX, 0);
    for (int t = 0; t < 10; t++) run(1 + $urandom % KMAX, 0);
    // with idle gaps only the final value is checked, not the timing
    for (int t = 0; t < 5; t++) run(1 + $urandom % KMAX, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
