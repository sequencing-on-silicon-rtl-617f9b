// mat_accel: the MAT matrix-multiply accelerator (scratchpads, sequencer and
// the 4x4 systolic array).
//
// A core loads an N x K slice of A and a K x N slice of B into two operand
// scratchpads over the register bus, writes K and sets CTRL.start. The
// sequencer then reads one scratchpad word from each buffer per cycle
// (synchronous read, one cycle latency) and presents it to mat_array as the
// rank-1 step k, for k = 0..K-1. After the last step it waits for the array
// to drain and raises STATUS.done (also driven out as done, usable as an
// interrupt). The 16 results are then read from the C window. A job of K
// steps takes exactly K + 2*N clock cycles from the start write to the cycle
// that raises done (CYCLES register): the start cycle, K feed cycles (the
// scratchpad read of the first step overlapping the start) and 2*(N-1)+1
// cycles in which the last step crosses the array.
//
// Register map (byte offsets, 32-bit words):
//   0x000 CTRL    write bit0 = 1 starts a job (ignored while busy)
//   0x004 STATUS  bit0 busy, bit1 done (cleared by the next start)
//   0x008 K       number of rank-1 steps, 1..K_MAX (K_MAX <= 256)
//   0x00C CYCLES  busy cycles of the last job
//   0x100 + 4*(N*i+j)   C[i][j], signed ACC_W bits (read only)
//   0x400 + 4*k   A column k: byte i = A[i][k]           (write only)
//   0x800 + 4*k   B row k:    byte j = B[k][j]           (write only)
// The paper gives MAT's size (4x4) and purpose (matrix math for a CNN
// basecaller) and says it has scratchpad memory; the scratchpad depth, the
// int8/int32 arithmetic, the register map and the sequencing are this
// design's own. Weight and activation tiling, and the ReLU between basecaller
// layers, are left to software.
module mat_accel
  import soc_pkg::*;
#(
  parameter int unsigned N     = 4,
  parameter int unsigned IN_W  = 8,
  parameter int unsigned ACC_W = 32,
  parameter int unsigned K_MAX = 256
) (
  input  logic     clk,
  input  logic     rst_n,
  input  reg_req_t req,
  output reg_rsp_t rsp,
  output logic     done
);

  localparam int unsigned KW      = $clog2(K_MAX + 1);
  localparam int unsigned AW      = $clog2(K_MAX);
  localparam int unsigned LATENCY = 2 * (N - 1) + 1;
  localparam int unsigned WORD_W  = N * IN_W;
  localparam int unsigned NB      = $clog2(N);   // N is a power of two

  typedef enum logic [1:0] {S_IDLE, S_FEED, S_DRAIN} state_t;

  // Operand scratchpads: one word holds the N operands of one step.
  logic [WORD_W-1:0] abuf [K_MAX];
  logic [WORD_W-1:0] bbuf [K_MAX];

  state_t           state;
  logic [KW-1:0]    k_reg;
  logic [KW-1:0]    k_cnt;
  logic [3:0]       drain_cnt;
  logic             rd_valid;
  logic [WORD_W-1:0] a_word, b_word;
  logic [31:0]      cycles;
  logic             clear;
  logic             start;

  logic signed [IN_W-1:0]  a_col [N];
  logic signed [IN_W-1:0]  b_row [N];
  logic signed [ACC_W-1:0] c     [N][N];

  // Register decode
  logic wr;
  logic in_c, in_a, in_b;
  logic [7:0] widx;
  assign wr   = req.valid &&  req.we;

  assign widx = req.addr[9:2];
  assign in_c = (req.addr[11:8] == 4'h1) && (req.addr[7:2] < 6'(N * N));
  assign in_a = (req.addr[11:10] == 2'b01) && (32'(req.addr[9:2]) < K_MAX);
  assign in_b = (req.addr[11:10] == 2'b10) && (32'(req.addr[9:2]) < K_MAX);
  assign start = wr && (req.addr == ACC_CTRL) && req.wdata[0] && (state == S_IDLE);

  always_comb begin
    rsp = '0;
    if (req.valid) begin
      unique case (1'b1)
        req.addr == ACC_CTRL:   rsp.rdata = '0;
        req.addr == ACC_STATUS: rsp.rdata = {30'd0, done, state != S_IDLE};
        req.addr == 12'h008:    rsp.rdata = 32'(k_reg);
        req.addr == ACC_CYCLES: rsp.rdata = cycles;
        in_c:                   rsp.rdata = 32'(c[req.addr[2+NB +: NB]][req.addr[2 +: NB]]);
        in_a, in_b:             rsp.rdata = '0;
        default:                rsp.err   = 1'b1;
      endcase
    end
  end

  // Scratchpad write port (bus) and read port (sequencer)
  always_ff @(posedge clk) begin
    if (wr && in_a) abuf[widx[AW-1:0]] <= req.wdata[WORD_W-1:0];
    if (wr && in_b) bbuf[widx[AW-1:0]] <= req.wdata[WORD_W-1:0];
    a_word <= abuf[k_cnt[AW-1:0]];
    b_word <= bbuf[k_cnt[AW-1:0]];
  end

  // Sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      k_reg     <= KW'(1);
      k_cnt     <= '0;
      drain_cnt <= '0;
      rd_valid  <= 1'b0;
      cycles    <= '0;
      done      <= 1'b0;
    end else begin
      if (wr && req.addr == 12'h008 && state == S_IDLE) begin
        if (req.wdata == 0)                k_reg <= KW'(1);
        else if (req.wdata > 32'(K_MAX))   k_reg <= KW'(K_MAX);
        else                               k_reg <= KW'(req.wdata);
      end
      rd_valid <= 1'b0;
      if (state != S_IDLE) cycles <= cycles + 32'd1;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            state  <= S_FEED;
            k_cnt  <= '0;
            cycles <= 32'd1;
            done   <= 1'b0;
          end
        end
        S_FEED: begin
          rd_valid <= 1'b1;
          k_cnt    <= k_cnt + KW'(1);
          if (k_cnt == k_reg - KW'(1)) begin
            state     <= S_DRAIN;
            drain_cnt <= '0;
          end
        end
        S_DRAIN: begin
          if (drain_cnt == 4'(LATENCY - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            drain_cnt <= drain_cnt + 4'd1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign clear = start;

  for (genvar i = 0; i < N; i++) begin : g_unpack
    assign a_col[i] = a_word[i*IN_W +: IN_W];
    assign b_row[i] = b_word[i*IN_W +: IN_W];
  end

  mat_array #(.N(N), .IN_W(IN_W), .ACC_W(ACC_W)) u_array (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (clear),
    .in_valid(rd_valid),
    .a_col   (a_col),
    .b_row   (b_row),
    .c       (c)
  );

endmodule
