// ed_engine: the ED edit distance accelerator.
//
// Computes the Levenshtein distance (unit cost for substitution, insertion
// and deletion) between a query of M bases and a reference of N bases, both
// held in on-block scratchpads, by filling the dynamic-programming matrix
//   D[i][j] = min(D[i-1][j] + 1, D[i][j-1] + 1, D[i-1][j-1] + (q[i] != r[j]))
// with D[0][j] = j and D[i][0] = i. Only one row of D is kept: a register
// array row[0..MAX_LEN], updated in place one cell per clock, with the
// diagonal and left neighbours held in two registers. The fill visits the
// matrix row by row; each row costs one set-up cycle plus N cell cycles, so a
// job takes exactly M*(N+1) + 2 cycles (CYCLES register): 10,102 cycles for
// two 100-base sequences, i.e. about 2.5 M query bases per second at 250 MHz.
//
// Register map (byte offsets, 32-bit words):
//   0x000 CTRL    write bit0 = 1 starts a job (ignored while busy)
//   0x004 STATUS  bit0 busy, bit1 done (cleared by the next start)
//   0x008 LEN     bits[15:0] query length M, bits[31:16] reference length N
//                 (each clipped to MAX_LEN)
//   0x00C CYCLES  busy cycles of the last job
//   0x010 DIST    edit distance of the last job
//   0x400 + 4*w   query bases 16w..16w+15, base 16w+b in bits [2b+1:2b]
//   0x800 + 4*w   reference bases, same packing
// Bases are coded A=0, C=1, G=2, T=3. The paper states the block's purpose
// (DP comparison of 100-base sequences at about 900 K bases/s at 250 MHz);
// the unit-cost Levenshtein recurrence, the one-cell-per-cycle datapath,
// the scratchpad packing and the register map are this design's choices.
module ed_engine
  import soc_pkg::*;
#(
  parameter int unsigned MAX_LEN = 100
) (
  input  logic     clk,
  input  logic     rst_n,
  input  reg_req_t req,
  output reg_rsp_t rsp,
  output logic     done
);

  localparam int unsigned DW     = $clog2(MAX_LEN + 1);   // distance width
  localparam int unsigned IW     = $clog2(MAX_LEN + 1);   // index width
  localparam int unsigned NWORDS = (MAX_LEN + 15) / 16;   // scratchpad words

  typedef enum logic [1:0] {S_IDLE, S_INIT, S_ROW, S_CELL} state_t;

  base_t          qbuf [MAX_LEN];
  base_t          rbuf [MAX_LEN];
  logic [DW-1:0]  row  [MAX_LEN+1];

  state_t         state;
  logic [IW-1:0]  len_q, len_r;
  logic [IW-1:0]  ii;        // current query base (row i = ii + 1)
  logic [IW-1:0]  jj;        // current reference base (column j = jj + 1)
  logic [DW-1:0]  diag, left;
  logic [DW-1:0]  dist_q;
  logic [31:0]    cycles;

  // Register decode
  logic wr, start, in_q, in_r;
  logic [7:0] widx;
  assign wr    = req.valid && req.we;
  assign widx  = req.addr[9:2];
  assign in_q  = (req.addr[11:10] == 2'b01) && (32'(widx) < NWORDS);
  assign in_r  = (req.addr[11:10] == 2'b10) && (32'(widx) < NWORDS);
  assign start = wr && (req.addr == ACC_CTRL) && req.wdata[0] && (state == S_IDLE);

  always_comb begin
    rsp = '0;
    if (req.valid) begin
      unique case (1'b1)
        req.addr == ACC_CTRL:   rsp.rdata = '0;
        req.addr == ACC_STATUS: rsp.rdata = {30'd0, done, state != S_IDLE};
        req.addr == 12'h008:    rsp.rdata = {16'(len_r), 16'(len_q)};
        req.addr == ACC_CYCLES: rsp.rdata = cycles;
        req.addr == 12'h010:    rsp.rdata = 32'(dist_q);
        in_q, in_r:             rsp.rdata = '0;
        default:                rsp.err   = 1'b1;
      endcase
    end
  end

  // Scratchpad writes: 16 bases per word
  always_ff @(posedge clk) begin
    for (int b = 0; b < 16; b++) begin
      if (wr && in_q && (32'(widx) * 16 + b < MAX_LEN))
        qbuf[32'(widx) * 16 + b] <= base_t'(req.wdata[2*b +: 2]);
      if (wr && in_r && (32'(widx) * 16 + b < MAX_LEN))
        rbuf[32'(widx) * 16 + b] <= base_t'(req.wdata[2*b +: 2]);
    end
  end

  // One DP cell_v
  logic [DW-1:0] up, cost_sub, cost_del, cost_ins, cell_v;
  logic          mismatch;
  assign up       = row[jj + IW'(1)];
  assign mismatch = qbuf[ii] != rbuf[jj];
  assign cost_sub = diag + DW'(mismatch);
  assign cost_del = up + DW'(1);
  assign cost_ins = left + DW'(1);
  always_comb begin
    cell_v = cost_sub;
    if (cost_del < cell_v) cell_v = cost_del;
    if (cost_ins < cell_v) cell_v = cost_ins;
  end

  function automatic logic [IW-1:0] clip_len(input logic [15:0] v);
    return (32'(v) > MAX_LEN) ? IW'(MAX_LEN) : IW'(v);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      len_q  <= '0;
      len_r  <= '0;
      ii     <= '0;
      jj     <= '0;
      diag   <= '0;
      left   <= '0;
      dist_q   <= '0;
      cycles <= '0;
      done   <= 1'b0;
      for (int j = 0; j <= MAX_LEN; j++) row[j] <= '0;
    end else begin
      if (wr && req.addr == 12'h008 && state == S_IDLE) begin
        len_q <= clip_len(req.wdata[15:0]);
        len_r <= clip_len(req.wdata[31:16]);
      end
      if (state != S_IDLE) cycles <= cycles + 32'd1;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            state  <= S_INIT;
            cycles <= 32'd1;
            done   <= 1'b0;
          end
        end
        S_INIT: begin                       // D[0][j] = j
          for (int j = 0; j <= MAX_LEN; j++) row[j] <= DW'(j);
          ii <= '0;
          if (len_q == 0) begin
            dist_q  <= DW'(len_r);
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_ROW;
          end
        end
        S_ROW: begin                        // D[i][0] = i
          diag   <= row[0];
          left   <= DW'(ii) + DW'(1);
          row[0] <= DW'(ii) + DW'(1);
          jj     <= '0;
          if (len_r == 0) begin
            if (ii == len_q - IW'(1)) begin
              dist_q  <= DW'(len_q);
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              ii <= ii + IW'(1);
            end
          end else begin
            state <= S_CELL;
          end
        end
        S_CELL: begin                       // D[i][j]
          row[jj + IW'(1)] <= cell_v;
          diag <= up;
          left <= cell_v;
          if (jj == len_r - IW'(1)) begin
            if (ii == len_q - IW'(1)) begin
              dist_q  <= cell_v;
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              ii    <= ii + IW'(1);
              state <= S_ROW;
            end
          end else begin
            jj <= jj + IW'(1);
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
