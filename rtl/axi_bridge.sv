// axi_bridge: AXI4 slave port to the SoC's device register buses.
//
// Stands for the AXI4 path between the cores and the memory-mapped devices
// (accelerators, UART, GPIO). It is a full AXI4 slave for 32-bit data: it
// takes bursts of up to 256 beats (FIXED, INCR and WRAP), echoes transaction
// IDs and serves one transaction at a time. Each beat becomes one access on
// the register bus of the addressed device, so an INCR burst fills a run of
// scratchpad words at one word per clock.
//
// Timing. In IDLE the bridge accepts an address: AWREADY or ARREADY is high
// for one cycle. If both channels are valid, it takes the one it did not take
// last time, so neither can starve. A write then accepts one W beat per clock
// (WREADY high) and issues it to the device in the same cycle; after the
// beat with WLAST it returns BRESP/BID and waits for BREADY. A read issues
// one beat whenever the R output register is empty or is being emptied, so a
// master that holds RREADY high gets one beat per clock; RLAST marks the
// final beat.
//
// Responses per beat: DECERR when address bits [15:12] select no device,
// SLVERR when the device flags an unmapped offset, when a write beat's WSTRB
// is not all ones (the beat is not performed) or when AxSIZE is not 4 bytes
// (narrow transfers are not supported; no access is made). BRESP is the worst
// response of the burst. The upstream fabric is assumed to have selected
// this 64 KiB region, so bits above 15 are ignored. AxLOCK, AxCACHE, AxPROT,
// AxQOS, AxREGION and user signals are not brought in: exclusive access,
// protection and QoS are not provided. The paper names an AXI4 block on the
// floorplan and nothing more; everything here is this design's choice.
// Assertions check the master's side of the handshake and that WLAST comes
// with the burst's last beat. They use rst_n as a synchronous disable while
// the flip-flops use it as an asynchronous reset; lint tools note the mixed
// use, which is intended.
module axi_bridge
  import soc_pkg::*;
#(
  parameter int unsigned ADDR_W = 32,
  parameter int unsigned ID_W   = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // write address
  input  logic [ID_W-1:0]   s_awid,
  input  logic [ADDR_W-1:0] s_awaddr,
  input  logic [7:0]        s_awlen,
  input  logic [2:0]        s_awsize,
  input  logic [1:0]        s_awburst,
  input  logic              s_awvalid,
  output logic              s_awready,
  // write data
  input  logic [31:0]       s_wdata,
  input  logic [3:0]        s_wstrb,
  input  logic              s_wlast,
  input  logic              s_wvalid,
  output logic              s_wready,
  // write response
  output logic [ID_W-1:0]   s_bid,
  output logic [1:0]        s_bresp,
  output logic              s_bvalid,
  input  logic              s_bready,
  // read address
  input  logic [ID_W-1:0]   s_arid,
  input  logic [ADDR_W-1:0] s_araddr,
  input  logic [7:0]        s_arlen,
  input  logic [2:0]        s_arsize,
  input  logic [1:0]        s_arburst,
  input  logic              s_arvalid,
  output logic              s_arready,
  // read data
  output logic [ID_W-1:0]   s_rid,
  output logic [31:0]       s_rdata,
  output logic [1:0]        s_rresp,
  output logic              s_rlast,
  output logic              s_rvalid,
  input  logic              s_rready,
  // device register buses
  output reg_req_t          dev_req [N_DEV],
  input  reg_rsp_t          dev_rsp [N_DEV]
);

  localparam logic [1:0] BURST_FIXED = 2'b00;
  localparam logic [1:0] BURST_INCR  = 2'b01;
  localparam logic [1:0] BURST_WRAP  = 2'b10;

  typedef enum logic [1:0] {S_IDLE, S_W, S_B, S_R} state_t;

  state_t          state;
  logic            last_write;   // the previous transaction was a write
  logic [ID_W-1:0] id;
  logic [15:0]     addr;         // only bits [15:0] are decoded
  logic [7:0]      len;          // beats - 1
  logic [7:0]      beat;         // beats done so far
  logic [2:0]      size;
  logic [1:0]      burst;
  logic [1:0]      wresp;        // worst response of the write burst
  logic            rd_done;      // all read beats issued

  // Address of the next beat
  function automatic logic [15:0] next_addr(input logic [15:0] a, input logic [1:0] b,
                                            input logic [7:0] l);
    logic [15:0] mask;
    mask = (16'(l) + 16'd1) * 16'd4 - 16'd1;      // wrap container size - 1
    unique case (b)
      BURST_FIXED: return a;
      BURST_WRAP:  return (a & ~mask) | ((a + 16'd4) & mask);
      default:     return a + 16'd4;
    endcase
  endfunction

  function automatic logic [1:0] worst(input logic [1:0] x, input logic [1:0] y);
    if (x == AXI_DECERR || y == AXI_DECERR) return AXI_DECERR;
    if (x == AXI_SLVERR || y == AXI_SLVERR) return AXI_SLVERR;
    return AXI_OKAY;
  endfunction

  // Channel acceptance
  logic take_aw, take_ar;
  assign take_aw = (state == S_IDLE) && s_awvalid && !(s_arvalid && last_write);
  assign take_ar = (state == S_IDLE) && s_arvalid && !take_aw;
  assign s_awready = take_aw;
  assign s_arready = take_ar;
  assign s_wready  = (state == S_W);

  // Beat issue
  logic        w_beat, r_beat;
  logic [3:0]  dev;
  logic        dev_ok, size_ok, strb_ok;
  assign w_beat  = (state == S_W) && s_wvalid;
  assign r_beat  = (state == S_R) && !rd_done && (!s_rvalid || s_rready);
  assign dev     = addr[15:12];
  assign dev_ok  = 32'(dev) < N_DEV;
  assign size_ok = size == 3'd2;
  assign strb_ok = s_wstrb == 4'hF;

  always_comb begin
    for (int d = 0; d < N_DEV; d++) begin
      dev_req[d] = '0;
      if (32'(dev) == d && size_ok && ((w_beat && strb_ok) || r_beat)) begin
        dev_req[d].valid = 1'b1;
        dev_req[d].we    = w_beat;
        dev_req[d].addr  = {addr[REG_AW-1:2], 2'b00};
        dev_req[d].wdata = w_beat ? s_wdata : '0;
      end
    end
  end

  reg_rsp_t sel;
  always_comb begin
    sel = '0;
    for (int d = 0; d < N_DEV; d++)
      if (32'(dev) == d) sel = dev_rsp[d];
  end

  logic [1:0] beat_resp;
  always_comb begin
    if (!dev_ok)                                 beat_resp = AXI_DECERR;
    else if (!size_ok || (w_beat && !strb_ok))   beat_resp = AXI_SLVERR;
    else if (sel.err)                            beat_resp = AXI_SLVERR;
    else                                         beat_resp = AXI_OKAY;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      last_write <= 1'b0;
      id         <= '0;
      addr       <= '0;
      len        <= '0;
      beat       <= '0;
      size       <= '0;
      burst      <= '0;
      wresp      <= AXI_OKAY;
      rd_done    <= 1'b0;
      s_bvalid   <= 1'b0;
      s_bid      <= '0;
      s_bresp    <= AXI_OKAY;
      s_rvalid   <= 1'b0;
      s_rid      <= '0;
      s_rdata    <= '0;
      s_rresp    <= AXI_OKAY;
      s_rlast    <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: begin
          beat    <= '0;
          wresp   <= AXI_OKAY;
          rd_done <= 1'b0;
          if (take_aw) begin
            state <= S_W; last_write <= 1'b1;
            id <= s_awid; addr <= s_awaddr[15:0]; len <= s_awlen;
            size <= s_awsize; burst <= s_awburst;
          end else if (take_ar) begin
            state <= S_R; last_write <= 1'b0;
            id <= s_arid; addr <= s_araddr[15:0]; len <= s_arlen;
            size <= s_arsize; burst <= s_arburst;
          end
        end
        S_W: if (w_beat) begin
          wresp <= worst(wresp, beat_resp);
          addr  <= next_addr(addr, burst, len);
          beat  <= beat + 8'd1;
          if (s_wlast) begin
            state    <= S_B;
            s_bvalid <= 1'b1;
            s_bid    <= id;
            s_bresp  <= worst(wresp, beat_resp);
          end
        end
        S_B: if (s_bready) begin
          s_bvalid <= 1'b0;
          state    <= S_IDLE;
        end
        S_R: begin
          if (s_rvalid && s_rready) begin
            s_rvalid <= 1'b0;
            if (s_rlast) state <= S_IDLE;
          end
          if (r_beat) begin
            s_rvalid <= 1'b1;
            s_rid    <= id;
            s_rdata  <= (dev_ok && size_ok) ? sel.rdata : 32'd0;
            s_rresp  <= beat_resp;
            s_rlast  <= beat == len;
            addr     <= next_addr(addr, burst, len);
            beat     <= beat + 8'd1;
            if (beat == len) rd_done <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Master-side rules
  a_aw_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_awvalid && !s_awready |=> s_awvalid && $stable(s_awaddr) && $stable(s_awlen));
  a_ar_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_arvalid && !s_arready |=> s_arvalid && $stable(s_araddr) && $stable(s_arlen));
  a_w_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_wvalid && !s_wready |=> s_wvalid && $stable(s_wdata) && $stable(s_wlast));
  a_wlast: assert property (@(posedge clk) disable iff (!rst_n)
    w_beat |-> (s_wlast == (beat == len)));

endmodule
