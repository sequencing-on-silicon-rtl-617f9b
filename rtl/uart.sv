// uart: serial console port (8 data bits, no parity, one stop bit).
//
// Transmitter: a write to TXDATA while the transmitter is idle loads a 10-bit
// frame (start bit 0, eight data bits LSB first, stop bit 1) into a shift
// register that is shifted out every DIV clocks. Receiver: the line is
// synchronised by two flip-flops; a falling edge starts a frame, the start
// bit is re-checked half a bit later and the data bits are sampled in the
// middle of each bit time. A received byte sets RXDATA.valid until RXDATA is
// read; a byte arriving while valid is still set raises the sticky overrun
// flag, and a low stop bit raises the sticky framing-error flag.
//
// Register map (byte offsets): 0x000 TXDATA (write), 0x004 RXDATA (read:
// bits[7:0] data, bit8 valid; the read clears valid), 0x008 STATUS (bit0 tx
// busy, bit1 rx valid, bit2 overrun, bit3 framing error; a write clears
// bits 2 and 3), 0x00C DIV (clocks per bit, >= 4). The paper only names a
// UART on the floorplan; frame format, divisor and registers are this
// design's choice (CLK_DIV = 2170 is 115200 baud from a 250 MHz clock).
module uart
  import soc_pkg::*;
#(
  parameter int unsigned CLK_DIV = 2170
) (
  input  logic     clk,
  input  logic     rst_n,
  input  reg_req_t req,
  output reg_rsp_t rsp,
  input  logic     rxd,
  output logic     txd
);

  logic [15:0] div;
  logic        wr, rd;
  assign wr = req.valid &&  req.we;
  assign rd = req.valid && !req.we;

  // Transmitter
  logic [9:0]  tx_shift;
  logic [3:0]  tx_bits;     // bits left to send
  logic [15:0] tx_cnt;
  logic        tx_busy;
  assign tx_busy = tx_bits != 0;
  assign txd     = tx_busy ? tx_shift[0] : 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_shift <= '1;
      tx_bits  <= '0;
      tx_cnt   <= '0;
    end else if (!tx_busy) begin
      if (wr && req.addr == 12'h000) begin
        tx_shift <= {1'b1, req.wdata[7:0], 1'b0};
        tx_bits  <= 4'd10;
        tx_cnt   <= div - 16'd1;
      end
    end else if (tx_cnt == 0) begin
      tx_shift <= {1'b1, tx_shift[9:1]};
      tx_bits  <= tx_bits - 4'd1;
      tx_cnt   <= div - 16'd1;
    end else begin
      tx_cnt <= tx_cnt - 16'd1;
    end
  end

  // Receiver
  typedef enum logic [1:0] {R_IDLE, R_START, R_DATA, R_STOP} rx_state_t;
  rx_state_t   rx_state;
  logic [1:0]  rx_sync;
  logic        rx_in;
  logic [15:0] rx_cnt;
  logic [2:0]  rx_bit;
  logic [7:0]  rx_shift;
  logic [7:0]  rx_data;
  logic        rx_valid, rx_overrun, rx_ferr;
  logic        rd_rx;
  assign rx_in = rx_sync[1];
  assign rd_rx = rd && req.addr == 12'h004;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_sync    <= 2'b11;
      rx_state   <= R_IDLE;
      rx_cnt     <= '0;
      rx_bit     <= '0;
      rx_shift   <= '0;
      rx_data    <= '0;
      rx_valid   <= 1'b0;
      rx_overrun <= 1'b0;
      rx_ferr    <= 1'b0;
    end else begin
      rx_sync <= {rx_sync[0], rxd};
      if (rd_rx) rx_valid <= 1'b0;
      if (wr && req.addr == 12'h008) begin
        rx_overrun <= 1'b0;
        rx_ferr    <= 1'b0;
      end
      unique case (rx_state)
        R_IDLE: if (!rx_in) begin
          rx_state <= R_START;
          rx_cnt   <= (div >> 1) - 16'd1;
        end
        R_START: if (rx_cnt == 0) begin
          if (!rx_in) begin
            rx_state <= R_DATA;
            rx_cnt   <= div - 16'd1;
            rx_bit   <= '0;
          end else begin
            rx_state <= R_IDLE;               // glitch, not a start bit
          end
        end else rx_cnt <= rx_cnt - 16'd1;
        R_DATA: if (rx_cnt == 0) begin
          rx_shift <= {rx_in, rx_shift[7:1]};
          rx_cnt   <= div - 16'd1;
          rx_bit   <= rx_bit + 3'd1;
          if (rx_bit == 3'd7) rx_state <= R_STOP;
        end else rx_cnt <= rx_cnt - 16'd1;
        R_STOP: if (rx_cnt == 0) begin
          rx_state <= R_IDLE;
          if (!rx_in) rx_ferr <= 1'b1;
          else begin
            rx_data  <= rx_shift;
            rx_valid <= 1'b1;
            if (rx_valid && !rd_rx) rx_overrun <= 1'b1;
          end
        end else rx_cnt <= rx_cnt - 16'd1;
        default: rx_state <= R_IDLE;
      endcase
    end
  end

  // Divisor register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) div <= 16'(CLK_DIV);
    else if (wr && req.addr == 12'h00C && !tx_busy && rx_state == R_IDLE)
      div <= (req.wdata[15:0] < 16'd4) ? 16'd4 : req.wdata[15:0];
  end

  always_comb begin
    rsp = '0;
    if (req.valid) begin
      unique case (req.addr)
        12'h000: rsp.rdata = '0;
        12'h004: rsp.rdata = {23'd0, rx_valid, rx_data};
        12'h008: rsp.rdata = {28'd0, rx_ferr, rx_overrun, rx_valid, tx_busy};
        12'h00C: rsp.rdata = {16'd0, div};
        default: rsp.err   = 1'b1;
      endcase
    end
  end

endmodule
