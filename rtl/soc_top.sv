// soc_top: the digital uncore of the mobile-genomics SoC.
//
// The chip pairs two Linux-capable 64-bit RISC-V cores with two genomics
// accelerators: MAT, a 4x4 systolic array for the matrix products of a
// CNN basecaller, and ED, an edit distance engine for DP comparison of reads
// against a (for instance pathogen) reference. This top holds the parts of
// the chip that are built here: both accelerators with their scratchpads,
// the UART and the GPIO, all memory-mapped behind one 32-bit AXI4 slave
// port through axi_bridge. The cores, their L1 caches, the shared L2 and the
// off-chip I/O link are reused or unspecified parts; the top exposes the
// AXI4 slave port through which they reach the devices (bursts of up to 256
// beats, so scratchpads can be filled at one word per clock), and one
// done/interrupt line per accelerator.
//
// Address map (bits [15:12] of the AXI address, 4 KiB per device):
//   0x0000 MAT (mat_accel), 0x1000 ED (ed_engine), 0x2000 UART, 0x3000 GPIO.
// Everything runs in one clock domain; rst_n is an active-low asynchronous
// reset. The block set, MAT's 4x4 size and ED's 100-base comparison length
// follow the paper; the AXI4 subset, address map, register layouts
// and interrupt lines are this design's own.
module soc_top
  import soc_pkg::*;
#(
  parameter int unsigned MAT_K_MAX    = 256,
  parameter int unsigned ED_MAX_LEN   = 100,
  parameter int unsigned UART_CLK_DIV = 2170,
  parameter int unsigned GPIO_W       = 32,
  parameter int unsigned ID_W         = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4 slave: control/data port from the cores / I/O link
  input  logic [ID_W-1:0]   s_awid,
  input  logic [31:0]       s_awaddr,
  input  logic [7:0]        s_awlen,
  input  logic [2:0]        s_awsize,
  input  logic [1:0]        s_awburst,
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [31:0]       s_wdata,
  input  logic [3:0]        s_wstrb,
  input  logic              s_wlast,
  input  logic              s_wvalid,
  output logic              s_wready,
  output logic [ID_W-1:0]   s_bid,
  output logic [1:0]        s_bresp,
  output logic              s_bvalid,
  input  logic              s_bready,
  input  logic [ID_W-1:0]   s_arid,
  input  logic [31:0]       s_araddr,
  input  logic [7:0]        s_arlen,
  input  logic [2:0]        s_arsize,
  input  logic [1:0]        s_arburst,
  input  logic              s_arvalid,
  output logic              s_arready,
  output logic [ID_W-1:0]   s_rid,
  output logic [31:0]       s_rdata,
  output logic [1:0]        s_rresp,
  output logic              s_rlast,
  output logic              s_rvalid,
  input  logic              s_rready,
  // accelerator completion (level, cleared by the next start)
  output logic              mat_irq,
  output logic              ed_irq,
  // pads
  input  logic              uart_rxd,
  output logic              uart_txd,
  input  logic [GPIO_W-1:0] gpio_i,
  output logic [GPIO_W-1:0] gpio_o,
  output logic [GPIO_W-1:0] gpio_oe
);

  reg_req_t dev_req [N_DEV];
  reg_rsp_t dev_rsp [N_DEV];

  axi_bridge #(.ADDR_W(32), .ID_W(ID_W)) u_bus (
    .clk, .rst_n,
    .s_awid, .s_awaddr, .s_awlen, .s_awsize, .s_awburst, .s_awvalid, .s_awready,
    .s_wdata, .s_wstrb, .s_wlast, .s_wvalid, .s_wready,
    .s_bid, .s_bresp, .s_bvalid, .s_bready,
    .s_arid, .s_araddr, .s_arlen, .s_arsize, .s_arburst, .s_arvalid, .s_arready,
    .s_rid, .s_rdata, .s_rresp, .s_rlast, .s_rvalid, .s_rready,
    .dev_req, .dev_rsp
  );

  mat_accel #(.N(4), .IN_W(8), .ACC_W(32), .K_MAX(MAT_K_MAX)) u_mat (
    .clk, .rst_n,
    .req (dev_req[DEV_MAT]),
    .rsp (dev_rsp[DEV_MAT]),
    .done(mat_irq)
  );

  ed_engine #(.MAX_LEN(ED_MAX_LEN)) u_ed (
    .clk, .rst_n,
    .req (dev_req[DEV_ED]),
    .rsp (dev_rsp[DEV_ED]),
    .done(ed_irq)
  );

  uart #(.CLK_DIV(UART_CLK_DIV)) u_uart (
    .clk, .rst_n,
    .req(dev_req[DEV_UART]),
    .rsp(dev_rsp[DEV_UART]),
    .rxd(uart_rxd),
    .txd(uart_txd)
  );

  gpio #(.WIDTH(GPIO_W)) u_gpio (
    .clk, .rst_n,
    .req    (dev_req[DEV_GPIO]),
    .rsp    (dev_rsp[DEV_GPIO]),
    .gpio_i (gpio_i),
    .gpio_o (gpio_o),
    .gpio_oe(gpio_oe)
  );

endmodule
