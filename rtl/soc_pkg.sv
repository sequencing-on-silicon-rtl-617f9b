// soc_pkg: types and constants shared by the blocks of the genomics SoC.
//
// The control plane of the SoC is a simple register bus. The 32-bit AXI4
// slave port of the top (where the cores' fabric attaches) is converted into
// one request per burst beat by axi_bridge, and each device sees a reg_req_t
// and answers with a reg_rsp_t in the same cycle. Every device owns a 4 KiB
// window; the window is selected by address bits [15:12]. The register
// layout, the base encoding and the data types of both accelerators are this
// design's own choices: the paper names the blocks but not their interfaces.
package soc_pkg;

  // Register bus
  localparam int unsigned REG_AW = 12;  // byte offset inside one device window
  localparam int unsigned REG_DW = 32;

  typedef struct packed {
    logic              valid;  // one access this cycle
    logic              we;     // 1 = write, 0 = read
    logic [REG_AW-1:0] addr;   // byte offset, word aligned
    logic [REG_DW-1:0] wdata;
  } reg_req_t;

  typedef struct packed {
    logic [REG_DW-1:0] rdata;  // read data, valid in the cycle of the request
    logic              err;    // access to an unmapped offset
  } reg_rsp_t;

  // Device windows (address bits [15:12] of the AXI4 address)
  localparam int unsigned N_DEV   = 4;
  localparam int unsigned DEV_MAT  = 0;
  localparam int unsigned DEV_ED   = 1;
  localparam int unsigned DEV_UART = 2;
  localparam int unsigned DEV_GPIO = 3;

  // AXI response codes
  localparam logic [1:0] AXI_OKAY   = 2'b00;
  localparam logic [1:0] AXI_SLVERR = 2'b10;
  localparam logic [1:0] AXI_DECERR = 2'b11;

  // Nucleotide encoding used by the edit distance engine
  typedef enum logic [1:0] {
    BASE_A = 2'd0,
    BASE_C = 2'd1,
    BASE_G = 2'd2,
    BASE_T = 2'd3
  } base_t;

  // Common register offsets of the two accelerators
  localparam logic [REG_AW-1:0] ACC_CTRL   = 12'h000;  // write bit0 = start
  localparam logic [REG_AW-1:0] ACC_STATUS = 12'h004;  // bit0 busy, bit1 done
  localparam logic [REG_AW-1:0] ACC_CYCLES = 12'h00C;  // cycles of the last job

endpackage
