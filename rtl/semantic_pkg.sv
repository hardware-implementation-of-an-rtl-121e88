// semantic_pkg: types and constants shared by the SemantIC SoC blocks.
//
// The main-memory bus used by every bus master and SRAM bank is a single-beat
// request/response bus (mem_req_t / mem_rsp_t).  It stands in for the AXI
// interconnect of the chip: one outstanding transfer per master, a request is
// accepted when valid and ready are both high, and exactly one response
// (rvalid) follows for every accepted request, in order.  The bus width of 32
// bits matches the 32-bit RISC-V core; the simplification of AXI to this bus
// is a choice of this design.
//
// The OPC UA constants follow the OPC UA binary TCP mapping (message types
// HEL/ACK/ERR/OPN/MSG/CLO, chunk types F/C/A, status codes of the Bad_Tcp*
// family).  They are taken from the OPC UA specification, not from the chip
// description.
package semantic_pkg;

  localparam int unsigned AW = 32;
  localparam int unsigned DW = 32;

  typedef struct packed {
    logic            valid;
    logic            we;
    logic [AW-1:0]   addr;   // byte address, word aligned
    logic [DW-1:0]   wdata;
    logic [DW/8-1:0] wstrb;
  } mem_req_t;

  typedef struct packed {
    logic          ready;    // request accepted this cycle
    logic          rvalid;   // response for an earlier accepted request
    logic [DW-1:0] rdata;
  } mem_rsp_t;

  // APB (AMBA 3) request and response, one set per APB slave
  typedef struct packed {
    logic          psel;
    logic          penable;
    logic          pwrite;
    logic [11:0]   paddr;
    logic [31:0]   pwdata;
  } apb_req_t;

  typedef struct packed {
    logic          pready;
    logic [31:0]   prdata;
    logic          pslverr;
  } apb_rsp_t;

  // ---------------------------------------------------------------------
  // Main memory map (choice of this design; the paper gives no addresses)
  // ---------------------------------------------------------------------
  // SRAMn lives at n * 0x0010_0000, the APB peripherals at 0x1000_0000.
  localparam logic [31:0] SRAM_REGION = 32'h0010_0000;
  localparam logic [31:0] APB_BASE    = 32'h1000_0000;
  // each APB slave owns a 4 KiB window: slave k at APB_BASE + k*0x1000
  localparam int unsigned APB_OPCUA = 0;
  localparam int unsigned APB_TIMER = 1;
  localparam int unsigned APB_GPIO  = 2;
  localparam int unsigned APB_IRQ   = 3;
  localparam int unsigned APB_UART1 = 4;
  localparam int unsigned APB_UART2 = 5;
  localparam int unsigned APB_SPI   = 6;
  localparam int unsigned APB_I2C   = 7;
  localparam int unsigned N_APB     = 8;

  // Interconnect master numbering
  localparam int unsigned M_CPU_I  = 0;
  localparam int unsigned M_CPU_D  = 1;
  localparam int unsigned M_DMA_RX = 2;
  localparam int unsigned M_DMA_TX = 3;
  localparam int unsigned M_OPCUA  = 4;
  localparam int unsigned M_SPIS   = 5;
  localparam int unsigned N_MST    = 6;

  // ---------------------------------------------------------------------
  // OPC UA binary transport (OPC UA Part 6)
  // ---------------------------------------------------------------------
  // three ASCII bytes, little-endian as they appear in the first word
  localparam logic [23:0] MT_HEL = {8'h4C, 8'h45, 8'h48}; // "HEL"
  localparam logic [23:0] MT_ACK = {8'h4B, 8'h43, 8'h41}; // "ACK"
  localparam logic [23:0] MT_ERR = {8'h52, 8'h52, 8'h45}; // "ERR"
  localparam logic [23:0] MT_OPN = {8'h4E, 8'h50, 8'h4F}; // "OPN"
  localparam logic [23:0] MT_MSG = {8'h47, 8'h53, 8'h4D}; // "MSG"
  localparam logic [23:0] MT_CLO = {8'h4F, 8'h4C, 8'h43}; // "CLO"
  localparam logic [7:0]  CT_FINAL = 8'h46;               // 'F'
  localparam logic [7:0]  CT_CONT  = 8'h43;               // 'C'
  localparam logic [7:0]  CT_ABORT = 8'h41;               // 'A'

  localparam logic [31:0] BAD_TCP_SERVER_TOO_BUSY      = 32'h807D_0000;
  localparam logic [31:0] BAD_TCP_MESSAGE_TYPE_INVALID = 32'h807E_0000;
  localparam logic [31:0] BAD_TCP_SECURE_CHANNEL_UNKNOWN = 32'h807F_0000;
  localparam logic [31:0] BAD_TCP_MESSAGE_TOO_LARGE    = 32'h8080_0000;

  // size of the fixed part of a MSG/CLO chunk header: message header (12),
  // symmetric security header (4), sequence header (8)
  localparam int unsigned SYM_HDR_BYTES = 24;

endpackage
