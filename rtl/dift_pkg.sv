// dift_pkg: types and constants shared by the DIFT-enabled SoC.
//
// Tags follow a coupled scheme: every byte of data carries one tag bit
// (1 = sensitive), stored next to the byte and moved next to it on every bus.
// One bit per byte is what takes the data memory from 32 KB to 36 KB (12.5 %).
//
// The on-chip bus is a single-beat subset of AXI4: five channels with
// valid/ready handshakes, no bursts, no IDs, 32-bit data. The per-byte tags
// ride on the W and R channels as user bits. The APB side uses plain APB3
// signals. The address map follows the PULPino layout (instruction RAM at 0,
// data RAM at 0x0010_0000, peripherals at 0x1A10_0000); the map itself is this
// design's choice.
package dift_pkg;

  localparam int unsigned AddrW = 32;
  localparam int unsigned DataW = 32;
  localparam int unsigned StrbW = DataW / 8;
  localparam int unsigned TagW  = StrbW;        // one tag bit per byte

  typedef logic [AddrW-1:0] addr_t;
  typedef logic [DataW-1:0] data_t;
  typedef logic [StrbW-1:0] strb_t;
  typedef logic [TagW-1:0]  tag_t;

  // AXI response codes
  typedef enum logic [1:0] {
    RESP_OKAY   = 2'b00,
    RESP_EXOKAY = 2'b01,
    RESP_SLVERR = 2'b10,
    RESP_DECERR = 2'b11
  } resp_e;

  // Master -> slave half of a tagged single-beat AXI4 port
  typedef struct packed {
    logic  aw_valid;
    addr_t aw_addr;
    logic  w_valid;
    data_t w_data;
    strb_t w_strb;
    tag_t  w_tag;      // W user bits: tag of each written byte
    logic  b_ready;
    logic  ar_valid;
    addr_t ar_addr;
    logic  r_ready;
  } axi_req_t;

  // Slave -> master half
  typedef struct packed {
    logic  aw_ready;
    logic  w_ready;
    logic  b_valid;
    resp_e b_resp;
    logic  ar_ready;
    logic  r_valid;
    data_t r_data;
    tag_t  r_tag;      // R user bits: tag of each read byte
    resp_e r_resp;
  } axi_rsp_t;

  // APB3 request / response
  typedef struct packed {
    logic  psel;
    logic  penable;
    logic  pwrite;
    addr_t paddr;
    data_t pwdata;
  } apb_req_t;

  typedef struct packed {
    logic  pready;
    data_t prdata;
    logic  pslverr;
  } apb_rsp_t;

  // Address map
  localparam addr_t IRAM_BASE = 32'h0000_0000;
  localparam addr_t DRAM_BASE = 32'h0010_0000;
  localparam addr_t APB_BASE  = 32'h1A10_0000;
  localparam addr_t APB_SIZE  = 32'h0001_0000;

  // Register offsets of the obfuscator (word addresses inside its APB window)
  localparam logic [7:0] REG_CTRL    = 8'h00;  // write 1 to bit 0: start
  localparam logic [7:0] REG_STATUS  = 8'h04;  // bit 0 busy, bit 1 done
  localparam logic [7:0] REG_SRC     = 8'h08;  // byte address of input image
  localparam logic [7:0] REG_DST     = 8'h0C;  // byte address of output image
  localparam logic [7:0] REG_I_ROW   = 8'h10;  // i_row_blur
  localparam logic [7:0] REG_E_ROW   = 8'h14;  // e_row_blur
  localparam logic [7:0] REG_I_COL   = 8'h18;  // i_col_blur
  localparam logic [7:0] REG_E_COL   = 8'h1C;  // e_col_blur

  // Registers of the DIFT shell, above the accelerator's window
  localparam logic [7:0] REG_SHELL_CTRL   = 8'h40;  // bit 0: protection on
  localparam logic [7:0] REG_SHELL_STATUS = 8'h44;  // bit 0: violation (write 1 clears)
  localparam logic [7:0] REG_SHELL_VADDR  = 8'h48;  // address of the blocked write

endpackage
