// Shared types and constants of the HQC IoT processing system.
//
// The system bus is AXI4-Lite with 32-bit addresses and 32-bit data. A bus
// connection is carried as two structs: axil_req_t from master to slave and
// axil_rsp_t from slave to master. The HQC-128 constants follow the HQC
// specification (n = 17669, n1 = 46, RM(1,7) duplicated 3 times, weights
// w = 66 and w_r = w_e = 75); the accelerator uses 64-bit memory words, so a
// polynomial of R = F2[X]/(X^n - 1) fills 277 words. The bus width, the
// memory map and the command encoding of the accelerator are this design's
// own choices.
package hqc_pkg;

  // ---------------- AXI4-Lite ----------------
  typedef struct packed {
    logic        awvalid;
    logic [31:0] awaddr;
    logic        wvalid;
    logic [31:0] wdata;
    logic [3:0]  wstrb;
    logic        bready;
    logic        arvalid;
    logic [31:0] araddr;
    logic        rready;
  } axil_req_t;

  typedef struct packed {
    logic        awready;
    logic        wready;
    logic        bvalid;
    logic [1:0]  bresp;
    logic        arready;
    logic        rvalid;
    logic [31:0] rdata;
    logic [1:0]  rresp;
  } axil_rsp_t;

  localparam logic [1:0] RESP_OKAY   = 2'b00;
  localparam logic [1:0] RESP_SLVERR = 2'b10;
  localparam logic [1:0] RESP_DECERR = 2'b11;

  // ---------------- Memory map (top nibble selects the slave) ----------------
  localparam logic [31:0] IMEM_BASE = 32'h0000_0000;
  localparam logic [31:0] DMEM_BASE = 32'h1000_0000;
  localparam logic [31:0] IO_BASE   = 32'h2000_0000;
  localparam logic [31:0] DMA_BASE  = 32'h3000_0000;
  localparam logic [31:0] HQC_BASE  = 32'h4000_0000;

  // ---------------- HQC-128 ----------------
  localparam int unsigned HQC_N       = 17669;
  localparam int unsigned HQC_N1      = 46;
  localparam int unsigned HQC_W       = 66;
  localparam int unsigned HQC_WR      = 75;
  localparam int unsigned RM_MULT     = 3;
  localparam int unsigned SHAKE_RATE  = 136;  // SHAKE256 rate in bytes

  // ---------------- Accelerator commands ----------------
  typedef enum logic [3:0] {
    CMD_LOAD0    = 4'd0,   // main memory -> SRAM0, LEN 64-bit words
    CMD_LOAD1    = 4'd1,   // main memory -> SRAM1, LEN 64-bit words
    CMD_STORE0   = 4'd2,   // SRAM0 -> main memory, LEN 64-bit words
    CMD_STORE1   = 4'd3,   // SRAM1 -> main memory, LEN 64-bit words
    CMD_MUL      = 4'd4,   // SRAM1 = SRAM0 * sparse(main[SRC], WEIGHT) mod X^n-1
    CMD_ADD      = 4'd5,   // SRAM1 = SRAM1 + SRAM0
    CMD_SH_INIT  = 4'd6,   // clear the SHAKE256 state
    CMD_SH_ABS   = 4'd7,   // absorb LEN bytes from main[SRC]
    CMD_SH_FIN   = 4'd8,   // pad and start squeezing
    CMD_SH_SQZ   = 4'd9,   // squeeze LEN bytes to main[DST]
    CMD_SAMPLE   = 4'd10,  // WEIGHT distinct positions < n to main[DST]
    CMD_RM_DEC   = 4'd11   // decode LEN RM codewords of SRAM1 to bytes at main[DST]
  } hqc_cmd_e;

  // Register offsets of the accelerator (byte addresses)
  localparam logic [7:0] HQC_REG_CMD    = 8'h00;  // write: start command
  localparam logic [7:0] HQC_REG_STATUS = 8'h04;  // bit0 busy, bit1 error
  localparam logic [7:0] HQC_REG_SRC    = 8'h08;
  localparam logic [7:0] HQC_REG_DST    = 8'h0C;
  localparam logic [7:0] HQC_REG_LEN    = 8'h10;
  localparam logic [7:0] HQC_REG_WEIGHT = 8'h14;
  localparam logic [7:0] HQC_REG_CYCLES = 8'h18;  // cycles of the last command

  // DMA
  typedef enum logic [1:0] {DMA_SZ_BYTE = 2'd0, DMA_SZ_HALF = 2'd1, DMA_SZ_WORD = 2'd2} dma_size_e;
  localparam logic [7:0] DMA_REG_CTRL   = 8'h00;  // bit0 start, bit1 1=memset, bits3:2 size
  localparam logic [7:0] DMA_REG_STATUS = 8'h04;  // bit0 busy, bit1 error
  localparam logic [7:0] DMA_REG_SRC    = 8'h08;  // memcpy source
  localparam logic [7:0] DMA_REG_DST    = 8'h0C;
  localparam logic [7:0] DMA_REG_LEN    = 8'h10;  // number of elements
  localparam logic [7:0] DMA_REG_VALUE  = 8'h14;  // memset value

endpackage
