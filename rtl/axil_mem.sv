// Word-addressed memory on the AXI4-Lite bus, used for the 20 KB instruction
// memory and the 32 KB data memory of the IoT-PS.
//
// BYTES sets the size; the array has BYTES/4 words of 32 bits with byte
// write strobes. Reads take one cycle in the array plus the bus handshake.
// Accesses beyond the array answer SLVERR. On the ASIC the paper uses an SRAM
// macro for data and a ROM macro for the program; here both are a writable
// array (the FPGA variant, where the program is loaded over JTAG), since the
// program itself is not part of this RTL.
module axil_mem
  import hqc_pkg::*;
#(
  parameter int unsigned BYTES = 32768
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t req,
  output axil_rsp_t rsp
);
  localparam int unsigned WORDS = BYTES / 4;
  localparam int unsigned AW    = $clog2(WORDS);

  logic        wr_en, rd_en;
  logic [31:0] wr_addr, wr_data, rd_addr, rd_data;
  logic [3:0]  wr_strb;
  logic        wr_oob, rd_oob, rd_oob_q;

  logic [31:0] mem [WORDS];

  axil_slave_port u_port (
    .clk, .rst_n, .req, .rsp,
    .wr_en, .wr_addr, .wr_data, .wr_strb, .wr_err(wr_oob),
    .rd_en, .rd_addr, .rd_data, .rd_err(rd_oob_q)
  );

  // Only the offset inside the slave's 256 MB window counts.
  assign wr_oob = (wr_addr[27:0] >= 28'(BYTES));
  assign rd_oob = (rd_addr[27:0] >= 28'(BYTES));

  always_ff @(posedge clk) begin
    if (wr_en && !wr_oob) begin
      for (int b = 0; b < 4; b++)
        if (wr_strb[b]) mem[wr_addr[AW+1:2]][8*b +: 8] <= wr_data[8*b +: 8];
    end
    if (rd_en) rd_data <= mem[rd_addr[AW+1:2]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_oob_q <= 1'b0;
    else if (rd_en) rd_oob_q <= rd_oob;
  end
endmodule
