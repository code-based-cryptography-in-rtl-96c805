// Single-port synchronous SRAM of the HQC accelerator (SRAM0: 288 x 64 bit,
// SRAM1: 566 x 64 bit).
//
// One access per cycle: with en high, we selects a write of wdata to addr or
// a read whose data appears on rdata in the next cycle (rdata holds its value
// otherwise). The sizes are the paper's; the single port, the one-cycle read
// latency and the absence of byte enables are this design's choice, a model
// of a compiled SRAM macro written as an array so that it synthesizes to
// memory. The contents are cleared at reset only by the users of the memory,
// not by the array itself; rst_n only disables the address-range assertion
// while the users of the memory are still in reset.
module sram_sp #(
  parameter int unsigned WORDS = 288,
  parameter int unsigned WIDTH = 64,
  localparam int unsigned AW = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,   // used only to hold off the address check during reset
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

  a_addr_range: assert property (@(posedge clk) disable iff (!rst_n) en |-> (32'(addr) < WORDS));
endmodule
