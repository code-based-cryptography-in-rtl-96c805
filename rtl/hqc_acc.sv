// HQC accelerator: the loosely coupled co-processor of the IoT-PS.
//
// It holds the HQC Control Unit, the two shared SRAMs (SRAM0 288 x 64 bit,
// SRAM1 566 x 64 bit), the R-Unit, the Sampling-Unit and the RM-Decoder, as
// in the paper's block diagram. Commands arrive on the AXI4-Lite slave port;
// operands are fetched from and results written to main memory over the
// AXI4-Lite master port, so the processor can work in parallel. Only one
// compute unit runs at a time. The Keccak-f[1600] permutation core used by
// the Sampling-Unit is an external core (the paper uses an open-source
// 24-cycle implementation by the Keccak authors); its connection is brought
// out on the kec_* ports: kec_start pulses with the state on kec_state_o, and
// the core answers with kec_done and the permuted state on kec_state_i.
// SRAM0 holds a dense polynomial (277 words at n = 17669), SRAM1 the
// double-length intermediate product (554 words) and then the result.
module hqc_acc
  import hqc_pkg::*;
#(
  parameter int unsigned N_BITS  = HQC_N,
  parameter int unsigned W_MAX   = HQC_WR,
  parameter int unsigned S0_WORDS = 288,
  parameter int unsigned S1_WORDS = 566
) (
  input  logic          clk,
  input  logic          rst_n,
  input  axil_req_t     s_req,
  output axil_rsp_t     s_rsp,
  output axil_req_t     m_req,
  input  axil_rsp_t     m_rsp,
  output logic          busy,
  output logic          kec_start,
  output logic [1599:0] kec_state_o,
  input  logic          kec_done,
  input  logic [1599:0] kec_state_i,
  output logic [15:0]   n_perm,
  output logic [15:0]   n_rej_range,
  output logic [15:0]   n_rej_dup
);
  localparam int unsigned AW0 = $clog2(S0_WORDS);
  localparam int unsigned AW1 = $clog2(S1_WORDS);
  localparam int unsigned CW  = $clog2(N_BITS);
  localparam int unsigned NW  = (N_BITS + 63) / 64;

  initial begin
    assert (S0_WORDS >= NW)     else $error("SRAM0 too small for one polynomial");
    assert (S1_WORDS >= 2 * NW) else $error("SRAM1 too small for the unreduced product");
  end

  logic           s0_en, s0_we, s1_en, s1_we;
  logic [AW0-1:0] s0_addr;
  logic [AW1-1:0] s1_addr;
  logic [63:0]    s0_wdata, s0_rdata, s1_wdata, s1_rdata;

  logic           r_start, r_busy, r_done;
  logic [1:0]     r_op;
  logic [CW-1:0]  r_coord;
  logic           r_s0_en, r_s1_en, r_s1_we;
  logic [AW0-1:0] r_s0_addr;
  logic [AW1-1:0] r_s1_addr;
  logic [63:0]    r_s1_wdata;

  logic           su_start, su_done, su_busy;
  logic [2:0]     su_cmd;
  logic [15:0]    su_len;
  logic           su_in_valid, su_in_ready, su_out_valid, su_out_ready;
  logic [31:0]    su_in_data, su_out_data;

  logic           rm_in_valid, rm_in_ready, rm_out_valid;
  logic [63:0]    rm_in_word;
  logic [7:0]     rm_out_byte;

  hqc_ctrl #(.N_BITS(N_BITS), .AW0(AW0), .AW1(AW1)) u_ctrl (
    .clk, .rst_n, .s_req, .s_rsp, .m_req, .m_rsp, .busy,
    .s0_en, .s0_we, .s0_addr, .s0_wdata, .s0_rdata,
    .s1_en, .s1_we, .s1_addr, .s1_wdata, .s1_rdata,
    .r_start, .r_op, .r_coord, .r_busy, .r_done,
    .r_s0_en, .r_s0_addr, .r_s1_en, .r_s1_we, .r_s1_addr, .r_s1_wdata,
    .su_start, .su_cmd, .su_len, .su_done,
    .su_in_valid, .su_in_data, .su_in_ready, .su_out_valid, .su_out_data, .su_out_ready,
    .rm_in_valid, .rm_in_word, .rm_in_ready, .rm_out_valid, .rm_out_byte
  );

  sram_sp #(.WORDS(S0_WORDS), .WIDTH(64)) u_sram0 (
    .clk, .rst_n, .en(s0_en), .we(s0_we), .addr(s0_addr), .wdata(s0_wdata), .rdata(s0_rdata));
  sram_sp #(.WORDS(S1_WORDS), .WIDTH(64)) u_sram1 (
    .clk, .rst_n, .en(s1_en), .we(s1_we), .addr(s1_addr), .wdata(s1_wdata), .rdata(s1_rdata));

  r_unit #(.N_BITS(N_BITS), .AW0(AW0), .AW1(AW1)) u_r_unit (
    .clk, .rst_n, .start(r_start), .op(r_op), .coord(r_coord), .busy(r_busy), .done(r_done),
    .s0_en(r_s0_en), .s0_addr(r_s0_addr), .s0_rdata,
    .s1_en(r_s1_en), .s1_we(r_s1_we), .s1_addr(r_s1_addr), .s1_wdata(r_s1_wdata), .s1_rdata);

  sampling_unit #(.N_BITS(N_BITS), .W_MAX(W_MAX)) u_sampling (
    .clk, .rst_n, .start(su_start), .cmd(su_cmd), .len(su_len), .busy(su_busy), .done(su_done),
    .in_valid(su_in_valid), .in_data(su_in_data), .in_ready(su_in_ready),
    .out_valid(su_out_valid), .out_data(su_out_data), .out_ready(su_out_ready),
    .perm_start(kec_start), .perm_state_o(kec_state_o), .perm_done(kec_done), .perm_state_i(kec_state_i),
    .n_perm, .n_rej_range, .n_rej_dup);

  rm_decoder #(.MULT(RM_MULT)) u_rm (
    .clk, .rst_n, .in_valid(rm_in_valid), .in_word(rm_in_word), .in_ready(rm_in_ready),
    .out_valid(rm_out_valid), .out_byte(rm_out_byte));

  // The Sampling-Unit and the R-Unit never run together.
  a_exclusive: assert property (@(posedge clk) disable iff (!rst_n) !(su_busy && r_busy));
endmodule
