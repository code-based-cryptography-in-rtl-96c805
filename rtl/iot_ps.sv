// IoT processing system (IoT-PS) with the HQC accelerator.
//
// Five bus masters and five slaves share one AXI4-Lite interconnect:
//   masters  0 JTAG debug, 1 core instruction port, 2 core data port,
//            3 HQC accelerator master, 4 DMA master
//   slaves   0 instruction memory (20 KB) at 0x0000_0000,
//            1 data memory (32 KB)        at 0x1000_0000,
//            2 I/O controller             at 0x2000_0000,
//            3 DMA registers              at 0x3000_0000,
//            4 HQC accelerator registers  at 0x4000_0000.
// The RV32IC core is not part of this RTL: its two bus ports (cpu_i_*,
// cpu_d_*), its run/reset controls and its register-file debug port are
// ports of this module, and so is the F(2^8) unit the core's custom
// instructions use (gf_a, gf_b, gf_d). The Keccak-f[1600] core of the
// Sampling-Unit is external as well (kec_* ports). The JTAG module can
// hold the rest of the system in reset (sys_rst_req) and start or stop the
// core. The block structure and sizes follow the paper; the memory map, the
// master order and the reset scheme are this design's choices.
module iot_ps
  import hqc_pkg::*;
#(
  parameter int unsigned IMEM_BYTES = 20480,
  parameter int unsigned DMEM_BYTES = 32768,
  parameter int unsigned GPIO_PINS  = 16,
  parameter int unsigned N_BITS     = HQC_N
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // JTAG
  input  logic                 tck,
  input  logic                 tms,
  input  logic                 tdi,
  output logic                 tdo,
  // I/O pins
  input  logic [GPIO_PINS-1:0] gpio_i,
  output logic [GPIO_PINS-1:0] gpio_o,
  output logic [GPIO_PINS-1:0] gpio_oe,
  // RISC-V core connection
  input  axil_req_t            cpu_i_req,
  output axil_rsp_t            cpu_i_rsp,
  input  axil_req_t            cpu_d_req,
  output axil_rsp_t            cpu_d_rsp,
  output logic                 core_rst_n,
  output logic                 core_run,
  output logic                 rf_req,
  output logic                 rf_we,
  output logic [4:0]           rf_addr,
  output logic [31:0]          rf_wdata,
  input  logic [31:0]          rf_rdata,
  input  logic [15:0]          gf_a,
  input  logic [7:0]           gf_b,
  output logic [14:0]          gf_d,
  // Keccak-f[1600] permutation core
  output logic                 kec_start,
  output logic [1599:0]        kec_state_o,
  input  logic                 kec_done,
  input  logic [1599:0]        kec_state_i,
  // status
  output logic                 hqc_busy,
  output logic                 dma_busy,
  output logic [15:0]          n_perm,
  output logic [15:0]          n_rej_range,
  output logic [15:0]          n_rej_dup
);
  localparam int unsigned NM = 5, NS = 5;

  axil_req_t m_req [NM];
  axil_rsp_t m_rsp [NM];
  axil_req_t s_req [NS];
  axil_rsp_t s_rsp [NS];

  logic sys_rst_req, sys_rst_n;
  assign sys_rst_n  = rst_n && !sys_rst_req;
  assign core_rst_n = sys_rst_n;

  jtag_dbg u_jtag (
    .clk, .rst_n, .tck, .tms, .tdi, .tdo, .core_run, .sys_rst_req,
    .rf_req, .rf_we, .rf_addr, .rf_wdata, .rf_rdata,
    .m_req(m_req[0]), .m_rsp(m_rsp[0]));

  assign m_req[1]  = cpu_i_req;
  assign cpu_i_rsp = m_rsp[1];
  assign m_req[2]  = cpu_d_req;
  assign cpu_d_rsp = m_rsp[2];

  axil_interconnect #(.NM(NM), .NS(NS)) u_xbar (
    .clk, .rst_n(sys_rst_n), .m_req, .m_rsp, .s_req, .s_rsp);

  axil_mem #(.BYTES(IMEM_BYTES)) u_imem (.clk, .rst_n(sys_rst_n), .req(s_req[0]), .rsp(s_rsp[0]));
  axil_mem #(.BYTES(DMEM_BYTES)) u_dmem (.clk, .rst_n(sys_rst_n), .req(s_req[1]), .rsp(s_rsp[1]));

  io_ctrl #(.PINS(GPIO_PINS)) u_io (
    .clk, .rst_n(sys_rst_n), .req(s_req[2]), .rsp(s_rsp[2]), .gpio_i, .gpio_o, .gpio_oe);

  dma u_dma (
    .clk, .rst_n(sys_rst_n), .s_req(s_req[3]), .s_rsp(s_rsp[3]),
    .m_req(m_req[4]), .m_rsp(m_rsp[4]), .busy(dma_busy));

  hqc_acc #(.N_BITS(N_BITS)) u_hqc (
    .clk, .rst_n(sys_rst_n), .s_req(s_req[4]), .s_rsp(s_rsp[4]),
    .m_req(m_req[3]), .m_rsp(m_rsp[3]), .busy(hqc_busy),
    .kec_start, .kec_state_o, .kec_done, .kec_state_i,
    .n_perm, .n_rej_range, .n_rej_dup);

  gf28_unit u_gf (.a(gf_a), .b(gf_b), .d(gf_d));
endmodule
