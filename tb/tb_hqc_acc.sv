// Self-checking testbench of the HQC accelerator at its default size
// (n = 17669, SRAM0 288 x 64, SRAM1 566 x 64). The accelerator's master port
// and the test sequence of hqc_flow share a 32 KB memory through an
// interconnect, the sequence also drives the accelerator's slave port, and its permutation port to the Keccak-f[1600] model. The
// sequence must see at least one multiplication, addition, RM decoding,
// refused command and both sampling rejection causes.
module tb_hqc_acc;
  import hqc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, go = 1'b0;
  always #5 clk = ~clk;

  axil_req_t s_req, m_req, f_req;
  axil_rsp_t s_rsp, m_rsp, f_rsp;
  axil_req_t x_mreq [2];
  axil_rsp_t x_mrsp [2];
  axil_req_t x_sreq [5];
  axil_rsp_t x_srsp [5];
  logic busy, kec_start, kec_done;
  logic [1599:0] kec_so, kec_si;
  logic [15:0] n_perm, n_rej_range, n_rej_dup;
  logic finished;
  int checks, failures, n_mul, n_add, n_rm, n_busy_err;

  hqc_acc dut (.clk, .rst_n, .s_req, .s_rsp, .m_req, .m_rsp, .busy,
               .kec_start, .kec_state_o(kec_so), .kec_done, .kec_state_i(kec_si),
               .n_perm, .n_rej_range, .n_rej_dup);
  keccak_f1600_model u_kec (.clk, .rst_n, .start(kec_start), .state_i(kec_so),
                            .state_o(kec_si), .done(kec_done));
  // the test sequence and the accelerator master share a memory at
  // 0x1000_0000; the accelerator registers sit at 0x4000_0000
  assign x_mreq[0] = f_req;
  assign f_rsp     = x_mrsp[0];
  assign x_mreq[1] = m_req;
  assign m_rsp     = x_mrsp[1];
  assign s_req     = x_sreq[4];
  assign x_srsp[4] = s_rsp;
  assign x_srsp[0] = '0;
  assign x_srsp[2] = '0;
  assign x_srsp[3] = '0;
  axil_interconnect #(.NM(2), .NS(5)) u_xbar (.clk, .rst_n, .m_req(x_mreq), .m_rsp(x_mrsp),
                                             .s_req(x_sreq), .s_rsp(x_srsp));
  axil_mem #(.BYTES(32768)) u_mem (.clk, .rst_n, .req(x_sreq[1]), .rsp(x_srsp[1]));
  hqc_flow #(.REG_BASE(32'h4000_0000), .MEM_BASE(32'h1000_0000)) u_flow (
    .clk, .go, .req(f_req), .rsp(f_rsp), .n_rej_range, .n_rej_dup, .finished,
    .checks, .failures, .n_mul, .n_add, .n_rm, .n_busy_err);

  initial begin
    int c, f;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    go = 1'b1;
    wait (finished);
    c = checks; f = failures;
    c++; if (n_mul == 0) begin f++; $display("FAIL: no multiplication"); end
    c++; if (n_add == 0) begin f++; $display("FAIL: no addition"); end
    c++; if (n_rm == 0) begin f++; $display("FAIL: no RM decoding"); end
    c++; if (n_busy_err == 0) begin f++; $display("FAIL: no refused command"); end
    c++; if (n_perm == 0) begin f++; $display("FAIL: no permutation"); end
    c++; if (n_rej_range == 0) begin f++; $display("FAIL: no range rejection"); end
    c++; if (n_rej_dup == 0) begin f++; $display("FAIL: no duplicate rejection"); end
    $display("events: mul %0d add %0d rm %0d busy-refused %0d permutations %0d range-rejections %0d duplicate-rejections %0d",
             n_mul, n_add, n_rm, n_busy_err, n_perm, n_rej_range, n_rej_dup);
    $display("TB_RESULT checks=%0d failures=%0d", c, f);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
