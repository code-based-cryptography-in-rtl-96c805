// Testbench of the AXI4-Lite interconnect with three masters and two memory
// slaves (address nibble 0 and 1). All masters run random read/write traffic
// at the same time on disjoint address ranges of both slaves; every read is
// checked against a per-master reference, contention cycles are counted and
// each master must be served. Addresses with no slave return DECERR.
module tb_axil_interconnect;
  import hqc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  axil_req_t m_req [3];
  axil_rsp_t m_rsp [3];
  axil_req_t s_req [2];
  axil_rsp_t s_rsp [2];
  axil_interconnect #(.NM(3), .NS(2)) u_dut (.clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rsp);
  axil_mem #(.BYTES(4096)) u_m0 (.clk, .rst_n, .req(s_req[0]), .rsp(s_rsp[0]));
  axil_mem #(.BYTES(4096)) u_m1 (.clk, .rst_n, .req(s_req[1]), .rsp(s_rsp[1]));
  axil_bfm b0 (.clk, .req(m_req[0]), .rsp(m_rsp[0]));
  axil_bfm b1 (.clk, .req(m_req[1]), .rsp(m_rsp[1]));
  axil_bfm b2 (.clk, .req(m_req[2]), .rsp(m_rsp[2]));

  int n_contend = 0;
  int served [3] = '{0, 0, 0};
  always @(posedge clk) begin
    int c;
    c = 0;
    for (int m = 0; m < 3; m++) c += int'(m_req[m].awvalid || m_req[m].arvalid);
    if (c > 1) n_contend++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic traffic(input int m);
    logic [31:0] refm [2][64];
    logic [1:0] r;
    logic [31:0] d, a;
    int s, w;
    for (int i = 0; i < 64; i++) begin refm[0][i] = '0; refm[1][i] = '0; end
    for (int i = 0; i < 64; i++) begin
      for (int s2 = 0; s2 < 2; s2++) begin
        a = {4'(s2), 28'(m * 256 + 4 * i)};
        d = $urandom;
        refm[s2][i] = d;
        case (m) 0: b0.write(a, d, 4'hF, r); 1: b1.write(a, d, 4'hF, r); default: b2.write(a, d, 4'hF, r); endcase
        check(r == RESP_OKAY, "write response");
      end
    end
    for (int k = 0; k < 100; k++) begin
      s = $urandom_range(1);
      w = $urandom_range(63);
      a = {4'(s), 28'(m * 256 + 4 * w)};
      case (m) 0: b0.read(a, d, r); 1: b1.read(a, d, r); default: b2.read(a, d, r); endcase
      check(r == RESP_OKAY && d == refm[s][w], $sformatf("master %0d read slave %0d word %0d", m, s, w));
      served[m]++;
    end
  endtask

  initial begin
    logic [1:0] r;
    logic [31:0] d;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    fork
      traffic(0);
      traffic(1);
      traffic(2);
    join
    b1.read(32'h2000_0000, d, r);
    check(r == RESP_DECERR, "read DECERR");
    b2.write(32'hF000_0010, 32'h1, 4'hF, r);
    check(r == RESP_DECERR, "write DECERR");
    b0.read(32'h0000_0000, d, r);
    check(r == RESP_OKAY, "bus usable after DECERR");
    check(n_contend > 0, "masters contended");
    for (int m = 0; m < 3; m++) check(served[m] == 100, "all masters served");
    $display("contention cycles %0d", n_contend);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #5000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
