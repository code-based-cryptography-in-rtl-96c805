// Testbench of the AXI4-Lite memory at the data-memory size (32 KB) and the
// instruction-memory size (20 KB): word writes and read-back over the whole
// range, byte strobes, and the SLVERR response past the last word.
module tb_axil_mem;
  import hqc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  axil_req_t rq0, rq1;
  axil_rsp_t rs0, rs1;
  axil_mem #(.BYTES(32768)) u_d (.clk, .rst_n, .req(rq0), .rsp(rs0));
  axil_mem #(.BYTES(20480)) u_i (.clk, .rst_n, .req(rq1), .rsp(rs1));
  axil_bfm b0 (.clk, .req(rq0), .rsp(rs0));
  axil_bfm b1 (.clk, .req(rq1), .rsp(rs1));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [1:0] r;
    logic [31:0] d, e;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < 32768; a += 1020) begin
      b0.write(32'(a) & ~32'h3, 32'(a) ^ 32'h5A5A_0000, 4'hF, r);
      check(r == RESP_OKAY, "write OKAY");
    end
    for (int a = 0; a < 32768; a += 1020) begin
      b0.read(32'(a) & ~32'h3, d, r);
      check(r == RESP_OKAY && d == (32'(a) ^ 32'h5A5A_0000), $sformatf("read back %0d", a));
    end
    b0.write(32'h1000_7FFC, 32'h1122_3344, 4'hF, r);
    b0.write(32'h1000_7FFC, 32'hAABB_CCDD, 4'b0101, r);
    b0.read(32'h1000_7FFC, d, r);
    check(d == 32'h11BB_33DD, $sformatf("byte strobes %h", d));
    b0.read(32'h1000_8000, d, r);
    check(r == RESP_SLVERR, "read past 32 KB");
    b0.write(32'h0000_8000, 32'h1, 4'hF, r);
    check(r == RESP_SLVERR, "write past 32 KB");
    b1.write(32'h0000_4FFC, 32'hCAFE_F00D, 4'hF, r);
    b1.read(32'h0000_4FFC, d, r);
    check(r == RESP_OKAY && d == 32'hCAFE_F00D, "last word of 20 KB");
    b1.read(32'h0000_5000, e, r);
    check(r == RESP_SLVERR, "read past 20 KB");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
