// Testbench of the I/O controller: output and output-enable registers, the
// toggle register and the two-flop synchronised input register.
module tb_io_ctrl;
  import hqc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  axil_req_t rq;
  axil_rsp_t rs;
  logic [15:0] gi = '0, go, goe;
  io_ctrl u_dut (.clk, .rst_n, .req(rq), .rsp(rs), .gpio_i(gi), .gpio_o(go), .gpio_oe(goe));
  axil_bfm b (.clk, .req(rq), .rsp(rs));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [1:0] r;
    logic [31:0] d;
    repeat (3) @(posedge clk);
    check(go == 16'h0 && goe == 16'h0, "reset values");
    rst_n = 1'b1;
    b.write(IO_BASE + 32'h0, 32'h0000_A5C3, 4'hF, r);
    b.write(IO_BASE + 32'h4, 32'h0000_FF0F, 4'hF, r);
    check(go == 16'hA5C3 && goe == 16'hFF0F, "OUT and OE");
    b.read(IO_BASE + 32'h0, d, r);
    check(d[15:0] == 16'hA5C3, "OUT read back");
    b.read(IO_BASE + 32'h4, d, r);
    check(d[15:0] == 16'hFF0F, "OE read back");
    for (int i = 0; i < 16; i++) begin
      b.write(IO_BASE + 32'hC, 32'(1) << i, 4'hF, r);
      check(go == (16'hA5C3 ^ ((16'h2 << i) - 16'h1)), $sformatf("toggle pin %0d", i));
    end
    @(negedge clk); gi = 16'h3C5A;
    @(posedge clk); #1;
    check(u_dut.sync2_q != 16'h3C5A, "input not visible after one edge");
    @(posedge clk); #1;
    check(u_dut.sync2_q == 16'h3C5A, "input visible after two edges");
    b.read(IO_BASE + 32'h8, d, r);
    check(d[15:0] == 16'h3C5A && r == RESP_OKAY, "IN register");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
