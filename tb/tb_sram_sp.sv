// Testbench of the single-port SRAM model: fills two instances (the SRAM0 and
// SRAM1 sizes of the accelerator) with random words, reads them back and
// checks the one-cycle read latency, that the read register holds while the
// memory is not enabled, and that a write does not disturb the read register.
module tb_sram_sp;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic en0, we0, en1, we1;
  logic [8:0] a0;
  logic [9:0] a1;
  logic [63:0] d0, d1, q0, q1;
  sram_sp #(.WORDS(288)) u0 (.clk, .rst_n, .en(en0), .we(we0), .addr(a0), .wdata(d0), .rdata(q0));
  sram_sp #(.WORDS(566)) u1 (.clk, .rst_n, .en(en1), .we(we1), .addr(a1), .wdata(d1), .rdata(q1));

  logic [63:0] ref0 [288];
  logic [63:0] ref1 [566];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    en0 = 0; we0 = 0; en1 = 0; we1 = 0; a0 = '0; a1 = '0; d0 = '0; d1 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 566; i++) begin
      @(negedge clk);
      d1 = {$urandom, $urandom}; ref1[i] = d1; a1 = 10'(i); en1 = 1; we1 = 1;
      if (i < 288) begin d0 = {$urandom, $urandom}; ref0[i] = d0; a0 = 9'(i); en0 = 1; we0 = 1; end
      else begin en0 = 0; we0 = 0; end
    end
    @(negedge clk); en0 = 0; en1 = 0; we0 = 0; we1 = 0;
    for (int i = 565; i >= 0; i--) begin
      @(negedge clk);
      a1 = 10'(i); en1 = 1;
      a0 = 9'(i % 288); en0 = 1;
      @(posedge clk); #1;
      check(q1 == ref1[i], $sformatf("SRAM1 word %0d", i));
      check(q0 == ref0[i % 288], $sformatf("SRAM0 word %0d", i % 288));
    end
    // hold while disabled, and write does not change the read register
    @(negedge clk); en0 = 0; a0 = 9'd5;
    @(posedge clk); #1;
    check(q0 == ref0[0], "read register holds when disabled");
    @(negedge clk); en0 = 1; we0 = 1; a0 = 9'd7; d0 = 64'h0123_4567_89AB_CDEF;
    @(posedge clk); #1;
    check(q0 == ref0[0], "read register unchanged by a write");
    @(negedge clk); we0 = 0;
    @(posedge clk); #1;
    check(q0 == 64'h0123_4567_89AB_CDEF, "written word read back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
