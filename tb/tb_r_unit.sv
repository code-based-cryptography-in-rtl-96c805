// Self-checking testbench of the R-Unit: one instance at the HQC-128 size
// (n = 17669, 277 words, weight 66), one where n is a multiple of 64
// (n = 256) and one small odd size (n = 197), each checked against a
// bit-level model of multiplication and addition in F2[X]/(X^n - 1).
module tb_r_unit;
  logic clk = 1'b0, rst_n = 1'b0, go = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int c0, f0, c1, f1, c2, f2;
  logic d0, d1, d2;

  r_unit_tester #(.N(17669), .W(66), .S0(288), .S1(566)) t_full (.clk, .rst_n, .go, .finished(d0), .checks(c0), .failures(f0));
  r_unit_tester #(.N(256),   .W(20), .S0(4),   .S1(8))   t_even (.clk, .rst_n, .go, .finished(d1), .checks(c1), .failures(f1));
  r_unit_tester #(.N(197),   .W(30), .S0(4),   .S1(8))   t_odd  (.clk, .rst_n, .go, .finished(d2), .checks(c2), .failures(f2));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    go = 1'b1;
    wait (d0 && d1 && d2);
    checks = c0 + c1 + c2;
    failures = f0 + f1 + f2;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
    $finish;
  end
endmodule
