// Self-checking testbench of the F(2^8) unit: all operand values of b with
// 64 random a each, plus the corner cases, against a bit-by-bit convolution
// a Horner evaluation
// of a[15:8] * b over GF(2) plus a[7:0].
module tb_gf28_unit;
  logic [15:0] a;
  logic [7:0]  b;
  logic [14:0] d;
  int checks = 0, failures = 0;

  gf28_unit dut (.a, .b, .d);

  // Horner evaluation over the bits of b, most significant first
  function automatic logic [14:0] ref_mac(input logic [15:0] x, input logic [7:0] y);
    int unsigned acc;
    int j;
    acc = 0;
    j = 7;
    while (j >= 0) begin
      acc = (acc << 1) ^ (y[j] ? int'(x[15:8]) : 0);
      j--;
    end
    return 15'(acc ^ int'(x[7:0]));
  endfunction

  task automatic try(input logic [15:0] x, input logic [7:0] y);
    a = x; b = y;
    #1;
    checks++;
    if (d !== ref_mac(x, y)) begin
      failures++;
      if (failures < 5) $display("FAIL a=%h b=%h d=%h expected %h", x, y, d, ref_mac(x, y));
    end
  endtask

  initial begin
    try(16'h0000, 8'h00);
    try(16'hFFFF, 8'hFF);
    try(16'h0100, 8'h01);
    try(16'h8000, 8'h80);
    try(16'h00A5, 8'h00);
    for (int y = 0; y < 256; y++)
      for (int t = 0; t < 64; t++) try(16'($urandom), 8'(y));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
