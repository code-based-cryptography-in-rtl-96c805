// Self-checking testbench of the RM-Decoder (RM(1,7), multiplicity 3).
// Every one of the 256 messages is encoded here (codeword bit j =
// m[7] XOR parity(m[6:0] & j), three copies), disturbed with a random number
// of bit errors (0 to 60 per 384 bits) and decoded; the expected byte comes
// from a direct correlation of the received counts with every codeword,
// which is worked out here independently of the butterfly network, with the
// same tie rule (first index of largest magnitude). The latency per codeword
// is checked: 6 input words, 7 transform passes, 128 peak-search steps and
// two cycles to register and present the result.
module tb_rm_decoder;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid = 1'b0, in_ready, out_valid;
  logic [63:0] in_word = '0;
  logic [7:0] out_byte;
  int checks = 0, failures = 0;

  rm_decoder dut (.clk, .rst_n, .in_valid, .in_word, .in_ready, .out_valid, .out_byte);

  function automatic bit cw_bit(input logic [7:0] m, input int j);
    return m[7] ^ (^(m[6:0] & 7'(j)));
  endfunction

  function automatic logic [7:0] ref_decode(input logic [383:0] r);
    int cnt [128];
    int best_abs, best_val, best_pos, t, at;
    for (int j = 0; j < 128; j++) cnt[j] = r[j] + r[128 + j] + r[256 + j];
    best_abs = 0; best_val = 0; best_pos = 0;
    for (int i = 0; i < 128; i++) begin
      t = 0;
      for (int j = 0; j < 128; j++) t += (^(7'(i) & 7'(j))) ? -cnt[j] : cnt[j];
      if (i == 0) t -= 192;
      at = (t < 0) ? -t : t;
      if (at > best_abs) begin best_abs = at; best_val = t; best_pos = i; end
    end
    return {(best_val > 0), 7'(best_pos)};
  endfunction

  initial begin
    logic [383:0] cw;
    logic [7:0] exp_b;
    int cyc, nerr;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int m = 0; m < 256; m++) begin
      for (int c = 0; c < 3; c++)
        for (int j = 0; j < 128; j++) cw[128*c + j] = cw_bit(8'(m), j);
      nerr = (m < 16) ? 0 : $urandom_range(60);
      for (int e = 0; e < nerr; e++) cw[$urandom_range(383)] ^= 1'b1;
      exp_b = ref_decode(cw);
      if (nerr == 0) begin
        checks++;
        if (exp_b != 8'(m)) begin failures++; $display("FAIL reference model m=%0d", m); end
      end
      cyc = 0;
      for (int k = 0; k < 6; k++) begin
        @(posedge clk);
        in_valid <= 1'b1;
        in_word  <= cw[64*k +: 64];
        do begin @(posedge clk); cyc++; end while (!in_ready);
        in_valid <= 1'b0;
      end
      while (!out_valid) begin @(posedge clk); cyc++; end
      checks++;
      if (out_byte != exp_b) begin
        failures++;
        $display("FAIL m=%0d errors=%0d decoded %h expected %h", m, nerr, out_byte, exp_b);
      end
      if (m == 0) $display("latency %0d cycles", cyc);
    end
    // back-to-back timing
    for (int c = 0; c < 3; c++)
      for (int j = 0; j < 128; j++) cw[128*c + j] = cw_bit(8'hA7, j);
    @(posedge clk);
    cyc = 0;
    for (int k = 0; k < 6; k++) begin
      in_valid <= 1'b1;
      in_word  <= cw[64*k +: 64];
      @(posedge clk);
      cyc++;
    end
    in_valid <= 1'b0;
    while (!out_valid) begin @(posedge clk); cyc++; end
    checks++;
    if (cyc != 6 + 7 + 128 + 2) begin
      failures++;
      $display("FAIL latency %0d cycles, expected %0d", cyc, 6 + 7 + 128 + 2);
    end
    checks++;
    if (out_byte != 8'hA7) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
