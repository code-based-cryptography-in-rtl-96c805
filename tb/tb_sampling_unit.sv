// Self-checking testbench of the Sampling-Unit.
//
// Two instances, each with its own Keccak-f[1600] model: A at the HQC-128
// size n = 17669 and B at n = 9000000, where about half of all 24-bit draws
// fall above the rejection threshold. Checks:
//   * SHAKE256("") and SHAKE256("abc") against the published FIPS 202
//     output bytes;
//   * incremental use: absorbing 200 bytes at once or as 100 + 100 bytes, and
//     squeezing 300 bytes at once or as 150 + 150 bytes, give the same bytes;
//     the number of permutations is the expected one;
//   * fixed-weight sampling on both instances against positions worked out
//     here from the squeezed byte stream with the reference rejection rule;
//     both rejection causes (out of range, duplicate) must occur.
module tb_sampling_unit;
  localparam int unsigned NA = 17669;
  localparam int unsigned NB = 9000000;
  localparam int unsigned W  = 75;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic          start [2];
  logic [2:0]    cmd [2];
  logic [15:0]   len [2];
  logic          busy [2], done [2];
  logic          in_valid [2], in_ready [2];
  logic [31:0]   in_data [2];
  logic          out_valid [2], out_ready [2];
  logic [31:0]   out_data [2];
  logic          p_start [2], p_done [2];
  logic [1599:0] p_so [2], p_si [2];
  logic [15:0]   n_perm [2], n_rej_range [2], n_rej_dup [2];

  sampling_unit #(.N_BITS(NA), .W_MAX(W)) dut_a (
    .clk, .rst_n, .start(start[0]), .cmd(cmd[0]), .len(len[0]), .busy(busy[0]), .done(done[0]),
    .in_valid(in_valid[0]), .in_data(in_data[0]), .in_ready(in_ready[0]),
    .out_valid(out_valid[0]), .out_data(out_data[0]), .out_ready(out_ready[0]),
    .perm_start(p_start[0]), .perm_state_o(p_so[0]), .perm_done(p_done[0]), .perm_state_i(p_si[0]),
    .n_perm(n_perm[0]), .n_rej_range(n_rej_range[0]), .n_rej_dup(n_rej_dup[0]));
  keccak_f1600_model kec_a (.clk, .rst_n, .start(p_start[0]), .state_i(p_so[0]),
                            .state_o(p_si[0]), .done(p_done[0]));
  sampling_unit #(.N_BITS(NB), .W_MAX(W)) dut_b (
    .clk, .rst_n, .start(start[1]), .cmd(cmd[1]), .len(len[1]), .busy(busy[1]), .done(done[1]),
    .in_valid(in_valid[1]), .in_data(in_data[1]), .in_ready(in_ready[1]),
    .out_valid(out_valid[1]), .out_data(out_data[1]), .out_ready(out_ready[1]),
    .perm_start(p_start[1]), .perm_state_o(p_so[1]), .perm_done(p_done[1]), .perm_state_i(p_si[1]),
    .n_perm(n_perm[1]), .n_rej_range(n_rej_range[1]), .n_rej_dup(n_rej_dup[1]));
  keccak_f1600_model kec_b (.clk, .rst_n, .start(p_start[1]), .state_i(p_so[1]),
                            .state_o(p_si[1]), .done(p_done[1]));

  byte unsigned msg [$];
  byte unsigned got [$];
  int unsigned  pos_got [$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run_cmd(input int u, input logic [2:0] c, input int l);
    int idx = 0;
    @(posedge clk);
    start[u] <= 1'b1; cmd[u] <= c; len[u] <= 16'(l);
    @(posedge clk);
    start[u] <= 1'b0;
    while (1) begin
      // feed absorb words from msg, collect output words
      if (c == 3'd1) begin
        in_valid[u] <= 1'b1;
        in_data[u]  <= {msg.size() > idx+3 ? msg[idx+3] : 8'h00, msg.size() > idx+2 ? msg[idx+2] : 8'h00,
                        msg.size() > idx+1 ? msg[idx+1] : 8'h00, msg.size() > idx   ? msg[idx]   : 8'h00};
      end
      out_ready[u] <= 1'b1;
      @(posedge clk);
      if (c == 3'd1 && in_valid[u] && in_ready[u]) idx += 4;
      if (out_valid[u] && out_ready[u]) begin
        if (c == 3'd3) for (int b = 0; b < 4; b++) got.push_back(out_data[u][8*b +: 8]);
        else           pos_got.push_back(out_data[u]);
      end
      if (done[u]) break;
    end
    in_valid[u]  <= 1'b0;
    out_ready[u] <= 1'b0;
    if (c == 3'd1) repeat (0) ;
  endtask

  // absorb msg[from +: l]
  task automatic absorb(input int u, input byte unsigned m [$]);
    msg = m;
    run_cmd(u, 3'd1, m.size());
  endtask

  task automatic squeeze(input int u, input int l, output byte unsigned r [$]);
    got.delete();
    run_cmd(u, 3'd3, l);
    r = got[0:l-1];
  endtask

  function automatic bit hex_eq(input byte unsigned r [$], input string hx);
    for (int i = 0; i < hx.len() / 2; i++) begin
      if (r[i] != byte'(hx.substr(2*i, 2*i+1).atohex())) return 1'b0;
    end
    return 1'b1;
  endfunction

  task automatic sample_check(input int u, input int unsigned n, input byte unsigned seed [$]);
    byte unsigned stream [$];
    int unsigned exp_pos [$];
    int unsigned thr, v, p, j;
    bit dup;
    run_cmd(u, 3'd0, 0);
    absorb(u, seed);
    run_cmd(u, 3'd2, 0);
    squeeze(u, 2040, stream);
    run_cmd(u, 3'd0, 0);
    absorb(u, seed);
    run_cmd(u, 3'd2, 0);
    pos_got.delete();
    run_cmd(u, 3'd4, W);
    thr = ((1 << 24) / n) * n;
    j = 0;
    while (exp_pos.size() < W && j + 3 <= stream.size()) begin
      v = (32'(stream[j]) << 16) | (32'(stream[j+1]) << 8) | 32'(stream[j+2]);
      j += 3;
      if (v >= thr) continue;
      p = v % n;
      dup = 1'b0;
      foreach (exp_pos[k]) if (exp_pos[k] == p) dup = 1'b1;
      if (!dup) exp_pos.push_back(p);
    end
    check(pos_got.size() == W, $sformatf("unit %0d: %0d positions emitted", u, pos_got.size()));
    for (int i = 0; i < W && i < pos_got.size(); i++)
      check(pos_got[i] == exp_pos[i], $sformatf("unit %0d position %0d: %0d expected %0d", u, i, pos_got[i], exp_pos[i]));
  endtask

  initial begin
    byte unsigned r1 [$], r2 [$], r3 [$], m [$], seed [$];
    int p0;
    for (int u = 0; u < 2; u++) begin
      start[u] = 0; cmd[u] = 0; len[u] = 0; in_valid[u] = 0; in_data[u] = 0; out_ready[u] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // SHAKE256("")
    run_cmd(0, 3'd0, 0);
    run_cmd(0, 3'd2, 0);
    squeeze(0, 32, r1);
    check(hex_eq(r1, "46b9dd2b0ba88d13233b3feb743eeb243fcd52ea62b81b82b50c27646ed5762f"), "SHAKE256 of empty string");
    // SHAKE256("abc")
    run_cmd(0, 3'd0, 0);
    m = '{8'h61, 8'h62, 8'h63};
    absorb(0, m);
    run_cmd(0, 3'd2, 0);
    squeeze(0, 16, r1);
    check(hex_eq(r1, "483366601360a8771c6863080cc4114d"), "SHAKE256 of abc");
    // incremental absorb and squeeze
    m.delete();
    for (int i = 0; i < 200; i++) m.push_back(8'(i * 7 + 3));
    run_cmd(0, 3'd0, 0);
    absorb(0, m);
    run_cmd(0, 3'd2, 0);
    p0 = n_perm[0];
    squeeze(0, 300, r1);
    check(n_perm[0] - p0 == 2, "two permutations while squeezing 300 bytes");
    run_cmd(0, 3'd0, 0);
    absorb(0, m[0:99]);
    absorb(0, m[100:199]);
    run_cmd(0, 3'd2, 0);
    squeeze(0, 150, r2);
    squeeze(0, 150, r3);
    r2 = {r2, r3};
    check(r1 == r2, "incremental absorb/squeeze equals one-shot");
    // fixed-weight sampling
    seed.delete();
    for (int i = 0; i < 40; i++) seed.push_back(8'($urandom));
    seed.push_back(8'h02);
    sample_check(0, NA, seed);
    sample_check(1, NB, seed);
    check(n_rej_range[1] > 0, "range rejection occurred");
    check(n_rej_dup[0] + n_rej_dup[1] > 0, "duplicate rejection occurred");
    $display("rejections: range %0d/%0d duplicate %0d/%0d", n_rej_range[0], n_rej_range[1], n_rej_dup[0], n_rej_dup[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
