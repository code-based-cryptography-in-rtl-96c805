// Test sequence for the HQC accelerator seen from the bus, shared by the
// accelerator and the system testbenches. Over its own AXI4-Lite master it
// places operands in main memory (MEM_BASE), programs the accelerator
// (REG_BASE) and checks every result against models worked out here:
//   * sparse-dense product in F2[X]/(X^n - 1) with WEIGHT coordinates,
//     including coordinates 0 and n-1, then an addition; both against a
//     bit-level model; the CYCLES register against the R-Unit schedule of two
//     cycles per word;
//   * SHAKE256("abc") against the FIPS 202 output;
//   * seed expansion and fixed-weight sampling (weight 75) against the
//     rejection rule applied to the squeezed byte stream, repeated over
//     several seeds until both rejection causes have been seen;
//   * RM decoding of 46 noisy codewords (three copies of RM(1,7) each);
//   * a command written while the accelerator is busy sets the error bit.
// Event counts are reported for the caller.
module hqc_flow
  import hqc_pkg::*;
  import hqc_model::*;
#(
  parameter logic [31:0] REG_BASE = 32'h4000_0000,
  parameter logic [31:0] MEM_BASE = 32'h1000_0000,
  parameter int unsigned N        = 17669,
  parameter int unsigned W        = 66,
  parameter int unsigned SAMPLE_ROUNDS = 60
) (
  input  logic      clk,
  input  logic      go,
  output axil_req_t req,
  input  axil_rsp_t rsp,
  input  logic [15:0] n_rej_range,
  input  logic [15:0] n_rej_dup,
  output logic      finished,
  output int        checks,
  output int        failures,
  output int        n_mul,
  output int        n_add,
  output int        n_rm,
  output int        n_busy_err
);
  localparam int unsigned NW = (N + 63) / 64;
  localparam logic [31:0] A_DENSE = MEM_BASE + 32'h0000;
  localparam logic [31:0] A_COORD = MEM_BASE + 32'h1000;
  localparam logic [31:0] A_RES   = MEM_BASE + 32'h2000;
  localparam logic [31:0] A_MSG   = MEM_BASE + 32'h3000;
  localparam logic [31:0] A_SQZ   = MEM_BASE + 32'h3100;
  localparam logic [31:0] A_POS   = MEM_BASE + 32'h3E00;
  localparam logic [31:0] A_CW    = MEM_BASE + 32'h4000;
  localparam logic [31:0] A_DEC   = MEM_BASE + 32'h5000;

  axil_bfm bfm (.clk, .req, .rsp);

  bit dense [N];
  bit acc   [N];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    logic [1:0] r;
    bfm.write(a, d, 4'hF, r);
  endtask

  task automatic rd(input logic [31:0] a, output logic [31:0] d);
    logic [1:0] r;
    bfm.read(a, d, r);
  endtask

  task automatic cmd(input hqc_cmd_e c, input logic [31:0] src, input logic [31:0] dst,
                     input int len, input int weight, output int cycles);
    logic [31:0] st;
    wr(REG_BASE + 32'(HQC_REG_SRC), src);
    wr(REG_BASE + 32'(HQC_REG_DST), dst);
    wr(REG_BASE + 32'(HQC_REG_LEN), 32'(len));
    wr(REG_BASE + 32'(HQC_REG_WEIGHT), 32'(weight));
    wr(REG_BASE + 32'(HQC_REG_CMD), 32'(c));
    do rd(REG_BASE + 32'(HQC_REG_STATUS), st); while (st[0]);
    check(!st[1], $sformatf("command %0d without error (status %h)", c, st));
    rd(REG_BASE + 32'(HQC_REG_CYCLES), st);
    cycles = int'(st);
  endtask

  task automatic put_poly(input logic [31:0] base);
    for (int w = 0; w < NW; w++) begin
      logic [63:0] v;
      v = '0;
      for (int b = 0; b < 64; b++) if (64*w + b < N) v[b] = dense[64*w + b];
      wr(base + 32'(8*w), v[31:0]);
      wr(base + 32'(8*w + 4), v[63:32]);
    end
  endtask

  task automatic squeeze_bytes(input int l, output byte unsigned s [$]);
    int cyc;
    logic [31:0] d;
    cmd(CMD_SH_SQZ, 0, A_SQZ, l, 0, cyc);
    s.delete();
    for (int i = 0; i < (l + 3) / 4; i++) begin
      rd(A_SQZ + 32'(4*i), d);
      for (int b = 0; b < 4; b++) if (4*i + b < l) s.push_back(d[8*b +: 8]);
    end
  endtask

  task automatic seedexpand(input byte unsigned seed [$]);
    int cyc;
    for (int i = 0; i < (seed.size() + 3) / 4; i++) begin
      logic [31:0] d;
      d = '0;
      for (int b = 0; b < 4; b++) if (4*i + b < seed.size()) d[8*b +: 8] = seed[4*i + b];
      wr(A_MSG + 32'(4*i), d);
    end
    cmd(CMD_SH_INIT, 0, 0, 0, 0, cyc);
    cmd(CMD_SH_ABS, A_MSG, 0, seed.size(), 0, cyc);
    cmd(CMD_SH_FIN, 0, 0, 0, 0, cyc);
  endtask

  initial begin
    int cyc, exp_min, bad;
    int unsigned coords [$];
    logic [31:0] d, st;
    byte unsigned s [$], seed [$];
    int unsigned pos [$];
    logic [7:0] msgs [HQC_N1];
    checks = 0; failures = 0; finished = 1'b0;
    n_mul = 0; n_add = 0; n_rm = 0; n_busy_err = 0;
    wait (go);

    // ---------------- multiplication and addition in R ----------------
    for (int i = 0; i < N; i++) dense[i] = 1'($urandom);
    put_poly(A_DENSE);
    coords.delete();
    coords.push_back(0);
    coords.push_back(N - 1);
    while (coords.size() < W) begin
      int unsigned c;
      bit seen;
      c = $urandom_range(N - 1);
      seen = 1'b0;
      foreach (coords[k]) if (coords[k] == c) seen = 1'b1;
      if (!seen) coords.push_back(c);
    end
    foreach (coords[k]) wr(A_COORD + 32'(4*k), coords[k]);
    for (int i = 0; i < N; i++) acc[i] = 0;
    foreach (coords[k])
      for (int i = 0; i < N; i++) if (dense[i]) acc[(i + coords[k]) % N] ^= 1'b1;

    cmd(CMD_LOAD0, A_DENSE, 0, NW, 0, cyc);
    // a second command while the multiplication runs must be refused
    wr(REG_BASE + 32'(HQC_REG_SRC), A_COORD);
    wr(REG_BASE + 32'(HQC_REG_WEIGHT), 32'(W));
    wr(REG_BASE + 32'(HQC_REG_CMD), 32'(CMD_MUL));
    wr(REG_BASE + 32'(HQC_REG_CMD), 32'(CMD_ADD));
    rd(REG_BASE + 32'(HQC_REG_STATUS), st);
    check(st[1] == 1'b1, "command while busy flagged");
    if (st[1]) n_busy_err++;
    do rd(REG_BASE + 32'(HQC_REG_STATUS), st); while (st[0]);
    wr(REG_BASE + 32'(HQC_REG_STATUS), 32'd0);   // clear the error
    rd(REG_BASE + 32'(HQC_REG_CYCLES), d);
    cyc = int'(d);
    n_mul++;
    exp_min = (2*NW + 2) + int'(W) * (2*(NW + 1) + 2) + (3*NW + 3);
    check(cyc >= exp_min && cyc <= exp_min + int'(W) * 40 + 40,
          $sformatf("multiplication took %0d cycles, R-Unit schedule %0d", cyc, exp_min));
    $display("multiplication: %0d cycles (R-Unit alone %0d)", cyc, exp_min);
    cmd(CMD_STORE1, 0, A_RES, NW, 0, cyc);
    bad = 0;
    for (int w = 0; w < NW; w++) begin
      logic [63:0] e, g;
      e = '0;
      for (int b = 0; b < 64; b++) if (64*w + b < N) e[b] = acc[64*w + b];
      rd(A_RES + 32'(8*w), g[31:0]);
      rd(A_RES + 32'(8*w + 4), g[63:32]);
      if (g != e) bad++;
    end
    check(bad == 0, $sformatf("product: %0d wrong words", bad));
    // addition: SRAM1 += dense
    for (int i = 0; i < N; i++) acc[i] ^= dense[i];
    cmd(CMD_ADD, 0, 0, 0, 0, cyc);
    n_add++;
    check(cyc >= 2*NW + 2 && cyc <= 2*NW + 10, $sformatf("addition took %0d cycles", cyc));
    cmd(CMD_STORE1, 0, A_RES, NW, 0, cyc);
    bad = 0;
    for (int w = 0; w < NW; w++) begin
      logic [63:0] e, g;
      e = '0;
      for (int b = 0; b < 64; b++) if (64*w + b < N) e[b] = acc[64*w + b];
      rd(A_RES + 32'(8*w), g[31:0]);
      rd(A_RES + 32'(8*w + 4), g[63:32]);
      if (g != e) bad++;
    end
    check(bad == 0, $sformatf("sum: %0d wrong words", bad));

    // ---------------- SHAKE256("abc") ----------------
    seed = '{8'h61, 8'h62, 8'h63};
    seedexpand(seed);
    squeeze_bytes(16, s);
    begin
      byte unsigned kat [16] = '{8'h48, 8'h33, 8'h66, 8'h60, 8'h13, 8'h60, 8'ha8, 8'h77,
                                 8'h1c, 8'h68, 8'h63, 8'h08, 8'h0c, 8'hc4, 8'h11, 8'h4d};
      bad = 0;
      for (int i = 0; i < 16; i++) if (s[i] != kat[i]) bad++;
      check(bad == 0, "SHAKE256(abc)");
    end

    // ---------------- fixed-weight sampling ----------------
    for (int r = 0; r < int'(SAMPLE_ROUNDS); r++) begin
      seed.delete();
      for (int i = 0; i < 40; i++) seed.push_back(8'($urandom));
      seed.push_back(8'h02);
      seedexpand(seed);
      squeeze_bytes(300, s);
      sample_ref(s, N, 75, pos);
      seedexpand(seed);
      cmd(CMD_SAMPLE, 0, A_POS, 0, 75, cyc);
      bad = 0;
      for (int i = 0; i < 75; i++) begin
        rd(A_POS + 32'(4*i), d);
        if (pos.size() != 75 || d != pos[i]) bad++;
      end
      check(bad == 0, $sformatf("sampled vector %0d: %0d wrong positions", r, bad));
      if (n_rej_range > 0 && n_rej_dup > 0) break;
    end

    // ---------------- RM decoding ----------------
    for (int c = 0; c < int'(HQC_N1); c++) begin
      logic [383:0] cw;
      msgs[c] = 8'($urandom);
      for (int k = 0; k < 3; k++)
        for (int j = 0; j < 128; j++) cw[128*k + j] = rm_bit(msgs[c], j);
      for (int e = 0; e < 40; e++) cw[$urandom_range(383)] ^= 1'b1;
      for (int k = 0; k < 12; k++) wr(A_CW + 32'(48*c + 4*k), cw[32*k +: 32]);
    end
    cmd(CMD_LOAD1, A_CW, 0, 6 * HQC_N1, 0, cyc);
    cmd(CMD_RM_DEC, 0, A_DEC, HQC_N1, 0, cyc);
    n_rm++;
    $display("RM decoding of %0d codewords: %0d cycles", HQC_N1, cyc);
    bad = 0;
    for (int c = 0; c < int'(HQC_N1); c++) begin
      if (c % 4 == 0) rd(A_DEC + 32'(c), d);
      if (d[8*(c%4) +: 8] != msgs[c]) bad++;
    end
    check(bad == 0, $sformatf("RM decoding: %0d wrong bytes", bad));
    finished = 1'b1;
  end
endmodule
