// Test harness for one R-Unit instance of size N: the R-Unit, its two SRAMs
// and a bit-level reference model of arithmetic in F2[X]/(X^N - 1).
// It runs random sparse-dense products (R_CLEAR, one R_SHIFTXOR per
// coordinate, R_REDUCE) and additions, compares every result bit with the
// model, and checks the cycle counts: 2 cycles per processed word
// (NW + 1 words per shift pass), plus two cycles to take the command and signal done.
module r_unit_tester #(
  parameter int unsigned N  = 17669,
  parameter int unsigned W  = 66,
  parameter int unsigned S0 = 288,
  parameter int unsigned S1 = 566
) (
  input  logic clk,
  input  logic rst_n,
  input  logic go,
  output logic finished,
  output int   checks,
  output int   failures
);
  localparam int unsigned NW  = (N + 63) / 64;
  localparam int unsigned AW0 = $clog2(S0);
  localparam int unsigned AW1 = $clog2(S1);
  localparam int unsigned CW  = $clog2(N);

  logic           start = 1'b0, busy, done;
  logic [1:0]     op = '0;
  logic [CW-1:0]  coord = '0;
  logic           s0_en, s1_en, s1_we;
  logic [AW0-1:0] s0_addr;
  logic [AW1-1:0] s1_addr;
  logic [63:0]    s0_rdata, s1_wdata, s1_rdata;

  r_unit #(.N_BITS(N), .AW0(AW0), .AW1(AW1)) dut (
    .clk, .rst_n, .start, .op, .coord, .busy, .done,
    .s0_en, .s0_addr, .s0_rdata, .s1_en, .s1_we, .s1_addr, .s1_wdata, .s1_rdata);
  sram_sp #(.WORDS(S0)) u_s0 (.clk, .rst_n, .en(s0_en), .we(1'b0), .addr(s0_addr), .wdata('0), .rdata(s0_rdata));
  sram_sp #(.WORDS(S1)) u_s1 (.clk, .rst_n, .en(s1_en), .we(s1_we), .addr(s1_addr), .wdata(s1_wdata), .rdata(s1_rdata));

  bit dense [N];
  bit acc   [N];
  int unsigned coords [$];

  task automatic op_run(input logic [1:0] o, input int c, input int exp_cycles);
    int cyc = 0;
    @(posedge clk);
    start <= 1'b1; op <= o; coord <= CW'(c);
    @(posedge clk);
    start <= 1'b0;
    cyc = 1;
    while (!done) begin
      @(posedge clk);
      cyc++;
    end
    checks++;
    if (cyc != exp_cycles) begin
      failures++;
      $display("FAIL N=%0d op %0d: %0d cycles, expected %0d", N, o, cyc, exp_cycles);
    end
  endtask

  task automatic compare(input string what);
    int bad = 0;
    for (int w = 0; w < NW; w++) begin
      logic [63:0] e = '0;
      for (int b = 0; b < 64; b++) if (64*w + b < N) e[b] = acc[64*w + b];
      checks++;
      if (u_s1.mem[w] !== e) begin
        failures++;
        bad++;
        if (bad < 4) $display("FAIL N=%0d %s word %0d: %h expected %h", N, what, w, u_s1.mem[w], e);
      end
    end
  endtask

  initial begin
    checks = 0; failures = 0; finished = 1'b0;
    wait (go);
    for (int t = 0; t < 2; t++) begin
      // random dense operand in SRAM0, bits above N zero
      for (int i = 0; i < N; i++) dense[i] = 1'($urandom);
      for (int w = 0; w < NW; w++) begin
        logic [63:0] v;
        v = '0;
        for (int b = 0; b < 64; b++) if (64*w + b < N) v[b] = dense[64*w + b];
        u_s0.mem[w] = v;
      end
      // random distinct coordinates, including the extremes
      coords.delete();
      coords.push_back(0);
      coords.push_back(N - 1);
      coords.push_back(63 % N);
      while (coords.size() < W) begin
        int unsigned c;
        bit seen;
        c = $urandom_range(N - 1);
        seen = 1'b0;
        foreach (coords[k]) if (coords[k] == c) seen = 1;
        if (!seen) coords.push_back(c);
      end
      // reference product
      for (int i = 0; i < N; i++) acc[i] = 0;
      foreach (coords[k])
        for (int i = 0; i < N; i++) if (dense[i]) acc[(i + coords[k]) % N] ^= 1'b1;
      // hardware product
      op_run(2'd0, 0, 2 * NW + 2);
      foreach (coords[k]) op_run(2'd1, coords[k], 2 * (NW + 1) + 2);
      op_run(2'd2, 0, 3 * NW + 3);
      compare("product");
      // addition with SRAM0
      for (int i = 0; i < N; i++) acc[i] ^= dense[i];
      op_run(2'd3, 0, 2 * NW + 2);
      compare("sum");
    end
    finished = 1'b1;
  end
endmodule
