// Behavioural model of the Keccak-f[1600] permutation core that the
// Sampling-Unit connects to (the design uses an external high-speed core that
// permutes in 24 cycles; it is not part of this RTL).
//
// On a one-cycle start pulse the model takes state_i, runs one round per
// clock cycle (theta, rho, pi, chi, iota as in FIPS 202) and after 24 cycles
// presents the result on state_o with a one-cycle done pulse. Lane (x,y) is
// bits 64*(x+5y)+63 .. 64*(x+5y) of the state, byte order as in FIPS 202.
module keccak_f1600_model (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [1599:0] state_i,
  output logic [1599:0] state_o,
  output logic          done
);
  localparam logic [63:0] RC [24] = '{
    64'h0000000000000001, 64'h0000000000008082, 64'h800000000000808A, 64'h8000000080008000,
    64'h000000000000808B, 64'h0000000080000001, 64'h8000000080008081, 64'h8000000000008009,
    64'h000000000000008A, 64'h0000000000000088, 64'h0000000080008009, 64'h000000008000000A,
    64'h000000008000808B, 64'h800000000000008B, 64'h8000000000008089, 64'h8000000000008003,
    64'h8000000000008002, 64'h8000000000000080, 64'h000000000000800A, 64'h800000008000000A,
    64'h8000000080008081, 64'h8000000000008080, 64'h0000000080000001, 64'h8000000080008008};
  // rotation offsets indexed x+5y
  localparam int ROT [25] = '{0, 1, 62, 28, 27,  36, 44, 6, 55, 20,  3, 10, 43, 25, 39,
                              41, 45, 15, 21, 8,  18, 2, 61, 56, 14};

  function automatic logic [63:0] rotl(input logic [63:0] v, input int r);
    return (r == 0) ? v : ((v << r) | (v >> (64 - r)));
  endfunction

  function automatic logic [1599:0] round_f(input logic [1599:0] s, input int rnd);
    logic [63:0] a [25];
    logic [63:0] b [25];
    logic [63:0] c [5];
    logic [63:0] d [5];
    logic [1599:0] o;
    for (int i = 0; i < 25; i++) a[i] = s[64*i +: 64];
    for (int x = 0; x < 5; x++) c[x] = a[x] ^ a[x+5] ^ a[x+10] ^ a[x+15] ^ a[x+20];
    for (int x = 0; x < 5; x++) d[x] = c[(x+4)%5] ^ rotl(c[(x+1)%5], 1);
    for (int i = 0; i < 25; i++) a[i] = a[i] ^ d[i%5];
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        b[y + 5*((2*x + 3*y) % 5)] = rotl(a[x + 5*y], ROT[x + 5*y]);
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        a[x + 5*y] = b[x + 5*y] ^ (~b[(x+1)%5 + 5*y] & b[(x+2)%5 + 5*y]);
    a[0] = a[0] ^ RC[rnd];
    for (int i = 0; i < 25; i++) o[64*i +: 64] = a[i];
    return o;
  endfunction

  logic [4:0] rnd_q;
  logic       run_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rnd_q   <= '0;
      run_q   <= 1'b0;
      done    <= 1'b0;
      state_o <= '0;
    end else begin
      done <= 1'b0;
      if (start && !run_q) begin
        state_o <= round_f(state_i, 0);
        rnd_q   <= 5'd1;
        run_q   <= 1'b1;
      end else if (run_q) begin
        state_o <= round_f(state_o, int'(rnd_q));
        rnd_q   <= rnd_q + 5'd1;
        if (rnd_q == 5'd23) begin
          run_q <= 1'b0;
          done  <= 1'b1;
        end
      end
    end
  end
endmodule
