// Sampling-Unit: incremental SHAKE256 (absorb, finalize, squeeze) around an
// external Keccak-f[1600] permutation, plus rejection-based sampling of
// fixed-weight vectors from the SHAKE output.
//
// The 1600-bit sponge state is held here; bytes are numbered as in FIPS 202
// (byte k is bits 8k+7..8k). A command is started by pulsing start with cmd
// and len:
//   SU_INIT    state = 0, position = 0
//   SU_ABSORB  XOR len bytes taken from in_data (4 bytes per word, little
//              endian, last word partial) into the rate; the state is
//              permuted whenever the 136-byte rate is full
//   SU_FINAL   SHAKE padding (0x1F at the position, 0x80 at byte 135), one
//              permutation, squeezing starts at byte 0
//   SU_SQUEEZE emit len bytes on out_data, 4 per word, little endian;
//              permutes after every 136 bytes
//   SU_SAMPLE  emit len distinct positions below N_BITS, one per word: three
//              squeezed bytes b0,b1,b2 form v = b0<<16 | b1<<8 | b2; v is
//              rejected if v >= floor(2^24/n)*n, otherwise reduced mod n and
//              rejected if it equals a position already emitted, as in the
//              HQC reference sampler
// Bytes are processed one per cycle; the permutation is requested with
// perm_start and the state is taken back on perm_done. done pulses when the
// command has finished. The paper states that the unit combines incremental
// SHAKE absorb/squeeze, the Keccak permutation and rejection sampling; the
// byte-serial datapath, the command set and the sequential duplicate check
// are this design's choices. The 24-bit rejection rule follows the HQC
// reference software, not the paper.
module sampling_unit #(
  parameter int unsigned N_BITS = 17669,
  parameter int unsigned W_MAX  = 75,
  localparam int unsigned CW    = $clog2(N_BITS)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [2:0]     cmd,
  input  logic [15:0]    len,
  output logic           busy,
  output logic           done,
  // absorb input
  input  logic           in_valid,
  input  logic [31:0]    in_data,
  output logic           in_ready,
  // squeeze / sample output
  output logic           out_valid,
  output logic [31:0]    out_data,
  input  logic           out_ready,
  // Keccak-f[1600] permutation
  output logic           perm_start,
  output logic [1599:0]  perm_state_o,
  input  logic           perm_done,
  input  logic [1599:0]  perm_state_i,
  // event counters for monitoring
  output logic [15:0]    n_perm,
  output logic [15:0]    n_rej_range,
  output logic [15:0]    n_rej_dup
);
  localparam logic [2:0] SU_INIT = 3'd0, SU_ABSORB = 3'd1, SU_FINAL = 3'd2,
                         SU_SQUEEZE = 3'd3, SU_SAMPLE = 3'd4;
  localparam int unsigned RATE   = 136;
  localparam int unsigned THRESH = ((1 << 24) / N_BITS) * N_BITS;
  localparam int unsigned QB     = $clog2((1 << 24) / N_BITS + 1);

  typedef enum logic [3:0] {
    U_IDLE, U_ABS_WAIT, U_ABS_BYTE, U_FIN, U_PERM, U_PERM_WAIT,
    U_SQZ_BYTE, U_SQZ_OUT, U_SMP_BYTE, U_SMP_CHECK, U_SMP_DUP, U_SMP_OUT
  } ustate_e;

  ustate_e       state_q, ret_q;
  logic [1599:0] st_q;
  logic [7:0]    pos_q;           // byte position in the rate
  logic [15:0]   left_q;          // bytes or positions still to do
  logic [31:0]   word_q;          // absorb word / squeeze output word
  logic [2:0]    wb_q;            // bytes held in word_q
  logic [23:0]   rnd_q;           // sampling: collected bytes
  logic [1:0]    rb_q;
  logic [CW-1:0] cand_q;
  logic [6:0]    nacc_q, k_q;     // accepted positions, duplicate-check index
  logic [CW-1:0] acc_mem [W_MAX];

  logic [7:0]    st_byte;
  logic [31:0]   mod_r;

  assign st_byte      = st_q[8*pos_q +: 8];
  assign busy         = (state_q != U_IDLE);
  assign in_ready     = (state_q == U_ABS_WAIT);
  assign out_valid    = (state_q == U_SQZ_OUT) || (state_q == U_SMP_OUT);
  assign out_data     = (state_q == U_SMP_OUT) ? 32'(cand_q) : word_q;
  assign perm_state_o = st_q;

  // v mod n by restoring division (quotient below 2^QB)
  always_comb begin
    mod_r = 32'(rnd_q);
    for (int b = QB - 1; b >= 0; b--) begin
      if (mod_r >= (32'(N_BITS) << b)) mod_r = mod_r - (32'(N_BITS) << b);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= U_IDLE;
      ret_q       <= U_IDLE;
      st_q        <= '0;
      pos_q       <= '0;
      left_q      <= '0;
      word_q      <= '0;
      wb_q        <= '0;
      rnd_q       <= '0;
      rb_q        <= '0;
      cand_q      <= '0;
      nacc_q      <= '0;
      k_q         <= '0;
      done        <= 1'b0;
      perm_start  <= 1'b0;
      n_perm      <= '0;
      n_rej_range <= '0;
      n_rej_dup   <= '0;
    end else begin
      done       <= 1'b0;
      perm_start <= 1'b0;
      unique case (state_q)
        U_IDLE: if (start) begin
          left_q <= len;
          wb_q   <= '0;
          rb_q   <= '0;
          nacc_q <= '0;
          unique case (cmd)
            SU_INIT: begin
              st_q  <= '0;
              pos_q <= '0;
              done  <= 1'b1;
            end
            SU_ABSORB:  state_q <= (len == 16'd0) ? U_IDLE : U_ABS_WAIT;
            SU_FINAL:   state_q <= U_FIN;
            SU_SQUEEZE: state_q <= (len == 16'd0) ? U_IDLE : U_SQZ_BYTE;
            SU_SAMPLE:  state_q <= (len == 16'd0) ? U_IDLE : U_SMP_BYTE;
            default:    done <= 1'b1;
          endcase
          if (cmd != SU_INIT && len == 16'd0 && cmd != SU_FINAL) done <= 1'b1;
        end
        // ---------------- absorb ----------------
        U_ABS_WAIT: if (in_valid) begin
          word_q  <= in_data;
          wb_q    <= (left_q >= 16'd4) ? 3'd4 : 3'(left_q);
          state_q <= U_ABS_BYTE;
        end
        U_ABS_BYTE: begin
          st_q[8*pos_q +: 8] <= st_byte ^ word_q[7:0];
          word_q <= word_q >> 8;
          wb_q   <= wb_q - 3'd1;
          left_q <= left_q - 16'd1;
          if (pos_q == 8'(RATE - 1)) begin
            pos_q <= '0;
            ret_q <= (left_q == 16'd1) ? U_IDLE : ((wb_q == 3'd1) ? U_ABS_WAIT : U_ABS_BYTE);
            state_q <= U_PERM;
          end else begin
            pos_q <= pos_q + 8'd1;
            if (left_q == 16'd1) begin
              state_q <= U_IDLE;
              done    <= 1'b1;
            end else if (wb_q == 3'd1) begin
              state_q <= U_ABS_WAIT;
            end
          end
        end
        // ---------------- finalize ----------------
        U_FIN: begin
          st_q[8*pos_q +: 8] <= st_byte ^ 8'h1F;
          st_q[8*(RATE-1) +: 8] <= st_q[8*(RATE-1) +: 8] ^ 8'h80 ^
                                   ((pos_q == 8'(RATE - 1)) ? 8'h1F : 8'h00);
          pos_q   <= '0;
          ret_q   <= U_IDLE;
          state_q <= U_PERM;
        end
        // ---------------- permutation ----------------
        U_PERM: begin
          perm_start <= 1'b1;
          n_perm     <= n_perm + 16'd1;
          state_q    <= U_PERM_WAIT;
        end
        U_PERM_WAIT: if (perm_done) begin
          st_q    <= perm_state_i;
          state_q <= ret_q;
          if (ret_q == U_IDLE) done <= 1'b1;
        end
        // ---------------- squeeze ----------------
        U_SQZ_BYTE: begin
          word_q[8*wb_q[1:0] +: 8] <= st_byte;
          for (int b = 0; b < 4; b++) if (b > int'(wb_q)) word_q[8*b +: 8] <= 8'h00;
          wb_q   <= wb_q + 3'd1;
          left_q <= left_q - 16'd1;
          pos_q  <= (pos_q == 8'(RATE - 1)) ? 8'd0 : pos_q + 8'd1;
          if (wb_q == 3'd3 || left_q == 16'd1) begin
            ret_q <= U_SQZ_OUT;
          end else begin
            ret_q <= U_SQZ_BYTE;
          end
          if (pos_q == 8'(RATE - 1))                  state_q <= U_PERM;
          else if (wb_q == 3'd3 || left_q == 16'd1)   state_q <= U_SQZ_OUT;
        end
        U_SQZ_OUT: if (out_ready) begin
          wb_q <= '0;
          if (left_q == 16'd0) begin
            state_q <= U_IDLE;
            done    <= 1'b1;
          end else begin
            state_q <= U_SQZ_BYTE;
          end
        end
        // ---------------- fixed-weight sampling ----------------
        U_SMP_BYTE: begin
          rnd_q <= {rnd_q[15:0], st_byte};
          rb_q  <= (rb_q == 2'd2) ? 2'd0 : rb_q + 2'd1;
          pos_q <= (pos_q == 8'(RATE - 1)) ? 8'd0 : pos_q + 8'd1;
          ret_q <= (rb_q == 2'd2) ? U_SMP_CHECK : U_SMP_BYTE;
          if (pos_q == 8'(RATE - 1)) state_q <= U_PERM;
          else if (rb_q == 2'd2)     state_q <= U_SMP_CHECK;
        end
        U_SMP_CHECK: begin
          if (32'(rnd_q) >= 32'(THRESH)) begin
            n_rej_range <= n_rej_range + 16'd1;
            state_q     <= U_SMP_BYTE;
          end else begin
            cand_q  <= CW'(mod_r);
            k_q     <= '0;
            state_q <= U_SMP_DUP;
          end
        end
        U_SMP_DUP: begin
          if (k_q == nacc_q) begin
            acc_mem[nacc_q[$clog2(W_MAX)-1:0]] <= cand_q;
            nacc_q  <= nacc_q + 7'd1;
            state_q <= U_SMP_OUT;
          end else if (acc_mem[k_q[$clog2(W_MAX)-1:0]] == cand_q) begin
            n_rej_dup <= n_rej_dup + 16'd1;
            state_q   <= U_SMP_BYTE;
          end else begin
            k_q <= k_q + 7'd1;
          end
        end
        U_SMP_OUT: if (out_ready) begin
          left_q <= left_q - 16'd1;
          if (left_q == 16'd1) begin
            state_q <= U_IDLE;
            done    <= 1'b1;
          end else begin
            state_q <= U_SMP_BYTE;
          end
        end
        default: state_q <= U_IDLE;
      endcase
    end
  end

  a_weight: assert property (@(posedge clk) disable iff (!rst_n)
    (start && cmd == SU_SAMPLE) |-> (len <= 16'(W_MAX)));
endmodule
