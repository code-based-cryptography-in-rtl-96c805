// RM-Decoder: maximum-likelihood decoder of the duplicated Reed-Muller code
// RM(1,7) used by HQC-128 (each 128-bit codeword is sent MULT times).
//
// One codeword of 2*MULT 64-bit words is taken on in_word/in_valid/in_ready,
// in the order of the reference software (copy 0 low half, copy 0 high half,
// copy 1 low half, ...). Decoding has three phases:
//   1. expand and sum: each arriving word adds its bits to 128 signed
//      counters, so counter j holds how many copies have bit j set;
//   2. Hadamard transform: 7 butterfly passes, one pass per cycle, each
//      t'[i] = t[2i] + t[2i+1], t'[i+64] = t[2i] - t[2i+1]; then
//      MULT*64 is subtracted from entry 0 (the half transform of the
//      reference);
//   3. peak search, one entry per cycle: the first entry of largest absolute
//      value gives the message bits 6..0 as its index and bit 7 as its sign
//      (set when the entry is positive).
// The message byte is presented on out_byte with a one-cycle out_valid pulse,
// 2*MULT + 7 + 128 + 2 cycles after the first input word if the words arrive
// back to back. The paper names these steps (transform for the duplicated
// code, Hadamard transform, peak search) and says they were adapted to
// hardware; the pass-per-cycle transform and the sequential peak search are
// this design's choices.
module rm_decoder #(
  parameter int unsigned MULT = 3
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [63:0] in_word,
  output logic        in_ready,
  output logic        out_valid,
  output logic [7:0]  out_byte
);
  localparam int unsigned TW = 11;   // |t| <= 128*MULT fits for MULT <= 7
  typedef logic signed [TW-1:0] tval_t;
  typedef enum logic [1:0] {D_SUM, D_HAD, D_PEAK, D_OUT} dstate_e;

  dstate_e     state_q;
  tval_t       t_q [128];
  logic [3:0]  cnt_q;                // input words, then passes
  logic [7:0]  pos_q;                // peak search index
  logic [TW-1:0] peak_abs_q;
  tval_t       peak_val_q;
  logic [6:0]  peak_pos_q;

  tval_t       t_next [128];
  tval_t       cur;
  logic [TW-1:0] cur_abs;

  assign in_ready = (state_q == D_SUM);

  always_comb begin
    for (int i = 0; i < 64; i++) begin
      t_next[i]      = t_q[2*i] + t_q[2*i+1];
      t_next[i + 64] = t_q[2*i] - t_q[2*i+1];
    end
    cur     = t_q[pos_q[6:0]];
    cur_abs = cur[TW-1] ? TW'(-cur) : TW'(cur);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= D_SUM;
      cnt_q      <= '0;
      pos_q      <= '0;
      peak_abs_q <= '0;
      peak_val_q <= '0;
      peak_pos_q <= '0;
      out_valid  <= 1'b0;
      out_byte   <= '0;
      for (int i = 0; i < 128; i++) t_q[i] <= '0;
    end else begin
      out_valid <= 1'b0;
      unique case (state_q)
        D_SUM: if (in_valid) begin
          for (int b = 0; b < 64; b++) begin
            if (cnt_q[0]) t_q[64 + b] <= ((cnt_q == 4'd1) ? tval_t'(0) : t_q[64 + b]) + tval_t'(in_word[b]);
            else          t_q[b]      <= ((cnt_q == 4'd0) ? tval_t'(0) : t_q[b])      + tval_t'(in_word[b]);
          end
          if (cnt_q == 4'(2 * MULT - 1)) begin
            cnt_q   <= '0;
            state_q <= D_HAD;
          end else begin
            cnt_q <= cnt_q + 4'd1;
          end
        end
        D_HAD: begin
          for (int i = 0; i < 128; i++) t_q[i] <= t_next[i];
          if (cnt_q == 4'd6) begin
            t_q[0]     <= t_next[0] - tval_t'(64 * MULT);
            cnt_q      <= '0;
            pos_q      <= '0;
            peak_abs_q <= '0;
            peak_val_q <= '0;
            peak_pos_q <= '0;
            state_q    <= D_PEAK;
          end else begin
            cnt_q <= cnt_q + 4'd1;
          end
        end
        D_PEAK: begin
          if (cur_abs > peak_abs_q) begin
            peak_abs_q <= cur_abs;
            peak_val_q <= cur;
            peak_pos_q <= pos_q[6:0];
          end
          pos_q <= pos_q + 8'd1;
          if (pos_q == 8'd127) state_q <= D_OUT;
        end
        D_OUT: begin
          out_valid <= 1'b1;
          out_byte  <= {(peak_val_q > 0), peak_pos_q};
          state_q   <= D_SUM;
        end
        default: state_q <= D_SUM;
      endcase
    end
  end
endmodule
