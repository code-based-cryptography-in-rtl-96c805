// R-Unit: arithmetic in R = F2[X]/(X^n - 1) on polynomials held in the two
// accelerator SRAMs as little-endian 64-bit words (bit k of the polynomial is
// bit k%64 of word k/64).
//
// Operations, selected by op when start is pulsed:
//   R_CLEAR    SRAM1[0 .. 2*NW-1] = 0                       1 cycle per word
//   R_SHIFTXOR SRAM1 ^= SRAM0 * X^coord (no reduction)      2 cycles per word
//   R_REDUCE   SRAM1[0 .. NW-1] = SRAM1 mod (X^n - 1)       3 cycles per word
//   R_ADD      SRAM1[0 .. NW-1] ^= SRAM0[0 .. NW-1]         2 cycles per word
// A sparse-dense product is one R_CLEAR, one R_SHIFTXOR per non-zero
// coordinate of the sparse operand, and one R_REDUCE. R_SHIFTXOR follows the
// paper: the dense polynomial (SRAM0) is shifted word by word by the
// coordinate and XORed into the intermediate result (SRAM1). In the first
// cycle of a word the dense word i and the intermediate word coord/64 + i are
// read; in the second the shifted word, merged with the carry of the previous
// word, is XORed in and written back, and the new carry-out is kept. NW+1
// words are processed so that the last carry is flushed. The reduction folds
// bits n .. 2n-2 back onto bits 0 .. n-2, reading the high part through a
// one-word sliding window, and clears the bits of the top word above n.
// done pulses one cycle after the last write. The clear, the reduction
// schedule and the addition are this design's choices; the paper gives the
// two-cycle multiplication step.
module r_unit #(
  parameter int unsigned N_BITS = 17669,
  parameter int unsigned AW0    = 9,
  parameter int unsigned AW1    = 10,
  localparam int unsigned NW    = (N_BITS + 63) / 64,
  localparam int unsigned CW    = $clog2(N_BITS)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [1:0]     op,
  input  logic [CW-1:0]  coord,
  output logic           busy,
  output logic           done,
  // SRAM0 (dense operand), read only
  output logic           s0_en,
  output logic [AW0-1:0] s0_addr,
  input  logic [63:0]    s0_rdata,
  // SRAM1 (intermediate / result)
  output logic           s1_en,
  output logic           s1_we,
  output logic [AW1-1:0] s1_addr,
  output logic [63:0]    s1_wdata,
  input  logic [63:0]    s1_rdata
);
  localparam logic [1:0] R_CLEAR = 2'd0, R_SHIFTXOR = 2'd1, R_REDUCE = 2'd2, R_ADD = 2'd3;
  localparam int unsigned HI   = N_BITS / 64;      // word holding bit n
  localparam int unsigned RS   = N_BITS % 64;      // bit of bit n in that word
  localparam int unsigned TOPB = N_BITS - 64 * (NW - 1);
  localparam logic [63:0] TOP_MASK = (TOPB == 64) ? '1 : ((64'd1 << TOPB) - 64'd1);

  typedef enum logic [2:0] {S_IDLE, S_CLR, S_RD, S_WR, S_PRIME, S_HIRD, S_LORD, S_LOWR} state_e;
  state_e state_q;
  logic [1:0]     op_q;
  logic [10:0]    idx_q;        // word counter
  logic [CW-7:0]  base_q;       // coord / 64
  logic [5:0]     sh_q;         // coord % 64
  logic [63:0]    carry_q;      // shift carry, or high window word in R_REDUCE
  logic [63:0]    hi_lo_q;      // lower high word of the reduction window

  logic [63:0] dense, shifted, carry_out, hi_word;

  always_comb begin
    dense     = (idx_q < 11'(NW)) ? s0_rdata : 64'd0;
    shifted   = (dense << sh_q) | carry_q;
    carry_out = (sh_q == 6'd0) ? 64'd0 : (dense >> (7'd64 - {1'b0, sh_q}));
    if (RS == 0) hi_word = hi_lo_q;
    else         hi_word = (hi_lo_q >> RS) | (s1_rdata << (64 - RS));
  end

  assign busy = (state_q != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      op_q    <= R_CLEAR;
      idx_q   <= '0;
      base_q  <= '0;
      sh_q    <= '0;
      carry_q <= '0;
      hi_lo_q <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          op_q    <= op;
          idx_q   <= '0;
          carry_q <= '0;
          base_q  <= coord[CW-1:6];
          sh_q    <= (op == R_SHIFTXOR) ? coord[5:0] : 6'd0;
          unique case (op)
            R_CLEAR:  state_q <= S_CLR;
            R_REDUCE: state_q <= S_PRIME;
            default:  state_q <= S_RD;
          endcase
        end
        S_CLR: begin
          idx_q <= idx_q + 11'd1;
          if (idx_q == 11'(2 * NW - 1)) begin
            state_q <= S_IDLE;
            done    <= 1'b1;
          end
        end
        S_RD: state_q <= S_WR;
        S_WR: begin
          carry_q <= carry_out;
          idx_q   <= idx_q + 11'd1;
          if ((op_q == R_SHIFTXOR && idx_q == 11'(NW)) ||
              (op_q == R_ADD && idx_q == 11'(NW - 1))) begin
            state_q <= S_IDLE;
            done    <= 1'b1;
          end else begin
            state_q <= S_RD;
          end
        end
        // Reduction: read SRAM1[HI], then per result word j read SRAM1[HI+j+1]
        // and SRAM1[j] and write SRAM1[j].
        S_PRIME: state_q <= S_HIRD;
        S_HIRD: begin
          if (idx_q == 11'd0) hi_lo_q <= s1_rdata;   // SRAM1[HI] from S_PRIME
          state_q <= S_LORD;
        end
        S_LORD: begin
          carry_q <= hi_word;                        // s1_rdata = SRAM1[HI+j+1]
          hi_lo_q <= s1_rdata;
          state_q <= S_LOWR;
        end
        S_LOWR: begin
          idx_q   <= idx_q + 11'd1;
          if (idx_q == 11'(NW - 1)) begin
            state_q <= S_IDLE;
            done    <= 1'b1;
          end else begin
            state_q <= S_HIRD;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // Memory ports
  always_comb begin
    s0_en    = 1'b0;
    s0_addr  = '0;
    s1_en    = 1'b0;
    s1_we    = 1'b0;
    s1_addr  = '0;
    s1_wdata = '0;
    unique case (state_q)
      S_CLR: begin
        s1_en = 1'b1; s1_we = 1'b1; s1_addr = AW1'(idx_q);
      end
      S_RD: begin
        s0_en   = (idx_q < 11'(NW));
        s0_addr = AW0'(idx_q);
        s1_en   = 1'b1;
        s1_addr = (op_q == R_SHIFTXOR) ? AW1'(11'(base_q) + idx_q) : AW1'(idx_q);
      end
      S_WR: begin
        s1_en    = 1'b1;
        s1_we    = 1'b1;
        s1_addr  = (op_q == R_SHIFTXOR) ? AW1'(11'(base_q) + idx_q) : AW1'(idx_q);
        s1_wdata = (op_q == R_SHIFTXOR) ? (s1_rdata ^ shifted) : (s1_rdata ^ s0_rdata);
      end
      S_PRIME: begin
        s1_en = 1'b1; s1_addr = AW1'(HI);
      end
      S_HIRD: begin
        s1_en = 1'b1; s1_addr = AW1'(11'(HI) + idx_q + 11'd1);
      end
      S_LORD: begin
        s1_en = 1'b1; s1_addr = AW1'(idx_q);
      end
      S_LOWR: begin
        s1_en    = 1'b1;
        s1_we    = 1'b1;
        s1_addr  = AW1'(idx_q);
        s1_wdata = (s1_rdata ^ carry_q) & ((idx_q == 11'(NW - 1)) ? TOP_MASK : '1);
      end
      default: ;
    endcase
  end
endmodule
