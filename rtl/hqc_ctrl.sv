// HQC Control Unit: command interface, operand transport and SRAM
// arbitration of the HQC accelerator.
//
// The processor writes SRC, DST, LEN and WEIGHT over the AXI4-Lite slave
// port and then a command code to CMD (hqc_pkg::hqc_cmd_e); STATUS bit 0 is
// high while the command runs, bit 1 records a bus error or a command written
// while busy, and CYCLES holds the clock cycles the last command took. The
// unit moves operands between main memory and the two SRAMs over its own
// AXI4-Lite master (two 32-bit beats per 64-bit SRAM word, low half first),
// streams bytes between main memory and the Sampling-Unit, feeds SRAM1 words
// to the RM-Decoder and packs the decoded bytes into words written to main
// memory. Only one compute unit works at a time; while the R-Unit runs it is
// given both SRAM ports, otherwise this unit owns them. A sparse-dense
// multiplication is R_CLEAR, then for each of WEIGHT coordinates (32-bit
// words read from SRC) one R_SHIFTXOR, then R_REDUCE. The paper gives the
// role of this block (AXI slave for commands, AXI master for operands, one
// control unit managing SRAM access and the unit modes); the register map,
// the command set and the schedules are this design's choices.
module hqc_ctrl
  import hqc_pkg::*;
#(
  parameter int unsigned N_BITS = HQC_N,
  parameter int unsigned AW0    = 9,
  parameter int unsigned AW1    = 10,
  localparam int unsigned CW    = $clog2(N_BITS)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  axil_req_t      s_req,
  output axil_rsp_t      s_rsp,
  output axil_req_t      m_req,
  input  axil_rsp_t      m_rsp,
  output logic           busy,
  // SRAM0
  output logic           s0_en,
  output logic           s0_we,
  output logic [AW0-1:0] s0_addr,
  output logic [63:0]    s0_wdata,
  input  logic [63:0]    s0_rdata,
  // SRAM1
  output logic           s1_en,
  output logic           s1_we,
  output logic [AW1-1:0] s1_addr,
  output logic [63:0]    s1_wdata,
  input  logic [63:0]    s1_rdata,
  // R-Unit
  output logic           r_start,
  output logic [1:0]     r_op,
  output logic [CW-1:0]  r_coord,
  input  logic           r_busy,
  input  logic           r_done,
  input  logic           r_s0_en,
  input  logic [AW0-1:0] r_s0_addr,
  input  logic           r_s1_en,
  input  logic           r_s1_we,
  input  logic [AW1-1:0] r_s1_addr,
  input  logic [63:0]    r_s1_wdata,
  // Sampling-Unit
  output logic           su_start,
  output logic [2:0]     su_cmd,
  output logic [15:0]    su_len,
  input  logic           su_done,
  output logic           su_in_valid,
  output logic [31:0]    su_in_data,
  input  logic           su_in_ready,
  input  logic           su_out_valid,
  input  logic [31:0]    su_out_data,
  output logic           su_out_ready,
  // RM-Decoder
  output logic           rm_in_valid,
  output logic [63:0]    rm_in_word,
  input  logic           rm_in_ready,
  input  logic           rm_out_valid,
  input  logic [7:0]     rm_out_byte
);
  localparam logic [1:0] R_CLEAR = 2'd0, R_SHIFTXOR = 2'd1, R_REDUCE = 2'd2, R_ADD = 2'd3;

  typedef enum logic [4:0] {
    C_IDLE, C_LD_LO, C_LD_HI, C_LD_WR, C_ST_RD, C_ST_LO, C_ST_HI,
    C_R_RUN, C_MUL_FETCH, C_MUL_NEXT, C_SU_RUN, C_ABS_FETCH, C_ABS_PUSH,
    C_OUT_TAKE, C_OUT_WRITE, C_RM_RD, C_RM_PUSH, C_RM_WAIT, C_RM_WRITE, C_DONE
  } cstate_e;

  // ---------------- registers ----------------
  cstate_e     state_q;
  hqc_cmd_e    cmd_q;
  logic [31:0] src_q, dst_q, len_q, weight_q, cycles_q;
  logic        err_q;
  logic [15:0] i_q;              // word / coordinate / codeword counter
  logic [2:0]  k_q;              // word inside an RM codeword, byte in a packed word
  logic [31:0] lo_q, hold_q;
  logic [63:0] word_q;
  logic        issued_q;
  logic [1:0]  r_phase_q;        // MUL: 0 clear, 1 shift passes, 2 reduce

  // ---------------- AXI slave ----------------
  logic        wr_en, rd_en;
  logic [31:0] wr_addr, wr_data, rd_addr;
  logic [31:0] rd_data;
  logic [3:0]  wr_strb;

  axil_slave_port u_slave (
    .clk, .rst_n, .req(s_req), .rsp(s_rsp),
    .wr_en, .wr_addr, .wr_data, .wr_strb, .wr_err(1'b0),
    .rd_en, .rd_addr, .rd_data, .rd_err(1'b0)
  );

  // ---------------- AXI master ----------------
  logic        mp_start, mp_we, mp_busy, mp_done, mp_err;
  logic [31:0] mp_addr, mp_wdata, mp_rdata;
  logic [3:0]  mp_strb;

  axil_master_port u_master (
    .clk, .rst_n, .start(mp_start), .we(mp_we), .addr(mp_addr), .wdata(mp_wdata),
    .wstrb(mp_strb), .busy(mp_busy), .done(mp_done), .rdata(mp_rdata), .err(mp_err),
    .req(m_req), .rsp(m_rsp)
  );

  assign busy = (state_q != C_IDLE);

  // register reads
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_data <= '0;
    else if (rd_en) begin
      unique case (rd_addr[7:0])
        HQC_REG_CMD:    rd_data <= 32'(cmd_q);
        HQC_REG_STATUS: rd_data <= {30'd0, err_q, busy};
        HQC_REG_SRC:    rd_data <= src_q;
        HQC_REG_DST:    rd_data <= dst_q;
        HQC_REG_LEN:    rd_data <= len_q;
        HQC_REG_WEIGHT: rd_data <= weight_q;
        HQC_REG_CYCLES: rd_data <= cycles_q;
        default:        rd_data <= '0;
      endcase
    end
  end

  // number of 32-bit words of a byte length
  logic [15:0] len_words;
  assign len_words = 16'((len_q + 32'd3) >> 2);

  // ---------------- command sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= C_IDLE;
      cmd_q     <= CMD_LOAD0;
      src_q     <= '0;
      dst_q     <= '0;
      len_q     <= '0;
      weight_q  <= '0;
      cycles_q  <= '0;
      err_q     <= 1'b0;
      i_q       <= '0;
      k_q       <= '0;
      lo_q      <= '0;
      hold_q    <= '0;
      word_q    <= '0;
      issued_q  <= 1'b0;
      r_phase_q <= '0;
      mp_start  <= 1'b0;
      mp_we     <= 1'b0;
      mp_addr   <= '0;
      mp_wdata  <= '0;
      mp_strb   <= '0;
      r_start   <= 1'b0;
      r_op      <= R_CLEAR;
      r_coord   <= '0;
      su_start  <= 1'b0;
      su_cmd    <= '0;
      su_len    <= '0;
    end else begin
      mp_start <= 1'b0;
      r_start  <= 1'b0;
      su_start <= 1'b0;
      if (state_q != C_IDLE) cycles_q <= cycles_q + 32'd1;
      if (mp_done && mp_err) err_q <= 1'b1;

      // register writes
      if (wr_en) begin
        unique case (wr_addr[7:0])
          HQC_REG_SRC:    src_q    <= wr_data;
          HQC_REG_DST:    dst_q    <= wr_data;
          HQC_REG_LEN:    len_q    <= wr_data;
          HQC_REG_WEIGHT: weight_q <= wr_data;
          HQC_REG_STATUS: err_q    <= 1'b0;
          HQC_REG_CMD:    if (state_q != C_IDLE) err_q <= 1'b1;
          default: ;
        endcase
      end

      unique case (state_q)
        C_IDLE: if (wr_en && wr_addr[7:0] == HQC_REG_CMD) begin
          cmd_q     <= hqc_cmd_e'(wr_data[3:0]);
          cycles_q  <= '0;
          i_q       <= '0;
          k_q       <= '0;
          issued_q  <= 1'b0;
          r_phase_q <= '0;
          unique case (hqc_cmd_e'(wr_data[3:0]))
            CMD_LOAD0, CMD_LOAD1:   state_q <= (len_q == 0) ? C_DONE : C_LD_LO;
            CMD_STORE0, CMD_STORE1: state_q <= (len_q == 0) ? C_DONE : C_ST_RD;
            CMD_MUL: begin
              r_start <= 1'b1; r_op <= R_CLEAR; state_q <= C_R_RUN;
            end
            CMD_ADD: begin
              r_start <= 1'b1; r_op <= R_ADD; r_phase_q <= 2'd2; state_q <= C_R_RUN;
            end
            CMD_SH_INIT, CMD_SH_FIN: begin
              su_start <= 1'b1;
              su_cmd   <= (wr_data[3:0] == 4'(CMD_SH_INIT)) ? 3'd0 : 3'd2;
              su_len   <= '0;
              state_q  <= C_SU_RUN;
            end
            CMD_SH_ABS: begin
              su_start <= (len_q != 0);
              su_cmd   <= 3'd1;
              su_len   <= len_q[15:0];
              state_q  <= (len_q == 0) ? C_DONE : C_ABS_FETCH;
            end
            CMD_SH_SQZ: begin
              su_start <= (len_q != 0);
              su_cmd   <= 3'd3;
              su_len   <= len_q[15:0];
              state_q  <= (len_q == 0) ? C_DONE : C_OUT_TAKE;
            end
            CMD_SAMPLE: begin
              su_start <= (weight_q != 0);
              su_cmd   <= 3'd4;
              su_len   <= weight_q[15:0];
              state_q  <= (weight_q == 0) ? C_DONE : C_OUT_TAKE;
            end
            CMD_RM_DEC: begin
              hold_q  <= '0;
              state_q <= (len_q == 0) ? C_DONE : C_RM_RD;
            end
            default: begin
              err_q   <= 1'b1;
              state_q <= C_DONE;
            end
          endcase
        end

        // ---- main memory -> SRAM: two reads, one SRAM write per word ----
        C_LD_LO: if (!issued_q) begin
          mp_start <= 1'b1; mp_we <= 1'b0; mp_addr <= src_q + 32'({i_q, 3'b000}); issued_q <= 1'b1;
        end else if (mp_done) begin
          lo_q <= mp_rdata; issued_q <= 1'b0; state_q <= C_LD_HI;
        end
        C_LD_HI: if (!issued_q) begin
          mp_start <= 1'b1; mp_we <= 1'b0; mp_addr <= src_q + 32'({i_q, 3'b100}); issued_q <= 1'b1;
        end else if (mp_done) begin
          word_q <= {mp_rdata, lo_q}; issued_q <= 1'b0; state_q <= C_LD_WR;
        end
        C_LD_WR: begin
          i_q     <= i_q + 16'd1;
          state_q <= (32'(i_q) + 32'd1 == len_q) ? C_DONE : C_LD_LO;
        end

        // ---- SRAM -> main memory ----
        C_ST_RD: state_q <= C_ST_LO;
        C_ST_LO: if (!issued_q) begin
          word_q   <= (cmd_q == CMD_STORE0) ? s0_rdata : s1_rdata;
          mp_start <= 1'b1; mp_we <= 1'b1; mp_strb <= 4'hF;
          mp_addr  <= dst_q + 32'({i_q, 3'b000});
          mp_wdata <= (cmd_q == CMD_STORE0) ? s0_rdata[31:0] : s1_rdata[31:0];
          issued_q <= 1'b1;
        end else if (mp_done) begin
          issued_q <= 1'b0; state_q <= C_ST_HI;
        end
        C_ST_HI: if (!issued_q) begin
          mp_start <= 1'b1; mp_we <= 1'b1; mp_strb <= 4'hF;
          mp_addr  <= dst_q + 32'({i_q, 3'b100});
          mp_wdata <= word_q[63:32];
          issued_q <= 1'b1;
        end else if (mp_done) begin
          issued_q <= 1'b0;
          i_q      <= i_q + 16'd1;
          state_q  <= (32'(i_q) + 32'd1 == len_q) ? C_DONE : C_ST_RD;
        end

        // ---- R-Unit ----
        C_R_RUN: if (r_done) begin
          unique case (r_phase_q)
            2'd0: begin   // clear finished
              r_phase_q <= 2'd1;
              state_q   <= (weight_q == 0) ? C_MUL_NEXT : C_MUL_FETCH;
            end
            2'd1: state_q <= C_MUL_NEXT;  // one shift pass finished
            default: state_q <= C_DONE;   // reduce or add finished
          endcase
        end
        C_MUL_FETCH: if (!issued_q) begin
          mp_start <= 1'b1; mp_we <= 1'b0; mp_addr <= src_q + 32'({i_q, 2'b00}); issued_q <= 1'b1;
        end else if (mp_done) begin
          issued_q <= 1'b0;
          r_start  <= 1'b1;
          r_op     <= R_SHIFTXOR;
          r_coord  <= CW'(mp_rdata);
          i_q      <= i_q + 16'd1;
          state_q  <= C_R_RUN;
        end
        C_MUL_NEXT: begin
          if (32'(i_q) < weight_q) state_q <= C_MUL_FETCH;
          else begin
            r_start <= 1'b1; r_op <= R_REDUCE; r_phase_q <= 2'd2; state_q <= C_R_RUN;
          end
        end

        // ---- Sampling-Unit ----
        C_SU_RUN: if (su_done) state_q <= C_DONE;
        C_ABS_FETCH: if (!issued_q) begin
          mp_start <= 1'b1; mp_we <= 1'b0; mp_addr <= src_q + 32'({i_q, 2'b00}); issued_q <= 1'b1;
        end else if (mp_done) begin
          issued_q <= 1'b0; hold_q <= mp_rdata; state_q <= C_ABS_PUSH;
        end
        C_ABS_PUSH: if (su_in_ready) begin
          i_q     <= i_q + 16'd1;
          state_q <= (i_q + 16'd1 == len_words) ? C_SU_RUN : C_ABS_FETCH;
        end
        C_OUT_TAKE: if (su_out_valid) begin
          hold_q  <= su_out_data;
          state_q <= C_OUT_WRITE;
        end
        C_OUT_WRITE: if (!issued_q) begin
          mp_start <= 1'b1; mp_we <= 1'b1; mp_strb <= 4'hF;
          mp_addr  <= dst_q + 32'({i_q, 2'b00}); mp_wdata <= hold_q; issued_q <= 1'b1;
        end else if (mp_done) begin
          issued_q <= 1'b0;
          i_q      <= i_q + 16'd1;
          if (i_q + 16'd1 == ((cmd_q == CMD_SAMPLE) ? weight_q[15:0] : len_words)) state_q <= C_DONE;
          else state_q <= C_OUT_TAKE;
        end

        // ---- RM-Decoder: 2*RM_MULT SRAM1 words per codeword ----
        C_RM_RD: state_q <= C_RM_PUSH;
        C_RM_PUSH: begin
          if (!issued_q) begin
            word_q   <= s1_rdata;
            issued_q <= 1'b1;
          end else if (rm_in_ready) begin
            issued_q <= 1'b0;
            if (k_q == 3'(2 * RM_MULT - 1)) begin
              k_q     <= '0;
              state_q <= C_RM_WAIT;
            end else begin
              k_q     <= k_q + 3'd1;
              state_q <= C_RM_RD;
            end
          end
        end
        C_RM_WAIT: if (rm_out_valid) begin
          hold_q[8*i_q[1:0] +: 8] <= rm_out_byte;
          i_q <= i_q + 16'd1;
          if (i_q[1:0] == 2'd3 || 32'(i_q) + 32'd1 == len_q) state_q <= C_RM_WRITE;
          else state_q <= C_RM_RD;
        end
        C_RM_WRITE: if (!issued_q) begin
          mp_start <= 1'b1; mp_we <= 1'b1;
          mp_strb  <= (i_q[1:0] == 2'd0) ? 4'hF : ((4'h1 << i_q[1:0]) - 4'h1);
          mp_addr  <= dst_q + 32'({(i_q - 16'd1) >> 2, 2'b00});
          mp_wdata <= hold_q;
          issued_q <= 1'b1;
        end else if (mp_done) begin
          issued_q <= 1'b0;
          hold_q   <= '0;
          state_q  <= (32'(i_q) == len_q) ? C_DONE : C_RM_RD;
        end

        C_DONE: state_q <= C_IDLE;
        default: state_q <= C_IDLE;
      endcase
    end
  end

  // address of the SRAM1 word of the current RM codeword
  logic [15:0] rm_word_idx;
  assign rm_word_idx = 16'(i_q * 16'(2 * RM_MULT)) + 16'(k_q);

  // ---------------- SRAM arbitration and unit streams ----------------
  always_comb begin
    s0_en = 1'b0; s0_we = 1'b0; s0_addr = '0; s0_wdata = word_q;
    s1_en = 1'b0; s1_we = 1'b0; s1_addr = '0; s1_wdata = word_q;
    if (r_busy) begin
      s0_en    = r_s0_en;
      s0_addr  = r_s0_addr;
      s1_en    = r_s1_en;
      s1_we    = r_s1_we;
      s1_addr  = r_s1_addr;
      s1_wdata = r_s1_wdata;
    end else begin
      unique case (state_q)
        C_LD_WR: begin
          if (cmd_q == CMD_LOAD0) begin s0_en = 1'b1; s0_we = 1'b1; s0_addr = AW0'(i_q); end
          else                    begin s1_en = 1'b1; s1_we = 1'b1; s1_addr = AW1'(i_q); end
        end
        C_ST_RD: begin
          if (cmd_q == CMD_STORE0) begin s0_en = 1'b1; s0_addr = AW0'(i_q); end
          else                     begin s1_en = 1'b1; s1_addr = AW1'(i_q); end
        end
        C_RM_RD: begin s1_en = 1'b1; s1_addr = AW1'(rm_word_idx); end
        default: ;
      endcase
    end
  end

  assign su_in_valid  = (state_q == C_ABS_PUSH);
  assign su_in_data   = hold_q;
  assign su_out_ready = (state_q == C_OUT_TAKE);
  assign rm_in_valid  = (state_q == C_RM_PUSH) && issued_q;
  assign rm_in_word   = word_q;

  // Only one compute unit may run at a time.
  a_one_unit: assert property (@(posedge clk) disable iff (!rst_n) !(r_busy && su_start));
endmodule
