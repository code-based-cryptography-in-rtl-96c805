// JTAG debug module: IEEE 1149.1 test access port giving access to the bus
// (and so to all memories), to the core register file, and to run control.
//
// TCK, TMS and TDI are sampled with the system clock through two-flop
// synchronizers; a rising TCK edge advances the TAP state machine and shifts,
// a falling edge updates TDO. The system clock must therefore be at least
// four times faster than TCK. Instructions (4-bit IR, IDCODE after reset):
//   0x1 IDCODE  32-bit identification code
//   0x2 MEMACC  66-bit DR {op[1:0], addr[31:0], data[31:0]}, data shifted
//               first; Update-DR with op 1 reads, op 2 writes one bus word
//               over the AXI4-Lite master; Capture-DR returns
//               {busy, err, addr, last read data}
//   0x3 CTRL    2-bit DR {reset, run}: Update-DR sets the system reset
//               request and the core run enable (start/stop); capture
//               returns the current values
//   0x4 REGACC  38-bit DR {we, addr[4:0], data[31:0]}: Update-DR issues a
//               register-file access on the rf_* port; Capture-DR returns the
//               last read value
//   0xF BYPASS  1-bit bypass register (also for all other codes)
// The paper says what the module can reach and control; the instruction set,
// the register layouts and the oversampled TCK are this design's choices.
module jtag_dbg
  import hqc_pkg::*;
#(
  parameter logic [31:0] IDCODE = 32'h1000_0001
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        tck,
  input  logic        tms,
  input  logic        tdi,
  output logic        tdo,
  // run control
  output logic        core_run,
  output logic        sys_rst_req,
  // register file of the core
  output logic        rf_req,
  output logic        rf_we,
  output logic [4:0]  rf_addr,
  output logic [31:0] rf_wdata,
  input  logic [31:0] rf_rdata,
  // bus master
  output axil_req_t   m_req,
  input  axil_rsp_t   m_rsp
);
  typedef enum logic [3:0] {
    TLR, RTI, SEL_DR, CAP_DR, SH_DR, EX1_DR, PA_DR, EX2_DR, UP_DR,
    SEL_IR, CAP_IR, SH_IR, EX1_IR, PA_IR, EX2_IR, UP_IR
  } tap_e;
  localparam logic [3:0] IR_IDCODE = 4'h1, IR_MEMACC = 4'h2, IR_CTRL = 4'h3,
                         IR_REGACC = 4'h4, IR_BYPASS = 4'hF;

  logic [2:0] tck_s;
  logic [1:0] tms_s, tdi_s;
  logic       tck_rise, tck_fall;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tck_s <= '0; tms_s <= '0; tdi_s <= '0;
    end else begin
      tck_s <= {tck_s[1:0], tck};
      tms_s <= {tms_s[0], tms};
      tdi_s <= {tdi_s[0], tdi};
    end
  end
  assign tck_rise = (tck_s[2:1] == 2'b01);
  assign tck_fall = (tck_s[2:1] == 2'b10);

  tap_e        tap_q, tap_d;
  logic [3:0]  ir_q, ir_sh_q;
  logic [65:0] dr_q;
  logic [31:0] rd_last_q;
  logic [31:0] rf_last_q;
  logic        rf_pend_q;

  // bus master
  logic        mp_start, mp_we, mp_busy, mp_done, mp_err, err_q;
  logic [31:0] mp_addr, mp_wdata, mp_rdata;

  axil_master_port u_master (
    .clk, .rst_n, .start(mp_start), .we(mp_we), .addr(mp_addr), .wdata(mp_wdata),
    .wstrb(4'hF), .busy(mp_busy), .done(mp_done), .rdata(mp_rdata), .err(mp_err),
    .req(m_req), .rsp(m_rsp)
  );

  always_comb begin
    tap_d = tap_q;
    unique case (tap_q)
      TLR:    tap_d = tms_s[1] ? TLR    : RTI;
      RTI:    tap_d = tms_s[1] ? SEL_DR : RTI;
      SEL_DR: tap_d = tms_s[1] ? SEL_IR : CAP_DR;
      CAP_DR: tap_d = tms_s[1] ? EX1_DR : SH_DR;
      SH_DR:  tap_d = tms_s[1] ? EX1_DR : SH_DR;
      EX1_DR: tap_d = tms_s[1] ? UP_DR  : PA_DR;
      PA_DR:  tap_d = tms_s[1] ? EX2_DR : PA_DR;
      EX2_DR: tap_d = tms_s[1] ? UP_DR  : SH_DR;
      UP_DR:  tap_d = tms_s[1] ? SEL_DR : RTI;
      SEL_IR: tap_d = tms_s[1] ? TLR    : CAP_IR;
      CAP_IR: tap_d = tms_s[1] ? EX1_IR : SH_IR;
      SH_IR:  tap_d = tms_s[1] ? EX1_IR : SH_IR;
      EX1_IR: tap_d = tms_s[1] ? UP_IR  : PA_IR;
      PA_IR:  tap_d = tms_s[1] ? EX2_IR : PA_IR;
      EX2_IR: tap_d = tms_s[1] ? UP_IR  : SH_IR;
      UP_IR:  tap_d = tms_s[1] ? SEL_DR : RTI;
      default: tap_d = TLR;
    endcase
  end

  // length of the selected data register
  logic [6:0] dr_len;
  always_comb begin
    unique case (ir_q)
      IR_IDCODE: dr_len = 7'd32;
      IR_MEMACC: dr_len = 7'd66;
      IR_CTRL:   dr_len = 7'd2;
      IR_REGACC: dr_len = 7'd38;
      default:   dr_len = 7'd1;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tap_q       <= TLR;
      ir_q        <= IR_IDCODE;
      ir_sh_q     <= '0;
      dr_q        <= '0;
      tdo         <= 1'b0;
      core_run    <= 1'b0;
      sys_rst_req <= 1'b0;
      rd_last_q   <= '0;
      rf_last_q   <= '0;
      rf_pend_q   <= 1'b0;
      rf_req      <= 1'b0;
      rf_we       <= 1'b0;
      rf_addr     <= '0;
      rf_wdata    <= '0;
      mp_start    <= 1'b0;
      mp_we       <= 1'b0;
      mp_addr     <= '0;
      mp_wdata    <= '0;
      err_q       <= 1'b0;
    end else begin
      mp_start  <= 1'b0;
      rf_req    <= 1'b0;
      rf_pend_q <= rf_req && !rf_we;
      if (rf_pend_q) rf_last_q <= rf_rdata;
      if (mp_done) begin
        err_q <= mp_err;
        if (!mp_we) rd_last_q <= mp_rdata;
      end
      if (tck_rise) begin
        tap_q <= tap_d;
        unique case (tap_q)
          TLR:    ir_q <= IR_IDCODE;
          CAP_IR: ir_sh_q <= 4'b0001;
          SH_IR:  ir_sh_q <= {tdi_s[1], ir_sh_q[3:1]};
          UP_IR:  ir_q <= ir_sh_q;
          CAP_DR: begin
            unique case (ir_q)
              IR_IDCODE: dr_q <= 66'(IDCODE);
              IR_MEMACC: dr_q <= {mp_busy, err_q, mp_addr, rd_last_q};
              IR_CTRL:   dr_q <= 66'({sys_rst_req, core_run});
              IR_REGACC: dr_q <= 66'({rf_we, rf_addr, rf_last_q});
              default:   dr_q <= '0;
            endcase
          end
          SH_DR: begin
            dr_q <= dr_q >> 1;
            dr_q[dr_len - 7'd1] <= tdi_s[1];
          end
          UP_DR: begin
            unique case (ir_q)
              IR_MEMACC: if (!mp_busy && (dr_q[65:64] == 2'd1 || dr_q[65:64] == 2'd2)) begin
                mp_start <= 1'b1;
                mp_we    <= (dr_q[65:64] == 2'd2);
                mp_addr  <= dr_q[63:32];
                mp_wdata <= dr_q[31:0];
              end
              IR_CTRL: begin
                core_run    <= dr_q[0];
                sys_rst_req <= dr_q[1];
              end
              IR_REGACC: begin
                rf_req   <= 1'b1;
                rf_we    <= dr_q[37];
                rf_addr  <= dr_q[36:32];
                rf_wdata <= dr_q[31:0];
              end
              default: ;
            endcase
          end
          default: ;
        endcase
      end
      if (tck_fall) begin
        if (tap_q == SH_IR)      tdo <= ir_sh_q[0];
        else if (tap_q == SH_DR) tdo <= dr_q[0];
        else                     tdo <= 1'b0;
      end
    end
  end
endmodule
