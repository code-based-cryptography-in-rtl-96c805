// AXI4-Lite master back end: performs one single-beat read or write per
// request of a simple command port.
//
// The user raises start for one cycle with we, addr, wdata and wstrb. For a
// write, AWVALID and WVALID are raised together and each is dropped once its
// READY has been seen; the transfer ends at the BVALID handshake. For a read,
// ARVALID is held until ARREADY and the transfer ends at the RVALID
// handshake. done pulses for one cycle at the end, with rdata and err (any
// response other than OKAY). busy is high from start to done; start is
// ignored while busy. One outstanding transaction, as the paper states for the
// processor's bus accesses.
module axil_master_port
  import hqc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        we,
  input  logic [31:0] addr,
  input  logic [31:0] wdata,
  input  logic [3:0]  wstrb,
  output logic        busy,
  output logic        done,
  output logic [31:0] rdata,
  output logic        err,
  output axil_req_t   req,
  input  axil_rsp_t   rsp
);
  typedef enum logic [1:0] {M_IDLE, M_WRITE, M_READ} mstate_e;
  mstate_e     state_q;
  logic        aw_pend_q, w_pend_q, ar_pend_q;
  logic [31:0] addr_q, wdata_q;
  logic [3:0]  wstrb_q;

  assign busy = (state_q != M_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= M_IDLE;
      aw_pend_q <= 1'b0;
      w_pend_q  <= 1'b0;
      ar_pend_q <= 1'b0;
      addr_q    <= '0;
      wdata_q   <= '0;
      wstrb_q   <= '0;
      done      <= 1'b0;
      rdata     <= '0;
      err       <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        M_IDLE: if (start) begin
          addr_q  <= addr;
          wdata_q <= wdata;
          wstrb_q <= wstrb;
          if (we) begin
            state_q   <= M_WRITE;
            aw_pend_q <= 1'b1;
            w_pend_q  <= 1'b1;
          end else begin
            state_q   <= M_READ;
            ar_pend_q <= 1'b1;
          end
        end
        M_WRITE: begin
          if (aw_pend_q && rsp.awready) aw_pend_q <= 1'b0;
          if (w_pend_q && rsp.wready)   w_pend_q  <= 1'b0;
          if (!aw_pend_q && !w_pend_q && rsp.bvalid) begin
            state_q <= M_IDLE;
            done    <= 1'b1;
            err     <= (rsp.bresp != RESP_OKAY);
          end
        end
        M_READ: begin
          if (ar_pend_q && rsp.arready) ar_pend_q <= 1'b0;
          if (!ar_pend_q && rsp.rvalid) begin
            state_q <= M_IDLE;
            done    <= 1'b1;
            rdata   <= rsp.rdata;
            err     <= (rsp.rresp != RESP_OKAY);
          end
        end
        default: state_q <= M_IDLE;
      endcase
    end
  end

  always_comb begin
    req         = '0;
    req.awvalid = (state_q == M_WRITE) && aw_pend_q;
    req.awaddr  = addr_q;
    req.wvalid  = (state_q == M_WRITE) && w_pend_q;
    req.wdata   = wdata_q;
    req.wstrb   = wstrb_q;
    req.bready  = (state_q == M_WRITE) && !aw_pend_q && !w_pend_q;
    req.arvalid = (state_q == M_READ) && ar_pend_q;
    req.araddr  = addr_q;
    req.rready  = (state_q == M_READ) && !ar_pend_q;
  end
endmodule
