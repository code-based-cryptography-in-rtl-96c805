// AXI4-Lite slave front end: turns bus transactions into a simple register
// port with single-cycle write strobes and a fixed one-cycle read latency.
//
// A write is taken when AWVALID and WVALID are both high and no write
// response is pending; wr_en pulses for one cycle with the address, data and
// strobes, and BVALID follows in the next cycle with the response given by
// wr_err. A read is taken when ARVALID is high, no read data is pending and no
// write is taken in the same cycle; rd_en pulses and the user logic must
// present rd_data (and rd_err) in the following cycle, which is then held on
// RDATA until RREADY. One outstanding read and one outstanding write at a
// time, as AXI4-Lite slaves commonly do.
module axil_slave_port
  import hqc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  axil_req_t   req,
  output axil_rsp_t   rsp,
  output logic        wr_en,
  output logic [31:0] wr_addr,
  output logic [31:0] wr_data,
  output logic [3:0]  wr_strb,
  input  logic        wr_err,
  output logic        rd_en,
  output logic [31:0] rd_addr,
  input  logic [31:0] rd_data,
  input  logic        rd_err
);
  logic bvalid_q, rvalid_q, rd_pend_q;
  logic [1:0]  bresp_q, rresp_q;
  logic [31:0] rdata_q;
  logic wr_take, rd_take;

  assign wr_take = req.awvalid && req.wvalid && !bvalid_q;
  assign rd_take = req.arvalid && !rvalid_q && !rd_pend_q && !wr_take;

  assign wr_en   = wr_take;
  assign wr_addr = req.awaddr;
  assign wr_data = req.wdata;
  assign wr_strb = req.wstrb;
  assign rd_en   = rd_take;
  assign rd_addr = req.araddr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bvalid_q  <= 1'b0;
      rvalid_q  <= 1'b0;
      rd_pend_q <= 1'b0;
      bresp_q   <= RESP_OKAY;
      rresp_q   <= RESP_OKAY;
      rdata_q   <= '0;
    end else begin
      if (wr_take) begin
        bvalid_q <= 1'b1;
        bresp_q  <= wr_err ? RESP_SLVERR : RESP_OKAY;
      end else if (bvalid_q && req.bready) begin
        bvalid_q <= 1'b0;
      end
      rd_pend_q <= rd_take;
      if (rd_pend_q) begin
        rvalid_q <= 1'b1;
        rdata_q  <= rd_data;
        rresp_q  <= rd_err ? RESP_SLVERR : RESP_OKAY;
      end else if (rvalid_q && req.rready) begin
        rvalid_q <= 1'b0;
      end
    end
  end

  always_comb begin
    rsp         = '0;
    rsp.awready = wr_take;
    rsp.wready  = wr_take;
    rsp.bvalid  = bvalid_q;
    rsp.bresp   = bresp_q;
    rsp.arready = rd_take;
    rsp.rvalid  = rvalid_q;
    rsp.rdata   = rdata_q;
    rsp.rresp   = rresp_q;
  end

  // A read response must stay stable while it waits for RREADY.
  property p_r_stable;
    @(posedge clk) disable iff (!rst_n) (rvalid_q && !req.rready) |=> (rvalid_q && $stable(rdata_q));
  endproperty
  a_r_stable: assert property (p_r_stable);
endmodule
