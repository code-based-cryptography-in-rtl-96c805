// AXI4-Lite interconnect of the IoT-PS: NM masters, NS slaves, one
// transaction in flight at a time.
//
// When idle, the interconnect grants the next master (round robin, starting
// after the last one granted) that raises AWVALID or ARVALID; a write is
// preferred if a master raises both. The slave is selected by address bits
// 31:28 (slave k owns 0xk000_0000 .. 0xkFFF_FFFF, see hqc_pkg); an address
// with no slave is answered by an internal responder with DECERR. The grant is
// held until the B handshake (write) or R handshake (read), so every
// transaction takes its slave's latency plus one cycle to grant. The paper
// only names an AXI4-Lite interconnect; the shared single-transaction
// structure, the round-robin arbitration and the decoding are this design's
// choices (the masters in this system allow one outstanding access each).
module axil_interconnect
  import hqc_pkg::*;
#(
  parameter int unsigned NM = 5,
  parameter int unsigned NS = 5
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t m_req [NM],
  output axil_rsp_t m_rsp [NM],
  output axil_req_t s_req [NS],
  input  axil_rsp_t s_rsp [NS]
);
  localparam int unsigned MW = (NM > 1) ? $clog2(NM) : 1;
  localparam int unsigned SW = 4;

  logic          active_q, write_q, decerr_q;
  logic [MW-1:0] gnt_q, last_q;
  logic [SW-1:0] slv_q;
  logic          err_bvalid_q, err_rvalid_q, err_addr_done_q;

  // choose the next requester after last_q
  logic          found;
  logic [MW-1:0] pick;
  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int o = 1; o <= int'(NM); o++) begin
      int idx;
      idx = (int'(last_q) + o) % int'(NM);
      if (!found && (m_req[idx].awvalid || m_req[idx].arvalid)) begin
        found = 1'b1;
        pick  = MW'(idx);
      end
    end
  end

  logic [31:0] pick_addr;
  assign pick_addr = m_req[pick].awvalid ? m_req[pick].awaddr : m_req[pick].araddr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_q        <= 1'b0;
      write_q         <= 1'b0;
      decerr_q        <= 1'b0;
      gnt_q           <= '0;
      last_q          <= MW'(NM - 1);
      slv_q           <= '0;
      err_bvalid_q    <= 1'b0;
      err_rvalid_q    <= 1'b0;
      err_addr_done_q <= 1'b0;
    end else if (!active_q) begin
      if (found) begin
        active_q        <= 1'b1;
        gnt_q           <= pick;
        last_q          <= pick;
        write_q         <= m_req[pick].awvalid;
        slv_q           <= pick_addr[31:28];
        decerr_q        <= (32'(pick_addr[31:28]) >= NS);
        err_addr_done_q <= 1'b0;
      end
    end else begin
      // internal DECERR responder
      if (decerr_q) begin
        if (write_q) begin
          if (!err_addr_done_q && m_req[gnt_q].awvalid && m_req[gnt_q].wvalid) begin
            err_addr_done_q <= 1'b1;
            err_bvalid_q    <= 1'b1;
          end
        end else if (!err_addr_done_q && m_req[gnt_q].arvalid) begin
          err_addr_done_q <= 1'b1;
          err_rvalid_q    <= 1'b1;
        end
      end
      // end of transaction
      if (write_q) begin
        if ((decerr_q ? err_bvalid_q : s_rsp[slv_q].bvalid) && m_req[gnt_q].bready) begin
          active_q     <= 1'b0;
          err_bvalid_q <= 1'b0;
        end
      end else begin
        if ((decerr_q ? err_rvalid_q : s_rsp[slv_q].rvalid) && m_req[gnt_q].rready) begin
          active_q     <= 1'b0;
          err_rvalid_q <= 1'b0;
        end
      end
    end
  end

  // routing
  always_comb begin
    for (int s = 0; s < int'(NS); s++) s_req[s] = '0;
    for (int m = 0; m < int'(NM); m++) m_rsp[m] = '0;
    if (active_q) begin
      if (decerr_q) begin
        m_rsp[gnt_q].awready = write_q && !err_addr_done_q && m_req[gnt_q].awvalid && m_req[gnt_q].wvalid;
        m_rsp[gnt_q].wready  = m_rsp[gnt_q].awready;
        m_rsp[gnt_q].bvalid  = err_bvalid_q;
        m_rsp[gnt_q].bresp   = RESP_DECERR;
        m_rsp[gnt_q].arready = !write_q && !err_addr_done_q && m_req[gnt_q].arvalid;
        m_rsp[gnt_q].rvalid  = err_rvalid_q;
        m_rsp[gnt_q].rresp   = RESP_DECERR;
      end else if (write_q) begin
        s_req[slv_q].awvalid = m_req[gnt_q].awvalid;
        s_req[slv_q].awaddr  = m_req[gnt_q].awaddr;
        s_req[slv_q].wvalid  = m_req[gnt_q].wvalid;
        s_req[slv_q].wdata   = m_req[gnt_q].wdata;
        s_req[slv_q].wstrb   = m_req[gnt_q].wstrb;
        s_req[slv_q].bready  = m_req[gnt_q].bready;
        m_rsp[gnt_q].awready = s_rsp[slv_q].awready;
        m_rsp[gnt_q].wready  = s_rsp[slv_q].wready;
        m_rsp[gnt_q].bvalid  = s_rsp[slv_q].bvalid;
        m_rsp[gnt_q].bresp   = s_rsp[slv_q].bresp;
      end else begin
        s_req[slv_q].arvalid = m_req[gnt_q].arvalid;
        s_req[slv_q].araddr  = m_req[gnt_q].araddr;
        s_req[slv_q].rready  = m_req[gnt_q].rready;
        m_rsp[gnt_q].arready = s_rsp[slv_q].arready;
        m_rsp[gnt_q].rvalid  = s_rsp[slv_q].rvalid;
        m_rsp[gnt_q].rdata   = s_rsp[slv_q].rdata;
        m_rsp[gnt_q].rresp   = s_rsp[slv_q].rresp;
      end
    end
  end

  // A granted master keeps its request until the handshake (AXI rule).
  a_hold_ar: assert property (@(posedge clk) disable iff (!rst_n)
    (active_q && !write_q && m_req[gnt_q].arvalid && !m_rsp[gnt_q].arready) |=> m_req[gnt_q].arvalid);
endmodule
