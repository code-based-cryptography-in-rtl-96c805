// DMA controller with memcpy and memset at byte, half-word and word
// granularity.
//
// The processor programs SRC, DST, LEN (number of elements) and VALUE over
// the AXI4-Lite slave port and writes CTRL with bit 0 = start, bit 1 = memset
// (0: memcpy) and bits 3:2 = element size (0 byte, 1 half-word, 2 word).
// STATUS bit 0 reads busy and bit 1 a bus error of the last transfer (cleared
// by the next start). For each element the DMA reads the aligned source word
// over its AXI4-Lite master (memcpy only), moves the element to the byte lanes
// of its destination address and writes it with the matching byte strobes,
// so a memcpy element costs one read and one write, a memset element one
// write. Elements must be aligned to their size. The paper gives the two
// functions and the three granularities; the register map and the
// element-by-element schedule are this design's choices.
module dma
  import hqc_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t s_req,
  output axil_rsp_t s_rsp,
  output axil_req_t m_req,
  input  axil_rsp_t m_rsp,
  output logic      busy
);
  typedef enum logic [1:0] {D_IDLE, D_RD, D_WR} dstate_e;

  dstate_e     state_q;
  logic [31:0] src_q, dst_q, len_q, value_q, cnt_q;
  logic        set_q, err_q, issued_q;
  dma_size_e   size_q;
  logic [31:0] data_q;

  logic        wr_en, rd_en;
  logic [31:0] wr_addr, wr_data, rd_addr;
  logic [31:0] rd_data;
  logic [3:0]  wr_strb;

  axil_slave_port u_slave (
    .clk, .rst_n, .req(s_req), .rsp(s_rsp),
    .wr_en, .wr_addr, .wr_data, .wr_strb, .wr_err(1'b0),
    .rd_en, .rd_addr, .rd_data, .rd_err(1'b0)
  );

  logic        mp_start, mp_we, mp_busy, mp_done, mp_err;
  logic [31:0] mp_addr, mp_wdata, mp_rdata;
  logic [3:0]  mp_strb;

  axil_master_port u_master (
    .clk, .rst_n, .start(mp_start), .we(mp_we), .addr(mp_addr), .wdata(mp_wdata),
    .wstrb(mp_strb), .busy(mp_busy), .done(mp_done), .rdata(mp_rdata), .err(mp_err),
    .req(m_req), .rsp(m_rsp)
  );

  assign busy = (state_q != D_IDLE);

  // element address offsets and lane handling
  logic [31:0] step, src_a, dst_a, elem, lane_data;
  logic [3:0]  lane_strb;
  always_comb begin
    unique case (size_q)
      DMA_SZ_BYTE: step = cnt_q;
      DMA_SZ_HALF: step = cnt_q << 1;
      default:     step = cnt_q << 2;
    endcase
    src_a = src_q + step;
    dst_a = dst_q + step;
    // element taken from the read word (memcpy) or from VALUE (memset)
    elem = set_q ? value_q : (mp_rdata >> {src_a[1:0], 3'b000});
    unique case (size_q)
      DMA_SZ_BYTE: begin
        lane_data = {4{elem[7:0]}};
        lane_strb = 4'b0001 << dst_a[1:0];
      end
      DMA_SZ_HALF: begin
        lane_data = {2{elem[15:0]}};
        lane_strb = 4'b0011 << {dst_a[1], 1'b0};
      end
      default: begin
        lane_data = elem;
        lane_strb = 4'hF;
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= D_IDLE;
      src_q    <= '0;
      dst_q    <= '0;
      len_q    <= '0;
      value_q  <= '0;
      cnt_q    <= '0;
      set_q    <= 1'b0;
      err_q    <= 1'b0;
      issued_q <= 1'b0;
      size_q   <= DMA_SZ_WORD;
      data_q   <= '0;
      mp_start <= 1'b0;
      mp_we    <= 1'b0;
      mp_addr  <= '0;
      mp_wdata <= '0;
      mp_strb  <= '0;
      rd_data  <= '0;
    end else begin
      mp_start <= 1'b0;
      if (rd_en) begin
        unique case (rd_addr[7:0])
          DMA_REG_CTRL:   rd_data <= {28'd0, size_q, set_q, 1'b0};
          DMA_REG_STATUS: rd_data <= {30'd0, err_q, busy};
          DMA_REG_SRC:    rd_data <= src_q;
          DMA_REG_DST:    rd_data <= dst_q;
          DMA_REG_LEN:    rd_data <= len_q;
          DMA_REG_VALUE:  rd_data <= value_q;
          default:        rd_data <= '0;
        endcase
      end
      if (wr_en && state_q == D_IDLE) begin
        unique case (wr_addr[7:0])
          DMA_REG_SRC:   src_q   <= wr_data;
          DMA_REG_DST:   dst_q   <= wr_data;
          DMA_REG_LEN:   len_q   <= wr_data;
          DMA_REG_VALUE: value_q <= wr_data;
          DMA_REG_CTRL: begin
            set_q  <= wr_data[1];
            size_q <= (wr_data[3:2] == 2'd3) ? DMA_SZ_WORD : dma_size_e'(wr_data[3:2]);
            if (wr_data[0] && len_q != 0) begin
              err_q    <= 1'b0;
              cnt_q    <= '0;
              issued_q <= 1'b0;
              state_q  <= wr_data[1] ? D_WR : D_RD;
            end
          end
          default: ;
        endcase
      end
      unique case (state_q)
        D_RD: if (!issued_q) begin
          mp_start <= 1'b1; mp_we <= 1'b0; mp_addr <= {src_a[31:2], 2'b00}; issued_q <= 1'b1;
        end else if (mp_done) begin
          issued_q <= 1'b0;
          data_q   <= lane_data;
          if (mp_err) err_q <= 1'b1;
          state_q  <= D_WR;
        end
        D_WR: if (!issued_q) begin
          mp_start <= 1'b1; mp_we <= 1'b1; mp_addr <= {dst_a[31:2], 2'b00};
          mp_wdata <= set_q ? lane_data : data_q;
          mp_strb  <= lane_strb;
          issued_q <= 1'b1;
        end else if (mp_done) begin
          issued_q <= 1'b0;
          if (mp_err) err_q <= 1'b1;
          cnt_q    <= cnt_q + 32'd1;
          if (cnt_q + 32'd1 == len_q) state_q <= D_IDLE;
          else                        state_q <= set_q ? D_WR : D_RD;
        end
        default: ;
      endcase
    end
  end
endmodule
