// I/O controller: general-purpose pins for communication by pin toggling.
//
// Registers (byte offsets): 0x0 OUT, the value driven on gpio_o; 0x4 OE, the
// per-pin output enables; 0x8 IN, the pins as sampled through a two-flop
// synchronizer (read only); 0xC TOGGLE, a write-only register whose set bits
// invert the matching OUT bits. The paper only says the controller
// communicates by pin toggling; the register set, the width (PINS) and the
// synchronizer are this design's choices.
module io_ctrl
  import hqc_pkg::*;
#(
  parameter int unsigned PINS = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  axil_req_t       req,
  output axil_rsp_t       rsp,
  input  logic [PINS-1:0] gpio_i,
  output logic [PINS-1:0] gpio_o,
  output logic [PINS-1:0] gpio_oe
);
  logic        wr_en, rd_en;
  logic [31:0] wr_addr, wr_data, rd_addr;
  logic [31:0] rd_data;
  logic [3:0]  wr_strb;
  logic [PINS-1:0] sync1_q, sync2_q;

  axil_slave_port u_port (
    .clk, .rst_n, .req, .rsp,
    .wr_en, .wr_addr, .wr_data, .wr_strb, .wr_err(1'b0),
    .rd_en, .rd_addr, .rd_data, .rd_err(1'b0)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gpio_o  <= '0;
      gpio_oe <= '0;
      sync1_q <= '0;
      sync2_q <= '0;
      rd_data <= '0;
    end else begin
      sync1_q <= gpio_i;
      sync2_q <= sync1_q;
      if (wr_en) begin
        unique case (wr_addr[3:2])
          2'd0: gpio_o  <= wr_data[PINS-1:0];
          2'd1: gpio_oe <= wr_data[PINS-1:0];
          2'd3: gpio_o  <= gpio_o ^ wr_data[PINS-1:0];
          default: ;
        endcase
      end
      if (rd_en) begin
        unique case (rd_addr[3:2])
          2'd0: rd_data <= 32'(gpio_o);
          2'd1: rd_data <= 32'(gpio_oe);
          2'd2: rd_data <= 32'(sync2_q);
          default: rd_data <= '0;
        endcase
      end
    end
  end
endmodule
