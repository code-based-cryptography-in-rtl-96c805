// AXI4-Lite master bus-functional model for the testbenches: blocking write
// and read tasks with single-beat transactions. AWVALID and WVALID are raised
// together; each is dropped after its READY. A read returns data and response.
module axil_bfm
  import hqc_pkg::*;
(
  input  logic      clk,
  output axil_req_t req,
  input  axil_rsp_t rsp
);
  initial req = '0;

  task automatic write(input logic [31:0] addr, input logic [31:0] data,
                       input logic [3:0] strb = 4'hF, output logic [1:0] resp);
    bit aw_done, w_done;
    aw_done = 0; w_done = 0;
    @(posedge clk);
    req.awvalid <= 1'b1; req.awaddr <= addr;
    req.wvalid  <= 1'b1; req.wdata  <= data; req.wstrb <= strb;
    req.bready  <= 1'b1;
    do begin
      @(posedge clk);
      if (rsp.awready) begin aw_done = 1; req.awvalid <= 1'b0; end
      if (rsp.wready)  begin w_done = 1;  req.wvalid  <= 1'b0; end
    end while (!(aw_done && w_done));
    while (!rsp.bvalid) @(posedge clk);
    resp = rsp.bresp;
    req.bready <= 1'b0;
  endtask

  task automatic read(input logic [31:0] addr, output logic [31:0] data, output logic [1:0] resp);
    @(posedge clk);
    req.arvalid <= 1'b1; req.araddr <= addr; req.rready <= 1'b1;
    do @(posedge clk); while (!rsp.arready);
    req.arvalid <= 1'b0;
    while (!rsp.rvalid) @(posedge clk);
    data = rsp.rdata;
    resp = rsp.rresp;
    @(posedge clk);
    req.rready <= 1'b0;
  endtask
endmodule
