// Testbench of the DMA controller. A bus-functional master and the DMA share
// a two-master interconnect with a 32 KB memory (slave 1) and the DMA
// registers (slave 3). Checked: memcpy of bytes to an unaligned destination,
// of half-words and of words, memset of bytes and words, that neighbouring
// bytes are untouched, the busy flag and the error flag on a transfer that
// runs past the memory.
module tb_dma;
  import hqc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  axil_req_t m_req [2];
  axil_rsp_t m_rsp [2];
  axil_req_t s_req [5];
  axil_rsp_t s_rsp [5];
  logic busy;
  axil_interconnect #(.NM(2), .NS(5)) u_xbar (.clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rsp);
  axil_mem #(.BYTES(32768)) u_mem (.clk, .rst_n, .req(s_req[1]), .rsp(s_rsp[1]));
  dma u_dut (.clk, .rst_n, .s_req(s_req[3]), .s_rsp(s_rsp[3]), .m_req(m_req[1]), .m_rsp(m_rsp[1]), .busy);
  assign s_rsp[0] = '0;
  assign s_rsp[2] = '0;
  assign s_rsp[4] = '0;
  axil_bfm b (.clk, .req(m_req[0]), .rsp(m_rsp[0]));

  byte unsigned img [32768];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input bit set, input int size, input int src, input int dst, input int len,
                     input logic [31:0] value, output bit err);
    logic [1:0] r;
    logic [31:0] st;
    int sz;
    b.write(DMA_BASE + 32'(DMA_REG_SRC), DMEM_BASE + 32'(src), 4'hF, r);
    b.write(DMA_BASE + 32'(DMA_REG_DST), DMEM_BASE + 32'(dst), 4'hF, r);
    b.write(DMA_BASE + 32'(DMA_REG_LEN), 32'(len), 4'hF, r);
    b.write(DMA_BASE + 32'(DMA_REG_VALUE), value, 4'hF, r);
    b.write(DMA_BASE + 32'(DMA_REG_CTRL), {28'd0, 2'(size), set, 1'b1}, 4'hF, r);
    @(posedge clk); #1;
    check(busy, "busy after start");
    do b.read(DMA_BASE + 32'(DMA_REG_STATUS), st, r); while (st[0]);
    err = st[1];
    // reference
    sz = 1 << size;
    for (int i = 0; i < len; i++)
      for (int k = 0; k < sz; k++)
        if (dst + i*sz + k < 32768)
          img[dst + i*sz + k] = set ? value[8*k +: 8] : img[src + i*sz + k];
  endtask

  task automatic compare(input int lo, input int hi, input string what);
    logic [1:0] r;
    logic [31:0] d;
    int bad;
    bad = 0;
    for (int a = lo; a < hi; a += 4) begin
      b.read(DMEM_BASE + 32'(a), d, r);
      for (int k = 0; k < 4; k++) if (d[8*k +: 8] != img[a + k]) bad++;
    end
    check(bad == 0, $sformatf("%s: %0d bytes wrong", what, bad));
  endtask

  initial begin
    logic [1:0] r;
    logic [31:0] d;
    bit err;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < 1024; a += 4) begin
      d = $urandom;
      b.write(DMEM_BASE + 32'(a), d, 4'hF, r);
      for (int k = 0; k < 4; k++) img[a + k] = d[8*k +: 8];
    end
    run(1'b0, 0, 3, 517, 41, 0, err);
    check(!err, "byte memcpy no error");
    compare(512, 576, "byte memcpy");
    run(1'b0, 1, 6, 602, 13, 0, err);
    compare(600, 640, "half-word memcpy");
    run(1'b0, 2, 64, 700, 30, 0, err);
    compare(696, 824, "word memcpy");
    run(1'b1, 0, 0, 829, 7, 32'h0000_003C, err);
    compare(824, 840, "byte memset");
    run(1'b1, 1, 0, 842, 3, 32'h0000_BEEF, err);
    compare(840, 852, "half-word memset");
    run(1'b1, 2, 0, 852, 9, 32'h1357_9BDF, err);
    compare(852, 892, "word memset");
    run(1'b1, 2, 0, 32760, 4, 32'h0, err);
    check(err, "error flag when running past memory");
    run(1'b1, 2, 0, 900, 1, 32'h0, err);
    check(!err, "error flag cleared by next start");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #5000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
