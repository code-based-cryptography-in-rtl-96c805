// End-to-end testbench of the IoT-PS at its default parameters
// (n = 17669, 20 KB instruction memory, 32 KB data memory).
//
// The RV32IC core is not part of the RTL; two bus-functional masters stand in
// for its data and instruction ports, and the Keccak-f[1600] model is
// attached to the permutation port. While the data-port master runs the full
// accelerator sequence of hqc_flow on operands in data memory, the
// instruction-port master concurrently drives the DMA (memcpy at byte,
// half-word and word size, memset), the I/O controller and an unmapped
// address. Then the JTAG port is driven pin by pin: IDCODE, a bus write and
// read of data memory, a register-file access and the run/reset controls.
// The F(2^8) unit is checked at the core port. Mechanisms that must occur at
// least once: bus contention between masters, multiplication, addition,
// RM decoding, refused accelerator command, both sampling rejections, DMA
// memcpy of each size and memset, decode error, JTAG bus access.
module tb_iot_ps;
  import hqc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, go = 1'b0;
  always #5 clk = ~clk;

  logic tck = 1'b0, tms = 1'b1, tdi = 1'b0, tdo;
  logic [15:0] gpio_i = 16'h0000, gpio_o, gpio_oe;
  axil_req_t cpu_i_req, cpu_d_req;
  axil_rsp_t cpu_i_rsp, cpu_d_rsp;
  logic core_rst_n, core_run, rf_req, rf_we;
  logic [4:0] rf_addr;
  logic [31:0] rf_wdata;
  logic [31:0] rf_rdata = 32'hC0DE_0005;
  logic [15:0] gf_a = '0;
  logic [7:0] gf_b = '0;
  logic [14:0] gf_d;
  logic kec_start, kec_done;
  logic [1599:0] kec_so, kec_si;
  logic hqc_busy, dma_busy;
  logic [15:0] n_perm, n_rej_range, n_rej_dup;

  iot_ps dut (
    .clk, .rst_n, .tck, .tms, .tdi, .tdo, .gpio_i, .gpio_o, .gpio_oe,
    .cpu_i_req, .cpu_i_rsp, .cpu_d_req, .cpu_d_rsp, .core_rst_n, .core_run,
    .rf_req, .rf_we, .rf_addr, .rf_wdata, .rf_rdata, .gf_a, .gf_b, .gf_d,
    .kec_start, .kec_state_o(kec_so), .kec_done, .kec_state_i(kec_si),
    .hqc_busy, .dma_busy, .n_perm, .n_rej_range, .n_rej_dup);
  keccak_f1600_model u_kec (.clk, .rst_n, .start(kec_start), .state_i(kec_so),
                            .state_o(kec_si), .done(kec_done));

  logic flow_done;
  int f_checks, f_failures, n_mul, n_add, n_rm, n_busy_err;
  hqc_flow #(.REG_BASE(HQC_BASE), .MEM_BASE(DMEM_BASE)) u_flow (
    .clk, .go, .req(cpu_d_req), .rsp(cpu_d_rsp), .n_rej_range, .n_rej_dup,
    .finished(flow_done), .checks(f_checks), .failures(f_failures),
    .n_mul, .n_add, .n_rm, .n_busy_err);
  axil_bfm u_ibus (.clk, .req(cpu_i_req), .rsp(cpu_i_rsp));

  int checks = 0, failures = 0;
  logic ibus_done = 1'b0;
  int s_perm, s_range, s_dup;
  int n_contend = 0, n_dma_cpy = 0, n_dma_set = 0, n_decerr = 0, n_jtag_bus = 0, n_rf = 0;

  // more than one master requesting in the same cycle
  always @(posedge clk) begin
    int r;
    r = 0;
    for (int m = 0; m < 5; m++) r += int'(dut.m_req[m].arvalid || dut.m_req[m].awvalid);
    if (r > 1) n_contend++;
    if (rf_req) n_rf++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- instruction-port master: DMA, I/O, decode error ----------------
  task automatic iw(input logic [31:0] a, input logic [31:0] d, output logic [1:0] r);
    u_ibus.write(a, d, 4'hF, r);
  endtask
  task automatic ir(input logic [31:0] a, output logic [31:0] d, output logic [1:0] r);
    u_ibus.read(a, d, r);
  endtask

  task automatic dma_run(input bit set, input int size, input logic [31:0] src, input logic [31:0] dst,
                         input int len, input logic [31:0] value);
    logic [1:0] r;
    logic [31:0] st;
    iw(DMA_BASE + 32'(DMA_REG_SRC), src, r);
    iw(DMA_BASE + 32'(DMA_REG_DST), dst, r);
    iw(DMA_BASE + 32'(DMA_REG_LEN), 32'(len), r);
    iw(DMA_BASE + 32'(DMA_REG_VALUE), value, r);
    iw(DMA_BASE + 32'(DMA_REG_CTRL), {28'd0, 2'(size), set, 1'b1}, r);
    do ir(DMA_BASE + 32'(DMA_REG_STATUS), st, r); while (st[0]);
    check(!st[1], "DMA without bus error");
  endtask

  initial begin : ibus_seq
    logic [1:0] r;
    logic [31:0] d;
    byte unsigned ref_mem [512];
    wait (go);
    // source data in data memory at 0x1000_6000, destinations after it
    for (int i = 0; i < 64; i++) begin
      d = $urandom;
      iw(DMEM_BASE + 32'h6000 + 32'(4*i), d, r);
      for (int b = 0; b < 4; b++) ref_mem[4*i + b] = d[8*b +: 8];
    end
    // memcpy: 37 bytes to an odd offset, 11 half-words, 16 words
    dma_run(1'b0, 0, DMEM_BASE + 32'h6001, DMEM_BASE + 32'h6403, 37, 0);
    n_dma_cpy++;
    dma_run(1'b0, 1, DMEM_BASE + 32'h6002, DMEM_BASE + 32'h6502, 11, 0);
    n_dma_cpy++;
    dma_run(1'b0, 2, DMEM_BASE + 32'h6000, DMEM_BASE + 32'h6600, 16, 0);
    n_dma_cpy++;
    dma_run(1'b1, 0, 0, DMEM_BASE + 32'h6701, 6, 32'h0000_00A5);
    n_dma_set++;
    dma_run(1'b1, 2, 0, DMEM_BASE + 32'h6800, 5, 32'hDEAD_BEEF);
    n_dma_set++;
    begin
      int bad, a;
      bad = 0;
      for (int i = 0; i < 37; i++) begin
        a = 32'h403 + i;
        ir(DMEM_BASE + 32'h6000 + 32'(a & ~3), d, r);
        if (d[8*(a%4) +: 8] != ref_mem[1 + i]) bad++;
      end
      for (int i = 0; i < 11; i++) begin
        a = 32'h502 + 2*i;
        ir(DMEM_BASE + 32'h6000 + 32'(a & ~3), d, r);
        if (d[8*(a%4) +: 16] != {ref_mem[2 + 2*i + 1], ref_mem[2 + 2*i]}) bad++;
      end
      for (int i = 0; i < 16; i++) begin
        ir(DMEM_BASE + 32'h6600 + 32'(4*i), d, r);
        if (d != {ref_mem[4*i+3], ref_mem[4*i+2], ref_mem[4*i+1], ref_mem[4*i]}) bad++;
      end
      // memset bytes 0x701..0x706; bytes 0x700 and 0x707 were never written
      ir(DMEM_BASE + 32'h6704, d, r);
      if (d[23:0] != 24'hA5A5A5) bad++;
      for (int i = 0; i < 5; i++) begin
        ir(DMEM_BASE + 32'h6800 + 32'(4*i), d, r);
        if (d != 32'hDEAD_BEEF) bad++;
      end
      check(bad == 0, $sformatf("DMA results: %0d wrong", bad));
    end
    // I/O pin toggling
    iw(IO_BASE + 32'h4, 32'h0000_00FF, r);
    iw(IO_BASE + 32'h0, 32'h0000_0055, r);
    iw(IO_BASE + 32'hC, 32'h0000_000F, r);
    check(gpio_o == 16'h005A && gpio_oe == 16'h00FF, "GPIO output and toggle");
    gpio_i = 16'h1234;
    repeat (4) @(posedge clk);
    ir(IO_BASE + 32'h8, d, r);
    check(d[15:0] == 16'h1234, "GPIO input");
    // unmapped address
    ir(32'h7000_0000, d, r);
    check(r == RESP_DECERR, "decode error on unmapped read");
    if (r == RESP_DECERR) n_decerr++;
    iw(32'hF000_0000, 32'h1, r);
    check(r == RESP_DECERR, "decode error on unmapped write");
    // instruction memory access
    iw(IMEM_BASE + 32'h4FFC, 32'h0000_0013, r);
    ir(IMEM_BASE + 32'h4FFC, d, r);
    check(d == 32'h0000_0013 && r == RESP_OKAY, "instruction memory word at the top");
    ir(IMEM_BASE + 32'h5000, d, r);
    check(r == RESP_SLVERR, "instruction memory ends at 20 KB");
    ibus_done = 1'b1;
  end

  // ---------------- JTAG ----------------
  task automatic jclk(input bit tms_v, input bit tdi_v, output bit tdo_v);
    tms = tms_v; tdi = tdi_v;
    repeat (4) @(posedge clk);
    tdo_v = tdo;
    tck = 1'b1;
    repeat (4) @(posedge clk);
    tck = 1'b0;
  endtask
  task automatic jtag_ir(input logic [3:0] v);
    bit o;
    jclk(1, 0, o); jclk(1, 0, o); jclk(0, 0, o); jclk(0, 0, o);
    for (int i = 0; i < 4; i++) jclk(i == 3, v[i], o);
    jclk(1, 0, o); jclk(0, 0, o);
  endtask
  task automatic jtag_dr(input int len, input logic [65:0] din, output logic [65:0] dout);
    bit o;
    dout = '0;
    jclk(1, 0, o); jclk(0, 0, o); jclk(0, 0, o);
    for (int i = 0; i < len; i++) begin
      jclk(i == len - 1, din[i], o);
      dout[i] = o;
    end
    jclk(1, 0, o); jclk(0, 0, o);
  endtask

  initial begin
    logic [65:0] q;
    bit o;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    go = 1'b1;
    wait (flow_done && ibus_done);
    checks += f_checks;
    failures += f_failures;
    // counters are cleared by the JTAG system reset below
    s_perm = int'(n_perm); s_range = int'(n_rej_range); s_dup = int'(n_rej_dup);
    // TAP reset, IDCODE
    for (int i = 0; i < 5; i++) jclk(1, 0, o);
    jclk(0, 0, o);
    jtag_dr(32, '0, q);
    check(q[31:0] == 32'h1000_0001, $sformatf("IDCODE %h", q[31:0]));
    // bus write and read through JTAG
    jtag_ir(4'h2);
    jtag_dr(66, {2'd2, DMEM_BASE + 32'h7F00, 32'hA5A5_0F0F}, q);
    repeat (20) @(posedge clk);
    check(dut.u_dmem.mem[(32'h7F00) >> 2] == 32'hA5A5_0F0F, "JTAG write to data memory");
    jtag_dr(66, {2'd1, DMEM_BASE + 32'h7F00, 32'h0}, q);
    repeat (20) @(posedge clk);
    jtag_dr(66, '0, q);
    check(q[31:0] == 32'hA5A5_0F0F && !q[64], $sformatf("JTAG read of data memory %h", q[31:0]));
    n_jtag_bus++;
    // register file access
    jtag_ir(4'h4);
    jtag_dr(38, {1'b0, 5'd5, 32'h0}, q);
    repeat (4) @(posedge clk);
    jtag_dr(38, '0, q);
    check(q[31:0] == 32'hC0DE_0005, "JTAG register-file read");
    check(n_rf > 0, "register-file request issued");
    // run control
    jtag_ir(4'h3);
    jtag_dr(2, 66'b01, q);
    check(core_run && core_rst_n, "core started");
    jtag_dr(2, 66'b10, q);
    check(!core_run && !core_rst_n, "system held in reset");
    jtag_dr(2, 66'b00, q);
    check(core_rst_n, "reset released");
    // F(2^8) unit at the core port: x^7 * x^7 + 1
    gf_a = 16'h8001; gf_b = 8'h80;
    #1;
    check(gf_d == 15'h4001, "F(2^8) unit");
    // mechanisms
    check(n_contend > 0, "bus contention");
    check(n_mul > 0 && n_add > 0 && n_rm > 0 && n_busy_err > 0, "accelerator operations");
    check(s_range > 0 && s_dup > 0, "both rejection causes");
    check(n_dma_cpy == 3 && n_dma_set == 2, "DMA operations");
    check(n_decerr > 0, "decode error");
    $display("events: contention %0d mul %0d add %0d rm %0d refused %0d perms %0d range-rej %0d dup-rej %0d dma-cpy %0d dma-set %0d decerr %0d jtag-bus %0d",
             n_contend, n_mul, n_add, n_rm, n_busy_err, s_perm, s_range, s_dup,
             n_dma_cpy, n_dma_set, n_decerr, n_jtag_bus);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4000000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
