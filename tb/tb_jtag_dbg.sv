// Testbench of the JTAG debug unit, driving TCK/TMS/TDI pin by pin at one
// eighth of the system clock with a 32 KB memory on its bus master port.
// Checked: IDCODE after TAP reset, BYPASS delay of one bit, the IR capture
// pattern, bus write and read through MEMACC including an error response,
// a register-file read and write through REGACC, and the run/reset controls.
module tb_jtag_dbg;
  import hqc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic tck = 1'b0, tms = 1'b1, tdi = 1'b0, tdo;
  logic core_run, sys_rst_req, rf_req, rf_we;
  logic [4:0] rf_addr;
  logic [31:0] rf_wdata, rf_rdata;
  axil_req_t m_req;
  axil_rsp_t m_rsp;
  logic [31:0] regs [32];
  jtag_dbg u_dut (.clk, .rst_n, .tck, .tms, .tdi, .tdo, .core_run, .sys_rst_req,
                  .rf_req, .rf_we, .rf_addr, .rf_wdata, .rf_rdata, .m_req, .m_rsp);
  axil_mem #(.BYTES(32768)) u_mem (.clk, .rst_n, .req(m_req), .rsp(m_rsp));
  initial for (int i = 0; i < 32; i++) regs[i] = 32'h100 + 32'(i);
  assign rf_rdata = regs[rf_addr];
  always @(posedge clk) if (rf_req && rf_we) regs[rf_addr] <= rf_wdata;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic jclk(input bit tms_v, input bit tdi_v, output bit tdo_v);
    tms = tms_v; tdi = tdi_v;
    repeat (4) @(posedge clk);
    tdo_v = tdo;
    tck = 1'b1;
    repeat (4) @(posedge clk);
    tck = 1'b0;
  endtask
  task automatic jtag_ir(input logic [3:0] v, output logic [3:0] cap);
    bit o;
    jclk(1, 0, o); jclk(1, 0, o); jclk(0, 0, o); jclk(0, 0, o);
    for (int i = 0; i < 4; i++) begin jclk(i == 3, v[i], o); cap[i] = o; end
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
    logic [3:0] c;
    bit o;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 5; i++) jclk(1, 0, o);
    jclk(0, 0, o);
    jtag_dr(32, '0, q);
    check(q[31:0] == 32'h1000_0001, $sformatf("IDCODE %h", q[31:0]));
    jtag_ir(4'hF, c);
    check(c[1:0] == 2'b01, "IR capture pattern");
    jtag_dr(9, 66'h0AD, q);
    check(q[8:1] == 8'hAD && q[0] == 1'b0, $sformatf("BYPASS %h", q[8:0]));
    // memory write and read
    jtag_ir(4'h2, c);
    for (int i = 0; i < 4; i++) begin
      jtag_dr(66, {2'd2, DMEM_BASE + 32'(16*i), 32'hBEEF_0000 + 32'(i)}, q);
      repeat (10) @(posedge clk);
    end
    for (int i = 0; i < 4; i++) check(u_mem.mem[4*i] == 32'hBEEF_0000 + 32'(i), "MEMACC write");
    jtag_dr(66, {2'd1, DMEM_BASE + 32'h30, 32'h0}, q);
    repeat (10) @(posedge clk);
    jtag_dr(66, '0, q);
    check(q[31:0] == 32'hBEEF_0003 && !q[64], $sformatf("MEMACC read %h", q[31:0]));
    jtag_dr(66, {2'd1, 32'h0000_9000, 32'h0}, q);
    repeat (10) @(posedge clk);
    jtag_dr(66, '0, q);
    check(q[64], "MEMACC error flag");
    // register file
    jtag_ir(4'h4, c);
    jtag_dr(38, {1'b1, 5'd9, 32'h1234_5678}, q);
    repeat (4) @(posedge clk);
    check(regs[9] == 32'h1234_5678, "REGACC write");
    jtag_dr(38, {1'b0, 5'd17, 32'h0}, q);
    repeat (4) @(posedge clk);
    jtag_dr(38, '0, q);
    check(q[31:0] == 32'h111, $sformatf("REGACC read %h", q[31:0]));
    // run control
    jtag_ir(4'h3, c);
    check(!core_run, "core halted after reset");
    jtag_dr(2, 66'b01, q);
    check(core_run && !sys_rst_req, "run");
    jtag_dr(2, 66'b10, q);
    check(!core_run && sys_rst_req, "reset request");
    jtag_dr(2, 66'b00, q);
    check(!sys_rst_req, "reset released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #20000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
