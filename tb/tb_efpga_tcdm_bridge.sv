// Testbench for efpga_tcdm_bridge: eFPGA clock 19 ns, MCU clock 5 ns. The
// eFPGA side issues random reads and writes, mostly to SRAM but some to the
// boot ROM, APB and unmapped space; the MCU side is a memory model with
// random grant delays. Checks: every request gets one in-order response;
// SRAM reads return the last written data; out-of-range requests never
// reach the crossbar side and come back with err = 1.
module tb_efpga_tcdm_bridge;
  import arnold_pkg::*;
  logic clk_f = 0, clk_m = 0, rst_n = 0;
  always #9.5 clk_f = ~clk_f;
  always #2.5 clk_m = ~clk_m;
  int checks = 0, failures = 0;
  logic f_req, f_gnt, f_rvalid, m_req, m_gnt, m_rvalid;
  tcdm_req_t f_reqd, m_reqd; tcdm_rsp_t f_rsp, m_rsp;
  efpga_tcdm_bridge dut (.clk_f, .rst_f_n(rst_n), .f_req, .f_gnt, .f_reqd, .f_rvalid, .f_rsp,
                         .clk_m, .rst_m_n(rst_n), .m_req, .m_gnt, .m_reqd, .m_rvalid, .m_rsp);
  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [31:0] mem [logic [31:0]];
  int gw;
  assign m_gnt = m_req && gw == 0;
  always @(posedge clk_m) begin
    m_rvalid <= 0;
    if (m_req && rst_n) check(m_reqd.addr >= SRAM_BASE && m_reqd.addr < SRAM_END, "only SRAM reaches the crossbar");
    if (m_req && !m_gnt) gw <= gw - 1;
    if (m_gnt) begin
      gw <= $urandom % 3;
      m_rvalid <= 1;
      m_rsp <= '{rdata: mem.exists(m_reqd.addr) ? mem[m_reqd.addr] : 32'h0, err: 0};
      if (m_reqd.we) mem[m_reqd.addr] = m_reqd.wdata;
    end
  end

  typedef struct { logic [31:0] rdata; bit err; bit is_read; } exp_t;
  exp_t expq [$];
  logic [31:0] shadow [logic [31:0]];
  int nresp = 0;
  always @(posedge clk_f) if (rst_n && f_rvalid) begin
    exp_t e;
    check(expq.size() > 0, "unexpected response");
    e = expq.pop_front();
    check(f_rsp.err == e.err, "err flag");
    if (e.is_read && !e.err) check(f_rsp.rdata == e.rdata, $sformatf("read data %h exp %h", f_rsp.rdata, e.rdata));
    nresp++;
  end

  initial begin
    f_req = 0; f_reqd = '0; gw = 0; m_rvalid = 0; m_rsp = '0;
    #40 rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      logic [31:0] a; bit ok; exp_t e;
      case ($urandom % 8)
        0: a = ROM_BASE + 4 * ($urandom % 16);
        1: a = APB_BASE + 4 * ($urandom % 16);
        2: a = 32'h4000_0000;
        default: a = SRAM_BASE + 4 * ($urandom % 64);
      endcase
      ok = a >= SRAM_BASE && a < SRAM_END;
      @(negedge clk_f);
      f_req = 1; f_reqd = '{addr: a, we: 1'($urandom), be: 4'hF, wdata: $urandom};
      @(posedge clk_f); while (!f_gnt) @(posedge clk_f);
      e.is_read = !f_reqd.we; e.err = !ok;
      e.rdata = shadow.exists(a) ? shadow[a] : 32'h0;
      if (ok && f_reqd.we) shadow[a] = f_reqd.wdata;
      expq.push_back(e);
      @(negedge clk_f); f_req = ($urandom % 3 == 0);
      f_req = 0;
    end
    wait (nresp == 300);
    check(expq.size() == 0, "all responses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #400000; failures++; $display("nresp %0d", nresp); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
