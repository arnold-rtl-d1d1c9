// Testbench for tcdm_xbar with 9 masters and the 8 slaves of the memory
// map. Slave models answer every read with a word that encodes the slave
// index and the address; slave 7 (APB bridge) withholds gnt for a random
// number of cycles. Masters issue random reads and writes to random mapped
// and unmapped addresses, holding each request until granted. Checked:
// every response arrives exactly one cycle after its grant with the right
// slave's data, unmapped addresses get err = 1, each slave sees only
// addresses that decode to it, and with all masters hammering one bank
// every master is granted within 9 cycles (round robin).
module tb_tcdm_xbar;
  import arnold_pkg::*;
  localparam int NM = 9, NS = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic      m_req [NM], m_gnt [NM], m_rvalid [NM];
  tcdm_req_t m_reqd [NM];
  tcdm_rsp_t m_rsp [NM];
  logic      s_req [NS], s_gnt [NS];
  tcdm_req_t s_reqd [NS];
  logic      stall_q [NS];
  tcdm_req_t stall_d [NS];
  tcdm_rsp_t s_rsp [NS];

  tcdm_xbar dut (.clk, .rst_n, .m_req, .m_gnt, .m_reqd, .m_rvalid, .m_rsp, .s_req, .s_gnt, .s_reqd, .s_rsp);

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [31:0] sig(input int s, input logic [31:0] a);
    return {a[27:0], 4'(s)} ^ 32'h5A5A_0000;
  endfunction

  // slave models
  int apb_wait;
  always_comb begin
    for (int s = 0; s < NS; s++) s_gnt[s] = s_req[s];
    s_gnt[S_APB] = s_req[S_APB] && (apb_wait == 0);
  end
  always_ff @(posedge clk) begin
    for (int s = 0; s < NS; s++) begin
      if (s_req[s] && s_gnt[s]) s_rsp[s] <= '{rdata: sig(s, s_reqd[s].addr), err: 1'b0};
      if (s_req[s] && rst_n) begin
        logic v; logic [3:0] t;
        t = addr_to_slave(s_reqd[s].addr, v);
        check(v && int'(t) == s, $sformatf("slave %0d got address %h", s, s_reqd[s].addr));
      end
    end
    // a request the slave has not granted must stay unchanged
    for (int s = 0; s < NS; s++) begin
      if (rst_n && stall_q[s]) check(s_req[s] && s_reqd[s] == stall_d[s], $sformatf("slave %0d request held while stalled", s));
      stall_q[s] <= s_req[s] && !s_gnt[s];
      stall_d[s] <= s_reqd[s];
    end
    if (s_req[S_APB] && apb_wait > 0) apb_wait <= apb_wait - 1;
    else if (!s_req[S_APB]) apb_wait <= $urandom % 4;
  end

  function automatic logic [31:0] rnd_addr();
    case ($urandom % 6)
      0: return ROM_BASE + ($urandom % 2048) * 4;
      1: return APB_BASE + ($urandom % 16384) * 4;
      2: return PRIV0_BASE + ($urandom % 16384) * 4;
      3: return 32'h3000_0000 + ($urandom % 256) * 4;   // unmapped
      default: return ILV_BASE + ($urandom % 114688) * 4;
    endcase
  endfunction

  int done [NM];
  int maxwait = 0;
  bit hammer = 0;
  for (genvar m = 0; m < NM; m++) begin : g_m
    initial begin
      m_req[m] = 0; m_reqd[m] = '0;
      wait (rst_n);
      for (int i = 0; i < 300; i++) begin
        logic [31:0] a; logic v; logic [3:0] t; int w;
        @(negedge clk);
        a = hammer ? ILV_BASE + 32'h100 : rnd_addr();
        t = addr_to_slave(a, v);
        m_req[m] = 1; m_reqd[m] = '{addr: a, we: 1'($urandom), be: 4'hF, wdata: $urandom};
        w = 0;
        @(posedge clk);
        while (!m_gnt[m]) begin w++; @(posedge clk); end
        if (hammer && w > maxwait) maxwait = w;
        @(negedge clk); m_req[m] = 0;
        check(m_rvalid[m], $sformatf("m%0d rvalid one cycle after gnt", m));
        if (v) check(!m_rsp[m].err && m_rsp[m].rdata == sig(int'(t), a), $sformatf("m%0d data for %h: %h", m, a, m_rsp[m].rdata));
        else   check(m_rsp[m].err, $sformatf("m%0d unmapped %h not flagged", m, a));
        if (i == 199) begin done[m] = 1; wait (hammer); end
      end
      done[m] = 2;
    end
  end

  initial begin
    apb_wait = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    wait (done.sum() == NM);
    hammer = 1;
    wait (done.sum() == 2 * NM);
    check(maxwait <= NM - 1, $sformatf("round robin: max wait %0d cycles", maxwait));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
