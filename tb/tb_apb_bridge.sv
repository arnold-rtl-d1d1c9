// Testbench for apb_bridge: seven APB slave models, each a small register
// file that takes a random number of cycles (pready low) per access. The
// crossbar side issues random writes and reads to random slaves and checks
// read data against a reference copy, that only the addressed slave sees
// psel, that the setup phase precedes the access phase, that gnt comes only
// with pready, and that a select beyond slave 6 gives err = 1.
module tb_apb_bridge;
  import arnold_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic req, gnt;
  tcdm_req_t reqd;
  tcdm_rsp_t rsp;
  apb_req_t apb_req [N_APB];
  apb_rsp_t apb_rsp [N_APB];
  logic [31:0] regs [N_APB][16];
  logic [31:0] model [N_APB][16];
  int wait_c [N_APB];
  logic setup_seen [N_APB];

  apb_bridge dut (.clk, .rst_n, .req, .gnt, .reqd, .rsp, .apb_req, .apb_rsp);

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always_comb
    for (int p = 0; p < N_APB; p++)
      apb_rsp[p] = '{prdata: regs[p][apb_req[p].paddr[5:2]], pready: wait_c[p] == 0, pslverr: 1'b0};

  always_ff @(posedge clk) begin
    int nsel;
    nsel = 0;
    for (int p = 0; p < N_APB; p++) begin
      if (apb_req[p].psel) nsel++;
      if (apb_req[p].psel && !apb_req[p].penable) setup_seen[p] <= 1;
      if (apb_req[p].psel && apb_req[p].penable) begin
        check(setup_seen[p], "setup phase before access phase");
        if (wait_c[p] > 0) wait_c[p] <= wait_c[p] - 1;
        else begin
          if (apb_req[p].pwrite) regs[p][apb_req[p].paddr[5:2]] <= apb_req[p].pwdata;
          setup_seen[p] <= 0;
          wait_c[p] <= $urandom % 3;
        end
      end
    end
    if (rst_n) check(nsel <= 1, "at most one psel");
  end

  initial begin
    req = 0; reqd = '0;
    for (int p = 0; p < N_APB; p++) begin
      wait_c[p] = 1; setup_seen[p] = 0;
      for (int r = 0; r < 16; r++) begin regs[p][r] = 32'(p * 100 + r); model[p][r] = 32'(p * 100 + r); end
    end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      int p, r, cyc; logic we; logic [31:0] d;
      p = $urandom % N_APB; r = $urandom % 16; we = 1'($urandom); d = $urandom;
      @(negedge clk);
      req = 1; reqd = '{addr: APB_BASE + 32'(p * 4096 + r * 4), we: we, be: 4'hF, wdata: d};
      cyc = 0;
      @(posedge clk);
      while (!gnt) begin cyc++; @(posedge clk); end
      check(cyc >= 2, "at least setup + access before gnt");
      @(negedge clk); req = 0;
      if (we) model[p][r] = d;
      else check(rsp.rdata == model[p][r] && !rsp.err, $sformatf("read slave %0d reg %0d: %h exp %h", p, r, rsp.rdata, model[p][r]));
    end
    @(negedge clk); req = 1; reqd = '{addr: APB_BASE + 32'h9000, we: 0, be: 4'hF, wdata: 0};
    @(posedge clk); while (!gnt) @(posedge clk);
    @(negedge clk); req = 0;
    check(rsp.err, "unmapped APB slave gives err");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
