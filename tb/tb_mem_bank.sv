// Testbench for mem_bank with the paper's interleaved-bank size (7 cuts of
// 4096 words). Writes random words (with random byte enables) at random
// addresses of this bank's share of the interleaved region, then reads
// them back and compares with a reference model; checks gnt = req and the
// one-cycle read latency, and that a private-bank instance (2 cuts,
// STRIDE_SHIFT 0) addresses its last word.
module tb_mem_bank;
  import arnold_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req, gnt, preq, pgnt;
  tcdm_req_t reqd, preqd;
  tcdm_rsp_t rsp, prsp;
  logic [31:0] model [int];

  mem_bank #(.NUM_CUTS(7), .STRIDE_SHIFT(2), .BASE(ILV_BASE)) dut (.clk, .rst_n, .req, .gnt, .reqd, .rsp);
  mem_bank #(.NUM_CUTS(2), .STRIDE_SHIFT(0), .BASE(PRIV0_BASE)) dutp (.clk, .rst_n, .req(preq), .gnt(pgnt), .reqd(preqd), .rsp(prsp));

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // bank 1 of the interleaved region: word index w -> address
  function automatic logic [31:0] a_of(int w);
    return ILV_BASE + 32'((w * 4 + 1) * 4);
  endfunction

  task automatic access(input logic [31:0] a, input logic we, input logic [3:0] be, input logic [31:0] d, output logic [31:0] q);
    @(negedge clk);
    req = 1; reqd = '{addr: a, we: we, be: be, wdata: d};
    #1 check(gnt == 1'b1, "gnt in request cycle");
    @(negedge clk);
    req = 0;
    q = rsp.rdata;
  endtask

  int idx [200];
  initial begin
    logic [31:0] q;
    req = 0; preq = 0; reqd = '0; preqd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      int w; logic [31:0] d;
      w = (i < 7) ? i * 4096 + 4095 : int'($urandom % (7 * 4096));
      idx[i] = w;
      d = $urandom;
      access(a_of(w), 1, 4'hF, d, q);
      model[w] = d;
    end
    for (int i = 0; i < 50; i++) begin
      logic [3:0] be; logic [31:0] d, m;
      be = 4'($urandom); d = $urandom;
      m = model[idx[i]];
      for (int b = 0; b < 4; b++) if (be[b]) m[8*b +: 8] = d[8*b +: 8];
      access(a_of(idx[i]), 1, be, d, q);
      model[idx[i]] = m;
    end
    for (int i = 0; i < 200; i++) begin
      access(a_of(idx[i]), 0, 4'hF, 0, q);
      check(q == model[idx[i]], $sformatf("word %0d: got %h exp %h", idx[i], q, model[idx[i]]));
    end
    // private bank: last and first word
    @(negedge clk); preq = 1; preqd = '{addr: PRIV0_BASE + 32'h7FFC, we: 1, be: 4'hF, wdata: 32'hCAFE_0001};
    @(negedge clk); preqd = '{addr: PRIV0_BASE, we: 1, be: 4'hF, wdata: 32'hCAFE_0002};
    @(negedge clk); preqd = '{addr: PRIV0_BASE + 32'h7FFC, we: 0, be: 4'hF, wdata: 0};
    @(negedge clk); preqd = '{addr: PRIV0_BASE, we: 0, be: 4'hF, wdata: 0};
    check(prsp.rdata == 32'hCAFE_0001, "private bank last word");
    @(negedge clk); preq = 0;
    check(prsp.rdata == 32'hCAFE_0002, "private bank first word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
