// Testbench for vec_mac. Streams random operands in all three vector modes
// (4x8, 2x16, 1x32 bit), taking each operand at random from the pins or
// from the local buffers (filled beforehand with known data), with random
// enable gaps and clears, and compares the four lane accumulators after the
// two-cycle latency with a reference computed from the same inputs.
module tb_vec_mac;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en, clr, sel_a, sel_b; logic [1:0] mode, buf_we;
  logic [31:0] op_a, op_b, buf_wdata;
  logic [8:0] buf_waddr, buf_raddr_a, buf_raddr_b;
  logic [31:0] acc [4];
  logic [31:0] bufa [512], bufb [512];
  logic [31:0] ref_acc [4];
  int nmac [3];

  vec_mac dut (.*);

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic void ref_step(input logic [1:0] md, input logic [31:0] a, input logic [31:0] b, input bit c);
    logic [31:0] p [4];
    p = '{default: 0};
    case (md)
      0: for (int k = 0; k < 4; k++) p[k] = 32'(int'($signed(a[8*k +: 8])) * int'($signed(b[8*k +: 8])));
      1: for (int k = 0; k < 2; k++) p[k] = 32'(int'($signed(a[16*k +: 16])) * int'($signed(b[16*k +: 16])));
      2: p[0] = 32'(longint'($signed(a)) * longint'($signed(b)));
      default: ;
    endcase
    for (int k = 0; k < 4; k++) ref_acc[k] = c ? p[k] : ref_acc[k] + p[k];
  endfunction

  initial begin
    en = 0; clr = 0; sel_a = 0; sel_b = 0; mode = 0; buf_we = 0; op_a = 0; op_b = 0;
    buf_wdata = 0; buf_waddr = 0; buf_raddr_a = 0; buf_raddr_b = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 512; i++) begin
      @(negedge clk);
      bufa[i] = $urandom; bufb[i] = $urandom;
      buf_waddr = 9'(i);
      buf_wdata = bufa[i]; buf_we = 2'b01;
      @(negedge clk); buf_wdata = bufb[i]; buf_we = 2'b10;
    end
    @(negedge clk); buf_we = 0;
    for (int blk = 0; blk < 30; blk++) begin
      logic [1:0] md;
      md = 2'($urandom % 3);
      // clear with the first MAC of the block
      for (int i = 0; i < 20; i++) begin
        logic [31:0] a, b; bit doit;
        @(negedge clk);
        doit = (i == 0) || ($urandom % 4 != 0);
        en = doit; clr = (i == 0); mode = md;
        sel_a = 1'($urandom); sel_b = 1'($urandom);
        op_a = $urandom; op_b = $urandom;
        buf_raddr_a = 9'($urandom); buf_raddr_b = 9'($urandom);
        a = sel_a ? bufa[buf_raddr_a] : op_a;
        b = sel_b ? bufb[buf_raddr_b] : op_b;
        if (doit) begin ref_step(md, a, b, i == 0); nmac[md]++; end
      end
      @(negedge clk); en = 0; clr = 0;
      @(negedge clk);
      for (int k = 0; k < 4; k++)
        check(acc[k] == ref_acc[k], $sformatf("block %0d mode %0d lane %0d: %h exp %h", blk, md, k, acc[k], ref_acc[k]));
    end
    check(nmac[0] > 0 && nmac[1] > 0 && nmac[2] > 0, "all modes exercised");
    // latency: a single MAC shows on acc after exactly 2 edges
    @(negedge clk); en = 1; clr = 1; mode = 2; sel_a = 0; sel_b = 0; op_a = 3; op_b = 5;
    @(negedge clk); en = 0; clr = 0;
    check(acc[0] != 15, "not visible after one cycle");
    @(negedge clk);
    check(acc[0] == 15, "visible after two cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
