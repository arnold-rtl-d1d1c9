// Testbench for boot_rom: reads the boot program (lui x5,0x1C008; jalr
// x0,0x80(x5)) and the NOP fill with one-cycle latency, and checks that a
// write is answered with err = 1 and leaves the content unchanged.
module tb_boot_rom;
  import arnold_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic req, gnt;
  tcdm_req_t reqd;
  tcdm_rsp_t rsp;

  boot_rom dut (.clk, .rst_n, .req, .gnt, .reqd, .rsp);

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic rd(input logic [31:0] a, input logic [31:0] exp);
    @(negedge clk); req = 1; reqd = '{addr: a, we: 0, be: 4'hF, wdata: 0};
    #1 check(gnt, "gnt");
    @(negedge clk); req = 0;
    check(rsp.rdata == exp && !rsp.err, $sformatf("read %h: got %h exp %h", a, rsp.rdata, exp));
  endtask

  initial begin
    req = 0; reqd = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    rd(ROM_BASE + 0, 32'h1C00_82B7);
    rd(ROM_BASE + 4, 32'h0802_8067);
    rd(ROM_BASE + 8, 32'h0000_0013);
    rd(ROM_END - 4,  32'h0000_0013);
    @(negedge clk); req = 1; reqd = '{addr: ROM_BASE, we: 1, be: 4'hF, wdata: 32'hDEAD_BEEF};
    @(negedge clk); req = 0;
    check(rsp.err, "write answered with err");
    rd(ROM_BASE + 0, 32'h1C00_82B7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
