// Testbench for apb_timer: for several prescaler and compare values checks
// that interrupts come exactly every (CMP+1)*(PRESCALER+1) cycles, that
// COUNT can be read and written, and that a disabled timer stays silent.
module tb_apb_timer;
  import arnold_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  apb_req_t apb_req; apb_rsp_t apb_rsp;
  logic irq;
  apb_timer dut (.clk, .rst_n, .apb_req, .apb_rsp, .irq);
  task automatic apb_wr(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk); apb_req = '{paddr: a, pwrite: 1, pwdata: d, psel: 1, penable: 0};
    @(negedge clk); apb_req.penable = 1;
    @(posedge clk); while (!apb_rsp.pready) @(posedge clk);
    @(negedge clk); apb_req = '0;
  endtask
  task automatic apb_rd(input logic [31:0] a, output logic [31:0] d);
    @(negedge clk); apb_req = '{paddr: a, pwrite: 0, pwdata: 0, psel: 1, penable: 0};
    @(negedge clk); apb_req.penable = 1;
    #1 while (!apb_rsp.pready) begin @(posedge clk); #1; end
    d = apb_rsp.prdata;
    @(negedge clk); apb_req = '0;
  endtask
  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask
  longint cyc = 0, last = -1, period = 0; int nirq = 0;
  always @(posedge clk) begin
    cyc++;
    if (irq) begin if (last >= 0) period = cyc - last; last = cyc; nirq++; end
  end
  initial begin
    logic [31:0] q;
    apb_req = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    repeat (50) @(posedge clk);
    check(nirq == 0, "no interrupt while disabled");
    for (int t = 0; t < 12; t++) begin
      int p, c;
      p = $urandom % 5; c = 3 + $urandom % 20;
      apb_wr(APB_BASE + 32'h2000, 0);
      apb_wr(APB_BASE + 32'h2008, c);
      apb_wr(APB_BASE + 32'h2004, 0);
      last = -1;
      apb_wr(APB_BASE + 32'h2000, 32'(p << 8) | 1);
      repeat (3 * (c + 1) * (p + 1) + 5) @(posedge clk);
      check(period == (c + 1) * (p + 1), $sformatf("period %0d expected %0d", period, (c + 1) * (p + 1)));
      check(nirq >= 2, "interrupts while enabled");
    end
    apb_wr(APB_BASE + 32'h2000, 0);
    apb_wr(APB_BASE + 32'h2004, 32'd77);
    apb_rd(APB_BASE + 32'h2004, q);
    check(q == 77, "COUNT write/read");
    apb_rd(APB_BASE + 32'h2008, q);
    check(q >= 3 && q < 23, "CMP read-back");
    nirq = 0;
    repeat (200) @(posedge clk);
    check(nirq == 0, "silent after disable");
    apb_rd(APB_BASE + 32'h2004, q);
    check(q == 77, "COUNT holds while disabled");
    // counting from a written COUNT: first interrupt after CMP-COUNT+1 ticks
    apb_wr(APB_BASE + 32'h2008, 32'd100);
    apb_wr(APB_BASE + 32'h2004, 32'd90);
    nirq = 0;
    apb_wr(APB_BASE + 32'h2000, 32'h1);
    repeat (8) @(posedge clk);
    check(nirq == 0, "no interrupt before COUNT reaches CMP");
    repeat (6) @(posedge clk);
    check(nirq == 1, $sformatf("one interrupt when COUNT reaches CMP, got %0d", nirq));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #500000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
