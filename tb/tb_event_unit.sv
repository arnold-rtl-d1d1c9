// Testbench for event_unit: random event pulses set pending bits, irq
// follows PENDING & MASK, write-1-to-clear clears only the written bits,
// SET raises software events, and an event coinciding with its clear stays
// pending.
module tb_event_unit;
  import arnold_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  apb_req_t apb_req; apb_rsp_t apb_rsp;
  logic [31:0] events, irq;
  event_unit dut (.clk, .rst_n, .apb_req, .apb_rsp, .events, .irq);
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
  initial begin
    logic [31:0] pend, mask, e, q, c;
    apb_req = '0; events = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    pend = 0;
    for (int i = 0; i < 30; i++) begin
      mask = $urandom; apb_wr(APB_BASE + 32'h3000, mask);
      e = $urandom & $urandom;
      @(negedge clk); events = e; @(negedge clk); events = 0;
      pend |= e;
      check(irq == (pend & mask), $sformatf("irq %h exp %h", irq, pend & mask));
      apb_rd(APB_BASE + 32'h3004, q); check(q == pend, "PENDING read");
      c = $urandom; apb_wr(APB_BASE + 32'h3004, c); pend &= ~c;
      apb_rd(APB_BASE + 32'h3004, q); check(q == pend, "clear");
    end
    apb_wr(APB_BASE + 32'h3004, 32'hFFFF_FFFF);
    apb_wr(APB_BASE + 32'h3008, 32'h0000_0100);
    apb_rd(APB_BASE + 32'h3004, q); check(q == 32'h100, "software SET");
    // event in the same cycle as its clear wins
    @(negedge clk); apb_req = '{paddr: APB_BASE + 32'h3004, pwrite: 1, pwdata: 32'h100, psel: 1, penable: 0};
    @(negedge clk); apb_req.penable = 1; events = 32'h100;
    @(negedge clk); apb_req = '0; events = 0;
    apb_rd(APB_BASE + 32'h3004, q); check(q == 32'h100, "event beats clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
