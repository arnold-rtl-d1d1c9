// Testbench for event_sync: 16 lines, eFPGA clock 23 ns, MCU clock 5 ns.
// Random single-cycle pulses on random lines (at most one per line every
// other eFPGA cycle) must each produce exactly one one-cycle pulse on the
// same line in the MCU domain.
module tb_event_sync;
  logic clk_f = 0, clk_m = 0, rst_n = 0;
  always #11.5 clk_f = ~clk_f;
  always #2.5 clk_m = ~clk_m;
  logic [15:0] f_evt, m_evt;
  int checks = 0, failures = 0;
  int sent [16], got [16];
  event_sync #(.N(16)) dut (.clk_f, .rst_f_n(rst_n), .f_evt, .clk_m, .rst_m_n(rst_n), .m_evt);

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk_m) if (rst_n) for (int i = 0; i < 16; i++) if (m_evt[i]) got[i]++;

  initial begin
    f_evt = 0;
    #50 rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk_f);
      f_evt = (n % 2 == 0) ? 16'($urandom) : 16'h0;
      for (int i = 0; i < 16; i++) if (f_evt[i]) sent[i]++;
    end
    @(negedge clk_f); f_evt = 0;
    #100;
    for (int i = 0; i < 16; i++) check(sent[i] == got[i] && sent[i] > 0, $sformatf("line %0d: sent %0d got %0d", i, sent[i], got[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
