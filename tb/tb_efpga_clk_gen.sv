// Testbench for efpga_clk_gen: counts rising edges of clk_out over a fixed
// window for each of the six sources (four pad clocks of different periods,
// the FLL clock, and the FLL clock divided by 2..7) and compares with the
// expected frequency; checks the high time of the divided clock.
module tb_efpga_clk_gen;
  logic clk_fll = 0, rst_n = 0;
  logic [3:0] clk_gpio = 0;
  logic [2:0] sel; logic [7:0] div; logic clk_out;
  int checks = 0, failures = 0;
  always #2 clk_fll = ~clk_fll;                 // 4 ns
  always #3 clk_gpio[0] = ~clk_gpio[0];         // 6 ns
  always #5 clk_gpio[1] = ~clk_gpio[1];         // 10 ns
  always #7 clk_gpio[2] = ~clk_gpio[2];         // 14 ns
  always #11 clk_gpio[3] = ~clk_gpio[3];        // 22 ns

  efpga_clk_gen dut (.*);

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int edges = 0, hi_fll = 0;
  always @(posedge clk_out) edges++;
  always @(posedge clk_fll) if (clk_out) hi_fll++;

  task automatic measure(input logic [2:0] s, input logic [7:0] d, input int period_ns);
    int expct;
    sel = s; div = d;
    #100;
    edges = 0; hi_fll = 0;
    #4620;
    expct = 4620 / period_ns;
    check(edges >= expct - 1 && edges <= expct + 1, $sformatf("sel %0d div %0d: %0d edges, expected %0d", s, d, edges, expct));
  endtask

  initial begin
    sel = 4; div = 0;
    #10 rst_n = 1;
    measure(0, 0, 6); measure(1, 0, 10); measure(2, 0, 14); measure(3, 0, 22);
    measure(4, 0, 4); measure(5, 0, 4); measure(5, 1, 4);
    for (int d = 2; d < 8; d++) begin
      measure(5, 8'(d), 4 * d);
      check(hi_fll >= (4620 / (4 * d)) * (d / 2) - d && hi_fll <= (4620 / (4 * d) + 1) * (d / 2) + d,
            $sformatf("div %0d high time %0d", d, hi_fll));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
