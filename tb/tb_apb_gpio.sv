// Testbench for apb_gpio: writes direction and output registers for all 41
// lines and checks the pins; drives random inputs and checks that the IN
// registers show them after the two synchronising flops.
module tb_apb_gpio;
  import arnold_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  apb_req_t apb_req; apb_rsp_t apb_rsp;
  logic [40:0] gpio_out, gpio_oe, gpio_in;
  apb_gpio dut (.clk, .rst_n, .apb_req, .apb_rsp, .gpio_out, .gpio_oe, .gpio_in);
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
    logic [63:0] v; logic [31:0] lo, hi;
    apb_req = '0; gpio_in = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    check(gpio_oe == 0, "all inputs after reset");
    for (int i = 0; i < 20; i++) begin
      v = {$urandom, $urandom};
      apb_wr(APB_BASE + 4096 + 0, v[31:0]); apb_wr(APB_BASE + 4096 + 4, v[63:32]);
      check(gpio_oe == v[40:0], "direction");
      v = {$urandom, $urandom};
      apb_wr(APB_BASE + 4096 + 8, v[31:0]); apb_wr(APB_BASE + 4096 + 12, v[63:32]);
      check(gpio_out == v[40:0], "output");
      apb_rd(APB_BASE + 4096 + 8, lo); check(lo == v[31:0], "OUT read-back");
      gpio_in = 41'({$urandom, $urandom});
      repeat (3) @(posedge clk);
      apb_rd(APB_BASE + 4096 + 16, lo); apb_rd(APB_BASE + 4096 + 20, hi);
      check({hi[8:0], lo} == gpio_in, $sformatf("input read %h%h vs %h", hi, lo, gpio_in));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
