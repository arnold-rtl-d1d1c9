// Testbench for soc_ctrl: programs random pad functions for all 41 pads and
// checks that each pad's output and output enable follow the selected
// source (GPIO, peripheral, eFPGA, off) while the inputs reach all three
// users; checks the eFPGA clock select, divider and reset registers and
// their read-back.
module tb_soc_ctrl;
  import arnold_pkg::*;
  localparam int N = NUM_PADS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  apb_req_t apb_req; apb_rsp_t apb_rsp;
  logic [N-1:0] gpio_out, gpio_oe, gpio_in, periph_out, periph_oe, periph_in, fpga_out, fpga_oe, fpga_in, pad_out, pad_oe, pad_in;
  logic [2:0] fpga_clksel; logic [7:0] fpga_clkdiv; logic fpga_rst_n;

  soc_ctrl dut (.clk, .rst_n, .apb_req, .apb_rsp, .gpio_out, .gpio_oe, .gpio_in, .periph_out, .periph_oe, .periph_in,
                .fpga_out, .fpga_oe, .fpga_in, .pad_out, .pad_oe, .pad_in, .fpga_clksel, .fpga_clkdiv, .fpga_rst_n);
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
    logic [31:0] fun [3]; logic [31:0] q;
    apb_req = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    check(fpga_rst_n == 0, "eFPGA held in reset after reset");
    for (int it = 0; it < 8; it++) begin
      for (int r = 0; r < 3; r++) begin fun[r] = $urandom; apb_wr(APB_BASE + 32'(r * 4), fun[r]); end
      for (int k = 0; k < 4; k++) begin
        gpio_out = {$urandom, $urandom}; gpio_oe = {$urandom, $urandom};
        periph_out = {$urandom, $urandom}; periph_oe = {$urandom, $urandom};
        fpga_out = {$urandom, $urandom}; fpga_oe = {$urandom, $urandom};
        pad_in = {$urandom, $urandom};
        #1;
        for (int p = 0; p < N; p++) begin
          logic [1:0] f; logic eo, ee;
          f = fun[p / 16][2 * (p % 16) +: 2];
          case (f)
            2'd0: begin eo = gpio_out[p]; ee = gpio_oe[p]; end
            2'd1: begin eo = periph_out[p]; ee = periph_oe[p]; end
            2'd2: begin eo = fpga_out[p]; ee = fpga_oe[p]; end
            default: begin eo = 0; ee = 0; end
          endcase
          check(pad_out[p] == eo && pad_oe[p] == ee, $sformatf("pad %0d function %0d", p, f));
        end
        check(gpio_in == pad_in && periph_in == pad_in && fpga_in == pad_in, "inputs fan out");
      end
      for (int r = 0; r < 3; r++) begin apb_rd(APB_BASE + 32'(r * 4), q); check(q == fun[r], "PADFUN read-back"); end
    end
    apb_wr(APB_BASE + 32'h10, 5); apb_wr(APB_BASE + 32'h14, 8'd12); apb_wr(APB_BASE + 32'h18, 1);
    check(fpga_clksel == 3'd5 && fpga_clkdiv == 8'd12 && fpga_rst_n == 1'b1, "eFPGA clock/reset registers");
    apb_rd(APB_BASE + 32'h14, q); check(q == 12, "CLKDIV read-back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
