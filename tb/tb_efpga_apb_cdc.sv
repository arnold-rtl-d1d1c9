// Testbench for efpga_apb_cdc: MCU clock 5 ns, eFPGA clock 13 ns. The
// eFPGA side holds a 32-register model that answers after a random number
// of cycles. Random APB writes and reads from the MCU side must land in /
// come from the right register (7-bit address) with the right data, and
// the eFPGA-side transfer must show a setup phase before its access phase.
module tb_efpga_apb_cdc;
  import arnold_pkg::*;
  logic clk = 0, clk_f = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  always #6.5 clk_f = ~clk_f;
  int checks = 0, failures = 0;
  apb_req_t apb_req; apb_rsp_t apb_rsp;
  logic f_psel, f_penable, f_pwrite, f_pready; logic [6:0] f_paddr; logic [31:0] f_pwdata, f_prdata;
  efpga_apb_cdc dut (.clk_m(clk), .rst_m_n(rst_n), .apb_req, .apb_rsp, .clk_f, .rst_f_n(rst_n),
                     .f_psel, .f_penable, .f_pwrite, .f_paddr, .f_pwdata, .f_prdata, .f_pready);
  task automatic apb_wr(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk); apb_req = '{paddr: a, pwrite: 1, pwdata: d, psel: 1, penable: 0};
    @(negedge clk); apb_req.penable = 1;
    @(posedge clk); while (!apb_rsp.pready) @(posedge clk);
    @(negedge clk); apb_req = '0;
  endtask
  task automatic apb_rd(input logic [31:0] a, output logic [31:0] d);
    @(negedge clk); apb_req = '{paddr: a, pwrite: 0, pwdata: 0, psel: 1, penable: 0};
    @(negedge clk); apb_req.penable = 1;
    #0.1 while (!apb_rsp.pready) begin @(posedge clk); #0.1; end
    d = apb_rsp.prdata;
    @(negedge clk); apb_req = '0;
  endtask
  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [31:0] fregs [32], model [32];
  int fwait; bit setup_seen;
  assign f_pready = (fwait == 0);
  assign f_prdata = fregs[f_paddr[6:2]];
  always @(posedge clk_f) if (rst_n) begin
    if (f_psel && !f_penable) setup_seen <= 1;
    if (f_psel && f_penable) begin
      check(setup_seen, "eFPGA-side setup phase");
      if (fwait > 0) fwait <= fwait - 1;
      else begin
        if (f_pwrite) fregs[f_paddr[6:2]] <= f_pwdata;
        fwait <= $urandom % 3; setup_seen <= 0;
      end
    end
  end

  initial begin
    logic [31:0] q;
    apb_req = '0; fwait = 1; setup_seen = 0;
    for (int i = 0; i < 32; i++) begin fregs[i] = 32'(i); model[i] = 32'(i); end
    #30 rst_n = 1;
    for (int n = 0; n < 150; n++) begin
      int r; logic [31:0] d;
      r = $urandom % 32; d = $urandom;
      if ($urandom % 2) begin apb_wr(APB_BASE + 32'h5000 + 32'(r * 4), d); model[r] = d; end
      else begin apb_rd(APB_BASE + 32'h5000 + 32'(r * 4), q); check(q == model[r], $sformatf("reg %0d: %h exp %h", r, q, model[r])); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #300000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
