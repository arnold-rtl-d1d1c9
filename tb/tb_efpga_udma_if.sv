// Testbench for efpga_udma_if: eFPGA clock 17 ns, MCU clock 5 ns. Streams
// 200 random words each way with random valid/ready on both ends and checks
// order and content; checks that the configuration word reaches the eFPGA
// side.
module tb_efpga_udma_if;
  logic clk_f = 0, clk_m = 0, rst_n = 0;
  always #8.5 clk_f = ~clk_f;
  always #2.5 clk_m = ~clk_m;
  int checks = 0, failures = 0;
  logic f_rx_valid, f_rx_ready, f_tx_valid, f_tx_ready, u_rx_valid, u_rx_ready, u_tx_valid, u_tx_ready;
  logic [31:0] f_rx_data, f_tx_data, f_cfg, u_rx_data, u_tx_data, u_cfg;
  efpga_udma_if dut (.clk_f, .rst_f_n(rst_n), .f_rx_valid, .f_rx_data, .f_rx_ready, .f_tx_valid, .f_tx_data, .f_tx_ready, .f_cfg,
                     .clk_m, .rst_m_n(rst_n), .u_rx_valid, .u_rx_data, .u_rx_ready, .u_tx_valid, .u_tx_data, .u_tx_ready, .u_cfg);

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [31:0] rxq [$], txq [$];
  int nrx = 0, ntx = 0, rrx = 0, rtx = 0;

  // eFPGA side: produce RX, consume TX
  always @(posedge clk_f) if (rst_n) begin
    if (f_rx_valid && f_rx_ready) begin rxq.push_back(f_rx_data); nrx++; end
    if (f_tx_valid && f_tx_ready) begin
      check(txq.size() > 0 && f_tx_data == txq[0], "TX word"); void'(txq.pop_front()); rtx++;
    end
  end
  always @(negedge clk_f) begin
    if (!(f_rx_valid && !f_rx_ready)) begin f_rx_valid <= (nrx < 200) && 1'($urandom); f_rx_data <= $urandom; end
    f_tx_ready <= 1'($urandom);
  end
  // MCU side: consume RX, produce TX
  always @(posedge clk_m) if (rst_n) begin
    if (u_rx_valid && u_rx_ready) begin
      check(rxq.size() > 0 && u_rx_data == rxq[0], "RX word"); void'(rxq.pop_front()); rrx++;
    end
    if (u_tx_valid && u_tx_ready) begin txq.push_back(u_tx_data); ntx++; end
  end
  always @(negedge clk_m) begin
    if (!(u_tx_valid && !u_tx_ready)) begin u_tx_valid <= (ntx < 200) && ($urandom % 5 == 0); u_tx_data <= $urandom; end
    u_rx_ready <= ($urandom % 3 == 0);
  end

  initial begin
    f_rx_valid = 0; u_tx_valid = 0; f_tx_ready = 0; u_rx_ready = 0; f_rx_data = 0; u_tx_data = 0;
    u_cfg = 32'h1234_5678;
    #40 rst_n = 1;
    wait (rrx == 200 && rtx == 200);
    check(f_cfg == 32'h1234_5678, "configuration bus");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #300000; failures++; $display("rrx %0d rtx %0d", rrx, rtx); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
