// Testbench for udma_uart. The serial output is looped back to the input;
// 40 random bytes are sent at a bit period of 8 clocks and must come back in
// order. An independent line monitor checks the 8N1 frame on uart_tx (start
// bit low, LSB first, stop bit high) at the programmed bit period.
module tb_udma_uart;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [31:0] cfg; logic tx_valid, tx_ready, rx_valid, uart_tx;
  logic [7:0] tx_data, rx_data;
  udma_uart dut (.clk, .rst_n, .cfg, .tx_valid, .tx_data, .tx_ready, .rx_valid, .rx_data, .uart_tx, .uart_rx(uart_tx));
  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask
  localparam int BP = 8;
  logic [7:0] sent [$], mon [$];
  int nrx = 0;
  always @(posedge clk) if (rst_n && rx_valid) begin
    check(sent.size() > 0 && rx_data == sent[0], $sformatf("loopback byte %h", rx_data));
    void'(sent.pop_front()); nrx++;
  end
  // line monitor
  initial begin
    @(posedge rst_n);
    forever begin
      logic [7:0] b;
      @(negedge uart_tx);
      repeat (BP / 2) @(posedge clk);
      check(uart_tx == 1'b0, "start bit");
      for (int k = 0; k < 8; k++) begin repeat (BP) @(posedge clk); b[k] = uart_tx; end
      repeat (BP) @(posedge clk);
      check(uart_tx == 1'b1, "stop bit");
      check(mon.size() > 0 && b == mon[0], $sformatf("frame data %h", b));
      void'(mon.pop_front());
    end
  end
  initial begin
    cfg = BP; tx_valid = 0; tx_data = 0;
    #20 rst_n = 1;
    repeat (3) @(posedge clk);
    for (int n = 0; n < 40; n++) begin
      @(negedge clk); tx_valid = 1; tx_data = 8'($urandom);
      @(posedge clk); while (!tx_ready) @(posedge clk);
      sent.push_back(tx_data); mon.push_back(tx_data);
      @(negedge clk); tx_valid = 0;
      repeat ($urandom % 20) @(negedge clk);
    end
    wait (nrx == 40);
    check(uart_tx == 1'b1, "idle line high");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
