// Testbench for dc_fifo: writer at 10 ns, reader at 7 ns period with random
// ready. Checks that 300 random words come out in order and unchanged, that
// the FIFO refuses a fifth word while the reader is stalled (depth 4), and
// that nothing appears on the read side while the FIFO is empty.
module tb_dc_fifo;
  logic wclk = 0, rclk = 0, rst_n = 0;
  always #5 wclk = ~wclk;
  always #3.5 rclk = ~rclk;
  logic w_valid, w_ready, r_valid, r_ready;
  logic [31:0] w_data, r_data;
  int checks = 0, failures = 0;
  logic [31:0] sent [$];
  int nsent = 0, nrecv = 0;
  bit stall = 1;

  dc_fifo #(.WIDTH(32), .DEPTH(4)) dut (.wclk, .wrst_n(rst_n), .w_valid, .w_data, .w_ready,
                                        .rclk, .rrst_n(rst_n), .r_valid, .r_data, .r_ready);

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    w_valid = 0; w_data = 0;
    repeat (3) @(posedge wclk);
    rst_n = 1;
    check(!r_valid, "empty after reset");
    // fill while reader stalls
    for (int i = 0; i < 6; i++) begin
      @(negedge wclk);
      w_valid = 1; w_data = $urandom;
      @(posedge wclk);
      if (w_ready) begin sent.push_back(w_data); nsent++; end
    end
    @(negedge wclk); w_valid = 0;
    check(nsent == 4, $sformatf("accepted %0d words with reader stalled, expected 4", nsent));
    check(!w_ready, "full flag after 4 words");
    stall = 0;
    while (nsent < 300) begin
      @(negedge wclk);
      w_valid = ($urandom % 3) != 0; w_data = $urandom;
      @(posedge wclk);
      if (w_valid && w_ready) begin sent.push_back(w_data); nsent++; end
    end
    @(negedge wclk); w_valid = 0;
    repeat (40) @(posedge rclk);
    check(nrecv == 300, $sformatf("received %0d of 300", nrecv));
    check(!r_valid, "empty at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge rclk) r_ready <= !stall && ($urandom % 4 != 0);
  always @(posedge rclk) if (rst_n && r_valid && r_ready) begin
    logic [31:0] exp;
    exp = sent.pop_front();
    check(r_data == exp, $sformatf("word %0d: got %h exp %h", nrecv, r_data, exp));
    nrecv++;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
