// UART on the uDMA (8 data bits, no parity, one stop bit, LSB first). The
// paper only names the UART; framing and sampling are the usual ones.
// cfg[15:0] is the bit period in clock cycles (values below 2 act as 2).
// The transmitter takes a byte from the tx stream when idle and sends
// start, 8 data and stop bits, each cfg cycles long. The receiver waits for
// a falling edge on the two-flop-synchronised uart_rx, samples every bit in
// its middle and, if the stop bit is high, offers the byte on rx_valid for
// one cycle (no back-pressure: the uDMA side FIFO must take it).
module udma_uart (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] cfg,
  input  logic        tx_valid,
  input  logic [7:0]  tx_data,
  output logic        tx_ready,
  output logic        rx_valid,
  output logic [7:0]  rx_data,
  output logic        uart_tx,
  input  logic        uart_rx
);
  logic [15:0] period;
  assign period = (cfg[15:0] < 16'd2) ? 16'd2 : cfg[15:0];

  // transmitter
  logic [9:0]  tx_sh_q;
  logic [3:0]  tx_bits_q;
  logic [15:0] tx_cnt_q;

  assign tx_ready = (tx_bits_q == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_sh_q <= '1; tx_bits_q <= '0; tx_cnt_q <= '0; uart_tx <= 1'b1;
    end else if (tx_bits_q == 0) begin
      uart_tx <= 1'b1;
      if (tx_valid) begin
        tx_sh_q   <= {1'b1, tx_data, 1'b0};
        tx_bits_q <= 4'd10;
        tx_cnt_q  <= '0;
      end
    end else begin
      uart_tx <= tx_sh_q[0];
      if (tx_cnt_q == period - 16'd1) begin
        tx_cnt_q  <= '0;
        tx_sh_q   <= {1'b1, tx_sh_q[9:1]};
        tx_bits_q <= tx_bits_q - 4'd1;
      end else begin
        tx_cnt_q <= tx_cnt_q + 16'd1;
      end
    end
  end

  // receiver
  logic        rx_s1, rx_s2, rx_s3;
  logic [3:0]  rx_bits_q;
  logic [15:0] rx_cnt_q;
  logic [8:0]  rx_sh_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_s1 <= 1'b1; rx_s2 <= 1'b1; rx_s3 <= 1'b1;
      rx_bits_q <= '0; rx_cnt_q <= '0; rx_sh_q <= '0; rx_valid <= 1'b0; rx_data <= '0;
    end else begin
      rx_s1 <= uart_rx; rx_s2 <= rx_s1; rx_s3 <= rx_s2;
      rx_valid <= 1'b0;
      if (rx_bits_q == 0) begin
        if (rx_s3 && !rx_s2) begin        // start edge
          rx_bits_q <= 4'd10;
          rx_cnt_q  <= period >> 1;       // first sample in mid start bit
        end
      end else if (rx_cnt_q == 0) begin
        rx_cnt_q  <= period - 16'd1;
        rx_bits_q <= rx_bits_q - 4'd1;
        rx_sh_q   <= {rx_s2, rx_sh_q[8:1]};
        if (rx_bits_q == 4'd10 && rx_s2) rx_bits_q <= '0;  // false start
        if (rx_bits_q == 4'd1) begin
          rx_valid <= rx_s2;              // stop bit must be high
          rx_data  <= rx_sh_q[8:1];
        end
      end else begin
        rx_cnt_q <= rx_cnt_q - 16'd1;
      end
    end
  end
endmodule
