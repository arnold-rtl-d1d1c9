// eFPGA I/O DMA interface: makes the eFPGA one more uDMA channel. The RX
// stream (eFPGA -> uDMA -> memory) and the TX stream (memory -> uDMA ->
// eFPGA) are 32-bit ready/valid buses, each through a 32 bit x 4 word
// dual-clock FIFO as in the paper. The uDMA's 32-bit per-channel
// configuration word reaches the eFPGA through two flops per bit; it is
// meant to be quasi-static (written while the channel is idle), which is
// this design's rule, not the paper's.
module efpga_udma_if #(
  parameter int unsigned DEPTH = 4
) (
  input  logic        clk_f,
  input  logic        rst_f_n,
  input  logic        f_rx_valid,
  input  logic [31:0] f_rx_data,
  output logic        f_rx_ready,
  output logic        f_tx_valid,
  output logic [31:0] f_tx_data,
  input  logic        f_tx_ready,
  output logic [31:0] f_cfg,
  input  logic        clk_m,
  input  logic        rst_m_n,
  output logic        u_rx_valid,
  output logic [31:0] u_rx_data,
  input  logic        u_rx_ready,
  input  logic        u_tx_valid,
  input  logic [31:0] u_tx_data,
  output logic        u_tx_ready,
  input  logic [31:0] u_cfg
);
  logic [31:0] cfg_s1;

  dc_fifo #(.WIDTH(32), .DEPTH(DEPTH)) u_rx_fifo (
    .wclk(clk_f), .wrst_n(rst_f_n), .w_valid(f_rx_valid), .w_data(f_rx_data), .w_ready(f_rx_ready),
    .rclk(clk_m), .rrst_n(rst_m_n), .r_valid(u_rx_valid), .r_data(u_rx_data), .r_ready(u_rx_ready)
  );

  dc_fifo #(.WIDTH(32), .DEPTH(DEPTH)) u_tx_fifo (
    .wclk(clk_m), .wrst_n(rst_m_n), .w_valid(u_tx_valid), .w_data(u_tx_data), .w_ready(u_tx_ready),
    .rclk(clk_f), .rrst_n(rst_f_n), .r_valid(f_tx_valid), .r_data(f_tx_data), .r_ready(f_tx_ready)
  );

  always_ff @(posedge clk_f or negedge rst_f_n) begin
    if (!rst_f_n) begin
      cfg_s1 <= '0; f_cfg <= '0;
    end else begin
      cfg_s1 <= u_cfg; f_cfg <= cfg_s1;
    end
  end
endmodule
