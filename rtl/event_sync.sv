// Dual-clock event propagators for the eFPGA event lines (the paper's
// "Synch" block, 16 lines). A one-cycle pulse on f_evt[i] in the eFPGA
// clock flips a toggle flop; the toggle crosses into the MCU clock through
// two flops, and a change seen on the third flop produces a one-cycle pulse
// on m_evt[i]. Latency 2-3 MCU cycles. Two events on one line must be
// separated by at least three MCU cycles to be seen as two.
module event_sync #(
  parameter int unsigned N = 16
) (
  input  logic         clk_f,
  input  logic         rst_f_n,
  input  logic [N-1:0] f_evt,
  input  logic         clk_m,
  input  logic         rst_m_n,
  output logic [N-1:0] m_evt
);
  logic [N-1:0] tog_q, s1_q, s2_q, s3_q;

  always_ff @(posedge clk_f or negedge rst_f_n) begin
    if (!rst_f_n) tog_q <= '0;
    else          tog_q <= tog_q ^ f_evt;
  end

  always_ff @(posedge clk_m or negedge rst_m_n) begin
    if (!rst_m_n) begin
      s1_q <= '0; s2_q <= '0; s3_q <= '0;
    end else begin
      s1_q <= tog_q; s2_q <= s1_q; s3_q <= s2_q;
    end
  end

  assign m_evt = s2_q ^ s3_q;
endmodule
