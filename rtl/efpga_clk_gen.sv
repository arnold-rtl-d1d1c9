// eFPGA clock generation. The paper gives the eFPGA six clock sources: four
// GPIO clocks, the eFPGA FLL, and an integer division of that FLL clock.
// sel picks the source: 0-3 clk_gpio[sel], 4 clk_fll, 5 the divided clock
// (6 and 7 also give clk_fll). For div = N >= 2 the divider output is
// clk_fll/N, high during the first floor(N/2) input cycles of each period;
// for div < 2 it is clk_fll itself. The selection is a plain multiplexer
// (the paper gives no glitch-free switching scheme): change sel or div only
// while the eFPGA is held in reset.
module efpga_clk_gen #(
  parameter int unsigned DIV_W = 8
) (
  input  logic             clk_fll,
  input  logic             rst_n,
  input  logic [3:0]       clk_gpio,
  input  logic [2:0]       sel,
  input  logic [DIV_W-1:0] div,
  output logic             clk_out
);
  logic [DIV_W-1:0] cnt_q;
  logic             div_q, clk_div;

  always_ff @(posedge clk_fll or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q <= '0; div_q <= 1'b0;
    end else begin
      logic [DIV_W-1:0] nxt;
      nxt   = (cnt_q >= div - 1'b1) ? '0 : cnt_q + 1'b1;
      cnt_q <= nxt;
      div_q <= (nxt < (div >> 1));
    end
  end

  assign clk_div = (div < DIV_W'(2)) ? clk_fll : div_q;

  always_comb begin
    case (sel)
      3'd0, 3'd1, 3'd2, 3'd3: clk_out = clk_gpio[sel[1:0]];
      3'd5:                   clk_out = clk_div;
      default:                clk_out = clk_fll;
    endcase
  end
endmodule
