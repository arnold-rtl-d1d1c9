// SRAM bank: NUM_CUTS single-port 4096 x 32 bit cuts behind one crossbar
// slave port. The paper's interleaved banks hold 7 cuts (112 kB) each and
// its private banks 2 cuts (32 kB).
//
// The local word index is ((addr - BASE) >> 2) >> STRIDE_SHIFT: with four
// word-interleaved banks STRIDE_SHIFT = 2 drops the two bank-select bits,
// for a private bank it is 0. The cut is selected by local index / 4096,
// the word inside it by the low 12 bits. Only the selected cut is enabled.
// The bank grants every request in the cycle it arrives (gnt = req) and its
// read data appears the next cycle, as the crossbar expects. The cut order
// and index formula are this design's choice.
module mem_bank
  import arnold_pkg::*;
#(
  parameter int unsigned NUM_CUTS     = ILV_CUTS,
  parameter int unsigned CUT_WORDS_P  = CUT_WORDS,
  parameter int unsigned STRIDE_SHIFT = 2,
  parameter logic [31:0] BASE         = ILV_BASE
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req,
  output logic      gnt,
  input  tcdm_req_t reqd,
  output tcdm_rsp_t rsp
);
  localparam int unsigned CW = $clog2(CUT_WORDS_P);
  localparam int unsigned SW = (NUM_CUTS > 1) ? $clog2(NUM_CUTS) : 1;

  logic [31:0]   word;
  logic [CW-1:0] cut_addr;
  logic [SW-1:0] cut_sel, cut_sel_q;
  logic [31:0]   cut_rdata [NUM_CUTS];

  assign word     = ((reqd.addr - BASE) >> 2) >> STRIDE_SHIFT;
  assign cut_addr = word[CW-1:0];
  assign cut_sel  = SW'(word >> CW);
  assign gnt      = req;

  for (genvar c = 0; c < NUM_CUTS; c++) begin : g_cut
    sram_cut #(.WORDS(CUT_WORDS_P)) u_cut (
      .clk   (clk),
      .en    (req && (int'(cut_sel) == c)),
      .we    (reqd.we),
      .be    (reqd.be),
      .addr  (cut_addr),
      .wdata (reqd.wdata),
      .rdata (cut_rdata[c])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cut_sel_q <= '0;
    else if (req) cut_sel_q <= cut_sel;
  end

  assign rsp.rdata = (int'(cut_sel_q) < NUM_CUTS) ? cut_rdata[cut_sel_q] : '0;
  assign rsp.err   = 1'b0;
endmodule
