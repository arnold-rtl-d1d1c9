// Parallel-vectorial MAC unit attached to the eFPGA (two of them in the
// SoC), giving the fabric hard arithmetic it otherwise lacks. Per unit and
// per cycle it performs four 8-bit, two 16-bit or one 32-bit signed
// multiply-accumulate, as the paper states. Each operand comes either from
// the eFPGA pins (op_a/op_b) or from one of two local SRAM buffers
// (sel_a/sel_b = 1), which the eFPGA fills through buf_we/buf_waddr/
// buf_wdata and reads through buf_raddr.
//
// Pipeline (this design's choice): in cycle t the eFPGA presents en, mode,
// clr, the select bits, the operands and the buffer read addresses; the
// buffers are read and the pin operands registered. In cycle t+1 the
// products are added into the lane accumulators, which are visible on acc
// after the edge ending t+1 (2-cycle latency, one MAC per cycle). Lane k
// takes bytes/halfwords k of both operands; mode 2 uses lane 0 only. All
// accumulators are 32 bits and wrap. clr zeroes the accumulators (in the
// same pipeline slot; with en also set, the new product starts the sum).
module vec_mac #(
  parameter int unsigned BUF_WORDS = 512
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         en,
  input  logic                         clr,
  input  logic [1:0]                   mode,    // 0: 4x8, 1: 2x16, 2: 1x32
  input  logic                         sel_a,
  input  logic                         sel_b,
  input  logic [31:0]                  op_a,
  input  logic [31:0]                  op_b,
  input  logic [1:0]                   buf_we,  // bit 0 buffer A, bit 1 buffer B
  input  logic [$clog2(BUF_WORDS)-1:0] buf_waddr,
  input  logic [31:0]                  buf_wdata,
  input  logic [$clog2(BUF_WORDS)-1:0] buf_raddr_a,
  input  logic [$clog2(BUF_WORDS)-1:0] buf_raddr_b,
  output logic [31:0]                  acc [4]
);
  typedef enum logic [1:0] {M8 = 2'd0, M16 = 2'd1, M32 = 2'd2} mode_e;

  logic [31:0] buf_a [BUF_WORDS];
  logic [31:0] buf_b [BUF_WORDS];
  logic [31:0] rd_a_q, rd_b_q, pin_a_q, pin_b_q;
  logic        en_q, clr_q, sel_a_q, sel_b_q;
  mode_e       mode_q;

  always_ff @(posedge clk) begin
    if (buf_we[0]) buf_a[buf_waddr] <= buf_wdata;
    if (buf_we[1]) buf_b[buf_waddr] <= buf_wdata;
    rd_a_q <= buf_a[buf_raddr_a];
    rd_b_q <= buf_b[buf_raddr_b];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en_q <= 1'b0; clr_q <= 1'b0; sel_a_q <= 1'b0; sel_b_q <= 1'b0; mode_q <= M8;
      pin_a_q <= '0; pin_b_q <= '0;
    end else begin
      en_q <= en; clr_q <= clr; sel_a_q <= sel_a; sel_b_q <= sel_b; mode_q <= mode_e'(mode);
      pin_a_q <= op_a; pin_b_q <= op_b;
    end
  end

  logic [31:0] a, b;
  logic [31:0] prod [4];
  assign a = sel_a_q ? rd_a_q : pin_a_q;
  assign b = sel_b_q ? rd_b_q : pin_b_q;

  always_comb begin
    prod = '{default: '0};
    case (mode_q)
      M8:  for (int k = 0; k < 4; k++)
             prod[k] = 32'($signed(a[8*k +: 8]) * $signed(b[8*k +: 8]));
      M16: for (int k = 0; k < 2; k++)
             prod[k] = 32'($signed(a[16*k +: 16]) * $signed(b[16*k +: 16]));
      M32: prod[0] = 32'($signed(a) * $signed(b));
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '{default: '0};
    end else begin
      for (int k = 0; k < 4; k++) begin
        if (clr_q)     acc[k] <= en_q ? prod[k] : 32'h0;
        else if (en_q) acc[k] <= acc[k] + prod[k];
      end
    end
  end
endmodule
