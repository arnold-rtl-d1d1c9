// SoC control registers and pad multiplexers. Each of the N pads can be
// driven by the software GPIO, by a uDMA peripheral or by the eFPGA I/O
// interface (the paper: every pad can be used by a peripheral, by software
// or by the eFPGA, chosen by SoC registers). The function code, 2 bits per
// pad, is this design's encoding: 0 GPIO, 1 peripheral, 2 eFPGA, 3 pad off
// (output disabled). Inputs are fanned out to all three users; only the
// selected one sees its output and output enable reach the pad.
// Registers:
//   0x00..0x08 PADFUN0..2  pads 16k..16k+15, 2 bits each
//   0x10 FPGA_CLKSEL [2:0]  eFPGA clock: 0-3 GPIO clock k, 4 FLL, 5 FLL/DIV
//   0x14 FPGA_CLKDIV [7:0]
//   0x18 FPGA_CTRL   bit 0 eFPGA reset (active low, 0 after reset)
// All reset to 0 (pads on GPIO, eFPGA held in reset).
module soc_ctrl
  import arnold_pkg::*;
#(
  parameter int unsigned N = NUM_PADS   // up to 48
) (
  input  logic         clk,
  input  logic         rst_n,
  input  apb_req_t     apb_req,
  output apb_rsp_t     apb_rsp,
  // function side
  input  logic [N-1:0] gpio_out,   input logic [N-1:0] gpio_oe,   output logic [N-1:0] gpio_in,
  input  logic [N-1:0] periph_out, input logic [N-1:0] periph_oe, output logic [N-1:0] periph_in,
  input  logic [N-1:0] fpga_out,   input logic [N-1:0] fpga_oe,   output logic [N-1:0] fpga_in,
  // pad side
  output logic [N-1:0] pad_out,
  output logic [N-1:0] pad_oe,
  input  logic [N-1:0] pad_in,
  // eFPGA control
  output logic [2:0]   fpga_clksel,
  output logic [7:0]   fpga_clkdiv,
  output logic         fpga_rst_n
);
  typedef enum logic [1:0] {F_GPIO = 2'd0, F_PERIPH = 2'd1, F_FPGA = 2'd2, F_OFF = 2'd3} padfun_e;

  logic [31:0] padfun_q [3];
  logic wr;
  logic [2:0] ridx;

  assign wr   = apb_req.psel && apb_req.penable && apb_req.pwrite;
  assign ridx = apb_req.paddr[4:2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      padfun_q <= '{default: '0}; fpga_clksel <= '0; fpga_clkdiv <= '0; fpga_rst_n <= 1'b0;
    end else if (wr) begin
      case (ridx)
        3'd0, 3'd1, 3'd2: padfun_q[ridx[1:0]] <= apb_req.pwdata;
        3'd4: fpga_clksel <= apb_req.pwdata[2:0];
        3'd5: fpga_clkdiv <= apb_req.pwdata[7:0];
        3'd6: fpga_rst_n  <= apb_req.pwdata[0];
        default: ;
      endcase
    end
  end

  always_comb begin
    apb_rsp = '{prdata: 32'h0, pready: 1'b1, pslverr: 1'b0};
    case (ridx)
      3'd0, 3'd1, 3'd2: apb_rsp.prdata = padfun_q[ridx[1:0]];
      3'd4: apb_rsp.prdata = {29'h0, fpga_clksel};
      3'd5: apb_rsp.prdata = {24'h0, fpga_clkdiv};
      3'd6: apb_rsp.prdata = {31'h0, fpga_rst_n};
      default: apb_rsp.pslverr = 1'b1;
    endcase
  end

  // pad multiplexers
  always_comb begin
    for (int p = 0; p < N; p++) begin
      padfun_e f;
      f = padfun_e'(padfun_q[p / 16][2*(p % 16) +: 2]);
      case (f)
        F_GPIO:   begin pad_out[p] = gpio_out[p];   pad_oe[p] = gpio_oe[p];   end
        F_PERIPH: begin pad_out[p] = periph_out[p]; pad_oe[p] = periph_oe[p]; end
        F_FPGA:   begin pad_out[p] = fpga_out[p];   pad_oe[p] = fpga_oe[p];   end
        default:  begin pad_out[p] = 1'b0;          pad_oe[p] = 1'b0;         end
      endcase
    end
    gpio_in   = pad_in;
    periph_in = pad_in;
    fpga_in   = pad_in;
  end
endmodule
