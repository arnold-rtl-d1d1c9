// Software GPIO on the APB bus (the "Core GPIO" pad function). The paper
// only names it; the register map is this design's choice:
//   0x00 DIR[31:0]  0x04 DIR[N-1:32]   1 = output
//   0x08 OUT[31:0]  0x0C OUT[N-1:32]
//   0x10 IN[31:0]   0x14 IN[N-1:32]    read only, after two sync flops
// APB transfers complete in their access phase (pready = 1).
module apb_gpio
  import arnold_pkg::*;
#(
  parameter int unsigned N = NUM_PADS   // 33..64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  apb_req_t     apb_req,
  output apb_rsp_t     apb_rsp,
  output logic [N-1:0] gpio_out,
  output logic [N-1:0] gpio_oe,
  input  logic [N-1:0] gpio_in
);
  logic [63:0] dir_q, out_q, in_s1, in_s2;
  logic [2:0]  widx;
  logic        wr;

  assign widx = apb_req.paddr[4:2];
  assign wr   = apb_req.psel && apb_req.penable && apb_req.pwrite;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dir_q <= '0; out_q <= '0; in_s1 <= '0; in_s2 <= '0;
    end else begin
      in_s1 <= 64'(gpio_in);
      in_s2 <= in_s1;
      if (wr) begin
        case (widx)
          3'd0: dir_q[31:0]  <= apb_req.pwdata;
          3'd1: dir_q[63:32] <= apb_req.pwdata;
          3'd2: out_q[31:0]  <= apb_req.pwdata;
          3'd3: out_q[63:32] <= apb_req.pwdata;
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    apb_rsp = '{prdata: 32'h0, pready: 1'b1, pslverr: 1'b0};
    case (widx)
      3'd0: apb_rsp.prdata = dir_q[31:0];
      3'd1: apb_rsp.prdata = dir_q[63:32];
      3'd2: apb_rsp.prdata = out_q[31:0];
      3'd3: apb_rsp.prdata = out_q[63:32];
      3'd4: apb_rsp.prdata = in_s2[31:0];
      3'd5: apb_rsp.prdata = in_s2[63:32];
      default: apb_rsp.pslverr = 1'b1;
    endcase
  end

  assign gpio_out = out_q[N-1:0];
  assign gpio_oe  = dir_q[N-1:0];
endmodule
