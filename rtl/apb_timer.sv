// 32-bit timer on the APB bus. The paper only names a timer; this one is
// the plainest useful form. Registers:
//   0x00 CTRL  bit 0 enable, bits [15:8] prescaler P (count every P+1 cycles)
//   0x04 COUNT current value (writable)
//   0x08 CMP   compare value
// When COUNT equals CMP on a count step, irq pulses for one cycle and COUNT
// restarts from 0, so the period is (CMP+1)*(P+1) cycles.
module apb_timer
  import arnold_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  apb_req_t apb_req,
  output apb_rsp_t apb_rsp,
  output logic     irq
);
  logic        en_q;
  logic [7:0]  pre_q, pcnt_q;
  logic [31:0] cnt_q, cmp_q;
  logic        wr, tick;

  assign wr   = apb_req.psel && apb_req.penable && apb_req.pwrite;
  assign tick = en_q && (pcnt_q == pre_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en_q <= 1'b0; pre_q <= '0; pcnt_q <= '0; cnt_q <= '0; cmp_q <= '1; irq <= 1'b0;
    end else begin
      irq <= 1'b0;
      if (en_q) pcnt_q <= tick ? 8'd0 : pcnt_q + 8'd1;
      if (tick) begin
        if (cnt_q == cmp_q) begin
          cnt_q <= '0;
          irq   <= 1'b1;
        end else begin
          cnt_q <= cnt_q + 32'd1;
        end
      end
      if (wr) begin
        case (apb_req.paddr[3:2])
          2'd0: begin en_q <= apb_req.pwdata[0]; pre_q <= apb_req.pwdata[15:8]; pcnt_q <= '0; end
          2'd1: cnt_q <= apb_req.pwdata;
          2'd2: cmp_q <= apb_req.pwdata;
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    apb_rsp = '{prdata: 32'h0, pready: 1'b1, pslverr: 1'b0};
    case (apb_req.paddr[3:2])
      2'd0: apb_rsp.prdata = {16'h0, pre_q, 7'h0, en_q};
      2'd1: apb_rsp.prdata = cnt_q;
      2'd2: apb_rsp.prdata = cmp_q;
      default: apb_rsp.pslverr = 1'b1;
    endcase
  end
endmodule
