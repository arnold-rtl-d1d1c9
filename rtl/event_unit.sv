// Event unit: turns event pulses into CPU interrupt requests. Line map:
// 0..15 the eFPGA events (after their clock-domain synchronisers), 16 the
// timer, 17.. the uDMA end-of-transfer events. A pulse sets its PENDING
// bit; irq = PENDING & MASK is a level held until software clears the bit.
// Registers (design choice): 0x00 MASK, 0x04 PENDING (write 1 to clear),
// 0x08 SET (write 1 to raise a software event). An event arriving in the
// same cycle as its clear wins.
module event_unit
  import arnold_pkg::*;
#(
  parameter int unsigned N = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  apb_req_t     apb_req,
  output apb_rsp_t     apb_rsp,
  input  logic [N-1:0] events,
  output logic [N-1:0] irq
);
  logic [N-1:0] mask_q, pend_q, clr, set;
  logic wr;

  assign wr  = apb_req.psel && apb_req.penable && apb_req.pwrite;
  assign clr = (wr && apb_req.paddr[3:2] == 2'd1) ? N'(apb_req.pwdata) : '0;
  assign set = (wr && apb_req.paddr[3:2] == 2'd2) ? N'(apb_req.pwdata) : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mask_q <= '0; pend_q <= '0;
    end else begin
      pend_q <= (pend_q & ~clr) | events | set;
      if (wr && apb_req.paddr[3:2] == 2'd0) mask_q <= N'(apb_req.pwdata);
    end
  end

  assign irq = pend_q & mask_q;

  always_comb begin
    apb_rsp = '{prdata: 32'h0, pready: 1'b1, pslverr: 1'b0};
    case (apb_req.paddr[3:2])
      2'd0: apb_rsp.prdata = 32'(mask_q);
      2'd1: apb_rsp.prdata = 32'(pend_q);
      2'd2: apb_rsp.prdata = 32'h0;
      default: apb_rsp.pslverr = 1'b1;
    endcase
  end
endmodule
