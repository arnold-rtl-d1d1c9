// APB bridge and decoder ("APB bus"): a crossbar slave that turns each word
// access into one APB transfer and routes it to one of NP peripherals
// selected by paddr[15:12] (4 kB per peripheral; the split is this design's
// choice).
//
// Sequence: IDLE sees req, registers the payload and drives the setup phase
// (psel); the next cycle raises penable (access phase) and waits for the
// selected slave's pready. In the cycle pready arrives the bridge returns
// gnt to the crossbar, and the registered prdata/pslverr form the response
// one cycle later. A select outside 0..NP-1 completes at once with err = 1.
// Minimum: 3 cycles from req to gnt.
module apb_bridge
  import arnold_pkg::*;
#(
  parameter int unsigned NP = N_APB
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req,
  output logic      gnt,
  input  tcdm_req_t reqd,
  output tcdm_rsp_t rsp,
  output apb_req_t  apb_req [NP],
  input  apb_rsp_t  apb_rsp [NP]
);
  typedef enum logic [1:0] {IDLE, SETUP, ACCESS} state_e;
  state_e    state_q;
  tcdm_req_t r_q;
  logic [3:0] psel_idx;
  logic       bad;
  apb_rsp_t   cur;

  assign psel_idx = r_q.addr[15:12];
  assign bad      = (int'(psel_idx) >= NP);
  assign cur      = bad ? '{prdata: 32'h0, pready: 1'b1, pslverr: 1'b1} : apb_rsp[psel_idx[$clog2(NP)-1:0]];

  always_comb begin
    for (int p = 0; p < NP; p++) begin
      apb_req[p].paddr   = r_q.addr;
      apb_req[p].pwrite  = r_q.we;
      apb_req[p].pwdata  = r_q.wdata;
      apb_req[p].psel    = (state_q != IDLE) && !bad && (int'(psel_idx) == p);
      apb_req[p].penable = (state_q == ACCESS);
    end
    gnt = (state_q == ACCESS) && cur.pready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= IDLE; r_q <= '0; rsp <= '0;
    end else begin
      case (state_q)
        IDLE:   if (req) begin state_q <= SETUP; r_q <= reqd; end
        SETUP:  state_q <= ACCESS;
        ACCESS: if (cur.pready) begin
                  state_q   <= IDLE;
                  rsp.rdata <= cur.prdata;
                  rsp.err   <= cur.pslverr;
                end
        default: state_q <= IDLE;
      endcase
    end
  end
endmodule
