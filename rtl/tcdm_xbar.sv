// System crossbar ("XBAR bus"): a single-cycle-latency logarithmic
// interconnect joining NM masters to the SRAM banks, the boot ROM and the
// APB bridge.
//
// Every master's address is decoded to a slave (arnold_pkg::addr_to_slave;
// word-level interleaving on address bits [3:2] over the 448 kB region).
// Each slave has its own round-robin arbiter, as in the paper. Once a
// master has been shown to a slave that holds back gnt (the APB bridge
// takes several cycles) the choice is kept until that slave grants, so a
// slave always answers the request it accepted. gnt reaches the chosen
// master combinationally; the slave's response comes one cycle later and
// is routed back by the master index registered at the grant. A request to
// an unmapped address is granted at once and answered with err = 1.
// Masters must hold req and the payload stable until gnt (asserted below).
module tcdm_xbar
  import arnold_pkg::*;
#(
  parameter int unsigned NM = N_MASTERS,
  parameter int unsigned NS = N_SLAVES
) (
  input  logic      clk,
  input  logic      rst_n,
  // masters
  input  logic      m_req    [NM],
  output logic      m_gnt    [NM],
  input  tcdm_req_t m_reqd   [NM],
  output logic      m_rvalid [NM],
  output tcdm_rsp_t m_rsp    [NM],
  // slaves
  output logic      s_req    [NS],
  input  logic      s_gnt    [NS],
  output tcdm_req_t s_reqd   [NS],
  input  tcdm_rsp_t s_rsp    [NS]
);
  localparam int unsigned MW = $clog2(NM);

  logic [3:0]    tgt [NM];
  logic          hit [NM];
  logic [NM-1:0] want [NS];
  logic          arb_valid [NS];
  logic [MW-1:0] arb_idx [NS];
  logic [MW-1:0] sel [NS];
  logic          hold_q [NS];
  logic [MW-1:0] hold_idx_q [NS];
  logic          rvalid_q [NS];
  logic [MW-1:0] rmaster_q [NS];
  logic [NM-1:0] err_q;

  always_comb begin
    for (int m = 0; m < NM; m++) tgt[m] = addr_to_slave(m_reqd[m].addr, hit[m]);
    for (int s = 0; s < NS; s++)
      for (int m = 0; m < NM; m++)
        want[s][m] = m_req[m] && hit[m] && (int'(tgt[m]) == s);
  end

  for (genvar s = 0; s < NS; s++) begin : g_slv
    rr_arbiter #(.N(NM)) u_arb (
      .clk   (clk),
      .rst_n (rst_n),
      .req   (want[s]),
      .adv   (s_gnt[s] && !hold_q[s]),
      .valid (arb_valid[s]),
      .idx   (arb_idx[s])
    );
    assign sel[s]    = hold_q[s] ? hold_idx_q[s] : arb_idx[s];
    assign s_req[s]  = hold_q[s] ? 1'b1 : arb_valid[s];
    assign s_reqd[s] = m_reqd[sel[s]];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        hold_q[s] <= 1'b0; hold_idx_q[s] <= '0;
        rvalid_q[s] <= 1'b0; rmaster_q[s] <= '0;
      end else begin
        hold_q[s]     <= s_req[s] && !s_gnt[s];
        hold_idx_q[s] <= sel[s];
        rvalid_q[s]   <= s_req[s] && s_gnt[s];
        rmaster_q[s]  <= sel[s];
      end
    end
  end

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      m_gnt[m]    = m_req[m] && !hit[m];   // unmapped: error slave
      m_rvalid[m] = err_q[m];
      m_rsp[m]    = '{rdata: 32'h0, err: err_q[m]};
    end
    for (int s = 0; s < NS; s++) begin
      if (s_req[s] && s_gnt[s]) m_gnt[sel[s]] = 1'b1;
      if (rvalid_q[s]) begin
        m_rvalid[rmaster_q[s]] = 1'b1;
        m_rsp[rmaster_q[s]]    = s_rsp[s];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) err_q <= '0;
    else for (int m = 0; m < NM; m++) err_q[m] <= m_req[m] && !hit[m];
  end

  // Protocol rule: a request stays up, unchanged, until it is granted.
  for (genvar m = 0; m < NM; m++) begin : g_chk
    property p_hold;
      @(posedge clk) disable iff (!rst_n) (m_req[m] && !m_gnt[m]) |=> (m_req[m] && $stable(m_reqd[m]));
    endproperty
    a_hold: assert property (p_hold) else $error("tcdm_xbar: master %0d dropped or changed an ungranted request", m);
  end
endmodule
