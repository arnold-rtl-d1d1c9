// eFPGA memory interface port (one of four). Lets logic in the eFPGA,
// clocked by clk_f, act as a master on the SoC crossbar, clocked by clk_m.
//
// eFPGA side (clk_f): TCDM-style req/gnt, where gnt simply means the
// request FIFO took the request; every request, read or write, later
// produces exactly one response (f_rvalid for one cycle, with rdata and
// err), in order. MCU side (clk_m): the head of the request FIFO is checked
// against the SRAM range. In range, it is issued to the crossbar and held
// until gnt; the crossbar's response is pushed into the response FIFO. Out
// of range (boot ROM, APB, unmapped) it is dropped and answered with
// err = 1: the paper restricts the eFPGA to the SRAM banks for security.
// One request is in flight on the MCU side, and a request is only issued
// when the response FIFO has room, so no response can be lost.
// The paper's FIFOs are 32 bit x 4 words; here the request FIFO is 69 bits
// wide (address, write flag, byte enables, data) and the response FIFO 33
// bits (data, error), both 4 deep.
module efpga_tcdm_bridge
  import arnold_pkg::*;
#(
  parameter logic [31:0] LO    = SRAM_BASE,
  parameter logic [31:0] HI    = SRAM_END,
  parameter int unsigned DEPTH = 4
) (
  input  logic      clk_f,
  input  logic      rst_f_n,
  input  logic      f_req,
  output logic      f_gnt,
  input  tcdm_req_t f_reqd,
  output logic      f_rvalid,
  output tcdm_rsp_t f_rsp,
  input  logic      clk_m,
  input  logic      rst_m_n,
  output logic      m_req,
  input  logic      m_gnt,
  output tcdm_req_t m_reqd,
  input  logic      m_rvalid,
  input  tcdm_rsp_t m_rsp
);
  logic      q_valid, q_ready;
  tcdm_req_t q_data;
  logic      r_wvalid, r_wready;
  tcdm_rsp_t r_wdata;
  logic      busy_q, allowed;

  dc_fifo #(.WIDTH($bits(tcdm_req_t)), .DEPTH(DEPTH)) u_req_fifo (
    .wclk(clk_f), .wrst_n(rst_f_n), .w_valid(f_req), .w_data(f_reqd), .w_ready(f_gnt),
    .rclk(clk_m), .rrst_n(rst_m_n), .r_valid(q_valid), .r_data(q_data), .r_ready(q_ready)
  );

  dc_fifo #(.WIDTH($bits(tcdm_rsp_t)), .DEPTH(DEPTH)) u_rsp_fifo (
    .wclk(clk_m), .wrst_n(rst_m_n), .w_valid(r_wvalid), .w_data(r_wdata), .w_ready(r_wready),
    .rclk(clk_f), .rrst_n(rst_f_n), .r_valid(f_rvalid), .r_data(f_rsp), .r_ready(1'b1)
  );

  assign allowed = (q_data.addr >= LO) && (q_data.addr < HI);
  assign m_req   = q_valid && allowed && !busy_q && r_wready;
  assign m_reqd  = q_data;
  assign q_ready = (m_req && m_gnt) || (q_valid && !allowed && !busy_q && r_wready);

  always_comb begin
    r_wvalid = 1'b0;
    r_wdata  = '{rdata: 32'h0, err: 1'b1};
    if (busy_q && m_rvalid) begin
      r_wvalid = 1'b1;
      r_wdata  = m_rsp;
    end else if (q_valid && !allowed && !busy_q) begin
      r_wvalid = 1'b1;
    end
  end

  always_ff @(posedge clk_m or negedge rst_m_n) begin
    if (!rst_m_n) busy_q <= 1'b0;
    else if (m_req && m_gnt) busy_q <= 1'b1;
    else if (m_rvalid) busy_q <= 1'b0;
  end
endmodule
