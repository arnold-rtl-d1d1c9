// eFPGA APB configuration and control interface. The CPU reaches registers
// of the design mapped in the eFPGA through an APB slave in the MCU clock
// (clk_m); the eFPGA sees a 75-pin APB master port in its own clock (clk_f):
// 7-bit address, 32-bit write and read data, write, ready, select, enable.
//
// An MCU-side access (access phase) pushes {write, address, data} into a
// request dual-clock FIFO once and then waits, pready low. On the eFPGA
// side an idle engine pops the request and runs a setup and an access phase
// until f_pready, then pushes the read data into a response FIFO. Its
// arrival on the MCU side completes the MCU-side access (pready high for
// one cycle). Latency is a few cycles of each clock plus the synchroniser
// stages. The paper names one 32 bit x 4 word FIFO; a request needs 40
// bits, so this design uses a 40-bit request FIFO and a 32-bit read FIFO.
module efpga_apb_cdc
  import arnold_pkg::*;
#(
  parameter int unsigned AW = 7
) (
  input  logic          clk_m,
  input  logic          rst_m_n,
  input  apb_req_t      apb_req,
  output apb_rsp_t      apb_rsp,
  input  logic          clk_f,
  input  logic          rst_f_n,
  output logic          f_psel,
  output logic          f_penable,
  output logic          f_pwrite,
  output logic [AW-1:0] f_paddr,
  output logic [31:0]   f_pwdata,
  input  logic [31:0]   f_prdata,
  input  logic          f_pready
);
  localparam int unsigned QW = 1 + AW + 32;

  logic          sent_q;
  logic          rq_wvalid, rq_wready, rq_rvalid, rq_rready;
  logic [QW-1:0] rq_rdata;
  logic          rs_wvalid, rs_wready, rs_rvalid;
  logic [31:0]   rs_rdata;

  // MCU side
  assign rq_wvalid = apb_req.psel && apb_req.penable && !sent_q;
  always_ff @(posedge clk_m or negedge rst_m_n) begin
    if (!rst_m_n) sent_q <= 1'b0;
    else if (rs_rvalid) sent_q <= 1'b0;
    else if (rq_wvalid && rq_wready) sent_q <= 1'b1;
  end
  assign apb_rsp = '{prdata: rs_rdata, pready: rs_rvalid && sent_q, pslverr: 1'b0};

  dc_fifo #(.WIDTH(QW), .DEPTH(4)) u_req_fifo (
    .wclk(clk_m), .wrst_n(rst_m_n), .w_valid(rq_wvalid),
    .w_data({apb_req.pwrite, apb_req.paddr[AW-1:0], apb_req.pwdata}), .w_ready(rq_wready),
    .rclk(clk_f), .rrst_n(rst_f_n), .r_valid(rq_rvalid), .r_data(rq_rdata), .r_ready(rq_rready)
  );

  dc_fifo #(.WIDTH(32), .DEPTH(4)) u_rsp_fifo (
    .wclk(clk_f), .wrst_n(rst_f_n), .w_valid(rs_wvalid), .w_data(f_prdata), .w_ready(rs_wready),
    .rclk(clk_m), .rrst_n(rst_m_n), .r_valid(rs_rvalid), .r_data(rs_rdata), .r_ready(sent_q)
  );

  // eFPGA side
  typedef enum logic [1:0] {F_IDLE, F_SETUP, F_ACCESS} fstate_e;
  fstate_e fst_q;

  assign rq_rready = (fst_q == F_IDLE) && rq_rvalid;
  assign rs_wvalid = (fst_q == F_ACCESS) && f_pready;
  assign f_psel    = (fst_q != F_IDLE);
  assign f_penable = (fst_q == F_ACCESS);

  always_ff @(posedge clk_f or negedge rst_f_n) begin
    if (!rst_f_n) begin
      fst_q <= F_IDLE; f_pwrite <= 1'b0; f_paddr <= '0; f_pwdata <= '0;
    end else begin
      case (fst_q)
        F_IDLE:   if (rq_rvalid) begin
                    fst_q <= F_SETUP;
                    {f_pwrite, f_paddr, f_pwdata} <= rq_rdata;
                  end
        F_SETUP:  fst_q <= F_ACCESS;
        F_ACCESS: if (f_pready && rs_wready) fst_q <= F_IDLE;
        default:  fst_q <= F_IDLE;
      endcase
    end
  end
endmodule
