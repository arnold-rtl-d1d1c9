// Arnold SoC top level: a RISC-V microcontroller whose memory system,
// peripheral DMA, control bus and pads are opened up to an embedded FPGA.
//
// Built here (three clock domains, as in the paper):
//  * clk_mcu: PMP in front of the core's fetch and data ports; the crossbar
//    joining 9 masters (core fetch, core data, uDMA RX, uDMA TX, JTAG, four
//    eFPGA memory ports) to 4 word-interleaved 112 kB banks, 2 private
//    32 kB banks, the boot ROM and the APB bridge; the APB peripherals (SoC
//    control with pad multiplexers, GPIO, timer, event unit, uDMA registers,
//    eFPGA user APB, eFPGA programming port); the uDMA core.
//  * clk_peri: the UART on uDMA channel 0, behind dual-clock FIFOs.
//  * clk_efpga: generated from the eFPGA FLL clock, a divided FLL clock or
//    one of four pad clocks; drives the eFPGA side of the four memory
//    bridges, the uDMA channel 1 interface, the APB configuration bridge,
//    the 16 event synchronisers and the two vector MAC units.
// Not built, and therefore ports of this module: the core itself (fetch and
// data TCDM ports, PMP CSR port, privilege, interrupt lines), the JTAG bus
// master, the eFPGA macro (every eFPGA-side pin group: fpga_*/mac_*), its
// configuration block (fcb_apb_*), the FLLs (the three clocks are inputs),
// the other uDMA peripherals (their pad signals ext_periph_*) and the pad
// cells (pad_*).
// Fixed assignments of this design: UART TX on pad 0 and RX on pad 1 in
// the peripheral pad function; pads 37..40 are the eFPGA's GPIO clock
// sources; interrupt lines 0-15 eFPGA events, 16 timer, 17/18 uDMA ch0
// RX/TX done, 19/20 uDMA ch1 (eFPGA) RX/TX done. The whole eFPGA subsystem,
// both sides of its clock crossings, is reset by rst_n and the FPGA_CTRL
// reset bit of the SoC control registers. Pad inputs are fanned out
// unchanged to the eFPGA (fpga_gpio_in) and to the external peripherals
// (ext_periph_in), so those outputs follow pad_in directly by design.
module arnold_soc
  import arnold_pkg::*;
(
  input  logic        clk_mcu,
  input  logic        clk_peri,
  input  logic        clk_efpga_fll,
  input  logic        rst_n,
  // core (not built)
  input  logic        cpu_priv_m,
  input  logic        cpu_csr_we,
  input  logic [11:0] cpu_csr_addr,
  input  logic [31:0] cpu_csr_wdata,
  output logic [31:0] cpu_csr_rdata,
  input  logic        cpu_i_req,
  output logic        cpu_i_gnt,
  input  tcdm_req_t   cpu_i_reqd,
  output logic        cpu_i_rvalid,
  output tcdm_rsp_t   cpu_i_rsp,
  input  logic        cpu_d_req,
  output logic        cpu_d_gnt,
  input  tcdm_req_t   cpu_d_reqd,
  output logic        cpu_d_rvalid,
  output tcdm_rsp_t   cpu_d_rsp,
  output logic [31:0] cpu_irq,
  // JTAG bus master (not built)
  input  logic        jtag_req,
  output logic        jtag_gnt,
  input  tcdm_req_t   jtag_reqd,
  output logic        jtag_rvalid,
  output tcdm_rsp_t   jtag_rsp,
  // eFPGA configuration block (not built)
  output apb_req_t    fcb_apb_req,
  input  apb_rsp_t    fcb_apb_rsp,
  // eFPGA macro pins (macro not built)
  output logic        clk_efpga,
  output logic        fpga_rst_n,
  input  logic        fpga_mem_req    [4],
  output logic        fpga_mem_gnt    [4],
  input  tcdm_req_t   fpga_mem_reqd   [4],
  output logic        fpga_mem_rvalid [4],
  output tcdm_rsp_t   fpga_mem_rsp    [4],
  input  logic        fpga_dma_rx_valid,
  input  logic [31:0] fpga_dma_rx_data,
  output logic        fpga_dma_rx_ready,
  output logic        fpga_dma_tx_valid,
  output logic [31:0] fpga_dma_tx_data,
  input  logic        fpga_dma_tx_ready,
  output logic [31:0] fpga_dma_cfg,
  output logic        fpga_apb_psel,
  output logic        fpga_apb_penable,
  output logic        fpga_apb_pwrite,
  output logic [6:0]  fpga_apb_paddr,
  output logic [31:0] fpga_apb_pwdata,
  input  logic [31:0] fpga_apb_prdata,
  input  logic        fpga_apb_pready,
  input  logic [15:0] fpga_events,
  input  logic [NUM_PADS-1:0] fpga_gpio_out,
  input  logic [NUM_PADS-1:0] fpga_gpio_oe,
  output logic [NUM_PADS-1:0] fpga_gpio_in,
  // MAC pins, two units
  input  logic        mac_en      [2],
  input  logic        mac_clr     [2],
  input  logic [1:0]  mac_mode    [2],
  input  logic        mac_sel_a   [2],
  input  logic        mac_sel_b   [2],
  input  logic [31:0] mac_op_a    [2],
  input  logic [31:0] mac_op_b    [2],
  input  logic [1:0]  mac_buf_we  [2],
  input  logic [8:0]  mac_buf_waddr [2],
  input  logic [31:0] mac_buf_wdata [2],
  input  logic [8:0]  mac_buf_raddr_a [2],
  input  logic [8:0]  mac_buf_raddr_b [2],
  output logic [31:0] mac_acc     [2][4],
  // other uDMA peripherals (not built): their pad-function signals
  input  logic [NUM_PADS-1:0] ext_periph_out,
  input  logic [NUM_PADS-1:0] ext_periph_oe,
  output logic [NUM_PADS-1:0] ext_periph_in,
  // pads
  output logic [NUM_PADS-1:0] pad_out,
  output logic [NUM_PADS-1:0] pad_oe,
  input  logic [NUM_PADS-1:0] pad_in
);
  localparam int unsigned NCH = 2;

  // ---------------- crossbar ----------------
  logic      m_req [N_MASTERS], m_gnt [N_MASTERS], m_rvalid [N_MASTERS];
  tcdm_req_t m_reqd [N_MASTERS];
  tcdm_rsp_t m_rsp [N_MASTERS];
  logic      s_req [N_SLAVES], s_gnt [N_SLAVES];
  tcdm_req_t s_reqd [N_SLAVES];
  tcdm_rsp_t s_rsp [N_SLAVES];

  tcdm_xbar u_xbar (
    .clk(clk_mcu), .rst_n(rst_n),
    .m_req, .m_gnt, .m_reqd, .m_rvalid, .m_rsp,
    .s_req, .s_gnt, .s_reqd, .s_rsp
  );

  // ---------------- PMP (core side) ----------------
  pmp_unit u_pmp (
    .clk(clk_mcu), .rst_n(rst_n), .priv_m(cpu_priv_m),
    .csr_we(cpu_csr_we), .csr_addr(cpu_csr_addr), .csr_wdata(cpu_csr_wdata), .csr_rdata(cpu_csr_rdata),
    .i_req(cpu_i_req), .i_gnt(cpu_i_gnt), .i_reqd(cpu_i_reqd), .i_rvalid(cpu_i_rvalid), .i_rsp(cpu_i_rsp),
    .d_req(cpu_d_req), .d_gnt(cpu_d_gnt), .d_reqd(cpu_d_reqd), .d_rvalid(cpu_d_rvalid), .d_rsp(cpu_d_rsp),
    .xi_req(m_req[M_CPU_I]), .xi_gnt(m_gnt[M_CPU_I]), .xi_reqd(m_reqd[M_CPU_I]),
    .xi_rvalid(m_rvalid[M_CPU_I]), .xi_rsp(m_rsp[M_CPU_I]),
    .xd_req(m_req[M_CPU_D]), .xd_gnt(m_gnt[M_CPU_D]), .xd_reqd(m_reqd[M_CPU_D]),
    .xd_rvalid(m_rvalid[M_CPU_D]), .xd_rsp(m_rsp[M_CPU_D])
  );

  assign m_req[M_JTAG]  = jtag_req;
  assign m_reqd[M_JTAG] = jtag_reqd;
  assign jtag_gnt       = m_gnt[M_JTAG];
  assign jtag_rvalid    = m_rvalid[M_JTAG];
  assign jtag_rsp       = m_rsp[M_JTAG];

  // ---------------- memories ----------------
  for (genvar b = 0; b < ILV_BANKS; b++) begin : g_ilv
    mem_bank #(.NUM_CUTS(ILV_CUTS), .STRIDE_SHIFT(2), .BASE(ILV_BASE)) u_bank (
      .clk(clk_mcu), .rst_n(rst_n),
      .req(s_req[S_ILV0 + b]), .gnt(s_gnt[S_ILV0 + b]), .reqd(s_reqd[S_ILV0 + b]), .rsp(s_rsp[S_ILV0 + b])
    );
  end

  mem_bank #(.NUM_CUTS(PRIV_CUTS), .STRIDE_SHIFT(0), .BASE(PRIV0_BASE)) u_priv0 (
    .clk(clk_mcu), .rst_n(rst_n),
    .req(s_req[S_PRIV0]), .gnt(s_gnt[S_PRIV0]), .reqd(s_reqd[S_PRIV0]), .rsp(s_rsp[S_PRIV0])
  );
  mem_bank #(.NUM_CUTS(PRIV_CUTS), .STRIDE_SHIFT(0), .BASE(PRIV1_BASE)) u_priv1 (
    .clk(clk_mcu), .rst_n(rst_n),
    .req(s_req[S_PRIV1]), .gnt(s_gnt[S_PRIV1]), .reqd(s_reqd[S_PRIV1]), .rsp(s_rsp[S_PRIV1])
  );
  boot_rom u_rom (
    .clk(clk_mcu), .rst_n(rst_n),
    .req(s_req[S_ROM]), .gnt(s_gnt[S_ROM]), .reqd(s_reqd[S_ROM]), .rsp(s_rsp[S_ROM])
  );

  // ---------------- APB ----------------
  apb_req_t apb_req [N_APB];
  apb_rsp_t apb_rsp [N_APB];

  apb_bridge u_apb (
    .clk(clk_mcu), .rst_n(rst_n),
    .req(s_req[S_APB]), .gnt(s_gnt[S_APB]), .reqd(s_reqd[S_APB]), .rsp(s_rsp[S_APB]),
    .apb_req, .apb_rsp
  );

  assign fcb_apb_req    = apb_req[P_FCB];
  assign apb_rsp[P_FCB] = fcb_apb_rsp;

  logic [NUM_PADS-1:0] gpio_out, gpio_oe, gpio_in, periph_out, periph_oe, periph_in;
  logic [2:0] fpga_clksel;
  logic [7:0] fpga_clkdiv;
  logic       fpga_rst_bit;

  soc_ctrl u_socctrl (
    .clk(clk_mcu), .rst_n(rst_n), .apb_req(apb_req[P_SOCCTRL]), .apb_rsp(apb_rsp[P_SOCCTRL]),
    .gpio_out, .gpio_oe, .gpio_in, .periph_out, .periph_oe, .periph_in,
    .fpga_out(fpga_gpio_out), .fpga_oe(fpga_gpio_oe), .fpga_in(fpga_gpio_in),
    .pad_out, .pad_oe, .pad_in,
    .fpga_clksel, .fpga_clkdiv, .fpga_rst_n(fpga_rst_bit)
  );

  apb_gpio u_gpio (
    .clk(clk_mcu), .rst_n(rst_n), .apb_req(apb_req[P_GPIO]), .apb_rsp(apb_rsp[P_GPIO]),
    .gpio_out, .gpio_oe, .gpio_in
  );

  logic timer_irq;
  apb_timer u_timer (
    .clk(clk_mcu), .rst_n(rst_n), .apb_req(apb_req[P_TIMER]), .apb_rsp(apb_rsp[P_TIMER]), .irq(timer_irq)
  );

  logic [15:0]    fpga_evt_m;
  logic [NCH-1:0] evt_rx, evt_tx;
  logic [31:0]    events;
  assign events = {11'h0, evt_tx[1], evt_rx[1], evt_tx[0], evt_rx[0], timer_irq, fpga_evt_m};

  event_unit u_event (
    .clk(clk_mcu), .rst_n(rst_n), .apb_req(apb_req[P_EVENT]), .apb_rsp(apb_rsp[P_EVENT]),
    .events, .irq(cpu_irq)
  );

  // ---------------- uDMA ----------------
  logic        ch_rx_valid [NCH], ch_rx_ready [NCH], ch_tx_valid [NCH], ch_tx_ready [NCH];
  logic [31:0] ch_rx_data [NCH], ch_tx_data [NCH], ch_cfg [NCH];
  logic [NCH-1:0] ch_en;

  udma_core #(.NCH(NCH)) u_udma (
    .clk(clk_mcu), .rst_n(rst_n), .apb_req(apb_req[P_UDMA]), .apb_rsp(apb_rsp[P_UDMA]),
    .rx_req(m_req[M_UDMA_RX]), .rx_gnt(m_gnt[M_UDMA_RX]), .rx_reqd(m_reqd[M_UDMA_RX]),
    .tx_req(m_req[M_UDMA_TX]), .tx_gnt(m_gnt[M_UDMA_TX]), .tx_reqd(m_reqd[M_UDMA_TX]),
    .tx_rvalid(m_rvalid[M_UDMA_TX]), .tx_rsp(m_rsp[M_UDMA_TX]),
    .ch_rx_valid, .ch_rx_data, .ch_rx_ready, .ch_tx_valid, .ch_tx_data, .ch_tx_ready,
    .ch_cfg, .ch_en, .evt_rx, .evt_tx
  );

  // channel 0: UART in the peripheral clock domain
  logic       u_tx_valid, u_tx_ready, u_rx_valid, uart_tx;
  logic [7:0] u_tx_data, u_rx_data;
  logic [31:0] u_tx_word, u_rx_word;
  logic       u_rx_fifo_ready;

  dc_fifo #(.WIDTH(32), .DEPTH(4)) u_uart_tx_fifo (
    .wclk(clk_mcu), .wrst_n(rst_n), .w_valid(ch_tx_valid[0]), .w_data(ch_tx_data[0]), .w_ready(ch_tx_ready[0]),
    .rclk(clk_peri), .rrst_n(rst_n), .r_valid(u_tx_valid), .r_data(u_tx_word), .r_ready(u_tx_ready && ch_en[0])
  );
  assign u_tx_data = u_tx_word[7:0];

  udma_uart u_uart (
    .clk(clk_peri), .rst_n(rst_n), .cfg(ch_cfg[0]),
    .tx_valid(u_tx_valid && ch_en[0]), .tx_data(u_tx_data), .tx_ready(u_tx_ready),
    .rx_valid(u_rx_valid), .rx_data(u_rx_data),
    .uart_tx(uart_tx), .uart_rx(periph_in[1])
  );
  assign u_rx_word = {24'h0, u_rx_data};

  dc_fifo #(.WIDTH(32), .DEPTH(4)) u_uart_rx_fifo (
    .wclk(clk_peri), .wrst_n(rst_n), .w_valid(u_rx_valid && ch_en[0]), .w_data(u_rx_word), .w_ready(u_rx_fifo_ready),
    .rclk(clk_mcu), .rrst_n(rst_n), .r_valid(ch_rx_valid[0]), .r_data(ch_rx_data[0]), .r_ready(ch_rx_ready[0])
  );

  always_comb begin
    periph_out    = ext_periph_out;
    periph_oe     = ext_periph_oe;
    periph_out[0] = uart_tx;
    periph_oe[0]  = 1'b1;
    periph_oe[1]  = 1'b0;
    ext_periph_in = periph_in;
  end

  // ---------------- eFPGA subsystem ----------------
  logic rst_fpga_n;
  assign rst_fpga_n = rst_n && fpga_rst_bit;
  assign fpga_rst_n = rst_fpga_n;

  efpga_clk_gen u_clkgen (
    .clk_fll(clk_efpga_fll), .rst_n(rst_n), .clk_gpio(pad_in[40:37]),
    .sel(fpga_clksel), .div(fpga_clkdiv), .clk_out(clk_efpga)
  );

  for (genvar p = 0; p < 4; p++) begin : g_fmem
    efpga_tcdm_bridge u_bridge (
      .clk_f(clk_efpga), .rst_f_n(rst_fpga_n),
      .f_req(fpga_mem_req[p]), .f_gnt(fpga_mem_gnt[p]), .f_reqd(fpga_mem_reqd[p]),
      .f_rvalid(fpga_mem_rvalid[p]), .f_rsp(fpga_mem_rsp[p]),
      .clk_m(clk_mcu), .rst_m_n(rst_fpga_n),
      .m_req(m_req[M_FPGA0 + p]), .m_gnt(m_gnt[M_FPGA0 + p]), .m_reqd(m_reqd[M_FPGA0 + p]),
      .m_rvalid(m_rvalid[M_FPGA0 + p]), .m_rsp(m_rsp[M_FPGA0 + p])
    );
  end

  efpga_udma_if u_fdma (
    .clk_f(clk_efpga), .rst_f_n(rst_fpga_n),
    .f_rx_valid(fpga_dma_rx_valid), .f_rx_data(fpga_dma_rx_data), .f_rx_ready(fpga_dma_rx_ready),
    .f_tx_valid(fpga_dma_tx_valid), .f_tx_data(fpga_dma_tx_data), .f_tx_ready(fpga_dma_tx_ready),
    .f_cfg(fpga_dma_cfg),
    .clk_m(clk_mcu), .rst_m_n(rst_fpga_n),
    .u_rx_valid(ch_rx_valid[1]), .u_rx_data(ch_rx_data[1]), .u_rx_ready(ch_rx_ready[1]),
    .u_tx_valid(ch_tx_valid[1]), .u_tx_data(ch_tx_data[1]), .u_tx_ready(ch_tx_ready[1]),
    .u_cfg(ch_cfg[1])
  );

  efpga_apb_cdc u_fapb (
    .clk_m(clk_mcu), .rst_m_n(rst_fpga_n), .apb_req(apb_req[P_FPGA]), .apb_rsp(apb_rsp[P_FPGA]),
    .clk_f(clk_efpga), .rst_f_n(rst_fpga_n),
    .f_psel(fpga_apb_psel), .f_penable(fpga_apb_penable), .f_pwrite(fpga_apb_pwrite),
    .f_paddr(fpga_apb_paddr), .f_pwdata(fpga_apb_pwdata), .f_prdata(fpga_apb_prdata), .f_pready(fpga_apb_pready)
  );

  event_sync #(.N(16)) u_evsync (
    .clk_f(clk_efpga), .rst_f_n(rst_fpga_n), .f_evt(fpga_events),
    .clk_m(clk_mcu), .rst_m_n(rst_n), .m_evt(fpga_evt_m)
  );

  for (genvar u = 0; u < 2; u++) begin : g_mac
    vec_mac #(.BUF_WORDS(512)) u_mac (
      .clk(clk_efpga), .rst_n(rst_fpga_n),
      .en(mac_en[u]), .clr(mac_clr[u]), .mode(mac_mode[u]), .sel_a(mac_sel_a[u]), .sel_b(mac_sel_b[u]),
      .op_a(mac_op_a[u]), .op_b(mac_op_b[u]),
      .buf_we(mac_buf_we[u]), .buf_waddr(mac_buf_waddr[u]), .buf_wdata(mac_buf_wdata[u]),
      .buf_raddr_a(mac_buf_raddr_a[u]), .buf_raddr_b(mac_buf_raddr_b[u]),
      .acc(mac_acc[u])
    );
  end
endmodule
