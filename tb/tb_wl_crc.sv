// Workload testbench: the CRC accelerator. The fabric holds a CRC-32 engine
// (reflected polynomial 0xEDB88320, initial value all ones, final
// inversion) fed by DMA channel 1: software writes 1024 bytes to SRAM,
// gives the word count to the fabric through the channel's configuration
// word, points the channel's TX at the data and its RX at a result word, and
// waits for the RX done interrupt. The engine here takes one word per
// eFPGA cycle and returns the final CRC as one word.
//
// Clocks follow the measured operating point: core domain 600 MHz, eFPGA on
// its FLL at 193 MHz. The chip needs 3.7 us for this job; the check is that
// the whole transfer, from starting TX to the done interrupt, is no slower,
// and that the CRC matches a reference computed in the testbench.
module tb_wl_crc;
  import arnold_pkg::*;

  logic clk_mcu = 0, clk_peri = 0, clk_fll = 0, rst_n = 0;
  always #0.8335 clk_mcu = ~clk_mcu;     // 600 MHz
  always #3.5    clk_peri = ~clk_peri;
  always #2.5907 clk_fll = ~clk_fll;     // 193 MHz

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- DUT ----------------
  logic        cpu_priv_m, cpu_csr_we; logic [11:0] cpu_csr_addr; logic [31:0] cpu_csr_wdata, cpu_csr_rdata;
  logic        cpu_i_req, cpu_i_gnt, cpu_i_rvalid, cpu_d_req, cpu_d_gnt, cpu_d_rvalid;
  tcdm_req_t   cpu_i_reqd, cpu_d_reqd; tcdm_rsp_t cpu_i_rsp, cpu_d_rsp;
  logic [31:0] cpu_irq;
  logic        jtag_req, jtag_gnt, jtag_rvalid; tcdm_req_t jtag_reqd; tcdm_rsp_t jtag_rsp;
  apb_req_t    fcb_apb_req; apb_rsp_t fcb_apb_rsp;
  logic        clk_efpga, fpga_rst_n;
  logic        fpga_mem_req [4], fpga_mem_gnt [4], fpga_mem_rvalid [4];
  tcdm_req_t   fpga_mem_reqd [4]; tcdm_rsp_t fpga_mem_rsp [4];
  logic        fpga_dma_rx_valid, fpga_dma_rx_ready, fpga_dma_tx_valid, fpga_dma_tx_ready;
  logic [31:0] fpga_dma_rx_data, fpga_dma_tx_data, fpga_dma_cfg;
  logic        fpga_apb_psel, fpga_apb_penable, fpga_apb_pwrite, fpga_apb_pready;
  logic [6:0]  fpga_apb_paddr; logic [31:0] fpga_apb_pwdata, fpga_apb_prdata;
  logic [15:0] fpga_events;
  logic [NUM_PADS-1:0] fpga_gpio_out, fpga_gpio_oe, fpga_gpio_in;
  logic        mac_en [2], mac_clr [2], mac_sel_a [2], mac_sel_b [2];
  logic [1:0]  mac_mode [2], mac_buf_we [2];
  logic [31:0] mac_op_a [2], mac_op_b [2], mac_buf_wdata [2];
  logic [8:0]  mac_buf_waddr [2], mac_buf_raddr_a [2], mac_buf_raddr_b [2];
  logic [31:0] mac_acc [2][4];
  logic [NUM_PADS-1:0] ext_periph_out, ext_periph_oe, ext_periph_in, pad_out, pad_oe, pad_in;

  arnold_soc dut (
    .clk_mcu, .clk_peri, .clk_efpga_fll(clk_fll), .rst_n,
    .cpu_priv_m, .cpu_csr_we, .cpu_csr_addr, .cpu_csr_wdata, .cpu_csr_rdata,
    .cpu_i_req, .cpu_i_gnt, .cpu_i_reqd, .cpu_i_rvalid, .cpu_i_rsp,
    .cpu_d_req, .cpu_d_gnt, .cpu_d_reqd, .cpu_d_rvalid, .cpu_d_rsp, .cpu_irq,
    .jtag_req, .jtag_gnt, .jtag_reqd, .jtag_rvalid, .jtag_rsp,
    .fcb_apb_req, .fcb_apb_rsp, .clk_efpga, .fpga_rst_n,
    .fpga_mem_req, .fpga_mem_gnt, .fpga_mem_reqd, .fpga_mem_rvalid, .fpga_mem_rsp,
    .fpga_dma_rx_valid, .fpga_dma_rx_data, .fpga_dma_rx_ready,
    .fpga_dma_tx_valid, .fpga_dma_tx_data, .fpga_dma_tx_ready, .fpga_dma_cfg,
    .fpga_apb_psel, .fpga_apb_penable, .fpga_apb_pwrite, .fpga_apb_paddr, .fpga_apb_pwdata,
    .fpga_apb_prdata, .fpga_apb_pready, .fpga_events, .fpga_gpio_out, .fpga_gpio_oe, .fpga_gpio_in,
    .mac_en, .mac_clr, .mac_mode, .mac_sel_a, .mac_sel_b, .mac_op_a, .mac_op_b,
    .mac_buf_we, .mac_buf_waddr, .mac_buf_wdata, .mac_buf_raddr_a, .mac_buf_raddr_b, .mac_acc,
    .ext_periph_out, .ext_periph_oe, .ext_periph_in, .pad_out, .pad_oe, .pad_in
  );

  // ---------------- core data port ----------------
  task automatic cpu_access(input logic [31:0] a, input bit we, input logic [31:0] wd,
                            output logic [31:0] rd, output logic err);
    @(negedge clk_mcu);
    cpu_d_req = 1; cpu_d_reqd = '{addr: a, we: we, be: 4'hF, wdata: wd};
    @(posedge clk_mcu); while (!cpu_d_gnt) @(posedge clk_mcu);
    @(negedge clk_mcu); cpu_d_req = 0;
    check(cpu_d_rvalid, "core response one cycle after grant");
    rd = cpu_d_rsp.rdata; err = cpu_d_rsp.err;
  endtask
  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    logic [31:0] q; logic e;
    cpu_access(a, 1, d, q, e);
    check(!e, $sformatf("write %h without error", a));
  endtask
  task automatic rd(input logic [31:0] a, output logic [31:0] d);
    logic e;
    cpu_access(a, 0, 0, d, e);
    check(!e, $sformatf("read %h without error", a));
  endtask
  task automatic csr(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk_mcu); cpu_csr_we = 1; cpu_csr_addr = a; cpu_csr_wdata = d;
    @(negedge clk_mcu); cpu_csr_we = 0;
  endtask

  localparam logic [31:0] SOC = APB_BASE + 32'h0000, GPIO = APB_BASE + 32'h1000, TIM = APB_BASE + 32'h2000,
                          EVT = APB_BASE + 32'h3000, UDMA = APB_BASE + 32'h4000, FAPB = APB_BASE + 32'h5000,
                          FCB = APB_BASE + 32'h6000;

  // ---------------- board and idle fabric pins ----------------
  assign pad_in = '0;
  assign ext_periph_out = '0;
  assign ext_periph_oe  = '0;
  assign fcb_apb_rsp = '{prdata: 32'h0, pready: 1'b1, pslverr: 1'b0};
  assign fpga_apb_pready = 1'b1;
  assign fpga_apb_prdata = 32'h0;
  assign fpga_gpio_out = '0;
  assign fpga_gpio_oe  = '0;
  assign fpga_events   = '0;
  always_comb
    for (int p = 0; p < 4; p++) begin fpga_mem_req[p] = 0; fpga_mem_reqd[p] = '0; end
  always_comb
    for (int u = 0; u < 2; u++) begin
      mac_en[u] = 0; mac_clr[u] = 0; mac_mode[u] = 0; mac_sel_a[u] = 0; mac_sel_b[u] = 0;
      mac_op_a[u] = 0; mac_op_b[u] = 0; mac_buf_we[u] = 0; mac_buf_waddr[u] = 0; mac_buf_wdata[u] = 0;
      mac_buf_raddr_a[u] = 0; mac_buf_raddr_b[u] = 0;
    end

  // ---------------- the CRC engine in the fabric ----------------
  function automatic logic [31:0] crc32_word(input logic [31:0] crc, input logic [31:0] w);
    logic [31:0] c;
    c = crc ^ w;
    for (int k = 0; k < 32; k++) c = c[0] ? ((c >> 1) ^ 32'hEDB8_8320) : (c >> 1);
    return c;
  endfunction
  logic [31:0] fcrc, fcount;
  int n_words_in;
  always @(posedge clk_efpga or negedge fpga_rst_n) begin
    if (!fpga_rst_n) begin
      fcrc <= 32'hFFFF_FFFF; fcount <= 0; fpga_dma_rx_valid <= 0; fpga_dma_rx_data <= 0; n_words_in <= 0;
    end else begin
      if (fpga_dma_tx_valid && fpga_dma_tx_ready) begin
        fcrc <= crc32_word(fcrc, fpga_dma_tx_data);
        fcount <= fcount + 1; n_words_in <= n_words_in + 1;
        if (fcount + 1 == fpga_dma_cfg) begin
          fpga_dma_rx_valid <= 1; fpga_dma_rx_data <= ~crc32_word(fcrc, fpga_dma_tx_data);
          fcrc <= 32'hFFFF_FFFF; fcount <= 0;
        end
      end
      if (fpga_dma_rx_valid && fpga_dma_rx_ready) fpga_dma_rx_valid <= 0;
    end
  end
  assign fpga_dma_tx_ready = 1'b1;

  localparam int          NWORDS = 256;                 // 1024 bytes
  localparam logic [31:0] SRC = ILV_BASE + 32'h4000, DST = PRIV1_BASE + 32'h400;
  localparam realtime     CHIP_TIME = 3700ns;

  initial begin
    logic [31:0] q, ref_crc, data [NWORDS];
    realtime t0, t1;
    int cyc;
    cpu_priv_m = 1; cpu_csr_we = 0; cpu_csr_addr = 0; cpu_csr_wdata = 0;
    cpu_i_req = 0; cpu_i_reqd = '0; cpu_d_req = 0; cpu_d_reqd = '0;
    jtag_req = 0; jtag_reqd = '0;
    #20 rst_n = 1;
    repeat (3) @(posedge clk_mcu);
    ref_crc = 32'hFFFF_FFFF;
    for (int k = 0; k < NWORDS; k++) begin
      data[k] = $urandom; wr(SRC + 32'(4 * k), data[k]); ref_crc = crc32_word(ref_crc, data[k]);
    end
    ref_crc = ~ref_crc;
    wr(SOC + 32'h10, 32'h4);                   // eFPGA clock: FLL
    wr(SOC + 32'h18, 32'h1);                   // release the eFPGA
    wr(EVT + 32'h00, 32'h0008_0000);           // channel 1 RX done -> interrupt line 19
    wr(UDMA + 32'h000, 32'h2);
    wr(UDMA + 32'h0A0, 32'(NWORDS));           // accelerator: number of words
    repeat (10) @(posedge clk_mcu);            // configuration word settles in the eFPGA domain
    wr(UDMA + 32'h080, DST); wr(UDMA + 32'h084, 32'd4); wr(UDMA + 32'h088, 32'h5);
    wr(UDMA + 32'h090, SRC); wr(UDMA + 32'h094, 32'(4 * NWORDS));
    @(negedge clk_mcu);
    cpu_d_req = 1; cpu_d_reqd = '{addr: UDMA + 32'h098, we: 1, be: 4'hF, wdata: 32'h5};
    @(posedge clk_mcu); while (!cpu_d_gnt) @(posedge clk_mcu);
    t0 = $realtime;
    @(negedge clk_mcu); cpu_d_req = 0;
    cyc = 0;
    while (!cpu_irq[19] && cyc < 20000) begin @(posedge clk_mcu); cyc++; end
    t1 = $realtime;
    check(cpu_irq[19], "done interrupt");
    check(n_words_in == NWORDS, $sformatf("words streamed into the fabric: %0d", n_words_in));
    rd(DST, q);
    check(q == ref_crc, $sformatf("CRC %h, expected %h", q, ref_crc));
    $display("CRC of %0d bytes: %h in %0.1f ns (%0d core cycles); chip: %0.1f ns",
             4 * NWORDS, q, (t1 - t0) / 1ns, cyc, CHIP_TIME / 1ns);
    check(t1 - t0 <= CHIP_TIME, "no slower than the chip");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
