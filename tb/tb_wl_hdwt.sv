// Workload testbench: the I/O-subsystem accelerator. The fabric is an SPI
// master reading 16-bit samples from an external ADC on four eFPGA-owned
// pads (SCLK, CS_N, MOSI out; MISO in) and computing, per pair of samples
// (a, b), the one-level Haar wavelet coefficients: approximation a + b and
// detail a - b (17-bit results kept in 32-bit words). For each sample it
// also shifts "sample greater than the previous one" into a 4-bit local
// binary pattern and stores that 16-bit pattern word every four samples.
// Software sets N and the output pointers through the eFPGA register
// interface and starts it; the fabric stores through one memory port and
// raises one event when done. Uses exactly what the chip's version uses:
// one memory port, the register interface, four pads and one event.
//
// Pads (this testbench's choice): 8 SCLK, 9 CS_N, 10 MOSI, 11 MISO.
// Clocks: core 600 MHz, eFPGA on its FLL (100 MHz); SCLK = eFPGA clock / 2.
module tb_wl_hdwt;
  import arnold_pkg::*;

  logic clk_mcu = 0, clk_peri = 0, clk_fll = 0, rst_n = 0;
  always #0.8335 clk_mcu = ~clk_mcu;     // 600 MHz
  always #3.5    clk_peri = ~clk_peri;
  always #5.0    clk_fll = ~clk_fll;     // 100 MHz

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

  // ---------------- external ADC (SPI mode 0, MSB first) ----------------
  localparam int NS = 64;
  logic [15:0] adc_samples [NS];
  int   adc_idx = 0;
  logic [15:0] adc_sh;
  logic miso;
  always @(negedge pad_out[9]) if (pad_oe[9]) begin adc_sh = adc_samples[adc_idx % NS]; adc_idx++; end
  assign miso = adc_sh[15];
  always @(negedge pad_out[8]) if (!pad_out[9]) adc_sh = {adc_sh[14:0], 1'b0};
  always_comb begin
    pad_in     = '0;
    pad_in[11] = miso;
  end

  // ---------------- idle pins ----------------
  assign ext_periph_out = '0;
  assign ext_periph_oe  = '0;
  assign fcb_apb_rsp = '{prdata: 32'h0, pready: 1'b1, pslverr: 1'b0};
  assign fpga_dma_rx_valid = 1'b0;
  assign fpga_dma_rx_data  = 32'h0;
  assign fpga_dma_tx_ready = 1'b0;
  always_comb
    for (int u = 0; u < 2; u++) begin
      mac_en[u] = 0; mac_clr[u] = 0; mac_mode[u] = 0; mac_sel_a[u] = 0; mac_sel_b[u] = 0;
      mac_op_a[u] = 0; mac_op_b[u] = 0; mac_buf_we[u] = 0; mac_buf_waddr[u] = 0; mac_buf_wdata[u] = 0;
      mac_buf_raddr_a[u] = 0; mac_buf_raddr_b[u] = 0;
    end
  always_comb
    for (int p = 1; p < 4; p++) begin fpga_mem_req[p] = 0; fpga_mem_reqd[p] = '0; end

  // ---------------- fabric: registers ----------------
  // 0x00 N, 0x04 coefficient pointer, 0x08 pattern pointer, 0x0C start
  logic [31:0] f_n, f_cptr, f_lptr; logic f_go;
  assign fpga_apb_pready = 1'b1;
  assign fpga_apb_prdata = (fpga_apb_paddr[3:2] == 2'd0) ? f_n : 32'h0;
  always @(posedge clk_efpga or negedge fpga_rst_n)
    if (!fpga_rst_n) begin f_n <= 0; f_cptr <= 0; f_lptr <= 0; f_go <= 0; end
    else if (fpga_apb_psel && fpga_apb_penable && fpga_apb_pwrite)
      case (fpga_apb_paddr[3:2])
        2'd0: f_n <= fpga_apb_pwdata;
        2'd1: f_cptr <= fpga_apb_pwdata;
        2'd2: f_lptr <= fpga_apb_pwdata;
        default: f_go <= fpga_apb_pwdata[0];
      endcase

  // ---------------- fabric: SPI master + HDWT + LBP ----------------
  logic sclk, cs_n, mosi;
  always_comb begin
    fpga_gpio_out = '0; fpga_gpio_oe = '0;
    fpga_gpio_out[8] = sclk; fpga_gpio_out[9] = cs_n; fpga_gpio_out[10] = mosi;
    fpga_gpio_oe[10:8] = 3'b111;
  end
  task automatic fmem_wr(input logic [31:0] a, input logic [31:0] wd, input logic [3:0] be = 4'hF);
    @(negedge clk_efpga);
    fpga_mem_req[0] = 1; fpga_mem_reqd[0] = '{addr: {a[31:2], 2'b00}, we: 1, be: be, wdata: wd};
    @(posedge clk_efpga); while (!fpga_mem_gnt[0]) @(posedge clk_efpga);
    @(negedge clk_efpga); fpga_mem_req[0] = 0;
    while (!fpga_mem_rvalid[0]) @(negedge clk_efpga);
    if (fpga_mem_rsp[0].err) f_errs++;
  endtask
  task automatic spi_read(output logic [15:0] v);
    @(negedge clk_efpga); cs_n = 0;
    for (int b = 15; b >= 0; b--) begin
      @(negedge clk_efpga); sclk = 1; v[b] = fpga_gpio_in[11];
      @(negedge clk_efpga); sclk = 0;
    end
    @(negedge clk_efpga); cs_n = 1;
  endtask
  int f_errs = 0;
  initial begin
    logic [15:0] a, b, prev; logic [3:0] lbp; logic [15:0] lword;
    sclk = 0; cs_n = 1; mosi = 0; fpga_events = '0;
    fpga_mem_req[0] = 0; fpga_mem_reqd[0] = '0;
    forever begin
      @(posedge clk_efpga);
      if (fpga_rst_n && f_go) begin
        prev = 0; lbp = 0; lword = 0;
        for (int k = 0; k < int'(f_n); k += 2) begin
          spi_read(a); spi_read(b);
          fmem_wr(f_cptr + 32'(4 * k),     32'($signed({1'b0, a}) + $signed({1'b0, b})));
          fmem_wr(f_cptr + 32'(4 * k + 4), 32'($signed({1'b0, a}) - $signed({1'b0, b})));
          for (int s = 0; s < 2; s++) begin
            logic [15:0] x; x = s ? b : a;
            lbp = {lbp[2:0], (x > prev)}; prev = x;
            lword = {lword[11:0], lbp};
            if ((k + s) % 4 == 3) fmem_wr(f_lptr + 32'(2 * ((k + s) / 4)), {lword, lword}, ((k + s) / 4) % 2 ? 4'b1100 : 4'b0011);
          end
        end
        @(negedge clk_efpga); fpga_events[2] = 1;
        @(negedge clk_efpga); fpga_events[2] = 0;
        wait (!f_go);
      end
    end
  end

  localparam logic [31:0] CPTR = ILV_BASE + 32'h6000, LPTR = ILV_BASE + 32'h7000;

  initial begin
    logic [31:0] q; logic [15:0] prev, lword; logic [3:0] lbp;
    int cyc;
    cpu_priv_m = 1; cpu_csr_we = 0; cpu_csr_addr = 0; cpu_csr_wdata = 0;
    cpu_i_req = 0; cpu_i_reqd = '0; cpu_d_req = 0; cpu_d_reqd = '0;
    jtag_req = 0; jtag_reqd = '0;
    for (int k = 0; k < NS; k++) adc_samples[k] = 16'($urandom);
    #20 rst_n = 1;
    repeat (3) @(posedge clk_mcu);
    wr(SOC + 32'h00, 32'h00AA_0000);         // pads 8-11: eFPGA function
    wr(SOC + 32'h10, 32'h4); wr(SOC + 32'h18, 32'h1);
    wr(EVT + 32'h00, 32'h4);                 // eFPGA event 2 -> interrupt line 2
    wr(FAPB + 32'h0, 32'(NS)); wr(FAPB + 32'h4, CPTR); wr(FAPB + 32'h8, LPTR);
    rd(FAPB + 32'h0, q); check(q == 32'(NS), "fabric register read-back");
    wr(FAPB + 32'hC, 32'h1);
    cyc = 0;
    while (!cpu_irq[2] && cyc < 200000) begin @(posedge clk_mcu); cyc++; end
    check(cpu_irq[2], "completion interrupt");
    check(f_errs == 0, "no bus errors");
    check(pad_oe[8] && pad_oe[9] && pad_oe[10] && !pad_oe[11], "pad directions");
    for (int k = 0; k < NS; k += 2) begin
      rd(CPTR + 32'(4 * k), q);
      check(q == 32'(int'(adc_samples[k]) + int'(adc_samples[k+1])), $sformatf("approximation %0d: %h from %h %h", k / 2, q, adc_samples[k], adc_samples[k+1]));
      rd(CPTR + 32'(4 * k + 4), q);
      check(q == 32'(int'(adc_samples[k]) - int'(adc_samples[k+1])), $sformatf("detail %0d", k / 2));
    end
    prev = 0; lbp = 0; lword = 0;
    for (int k = 0; k < NS; k++) begin
      lbp = {lbp[2:0], (adc_samples[k] > prev)}; prev = adc_samples[k];
      lword = {lword[11:0], lbp};
      if (k % 4 == 3) begin
        rd(LPTR + 32'(2 * (k / 4)) & ~32'h3, q);
        check((k / 4) % 2 ? q[31:16] == lword : q[15:0] == lword, $sformatf("pattern word %0d", k / 4));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
