// Workload testbench: custom I/O. The fabric drives an off-chip accelerator
// over 36 eFPGA-owned pads: pads 0-31 a bidirectional data bus, pad 32 the
// accelerator clock, pad 33 "data valid" (fabric to accelerator), pad 34
// bus direction (1: fabric drives), pad 35 "result ready" (accelerator to
// fabric). The fabric fetches N coefficient words from SRAM through one
// memory port, clocks them out one per accelerator clock, turns the bus
// around, waits for the result, stores it to SRAM and raises one event.
// The accelerator model returns the wrapping sum of the words it received,
// rotated left by one bit.
//
// Clocks: core 600 MHz, eFPGA on its FLL (160 MHz); the accelerator clock
// is the eFPGA clock divided by 2, i.e. 80 MHz as in the chip's example, and
// the testbench measures it on the pad.
module tb_wl_custom_io;
  import arnold_pkg::*;

  logic clk_mcu = 0, clk_peri = 0, clk_fll = 0, rst_n = 0;
  always #0.8335 clk_mcu = ~clk_mcu;     // 600 MHz
  always #3.5    clk_peri = ~clk_peri;
  always #3.125  clk_fll = ~clk_fll;     // 160 MHz

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

  // ---------------- off-chip accelerator ----------------
  logic [31:0] acc_sum, acc_bus; logic acc_done; int acc_n = 0;
  always @(posedge pad_out[32])
    if (pad_oe[32] && pad_out[34] && pad_out[33]) begin acc_sum <= acc_sum + pad_out[31:0]; acc_n <= acc_n + 1; end
  always_comb begin
    pad_in        = '0;
    pad_in[31:0]  = pad_out[34] ? pad_out[31:0] : acc_bus;
    pad_in[35]    = acc_done;
  end
  assign acc_bus = {acc_sum[30:0], acc_sum[31]};

  // accelerator clock frequency on pad 32
  realtime t_last = 0, period = 0;
  always @(posedge pad_out[32]) begin period = $realtime - t_last; t_last = $realtime; end

  // ---------------- fabric ----------------
  // registers: 0x00 source pointer, 0x04 word count, 0x08 result pointer, 0x0C start
  logic [31:0] f_src, f_cnt, f_dst; logic f_go;
  assign fpga_apb_pready = 1'b1;
  assign fpga_apb_prdata = (fpga_apb_paddr[3:2] == 2'd1) ? f_cnt : 32'h0;
  always @(posedge clk_efpga or negedge fpga_rst_n)
    if (!fpga_rst_n) begin f_src <= 0; f_cnt <= 0; f_dst <= 0; f_go <= 0; end
    else if (fpga_apb_psel && fpga_apb_penable && fpga_apb_pwrite)
      case (fpga_apb_paddr[3:2])
        2'd0: f_src <= fpga_apb_pwdata;
        2'd1: f_cnt <= fpga_apb_pwdata;
        2'd2: f_dst <= fpga_apb_pwdata;
        default: f_go <= fpga_apb_pwdata[0];
      endcase

  logic xclk, xvalid, xdir; logic [31:0] xdata;
  always @(posedge clk_efpga or negedge fpga_rst_n)
    if (!fpga_rst_n) xclk <= 0; else xclk <= ~xclk;
  always_comb begin
    fpga_gpio_out = '0; fpga_gpio_oe = '0;
    fpga_gpio_out[31:0] = xdata; fpga_gpio_oe[31:0] = {32{xdir}};
    fpga_gpio_out[32] = xclk;    fpga_gpio_oe[32] = 1'b1;
    fpga_gpio_out[33] = xvalid;  fpga_gpio_oe[33] = 1'b1;
    fpga_gpio_out[34] = xdir;    fpga_gpio_oe[34] = 1'b1;
  end
  task automatic fmem(input logic [31:0] a, input bit we, input logic [31:0] wd, output logic [31:0] rdata);
    @(negedge clk_efpga);
    fpga_mem_req[0] = 1; fpga_mem_reqd[0] = '{addr: a, we: we, be: 4'hF, wdata: wd};
    @(posedge clk_efpga); while (!fpga_mem_gnt[0]) @(posedge clk_efpga);
    @(negedge clk_efpga); fpga_mem_req[0] = 0;
    while (!fpga_mem_rvalid[0]) @(negedge clk_efpga);
    rdata = fpga_mem_rsp[0].rdata;
    if (fpga_mem_rsp[0].err) f_errs++;
  endtask
  int f_errs = 0;
  initial begin
    logic [31:0] q, buff [$];
    xvalid = 0; xdir = 1; xdata = 0; fpga_events = '0; fpga_mem_req[0] = 0; fpga_mem_reqd[0] = '0;
    forever begin
      @(posedge clk_efpga);
      if (fpga_rst_n && f_go) begin
        for (int k = 0; k < int'(f_cnt); k++) begin fmem(f_src + 32'(4 * k), 0, 0, q); buff.push_back(q); end
        // one word per accelerator clock, changed while xclk is low
        while (buff.size() > 0) begin
          @(negedge xclk); xvalid = 1; xdata = buff.pop_front();
        end
        @(negedge xclk); xvalid = 0;
        @(negedge xclk); xdir = 0;                  // bus turn-around
        while (!fpga_gpio_in[35]) @(posedge clk_efpga);
        q = fpga_gpio_in[31:0];
        xdir = 1;
        fmem(f_dst, 1, q, q);
        @(negedge clk_efpga); fpga_events[7] = 1;
        @(negedge clk_efpga); fpga_events[7] = 0;
        wait (!f_go);
      end
    end
  end

  localparam int          N = 40;
  localparam logic [31:0] SRC = ILV_BASE + 32'hD000, DST = PRIV1_BASE + 32'hE00;

  initial begin
    logic [31:0] q, ref_sum;
    int cyc;
    cpu_priv_m = 1; cpu_csr_we = 0; cpu_csr_addr = 0; cpu_csr_wdata = 0;
    cpu_i_req = 0; cpu_i_reqd = '0; cpu_d_req = 0; cpu_d_reqd = '0;
    jtag_req = 0; jtag_reqd = '0; acc_sum = 0; acc_done = 0;
    #20 rst_n = 1;
    repeat (3) @(posedge clk_mcu);
    ref_sum = 0;
    for (int k = 0; k < N; k++) begin q = $urandom; wr(SRC + 32'(4 * k), q); ref_sum += q; end
    wr(SOC + 32'h00, 32'hAAAA_AAAA);         // pads 0-15: eFPGA
    wr(SOC + 32'h04, 32'hAAAA_AAAA);         // pads 16-31: eFPGA
    wr(SOC + 32'h08, 32'h0000_00AA);         // pads 32-35: eFPGA
    wr(SOC + 32'h10, 32'h4); wr(SOC + 32'h18, 32'h1);
    wr(EVT + 32'h00, 32'h80);                // eFPGA event 7 -> interrupt line 7
    wr(FAPB + 32'h0, SRC); wr(FAPB + 32'h4, 32'(N)); wr(FAPB + 32'h8, DST);
    rd(FAPB + 32'h4, q); check(q == 32'(N), "fabric register read-back");
    wr(FAPB + 32'hC, 32'h1);
    wait (acc_n == N);
    check(period > 12.4ns && period < 12.6ns, $sformatf("accelerator clock period %0.2f ns", period / 1ns));
    repeat (20) @(posedge clk_mcu);
    check(!pad_oe[0] && !pad_oe[31] && pad_oe[32], "bus turned around, clock still driven");
    acc_done = 1;
    cyc = 0;
    while (!cpu_irq[7] && cyc < 100000) begin @(posedge clk_mcu); cyc++; end
    check(cpu_irq[7], "completion interrupt");
    check(f_errs == 0, "no bus errors");
    check(acc_n == N, "every word clocked into the accelerator once");
    rd(DST, q);
    check(q == {ref_sum[30:0], ref_sum[31]}, $sformatf("result %h expected %h", q, {ref_sum[30:0], ref_sum[31]}));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
