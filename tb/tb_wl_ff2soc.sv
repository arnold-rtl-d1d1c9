// Workload testbench: FF2SOC, an eight-way parallel 32-bit accumulator in
// the fabric that reads its values from SoC memory. Software fills 512 words
// of interleaved SRAM, gives the fabric the start address and the word count
// through the eFPGA register interface, and sets a start register. The fabric
// then reads the words through all four memory ports at once (port p takes
// words p, p+4, ...), adds word k into accumulator k mod 8, writes the eight
// sums back to SRAM through port 0 and raises event 0. The core waits for
// interrupt line 0 and checks the sums. The run also reports how many words
// per eFPGA cycle the four ports sustained.
//
// Clocks: core domain 600 MHz; eFPGA on its FLL (200 MHz) divided by 2.
module tb_wl_ff2soc;
  import arnold_pkg::*;

  logic clk_mcu = 0, clk_peri = 0, clk_fll = 0, rst_n = 0;
  always #0.8335 clk_mcu = ~clk_mcu;     // 600 MHz
  always #3.5    clk_peri = ~clk_peri;
  always #2.5    clk_fll = ~clk_fll;     // 200 MHz

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
  assign fpga_gpio_out = '0;
  assign fpga_gpio_oe  = '0;
  assign fpga_dma_rx_valid = 1'b0;
  assign fpga_dma_rx_data  = 32'h0;
  assign fpga_dma_tx_ready = 1'b0;
  always_comb
    for (int u = 0; u < 2; u++) begin
      mac_en[u] = 0; mac_clr[u] = 0; mac_mode[u] = 0; mac_sel_a[u] = 0; mac_sel_b[u] = 0;
      mac_op_a[u] = 0; mac_op_b[u] = 0; mac_buf_we[u] = 0; mac_buf_waddr[u] = 0; mac_buf_wdata[u] = 0;
      mac_buf_raddr_a[u] = 0; mac_buf_raddr_b[u] = 0;
    end

  // ---------------- fabric: register file ----------------
  // 0x00 start address, 0x04 word count, 0x08 result address, 0x0C start (write 1)
  logic [31:0] f_src, f_cnt, f_dst;
  logic        f_go;
  assign fpga_apb_pready = 1'b1;
  always_comb
    case (fpga_apb_paddr[3:2])
      2'd0: fpga_apb_prdata = f_src;
      2'd1: fpga_apb_prdata = f_cnt;
      2'd2: fpga_apb_prdata = f_dst;
      default: fpga_apb_prdata = 32'(f_go);
    endcase
  always @(posedge clk_efpga or negedge fpga_rst_n)
    if (!fpga_rst_n) begin f_src <= 0; f_cnt <= 0; f_dst <= 0; f_go <= 0; end
    else begin
      if (fpga_apb_psel && fpga_apb_penable && fpga_apb_pwrite)
        case (fpga_apb_paddr[3:2])
          2'd0: f_src <= fpga_apb_pwdata;
          2'd1: f_cnt <= fpga_apb_pwdata;
          2'd2: f_dst <= fpga_apb_pwdata;
          default: f_go <= fpga_apb_pwdata[0];
        endcase
    end

  // ---------------- fabric: the accumulator ----------------
  task automatic fmem(input int p, input logic [31:0] a, input bit we, input logic [31:0] wd,
                      output logic [31:0] rdata, output logic err);
    @(negedge clk_efpga);
    fpga_mem_req[p] = 1; fpga_mem_reqd[p] = '{addr: a, we: we, be: 4'hF, wdata: wd};
    @(posedge clk_efpga); while (!fpga_mem_gnt[p]) @(posedge clk_efpga);
    @(negedge clk_efpga); fpga_mem_req[p] = 0;
    while (!fpga_mem_rvalid[p]) @(negedge clk_efpga);
    rdata = fpga_mem_rsp[p].rdata; err = fpga_mem_rsp[p].err;
  endtask
  logic [31:0] facc [8];
  int f_errs = 0, f_cycles = 0;
  bit f_busy = 0;
  always @(posedge clk_efpga) if (f_busy) f_cycles++;
  task automatic port_reader(input int p);
    logic [31:0] q; logic e;
    for (int k = p; k < int'(f_cnt); k += 4) begin
      fmem(p, f_src + 32'(4 * k), 0, 0, q, e);
      if (e) f_errs++;
      facc[k % 8] += q;
    end
  endtask
  initial begin
    logic [31:0] q; logic e;
    fpga_events = '0;
    for (int p = 0; p < 4; p++) begin fpga_mem_req[p] = 0; fpga_mem_reqd[p] = '0; end
    forever begin
      @(posedge clk_efpga);
      if (fpga_rst_n && f_go) begin
        for (int i = 0; i < 8; i++) facc[i] = 0;
        f_busy = 1;
        fork port_reader(0); port_reader(1); port_reader(2); port_reader(3); join
        f_busy = 0;
        for (int i = 0; i < 8; i++) begin
          fmem(0, f_dst + 32'(4 * i), 1, facc[i], q, e);
          if (e) f_errs++;
        end
        @(negedge clk_efpga); fpga_events[0] = 1;
        @(negedge clk_efpga); fpga_events[0] = 0;
        wait (!f_go);
      end
    end
  end

  localparam int          NWORDS = 512;
  localparam logic [31:0] SRC = ILV_BASE + 32'h8000, DST = PRIV1_BASE + 32'h800;

  initial begin
    logic [31:0] q, ref_acc [8];
    int cyc;
    cpu_priv_m = 1; cpu_csr_we = 0; cpu_csr_addr = 0; cpu_csr_wdata = 0;
    cpu_i_req = 0; cpu_i_reqd = '0; cpu_d_req = 0; cpu_d_reqd = '0;
    jtag_req = 0; jtag_reqd = '0;
    #20 rst_n = 1;
    repeat (3) @(posedge clk_mcu);
    for (int i = 0; i < 8; i++) ref_acc[i] = 0;
    for (int k = 0; k < NWORDS; k++) begin
      q = $urandom; wr(SRC + 32'(4 * k), q); ref_acc[k % 8] += q;
    end
    wr(SOC + 32'h10, 32'h5); wr(SOC + 32'h14, 32'h2);   // eFPGA clock: FLL / 2
    wr(SOC + 32'h18, 32'h1);
    wr(EVT + 32'h00, 32'h1);                            // eFPGA event 0 -> interrupt line 0
    wr(FAPB + 32'h0, SRC); wr(FAPB + 32'h4, 32'(NWORDS)); wr(FAPB + 32'h8, DST);
    rd(FAPB + 32'h4, q); check(q == 32'(NWORDS), "fabric register read-back");
    wr(FAPB + 32'hC, 32'h1);
    cyc = 0;
    while (!cpu_irq[0] && cyc < 100000) begin @(posedge clk_mcu); cyc++; end
    check(cpu_irq[0], "completion interrupt from the fabric");
    wr(FAPB + 32'hC, 32'h0);
    wr(EVT + 32'h04, 32'h1);
    check(f_errs == 0, "no bus errors on the memory ports");
    for (int i = 0; i < 8; i++) begin
      rd(DST + 32'(4 * i), q);
      check(q == ref_acc[i], $sformatf("accumulator %0d: %h expected %h", i, q, ref_acc[i]));
    end
    $display("FF2SOC: %0d words through 4 ports in %0d eFPGA cycles (%0.2f words/cycle)",
             NWORDS, f_cycles, real'(NWORDS) / real'(f_cycles));
    check(f_cycles > 0, "fabric ran");
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
