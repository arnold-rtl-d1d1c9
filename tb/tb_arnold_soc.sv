// End-to-end testbench of arnold_soc at its default parameters. The
// testbench plays the parts that are not built: the core (data and fetch
// ports, PMP CSR port, privilege), the JTAG master, the eFPGA user logic
// (memory ports, uDMA stream, user APB slave, event lines, MAC drivers and
// pad I/O), the eFPGA configuration block and the board (UART TX pad looped
// back to the RX pad, a level on a GPIO input pad).
//
// Clocks: clk_mcu 5 ns, clk_peri 7 ns, eFPGA FLL 3 ns; the eFPGA runs on the
// FLL divided by 3 after software selects it and releases its reset.
//
// Mechanisms exercised and counted (a mechanism that never happens counts
// as a failure):
//   sram      core data reads/writes of private and interleaved SRAM
//   rom       core fetch from the boot ROM (reset vector code)
//   pmp       user-mode access denied by the PMP, answered with err
//   apb       peripheral register write/read-back
//   gpio      GPIO output reaching a pad and a pad input read back
//   padmux    eFPGA output routed to a pad and a pad input seen by the eFPGA
//   uart      bytes sent by uDMA channel 0 TX, looped back, stored by RX
//   udma_evt  uDMA end-of-transfer events reaching the interrupt lines
//   fpga_clk  eFPGA clock running after release
//   fmem      eFPGA memory-port accesses (4 ports, in parallel)
//   fmem_err  eFPGA memory access outside the SRAM answered with err
//   fdma      words moved memory -> eFPGA -> memory through uDMA channel 1
//   fapb      core accesses to the eFPGA user APB
//   fcb       core access to the eFPGA configuration port
//   fevt      eFPGA event reaching a core interrupt line
//   timer     timer interrupt
//   mac       vector MAC results
//   contention cycles in which a crossbar master waited for a grant
//   parallel  three masters granted every cycle on three interleaved banks,
//             and one word per cycle from a private bank (the 19.2 Gbit/s
//             of a private bank at 600 MHz)
//   round_robin three masters on one bank get equal shares
module tb_arnold_soc;
  import arnold_pkg::*;

  logic clk_mcu = 0, clk_peri = 0, clk_fll = 0, rst_n = 0;
  always #2.5 clk_mcu = ~clk_mcu;
  always #3.5 clk_peri = ~clk_peri;
  always #1.5 clk_fll = ~clk_fll;

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

  // mechanism counters
  int n_sram, n_rom, n_pmp, n_apb, n_gpio, n_padmux, n_uart, n_udma_evt, n_fpga_clk, n_fmem, n_fmem_err,
      n_fdma, n_fapb, n_fcb, n_fevt, n_timer, n_mac, n_contention, n_parallel, n_rr;

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

  // ---------------- board ----------------
  logic gpio_in_level;
  always_comb begin
    pad_in      = '0;
    pad_in[1]   = pad_oe[0] ? pad_out[0] : 1'b1;   // UART loop-back
    pad_in[3]   = gpio_in_level;
    pad_in[6]   = 1'b1;                             // seen by the eFPGA on pad 6
  end
  assign ext_periph_out = '0;
  assign ext_periph_oe  = '0;

  // ---------------- eFPGA configuration block model ----------------
  logic [31:0] fcb_reg;
  assign fcb_apb_rsp = '{prdata: fcb_reg, pready: 1'b1, pslverr: 1'b0};
  always @(posedge clk_mcu)
    if (fcb_apb_req.psel && fcb_apb_req.penable && fcb_apb_req.pwrite) fcb_reg <= fcb_apb_req.pwdata;

  // ---------------- eFPGA user APB slave model ----------------
  logic [31:0] fregs [32];
  assign fpga_apb_pready = 1'b1;
  assign fpga_apb_prdata = fregs[fpga_apb_paddr[6:2]];
  always @(posedge clk_efpga)
    if (fpga_apb_psel && fpga_apb_penable && fpga_apb_pwrite) fregs[fpga_apb_paddr[6:2]] <= fpga_apb_pwdata;

  // ---------------- eFPGA pad I/O ----------------
  always_comb begin
    fpga_gpio_out    = '0;
    fpga_gpio_oe     = '0;
    fpga_gpio_out[5] = 1'b1;
    fpga_gpio_oe[5]  = 1'b1;
  end

  // ---------------- eFPGA uDMA accelerator model: running CRC-32 ----------------
  function automatic logic [31:0] crc32_word(input logic [31:0] crc, input logic [31:0] w);
    logic [31:0] c;
    c = crc ^ w;
    for (int k = 0; k < 32; k++) c = c[0] ? ((c >> 1) ^ 32'hEDB8_8320) : (c >> 1);
    return c;
  endfunction
  logic [31:0] fcrc, fout [$];
  always @(posedge clk_efpga or negedge fpga_rst_n) begin
    if (!fpga_rst_n) begin
      fcrc <= 32'hFFFF_FFFF; fpga_dma_tx_ready <= 0; fpga_dma_rx_valid <= 0; fpga_dma_rx_data <= 0;
    end else begin
      if (fpga_dma_tx_valid && fpga_dma_tx_ready) begin
        fcrc <= crc32_word(fcrc, fpga_dma_tx_data);
        fout.push_back(crc32_word(fcrc, fpga_dma_tx_data));
      end
      fpga_dma_tx_ready <= 1'($urandom);
      if (fpga_dma_rx_valid && fpga_dma_rx_ready) fpga_dma_rx_valid <= 0;
      if (!(fpga_dma_rx_valid && !fpga_dma_rx_ready) && fout.size() > 0 && 1'($urandom)) begin
        fpga_dma_rx_valid <= 1; fpga_dma_rx_data <= fout.pop_front();
      end
    end
  end

  // ---------------- eFPGA memory ports ----------------
  task automatic fmem(input int p, input logic [31:0] a, input bit we, input logic [31:0] wd,
                      output logic [31:0] rdata, output logic err);
    @(negedge clk_efpga);
    fpga_mem_req[p] = 1; fpga_mem_reqd[p] = '{addr: a, we: we, be: 4'hF, wdata: wd};
    @(posedge clk_efpga); while (!fpga_mem_gnt[p]) @(posedge clk_efpga);
    @(negedge clk_efpga); fpga_mem_req[p] = 0;
    while (!fpga_mem_rvalid[p]) @(negedge clk_efpga);
    rdata = fpga_mem_rsp[p].rdata; err = fpga_mem_rsp[p].err;
  endtask
  task automatic fmem_port(input int p);
    logic [31:0] q; logic e;
    logic [31:0] base;
    base = ILV_BASE + 32'h2_0000 + 32'(p * 32'h100);
    for (int k = 0; k < 24; k++) begin
      fmem(p, base + 32'(4 * k), 1, 32'hF000_0000 | 32'(p << 16) | 32'(k), q, e);
      check(!e, "eFPGA write without error"); n_fmem++;
    end
    for (int k = 0; k < 24; k++) begin
      fmem(p, base + 32'(4 * k), 0, 0, q, e);
      check(!e && q == (32'hF000_0000 | 32'(p << 16) | 32'(k)), $sformatf("eFPGA port %0d read %0d: %h", p, k, q));
      n_fmem++;
    end
  endtask

  // ---------------- JTAG master (contends with the eFPGA ports) ----------------
  task automatic jtag_burst();
    for (int k = 0; k < 40; k++) begin
      @(negedge clk_mcu);
      jtag_req = 1; jtag_reqd = '{addr: ILV_BASE + 32'h2_0800 + 32'(4 * k), we: 1, be: 4'hF, wdata: 32'hA000_0000 + 32'(k)};
      @(posedge clk_mcu); while (!jtag_gnt) @(posedge clk_mcu);
      @(negedge clk_mcu); jtag_req = 0;
      check(jtag_rvalid && !jtag_rsp.err, "JTAG write response");
    end
  endtask

  // crossbar contention monitor
  always @(posedge clk_mcu) if (rst_n)
    for (int m = 0; m < N_MASTERS; m++) if (dut.m_req[m] && !dut.m_gnt[m]) n_contention++;

  // eFPGA clock activity
  always @(posedge clk_efpga) if (fpga_rst_n) n_fpga_clk++;

  // ---------------- MAC reference ----------------
  function automatic logic [31:0] lane_prod(input logic [1:0] mode, input int k, input logic [31:0] a, input logic [31:0] b);
    case (mode)
      2'd0: return 32'($signed(a[8*k +: 8]) * $signed(b[8*k +: 8]));
      2'd1: return (k < 2) ? 32'($signed(a[16*k +: 16]) * $signed(b[16*k +: 16])) : 32'h0;
      default: return (k == 0) ? 32'($signed(a) * $signed(b)) : 32'h0;
    endcase
  endfunction

  // ---------------- bandwidth: three single-cycle masters streaming ----------------
  // Each master keeps req high and moves to its next word in the cycle after
  // a grant. banks[m] gives the interleaved bank of master m (or -1: private
  // bank 0). Returns the grants per master over NCYC cycles.
  task automatic stream3(input int bk0, input int bk1, input int bk2, input int ncyc, output int g [3]);
    int bk [3]; int k [3]; bit pend [3];
    bk = '{bk0, bk1, bk2}; g = '{0, 0, 0}; k = '{0, 0, 0};
    for (int c = 0; c < ncyc; c++) begin
      logic [31:0] a [3];
      for (int m = 0; m < 3; m++)
        a[m] = (bk[m] < 0) ? PRIV0_BASE + 32'h4000 + 32'(4 * k[m]) : ILV_BASE + 32'h1_0000 + 32'(16 * k[m] + 4 * bk[m]);
      @(negedge clk_mcu);
      cpu_i_req = 1; cpu_i_reqd = '{addr: a[0], we: 0, be: 4'hF, wdata: 0};
      cpu_d_req = 1; cpu_d_reqd = '{addr: a[1], we: 0, be: 4'hF, wdata: 0};
      jtag_req  = 1; jtag_reqd  = '{addr: a[2], we: 0, be: 4'hF, wdata: 0};
      #1;                          // grants of this cycle, taken at the next edge
      if (cpu_i_gnt) begin g[0]++; k[0]++; end
      if (cpu_d_gnt) begin g[1]++; k[1]++; end
      if (jtag_gnt)  begin g[2]++; k[2]++; end
    end
    // a request may not be withdrawn before its grant: finish the open ones
    pend[0] = !cpu_i_gnt; pend[1] = !cpu_d_gnt; pend[2] = !jtag_gnt;
    while (pend[0] || pend[1] || pend[2]) begin
      @(negedge clk_mcu);
      cpu_i_req = pend[0]; cpu_d_req = pend[1]; jtag_req = pend[2];
      #1;
      if (cpu_i_gnt) pend[0] = 0;
      if (cpu_d_gnt) pend[1] = 0;
      if (jtag_gnt)  pend[2] = 0;
    end
    @(negedge clk_mcu); cpu_i_req = 0; cpu_d_req = 0; jtag_req = 0;
  endtask

  // ---------------- main sequence ----------------
  localparam logic [31:0] UART_SRC = PRIV0_BASE + 32'h100, UART_DST = ILV_BASE + 32'h1000;
  localparam logic [31:0] FDMA_SRC = ILV_BASE + 32'h3000, FDMA_DST = PRIV1_BASE + 32'h200;
  string      stage = "reset";
  logic [7:0]  uart_bytes [6];
  logic [31:0] fdma_words [8];

  initial begin
    logic [31:0] q, ref_crc; logic e;
    cpu_priv_m = 1; cpu_csr_we = 0; cpu_csr_addr = 0; cpu_csr_wdata = 0;
    cpu_i_req = 0; cpu_i_reqd = '0; cpu_d_req = 0; cpu_d_reqd = '0;
    jtag_req = 0; jtag_reqd = '0; fcb_reg = 0; gpio_in_level = 1;
    for (int p = 0; p < 4; p++) begin fpga_mem_req[p] = 0; fpga_mem_reqd[p] = '0; end
    for (int u = 0; u < 2; u++) begin
      mac_en[u] = 0; mac_clr[u] = 0; mac_mode[u] = 0; mac_sel_a[u] = 0; mac_sel_b[u] = 0;
      mac_op_a[u] = 0; mac_op_b[u] = 0; mac_buf_we[u] = 0; mac_buf_waddr[u] = 0; mac_buf_wdata[u] = 0;
      mac_buf_raddr_a[u] = 0; mac_buf_raddr_b[u] = 0;
    end
    fpga_events = 0;
    for (int i = 0; i < 32; i++) fregs[i] = 0;
    {n_sram, n_rom, n_pmp, n_apb, n_gpio, n_padmux, n_uart, n_udma_evt, n_fpga_clk, n_fmem, n_fmem_err,
     n_fdma, n_fapb, n_fcb, n_fevt, n_timer, n_mac, n_contention, n_parallel, n_rr} = '0;
    #23 rst_n = 1;
    repeat (3) @(posedge clk_mcu);

    stage = "boot ROM fetch";
    // --- boot ROM fetch ---
    @(negedge clk_mcu); cpu_i_req = 1; cpu_i_reqd = '{addr: ROM_BASE, we: 0, be: 4'hF, wdata: 0};
    @(posedge clk_mcu); while (!cpu_i_gnt) @(posedge clk_mcu);
    @(negedge clk_mcu); cpu_i_req = 0;
    check(cpu_i_rvalid && !cpu_i_rsp.err && cpu_i_rsp.rdata == 32'h1C00_82B7, "boot ROM word 0");
    n_rom++;

    stage = "SRAM through";
    // --- SRAM through the data port ---
    for (int k = 0; k < 16; k++) begin
      logic [31:0] a;
      a = (k < 8) ? PRIV0_BASE + 32'(4 * k * 37) : ILV_BASE + 32'(4 * k * 1031);
      wr(a, a ^ 32'h5A5A_1234);
    end
    for (int k = 0; k < 16; k++) begin
      logic [31:0] a;
      a = (k < 8) ? PRIV0_BASE + 32'(4 * k * 37) : ILV_BASE + 32'(4 * k * 1031);
      rd(a, q); check(q == (a ^ 32'h5A5A_1234), $sformatf("SRAM %h", a)); n_sram++;
    end

    stage = "bandwidth";
    // --- bandwidth: distinct banks serve three masters per cycle; a private
    //     bank serves one word per cycle (32 bit x 600 MHz = 19.2 Gbit/s) ---
    begin
      int g [3];
      stream3(0, 1, 2, 32, g);
      check(g[0] == 32 && g[1] == 32 && g[2] == 32, $sformatf("three banks, three masters: grants %0d %0d %0d of 32", g[0], g[1], g[2]));
      if (g[0] + g[1] + g[2] == 96) n_parallel++;
      stream3(3, -1, 2, 32, g);
      check(g[1] == 32, $sformatf("private bank: %0d words in 32 cycles", g[1]));
      check(g[0] == 32 && g[2] == 32, "interleaved masters undisturbed by the private bank");
      if (g[1] == 32) n_parallel++;
      stream3(1, 1, 1, 30, g);
      check(g[0] + g[1] + g[2] == 30, $sformatf("one bank: one grant per cycle, got %0d", g[0] + g[1] + g[2]));
      check(g[0] == 10 && g[1] == 10 && g[2] == 10, $sformatf("round robin shares one bank evenly: %0d %0d %0d", g[0], g[1], g[2]));
      if (g[0] == 10 && g[1] == 10 && g[2] == 10) n_rr++;
    end

    stage = "PMP";
    // --- PMP: user mode may touch SRAM only ---
    csr(12'h3B0, SRAM_BASE >> 2);
    csr(12'h3B1, SRAM_END >> 2);
    csr(12'h3A0, 32'h0000_0B00);            // entry 1: TOR, R+W
    cpu_priv_m = 0;
    rd(PRIV0_BASE, q); check(q == (PRIV0_BASE ^ 32'h5A5A_1234), "user-mode SRAM read allowed");
    cpu_access(ROM_BASE, 0, 0, q, e); check(e, "user-mode ROM read denied"); if (e) n_pmp++;
    cpu_access(APB_BASE, 1, 32'h1, q, e); check(e, "user-mode APB write denied"); if (e) n_pmp++;
    cpu_priv_m = 1;

    stage = "APB read-back";
    // --- APB read-back, GPIO, pad multiplexing ---
    wr(SOC + 32'h00, 32'h0000_0805);        // pad 0,1: peripheral (UART); pad 5: eFPGA
    rd(SOC + 32'h00, q); check(q == 32'h0000_0805, "PADFUN0 read-back"); n_apb++;
    wr(GPIO + 32'h00, 32'h4); wr(GPIO + 32'h08, 32'h4);
    repeat (2) @(posedge clk_mcu);
    check(pad_oe[2] && pad_out[2], "GPIO output on pad 2"); if (pad_oe[2] && pad_out[2]) n_gpio++;
    rd(GPIO + 32'h10, q); check(q[3] == 1'b1, "GPIO input pad 3 high"); if (q[3]) n_gpio++;
    gpio_in_level = 0; repeat (4) @(posedge clk_mcu);
    rd(GPIO + 32'h10, q); check(q[3] == 1'b0, "GPIO input pad 3 low"); if (!q[3]) n_gpio++;
    check(pad_oe[5] && pad_out[5], "eFPGA output on pad 5"); if (pad_oe[5] && pad_out[5]) n_padmux++;
    check(fpga_gpio_in[6], "pad 6 seen by the eFPGA"); if (fpga_gpio_in[6]) n_padmux++;
    check(!pad_oe[6], "pad 6 not driven while on GPIO input");

    stage = "eFPGA bring-up";
    // --- eFPGA bring-up: configuration port, clock, reset ---
    wr(FCB + 32'h0, 32'hC0FF_EE01);
    check(fcb_reg == 32'hC0FF_EE01, "configuration port write"); 
    rd(FCB + 32'h4, q); check(q == 32'hC0FF_EE01, "configuration port read"); n_fcb++;
    check(fpga_rst_n == 1'b0, "eFPGA held in reset after boot");
    wr(SOC + 32'h10, 32'h5); wr(SOC + 32'h14, 32'h3); wr(SOC + 32'h18, 32'h1);
    repeat (20) @(posedge clk_mcu);
    check(fpga_rst_n == 1'b1, "eFPGA reset released");

    stage = "eFPGA user APB";
    // --- eFPGA user APB ---
    for (int k = 0; k < 6; k++) wr(FAPB + 32'(4 * k), 32'h1111_0000 + 32'(k));
    for (int k = 0; k < 6; k++) begin rd(FAPB + 32'(4 * k), q); check(q == 32'h1111_0000 + 32'(k), "eFPGA APB read-back"); n_fapb++; end

    stage = "events and timer";
    // --- events and timer into the interrupt lines ---
    wr(EVT + 32'h00, 32'h001F_0008);        // mask: eFPGA event 3, timer, uDMA events
    @(negedge clk_efpga); fpga_events[3] = 1; @(negedge clk_efpga); fpga_events[3] = 0;
    repeat (12) @(posedge clk_mcu);
    check(cpu_irq[3], "eFPGA event 3 on interrupt line 3"); if (cpu_irq[3]) n_fevt++;
    wr(EVT + 32'h04, 32'h8);
    @(posedge clk_mcu); check(!cpu_irq[3], "event cleared");
    wr(TIM + 32'h08, 32'd40); wr(TIM + 32'h04, 32'd0); wr(TIM + 32'h00, 32'h1);
    repeat (60) @(posedge clk_mcu);
    check(cpu_irq[16], "timer interrupt"); if (cpu_irq[16]) n_timer++;
    wr(TIM + 32'h00, 32'h0); wr(EVT + 32'h04, 32'h0001_0000);

    stage = "UART over";
    // --- UART over uDMA channel 0 (loop-back through the pads) ---
    for (int k = 0; k < 6; k++) uart_bytes[k] = 8'($urandom);
    wr(UART_SRC, {uart_bytes[3], uart_bytes[2], uart_bytes[1], uart_bytes[0]});
    wr(UART_SRC + 4, {16'h0, uart_bytes[5], uart_bytes[4]});
    wr(UDMA + 32'h000, 32'h3);                                 // enable both channels
    wr(UDMA + 32'h060, 32'd6);                                 // UART bit period: 6 peripheral clocks
    wr(UDMA + 32'h040, UART_DST); wr(UDMA + 32'h044, 32'd6); wr(UDMA + 32'h048, 32'h1);
    wr(UDMA + 32'h050, UART_SRC); wr(UDMA + 32'h054, 32'd6); wr(UDMA + 32'h058, 32'h1);

    stage = "eFPGA CRC";
    // --- eFPGA CRC accelerator over uDMA channel 1 ---
    for (int k = 0; k < 8; k++) begin fdma_words[k] = $urandom; wr(FDMA_SRC + 32'(4 * k), fdma_words[k]); end
    wr(UDMA + 32'h0A0, 32'h0000_00C5);                         // accelerator configuration word
    wr(UDMA + 32'h080, FDMA_DST); wr(UDMA + 32'h084, 32'd32); wr(UDMA + 32'h088, 32'h5);
    wr(UDMA + 32'h090, FDMA_SRC); wr(UDMA + 32'h094, 32'd32); wr(UDMA + 32'h098, 32'h5);

    stage = "meanwhile";
    // --- meanwhile: eFPGA memory ports and JTAG in parallel ---
    fork
      fmem_port(0); fmem_port(1); fmem_port(2); fmem_port(3);
      jtag_burst();
    join
    fmem(2, ROM_BASE, 0, 0, q, e); check(e, "eFPGA access to the ROM rejected"); if (e) n_fmem_err++;
    fmem(1, 32'h5000_0000, 1, 32'h1, q, e); check(e, "eFPGA access to unmapped space rejected"); if (e) n_fmem_err++;
    for (int k = 0; k < 40; k += 7) begin
      rd(ILV_BASE + 32'h2_0800 + 32'(4 * k), q); check(q == 32'hA000_0000 + 32'(k), "JTAG data in memory");
    end
    check(fpga_dma_cfg == 32'h0000_00C5, "uDMA channel 1 configuration reaches the eFPGA");

    stage = "MAC units";
    // --- MAC units ---
    for (int u = 0; u < 2; u++) begin
      logic [31:0] ref_acc [4], a, b;
      logic [1:0] mode;
      mode = 2'(u == 0 ? 0 : 1);
      for (int l = 0; l < 4; l++) ref_acc[l] = 0;
      for (int k = 0; k < 10; k++) begin
        a = $urandom; b = $urandom;
        @(negedge clk_efpga);
        if (u == 1) begin mac_buf_we[u] = 2'b01; mac_buf_waddr[u] = 9'(k); mac_buf_wdata[u] = a; end
        @(negedge clk_efpga); mac_buf_we[u] = 0;
        mac_en[u] = 1; mac_clr[u] = (k == 0); mac_mode[u] = mode;
        mac_sel_a[u] = (u == 1); mac_buf_raddr_a[u] = 9'(k);
        mac_op_a[u] = (u == 1) ? 32'h0 : a; mac_op_b[u] = b;
        for (int l = 0; l < 4; l++) ref_acc[l] += lane_prod(mode, l, a, b);
        @(negedge clk_efpga); mac_en[u] = 0; mac_clr[u] = 0;
      end
      repeat (3) @(negedge clk_efpga);
      for (int l = 0; l < 4; l++) begin
        check(mac_acc[u][l] == ref_acc[l], $sformatf("MAC %0d lane %0d: %h exp %h", u, l, mac_acc[u][l], ref_acc[l]));
        if (mac_acc[u][l] == ref_acc[l]) n_mac++;
      end
    end

    stage = "wait for the uDMA";
    // --- wait for the uDMA transfers ---
    // poll the event unit until both RX transfers have signalled completion
    for (int t = 0; t < 200; t++) begin
      repeat (50) @(posedge clk_mcu);
      rd(EVT + 32'h04, q);
      if (q[17] && q[19]) break;
    end
    repeat (4) @(posedge clk_mcu);
    rd(EVT + 32'h04, q);
    check(q[17] && q[18] && q[19] && q[20], $sformatf("uDMA done events pending: %h", q));
    for (int b = 17; b <= 20; b++) if (q[b]) n_udma_evt++;
    check(cpu_irq[17] && cpu_irq[20], "uDMA interrupts");
    rd(UART_DST, q);
    check(q == {uart_bytes[3], uart_bytes[2], uart_bytes[1], uart_bytes[0]}, $sformatf("UART bytes 0-3: %h", q));
    if (q == {uart_bytes[3], uart_bytes[2], uart_bytes[1], uart_bytes[0]}) n_uart += 4;
    rd(UART_DST + 4, q);
    check(q[15:0] == {uart_bytes[5], uart_bytes[4]}, $sformatf("UART bytes 4-5: %h", q));
    if (q[15:0] == {uart_bytes[5], uart_bytes[4]}) n_uart += 2;
    ref_crc = 32'hFFFF_FFFF;
    for (int k = 0; k < 8; k++) begin
      ref_crc = crc32_word(ref_crc, fdma_words[k]);
      rd(FDMA_DST + 32'(4 * k), q);
      check(q == ref_crc, $sformatf("CRC word %0d: %h exp %h", k, q, ref_crc));
      if (q == ref_crc) n_fdma++;
    end

    stage = "report";
    // --- report ---
    $display("mechanisms: sram=%0d rom=%0d pmp=%0d apb=%0d gpio=%0d padmux=%0d uart=%0d udma_evt=%0d fpga_clk=%0d",
             n_sram, n_rom, n_pmp, n_apb, n_gpio, n_padmux, n_uart, n_udma_evt, n_fpga_clk);
    $display("            fmem=%0d fmem_err=%0d fdma=%0d fapb=%0d fcb=%0d fevt=%0d timer=%0d mac=%0d contention=%0d parallel=%0d rr=%0d",
             n_fmem, n_fmem_err, n_fdma, n_fapb, n_fcb, n_fevt, n_timer, n_mac, n_contention, n_parallel, n_rr);
    check(n_sram > 0, "mechanism sram");         check(n_rom > 0, "mechanism rom");
    check(n_pmp > 0, "mechanism pmp");           check(n_apb > 0, "mechanism apb");
    check(n_gpio > 0, "mechanism gpio");         check(n_padmux > 0, "mechanism padmux");
    check(n_uart > 0, "mechanism uart");         check(n_udma_evt > 0, "mechanism udma_evt");
    check(n_fpga_clk > 0, "mechanism fpga_clk"); check(n_fmem > 0, "mechanism fmem");
    check(n_fmem_err > 0, "mechanism fmem_err"); check(n_fdma > 0, "mechanism fdma");
    check(n_fapb > 0, "mechanism fapb");         check(n_fcb > 0, "mechanism fcb");
    check(n_fevt > 0, "mechanism fevt");         check(n_timer > 0, "mechanism timer");
    check(n_mac > 0, "mechanism mac");           check(n_contention > 0, "mechanism contention");
    check(n_parallel > 0, "mechanism parallel");  check(n_rr > 0, "mechanism round_robin");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired in stage %s", stage);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
