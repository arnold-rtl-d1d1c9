// Workload testbench: a binary neural network convolution layer in the
// fabric, using four memory ports, the register interface and one event.
// The input is an H x W map of 32-bit words, each word 32 one-bit channels;
// there are eight 3 x 3 filters of such words. For each output position the
// fabric adds popcount(input XOR filter) over the 3 x 3 window and compares
// the sum with a programmed threshold: output bit f is 1 when the sum of
// filter f is at most the threshold. It works on two horizontally adjacent
// windows at a time (sixteen 3 x 3 results per step, eight filters each),
// reads filters once and then the 3 x 4 input patch of each step through
// the four ports in parallel, and stores one output byte (eight filter bits)
// per position with byte enables. The map size (8 x 8) is this testbench's
// choice; the chip's layer sizes are not stated.
//
// Clocks: core 600 MHz, eFPGA on its FLL (100 MHz).
module tb_wl_bnn;
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

  // ---------------- idle pins ----------------
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

  localparam int H = 8, W = 8, OH = H - 2, OW = W - 2;

  // ---------------- fabric: registers ----------------
  // 0x00 input pointer, 0x04 filter pointer, 0x08 output pointer, 0x0C threshold, 0x10 start
  logic [31:0] f_in, f_wt, f_out, f_thr; logic f_go;
  assign fpga_apb_pready = 1'b1;
  assign fpga_apb_prdata = (fpga_apb_paddr[4:2] == 3'd3) ? f_thr : 32'h0;
  always @(posedge clk_efpga or negedge fpga_rst_n)
    if (!fpga_rst_n) begin f_in <= 0; f_wt <= 0; f_out <= 0; f_thr <= 0; f_go <= 0; end
    else if (fpga_apb_psel && fpga_apb_penable && fpga_apb_pwrite)
      case (fpga_apb_paddr[4:2])
        3'd0: f_in <= fpga_apb_pwdata;
        3'd1: f_wt <= fpga_apb_pwdata;
        3'd2: f_out <= fpga_apb_pwdata;
        3'd3: f_thr <= fpga_apb_pwdata;
        default: f_go <= fpga_apb_pwdata[0];
      endcase

  // ---------------- fabric: the accelerator ----------------
  task automatic fmem(input int p, input logic [31:0] a, input bit we, input logic [31:0] wd, input logic [3:0] be,
                      output logic [31:0] rdata);
    @(negedge clk_efpga);
    fpga_mem_req[p] = 1; fpga_mem_reqd[p] = '{addr: a, we: we, be: be, wdata: wd};
    @(posedge clk_efpga); while (!fpga_mem_gnt[p]) @(posedge clk_efpga);
    @(negedge clk_efpga); fpga_mem_req[p] = 0;
    while (!fpga_mem_rvalid[p]) @(negedge clk_efpga);
    rdata = fpga_mem_rsp[p].rdata;
    if (fpga_mem_rsp[p].err) f_errs++;
  endtask
  logic [31:0] fw [8][9];      // filters held in fabric registers
  logic [31:0] patch [3][4];   // input patch of one step
  int f_errs = 0, f_cycles = 0; bit f_busy = 0;
  always @(posedge clk_efpga) if (f_busy) f_cycles++;
  // port p loads filter words p, p+4, ... (72 words)
  task automatic load_filters(input int p);
    for (int i = p; i < 72; i += 4) fmem(p, f_wt + 32'(4 * i), 0, 0, 4'hF, fw[i / 9][i % 9]);
  endtask
  // port p loads column p of the 3 x 4 patch at (r, c)
  task automatic load_column(input int p, input int r, input int c);
    for (int y = 0; y < 3; y++) fmem(p, f_in + 32'(4 * ((r + y) * W + c + p)), 0, 0, 4'hF, patch[y][p]);
  endtask
  initial begin
    logic [31:0] q;
    fpga_events = '0;
    for (int p = 0; p < 4; p++) begin fpga_mem_req[p] = 0; fpga_mem_reqd[p] = '0; end
    forever begin
      @(posedge clk_efpga);
      if (fpga_rst_n && f_go) begin
        f_busy = 1;
        fork load_filters(0); load_filters(1); load_filters(2); load_filters(3); join
        for (int r = 0; r < OH; r++)
          for (int c = 0; c < OW; c += 2) begin
            logic [7:0] act [2];
            fork load_column(0, r, c); load_column(1, r, c); load_column(2, r, c); load_column(3, r, c); join
            for (int x = 0; x < 2; x++)
              for (int f = 0; f < 8; f++) begin
                int sum; sum = 0;
                for (int y = 0; y < 3; y++)
                  for (int dx = 0; dx < 3; dx++) sum += $countones(patch[y][x + dx] ^ fw[f][3 * y + dx]);
                act[x][f] = (sum <= int'(f_thr));
              end
            // positions (r, c) and (r, c+1) are bytes of the output map
            for (int x = 0; x < 2; x++) begin
              int idx; idx = r * OW + c + x;
              fmem(x, f_out + 32'(idx & ~3), 1, {4{act[x]}}, 4'b0001 << (idx % 4), q);
            end
          end
        f_busy = 0;
        @(negedge clk_efpga); fpga_events[5] = 1;
        @(negedge clk_efpga); fpga_events[5] = 0;
        wait (!f_go);
      end
    end
  end

  localparam logic [31:0] IN = ILV_BASE + 32'hA000, WT = ILV_BASE + 32'hB000, OUT = PRIV1_BASE + 32'hC00;

  initial begin
    logic [31:0] q, inmap [H * W], wts [72];
    int cyc, thr;
    cpu_priv_m = 1; cpu_csr_we = 0; cpu_csr_addr = 0; cpu_csr_wdata = 0;
    cpu_i_req = 0; cpu_i_reqd = '0; cpu_d_req = 0; cpu_d_reqd = '0;
    jtag_req = 0; jtag_reqd = '0;
    thr = 144;                               // half of 9 x 32
    #20 rst_n = 1;
    repeat (3) @(posedge clk_mcu);
    for (int i = 0; i < H * W; i++) begin inmap[i] = $urandom; wr(IN + 32'(4 * i), inmap[i]); end
    for (int i = 0; i < 72; i++) begin wts[i] = $urandom; wr(WT + 32'(4 * i), wts[i]); end
    wr(SOC + 32'h10, 32'h4); wr(SOC + 32'h18, 32'h1);
    wr(EVT + 32'h00, 32'h20);                // eFPGA event 5 -> interrupt line 5
    wr(FAPB + 32'h00, IN); wr(FAPB + 32'h04, WT); wr(FAPB + 32'h08, OUT); wr(FAPB + 32'h0C, 32'(thr));
    rd(FAPB + 32'h0C, q); check(q == 32'(thr), "threshold read-back");
    wr(FAPB + 32'h10, 32'h1);
    cyc = 0;
    while (!cpu_irq[5] && cyc < 200000) begin @(posedge clk_mcu); cyc++; end
    check(cpu_irq[5], "completion interrupt");
    check(f_errs == 0, "no bus errors");
    for (int r = 0; r < OH; r++)
      for (int c = 0; c < OW; c++) begin
        logic [7:0] exp_act; int idx;
        for (int f = 0; f < 8; f++) begin
          int sum; sum = 0;
          for (int y = 0; y < 3; y++)
            for (int dx = 0; dx < 3; dx++) sum += $countones(inmap[(r + y) * W + c + dx] ^ wts[9 * f + 3 * y + dx]);
          exp_act[f] = (sum <= thr);
        end
        idx = r * OW + c;
        rd(OUT + 32'(idx & ~3), q);
        check(q[8 * (idx % 4) +: 8] == exp_act, $sformatf("output (%0d,%0d): %h expected %h", r, c, q[8 * (idx % 4) +: 8], exp_act));
      end
    $display("BNN layer %0dx%0d, 8 filters: %0d eFPGA cycles", OH, OW, f_cycles);
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
