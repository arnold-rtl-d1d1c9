// Testbench for udma_core with two channels. A byte-addressed memory model
// sits behind the RX (write) and TX (read) ports with random grant delays.
// Channel 0 receives 37 bytes (8-bit items, unaligned start) while channel 1
// receives 16 words; then channel 0 sends 10 half-words and channel 1 sends
// 8 words. Checks: memory contents, TX item order and values, exactly one
// end-of-transfer event per direction, register read-back (CG, PERIPH_CFG,
// busy flag, remaining size) and pslverr on an undefined register.
module tb_udma_core;
  import arnold_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  int checks = 0, failures = 0;
  apb_req_t apb_req; apb_rsp_t apb_rsp;
  logic rx_req, rx_gnt, tx_req, tx_gnt, tx_rvalid;
  tcdm_req_t rx_reqd, tx_reqd; tcdm_rsp_t tx_rsp;
  logic ch_rx_valid [2], ch_rx_ready [2], ch_tx_valid [2], ch_tx_ready [2];
  logic [31:0] ch_rx_data [2], ch_tx_data [2], ch_cfg [2];
  logic [1:0] ch_en, evt_rx, evt_tx;
  udma_core #(.NCH(2)) dut (.*);

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic apb_wr(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk); apb_req = '{paddr: a, pwrite: 1, pwdata: d, psel: 1, penable: 0};
    @(negedge clk); apb_req.penable = 1;
    @(negedge clk); apb_req = '0;
  endtask
  task automatic apb_rd(input logic [31:0] a, output logic [31:0] d, output logic err);
    @(negedge clk); apb_req = '{paddr: a, pwrite: 0, pwdata: 0, psel: 1, penable: 0};
    @(negedge clk); apb_req.penable = 1; #0.1 d = apb_rsp.prdata; err = apb_rsp.pslverr;
    @(negedge clk); apb_req = '0;
  endtask

  // memory model
  logic [7:0] mem [logic [31:0]];
  function automatic logic [7:0] rdb(input logic [31:0] a);
    return mem.exists(a) ? mem[a] : 8'h00;
  endfunction
  int rxd, txd;
  assign rx_gnt = rx_req && rxd == 0;
  assign tx_gnt = tx_req && txd == 0;
  always @(posedge clk) begin
    tx_rvalid <= 0;
    if (rx_req && !rx_gnt) rxd <= rxd - 1;
    if (rx_gnt) begin
      rxd <= $urandom % 3;
      for (int b = 0; b < 4; b++) if (rx_reqd.be[b]) mem[rx_reqd.addr + 32'(b)] = rx_reqd.wdata[8*b +: 8];
    end
    if (tx_req && !tx_gnt) txd <= txd - 1;
    if (tx_gnt) begin
      txd <= $urandom % 3;
      tx_rvalid <= 1;
      tx_rsp <= '{rdata: {rdb(tx_reqd.addr + 3), rdb(tx_reqd.addr + 2), rdb(tx_reqd.addr + 1), rdb(tx_reqd.addr)}, err: 0};
    end
  end

  // stream sources and sinks
  logic [7:0]  src0 [37]; logic [31:0] src1 [16];
  bit rel1 = 0;
  int i0 = 0, i1 = 0, n_evrx [2], n_evtx [2];
  logic [31:0] got0 [$], got1 [$];
  always @(posedge clk) if (rst_n) begin
    if (ch_rx_valid[0] && ch_rx_ready[0]) i0++;
    if (ch_rx_valid[1] && ch_rx_ready[1]) i1++;
    if (ch_tx_valid[0]) begin check(ch_tx_ready[0], "TX item to a ready sink"); got0.push_back(ch_tx_data[0]); end
    if (ch_tx_valid[1]) rel1 = 1;
    if (ch_tx_valid[1]) begin check(ch_tx_ready[1], "TX item to a ready sink"); got1.push_back(ch_tx_data[1]); end
    for (int c = 0; c < 2; c++) begin
      if (evt_rx[c]) n_evrx[c]++;
      if (evt_tx[c]) n_evtx[c]++;
    end
  end
  always @(negedge clk) begin
    ch_rx_valid[0] <= (i0 < 37) && 1'($urandom);
    ch_rx_data[0]  <= {24'($urandom), src0[i0 < 37 ? i0 : 0]};
    ch_rx_valid[1] <= (i1 < 16) && ($urandom % 4 != 0);
    ch_rx_data[1]  <= src1[i1 < 16 ? i1 : 0];
    ch_tx_ready[0] <= 1;
    // channel 1 sink: ready is sticky while a read is outstanding
    if (!ch_tx_ready[1] || rel1) begin ch_tx_ready[1] <= 1'($urandom); rel1 = 0; end
  end

  localparam logic [31:0] U = APB_BASE + 32'h4000;
  localparam logic [31:0] B0 = SRAM_BASE + 32'h101, B1 = SRAM_BASE + 32'h200;
  initial begin
    logic [31:0] q; logic e;
    apb_req = '0; rxd = 0; txd = 0; tx_rvalid = 0; tx_rsp = '0;
    n_evrx = '{0, 0}; n_evtx = '{0, 0};
    for (int k = 0; k < 37; k++) src0[k] = 8'($urandom);
    for (int k = 0; k < 16; k++) src1[k] = $urandom;
    ch_rx_valid = '{0, 0}; ch_tx_ready = '{0, 0}; ch_rx_data = '{0, 0};
    #20 rst_n = 1;
    apb_wr(U + 32'h000, 32'h3);
    apb_rd(U + 32'h000, q, e); check(q == 32'h3 && ch_en == 2'b11, "CG register");
    apb_wr(U + 32'h0A0, 32'h0000_0123);
    check(ch_cfg[1] == 32'h123, "PERIPH_CFG drives channel config");
    apb_rd(U + 32'h07C, q, e); check(e, "pslverr on undefined register");
    // RX transfers
    apb_wr(U + 32'h040, B0); apb_wr(U + 32'h044, 37); apb_wr(U + 32'h048, 32'h1);       // 8-bit
    apb_wr(U + 32'h080, B1); apb_wr(U + 32'h084, 64); apb_wr(U + 32'h088, 32'h5);       // 32-bit
    apb_rd(U + 32'h048, q, e); check(q[0] == 1'b1, "busy while running");
    wait (n_evrx[0] == 1 && n_evrx[1] == 1);
    repeat (5) @(posedge clk);
    apb_rd(U + 32'h048, q, e); check(q[0] == 1'b0, "not busy after the transfer");
    apb_rd(U + 32'h044, q, e); check(q == 0, "remaining size 0");
    for (int k = 0; k < 37; k++) check(rdb(B0 + 32'(k)) == src0[k], $sformatf("RX byte %0d", k));
    for (int k = 0; k < 16; k++)
      check({rdb(B1 + 32'(4*k+3)), rdb(B1 + 32'(4*k+2)), rdb(B1 + 32'(4*k+1)), rdb(B1 + 32'(4*k))} == src1[k], $sformatf("RX word %0d", k));
    check(rdb(B0 - 1) == 8'h00 && rdb(B0 + 37) == 8'h00, "no writes outside the buffer");
    // TX transfers: ch0 10 half-words from B0+1, ch1 8 words from B1
    apb_wr(U + 32'h050, B0 + 1); apb_wr(U + 32'h054, 20); apb_wr(U + 32'h058, 32'h3);   // 16-bit
    apb_wr(U + 32'h090, B1);     apb_wr(U + 32'h094, 32); apb_wr(U + 32'h098, 32'h5);   // 32-bit
    wait (n_evtx[0] == 1 && n_evtx[1] == 1);
    repeat (10) @(posedge clk);
    check(got0.size() == 10 && got1.size() == 8, $sformatf("TX item counts %0d %0d", got0.size(), got1.size()));
    for (int k = 0; k < 10 && k < got0.size(); k++)
      check(got0[k] == {16'h0, rdb(B0 + 32'(2*k+2)), rdb(B0 + 32'(2*k+1))}, $sformatf("TX half %0d: %h", k, got0[k]));
    for (int k = 0; k < 8 && k < got1.size(); k++) check(got1[k] == src1[k], $sformatf("TX word %0d", k));
    check(n_evrx[0] == 1 && n_evrx[1] == 1 && n_evtx[0] == 1 && n_evtx[1] == 1, "one event per transfer");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
