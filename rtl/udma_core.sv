// uDMA core: the autonomous I/O DMA that moves data between the peripheral
// channels and the shared SRAM without the CPU. Following the paper, it has
// exactly two crossbar master ports, RX (peripheral -> memory, writes) and
// TX (memory -> peripheral, reads), each shared in time by all channels; a
// round-robin arbiter per port picks the channel. Addressing is linear.
//
// Per channel and direction software programs a start address, a length in
// bytes and a config word (enable + item size 8/16/32 bit). The RX engine
// takes an item from a channel's ready/valid stream, places it at the
// current address with matching byte enables, advances by the item size and
// raises evt_rx for one cycle when the length is used up. The TX engine
// keeps one read in flight: it picks a channel whose stream can accept an
// item, reads, and hands the item (shifted down to bit 0) to the stream.
// RX can issue one write per cycle; TX needs 3 cycles per item.
//
// Registers (design choice; the paper names "active peripheral, peripheral
// clock frequency, number of transfers"):
//   0x000 CG          bit c: peripheral c enabled (ch_en)
//   (c+1)*0x40 + 0x00 RX_SADDR  +0x04 RX_SIZE  +0x08 RX_CFG
//               0x10 TX_SADDR  +0x14 TX_SIZE  +0x18 TX_CFG
//               0x20 PERIPH_CFG (driven on ch_cfg, e.g. UART bit period)
//   CFG: bit 0 EN (write 1 starts; reads 1 while busy), bits [2:1] size
//   SADDR/SIZE read back the current address and remaining bytes.
// Some output bits are constant by design:
//   - the TX port only reads, so its we, be, wdata and address bits [1:0]
//     are fixed;
//   - the RX port only writes, so its we is fixed;
//   - the register port answers at once, so pready is fixed.
module udma_core
  import arnold_pkg::*;
#(
  parameter int unsigned NCH = 2
) (
  input  logic      clk,
  input  logic      rst_n,
  input  apb_req_t  apb_req,
  output apb_rsp_t  apb_rsp,
  // RX memory port (writes)
  output logic      rx_req,
  input  logic      rx_gnt,
  output tcdm_req_t rx_reqd,
  // TX memory port (reads)
  output logic      tx_req,
  input  logic      tx_gnt,
  output tcdm_req_t tx_reqd,
  input  logic      tx_rvalid,
  input  tcdm_rsp_t tx_rsp,
  // channel streams
  input  logic        ch_rx_valid [NCH],
  input  logic [31:0] ch_rx_data  [NCH],
  output logic        ch_rx_ready [NCH],
  output logic        ch_tx_valid [NCH],
  output logic [31:0] ch_tx_data  [NCH],
  input  logic        ch_tx_ready [NCH],
  output logic [31:0] ch_cfg      [NCH],
  output logic [NCH-1:0] ch_en,
  output logic [NCH-1:0] evt_rx,
  output logic [NCH-1:0] evt_tx
);
  localparam int unsigned CW = (NCH > 1) ? $clog2(NCH) : 1;

  typedef struct packed {
    logic [31:0] addr;
    logic [31:0] left;   // bytes remaining
    logic [1:0]  size;
    logic        busy;
  } dir_t;

  dir_t rx_q [NCH], tx_q [NCH];
  logic [31:0] pcfg_q [NCH];
  logic [NCH-1:0] cg_q;

  // ---------------- register interface ----------------
  logic        wr;
  logic [5:0]  region;
  logic [3:0]  ridx;
  assign wr     = apb_req.psel && apb_req.penable && apb_req.pwrite;
  assign region = apb_req.paddr[11:6];
  assign ridx   = apb_req.paddr[5:2];

  function automatic logic [31:0] step(input logic [1:0] s);
    return 32'(1) << s;
  endfunction

  always_comb begin
    int c;
    c = (region == 6'd0) ? 0 : int'(region) - 1;
    apb_rsp = '{prdata: 32'h0, pready: 1'b1, pslverr: 1'b0};
    if (region == 6'd0) begin
      apb_rsp.prdata = 32'(cg_q);
    end else if (int'(region) <= NCH) begin
      case (ridx)
        4'd0: apb_rsp.prdata = rx_q[c].addr;
        4'd1: apb_rsp.prdata = rx_q[c].left;
        4'd2: apb_rsp.prdata = {29'h0, rx_q[c].size, rx_q[c].busy};
        4'd4: apb_rsp.prdata = tx_q[c].addr;
        4'd5: apb_rsp.prdata = tx_q[c].left;
        4'd6: apb_rsp.prdata = {29'h0, tx_q[c].size, tx_q[c].busy};
        4'd8: apb_rsp.prdata = pcfg_q[c];
        default: apb_rsp.pslverr = 1'b1;
      endcase
    end else begin
      apb_rsp.pslverr = 1'b1;
    end
  end

  assign ch_en = cg_q;
  for (genvar c = 0; c < NCH; c++) begin : g_cfg
    assign ch_cfg[c] = pcfg_q[c];
  end

  // ---------------- RX engine ----------------
  logic [NCH-1:0] rx_cand;
  logic           rx_pick_v;
  logic [CW-1:0]  rx_pick;
  logic           rx_pend_q;
  tcdm_req_t      rx_pend_d;
  logic           rx_load;

  always_comb
    for (int c = 0; c < NCH; c++) rx_cand[c] = rx_q[c].busy && ch_rx_valid[c];

  assign rx_load = (!rx_pend_q || rx_gnt) && rx_pick_v;

  rr_arbiter #(.N(NCH)) u_rx_arb (
    .clk(clk), .rst_n(rst_n), .req(rx_cand), .adv(rx_load),
    .valid(rx_pick_v), .idx(rx_pick)
  );

  always_comb
    for (int c = 0; c < NCH; c++) ch_rx_ready[c] = rx_load && (int'(rx_pick) == c);

  assign rx_req  = rx_pend_q;
  assign rx_reqd = rx_pend_d;

  // ---------------- TX engine ----------------
  typedef enum logic [1:0] {T_IDLE, T_REQ, T_WAIT} tx_state_e;
  tx_state_e      tx_st_q;
  logic [NCH-1:0] tx_cand;
  logic           tx_pick_v;
  logic [CW-1:0]  tx_pick;
  logic [CW-1:0]  tx_ch_q;
  logic [1:0]     tx_off_q, tx_size_q;

  always_comb
    for (int c = 0; c < NCH; c++) tx_cand[c] = tx_q[c].busy && (tx_q[c].left != 0) && ch_tx_ready[c];

  rr_arbiter #(.N(NCH)) u_tx_arb (
    .clk(clk), .rst_n(rst_n), .req(tx_cand), .adv(tx_st_q == T_IDLE),
    .valid(tx_pick_v), .idx(tx_pick)
  );

  assign tx_req        = (tx_st_q == T_REQ);
  assign tx_reqd.addr  = {tx_q[tx_ch_q].addr[31:2], 2'b00};
  assign tx_reqd.we    = 1'b0;
  assign tx_reqd.be    = 4'hF;
  assign tx_reqd.wdata = 32'h0;

  always_comb begin
    for (int c = 0; c < NCH; c++) begin
      ch_tx_valid[c] = (tx_st_q == T_WAIT) && tx_rvalid && (int'(tx_ch_q) == c);
      ch_tx_data[c]  = tx_rsp.rdata >> (8 * tx_off_q);
      case (tx_size_q)
        2'd0:    ch_tx_data[c] = ch_tx_data[c] & 32'h0000_00FF;
        2'd1:    ch_tx_data[c] = ch_tx_data[c] & 32'h0000_FFFF;
        default: ;
      endcase
    end
  end

  // ---------------- state ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NCH; c++) begin
        rx_q[c] <= '0; tx_q[c] <= '0; pcfg_q[c] <= '0;
      end
      cg_q <= '0; rx_pend_q <= 1'b0; rx_pend_d <= '0;
      tx_st_q <= T_IDLE; tx_ch_q <= '0; tx_off_q <= '0; tx_size_q <= '0;
      evt_rx <= '0; evt_tx <= '0;
    end else begin
      evt_rx <= '0;
      evt_tx <= '0;

      // RX: load a new item into the pending write
      if (rx_pend_q && rx_gnt) rx_pend_q <= 1'b0;
      if (rx_load) begin
        rx_pend_q          <= 1'b1;
        rx_pend_d.addr     <= {rx_q[rx_pick].addr[31:2], 2'b00};
        rx_pend_d.we       <= 1'b1;
        rx_pend_d.be       <= size_be(rx_q[rx_pick].size, rx_q[rx_pick].addr[1:0]);
        rx_pend_d.wdata    <= ch_rx_data[rx_pick] << (8 * rx_q[rx_pick].addr[1:0]);
        rx_q[rx_pick].addr <= rx_q[rx_pick].addr + step(rx_q[rx_pick].size);
        rx_q[rx_pick].left <= rx_q[rx_pick].left - step(rx_q[rx_pick].size);
        if (rx_q[rx_pick].left <= step(rx_q[rx_pick].size)) begin
          rx_q[rx_pick].busy <= 1'b0;
          evt_rx[rx_pick]    <= 1'b1;
        end
      end

      // TX
      case (tx_st_q)
        T_IDLE: if (tx_pick_v) begin tx_st_q <= T_REQ; tx_ch_q <= tx_pick; end
        T_REQ:  if (tx_gnt) begin
                  tx_st_q   <= T_WAIT;
                  tx_off_q  <= tx_q[tx_ch_q].addr[1:0];
                  tx_size_q <= tx_q[tx_ch_q].size;
                  tx_q[tx_ch_q].addr <= tx_q[tx_ch_q].addr + step(tx_q[tx_ch_q].size);
                  tx_q[tx_ch_q].left <= tx_q[tx_ch_q].left - step(tx_q[tx_ch_q].size);
                end
        T_WAIT: if (tx_rvalid) begin
                  tx_st_q <= T_IDLE;
                  if (tx_q[tx_ch_q].left == 0) begin
                    tx_q[tx_ch_q].busy <= 1'b0;
                    evt_tx[tx_ch_q]    <= 1'b1;
                  end
                end
        default: tx_st_q <= T_IDLE;
      endcase

      // register writes (after the engines: software restarts win)
      if (wr) begin
        if (region == 6'd0) begin
          cg_q <= NCH'(apb_req.pwdata);
        end else if (int'(region) <= NCH) begin
          int c;
          c = int'(region) - 1;
          case (ridx)
            4'd0: rx_q[c].addr <= apb_req.pwdata;
            4'd1: rx_q[c].left <= apb_req.pwdata;
            4'd2: begin rx_q[c].size <= apb_req.pwdata[2:1]; rx_q[c].busy <= apb_req.pwdata[0]; end
            4'd4: tx_q[c].addr <= apb_req.pwdata;
            4'd5: tx_q[c].left <= apb_req.pwdata;
            4'd6: begin tx_q[c].size <= apb_req.pwdata[2:1]; tx_q[c].busy <= apb_req.pwdata[0]; end
            4'd8: pcfg_q[c] <= apb_req.pwdata;
            default: ;
          endcase
        end
      end
    end
  end

  a_rx_hold: assert property (@(posedge clk) disable iff (!rst_n) (rx_req && !rx_gnt) |=> (rx_req && $stable(rx_reqd)))
    else $error("udma_core: RX request changed before grant");
endmodule
