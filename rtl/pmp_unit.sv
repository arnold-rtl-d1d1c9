// Physical memory protection ("MPU" in front of the CPU) for the fetch and
// data ports of the core, following the RISC-V privileged specification as
// the paper requires: NE entries with pmpcfg (R, W, X, A, L) and pmpaddr
// CSRs, address matching OFF, TOR, NA4 and NAPOT, lowest-numbered matching
// entry wins. M-mode accesses are checked only against locked entries and
// pass when nothing matches; U-mode accesses need a matching entry that
// grants the right (X for fetch, R for load, W for store).
//
// Placement: the core's TCDM ports enter here and leave towards the
// crossbar. A permitted request is passed through unchanged (same gnt, same
// response one cycle later). A denied one never reaches the crossbar: it is
// granted at once and answered one cycle later with err = 1, rdata = 0.
// Only the byte address of the access is checked (accesses are aligned and
// at most one word wide), which is this design's simplification.
// CSR port: csr_addr 0x3A0-0x3A3 pmpcfg0-3, 0x3B0-0x3BF pmpaddr0-15;
// writes to locked entries (and to the pmpaddr below a locked TOR entry) are
// ignored; WARL details beyond that are not modelled.
module pmp_unit
  import arnold_pkg::*;
#(
  parameter int unsigned NE = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        priv_m,     // 1: machine mode, 0: user mode
  // CSR access
  input  logic        csr_we,
  input  logic [11:0] csr_addr,
  input  logic [31:0] csr_wdata,
  output logic [31:0] csr_rdata,
  // core side
  input  logic        i_req,  output logic i_gnt,  input tcdm_req_t i_reqd,
  output logic        i_rvalid, output tcdm_rsp_t i_rsp,
  input  logic        d_req,  output logic d_gnt,  input tcdm_req_t d_reqd,
  output logic        d_rvalid, output tcdm_rsp_t d_rsp,
  // crossbar side
  output logic        xi_req, input logic xi_gnt, output tcdm_req_t xi_reqd,
  input  logic        xi_rvalid, input tcdm_rsp_t xi_rsp,
  output logic        xd_req, input logic xd_gnt, output tcdm_req_t xd_reqd,
  input  logic        xd_rvalid, input tcdm_rsp_t xd_rsp
);
  typedef enum logic [1:0] {A_OFF = 2'd0, A_TOR = 2'd1, A_NA4 = 2'd2, A_NAPOT = 2'd3} amode_e;
  typedef struct packed {
    logic       l;
    logic [1:0] zero;
    amode_e     a;
    logic       x;
    logic       w;
    logic       r;
  } pmpcfg_t;

  pmpcfg_t     cfg_q  [NE];
  logic [31:0] addr_q [NE];

  // ---------------- CSRs ----------------
  function automatic logic locked(input int i);
    if (i >= NE) return 1'b0;
    if (cfg_q[i].l) return 1'b1;
    if (i + 1 < NE && cfg_q[i+1].l && cfg_q[i+1].a == A_TOR) return 1'b1;
    return 1'b0;
  endfunction

  logic [11:0] cfg_off, addr_off;
  assign cfg_off  = csr_addr - 12'h3A0;
  assign addr_off = csr_addr - 12'h3B0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_q  <= '{default: pmpcfg_t'(8'h00)};
      addr_q <= '{default: '0};
    end else if (csr_we) begin
      if (csr_addr >= 12'h3A0 && csr_addr < 12'h3A0 + 12'(NE / 4)) begin
        for (int k = 0; k < 4; k++) begin
          int i;
          i = 4 * int'(cfg_off) + k;
          if (i < NE && !cfg_q[i].l) begin
            cfg_q[i]      <= pmpcfg_t'(csr_wdata[8*k +: 8]);
            cfg_q[i].zero <= 2'b00;
          end
        end
      end else if (csr_addr >= 12'h3B0 && csr_addr < 12'h3B0 + 12'(NE)) begin
        if (!locked(int'(addr_off))) addr_q[addr_off[$clog2(NE)-1:0]] <= csr_wdata;
      end
    end
  end

  always_comb begin
    csr_rdata = '0;
    if (csr_addr >= 12'h3A0 && csr_addr < 12'h3A0 + 12'(NE / 4)) begin
      for (int k = 0; k < 4; k++) csr_rdata[8*k +: 8] = cfg_q[4 * int'(cfg_off) + k];
    end else if (csr_addr >= 12'h3B0 && csr_addr < 12'h3B0 + 12'(NE)) begin
      csr_rdata = addr_q[addr_off[$clog2(NE)-1:0]];
    end
  end

  // ---------------- checking ----------------
  // kind: 0 fetch (X), 1 load (R), 2 store (W)
  function automatic logic allowed(input logic [31:0] a, input logic [1:0] kind);
    logic [33:0] a34, lo, hi;
    logic [31:0] mask;
    a34 = {2'b00, a};
    for (int i = 0; i < NE; i++) begin
      logic match;
      match = 1'b0;
      case (cfg_q[i].a)
        A_TOR: begin
          lo = (i == 0) ? 34'h0 : {addr_q[i-1], 2'b00};
          hi = {addr_q[i], 2'b00};
          match = (a34 >= lo) && (a34 < hi);
        end
        A_NA4:   match = (a34[33:2] == addr_q[i]);
        A_NAPOT: begin
          mask  = addr_q[i] ^ (addr_q[i] + 32'd1);   // trailing ones plus one
          match = ((a34[33:2] ^ addr_q[i]) & ~mask) == 32'h0;
        end
        default: match = 1'b0;
      endcase
      if (match) begin
        if (priv_m && !cfg_q[i].l) return 1'b1;
        case (kind)
          2'd0:    return cfg_q[i].x;
          2'd1:    return cfg_q[i].r;
          default: return cfg_q[i].w;
        endcase
      end
    end
    return priv_m;
  endfunction

  logic i_ok, d_ok;
  logic i_deny_q, d_deny_q;
  assign i_ok = allowed(i_reqd.addr, 2'd0);
  assign d_ok = allowed(d_reqd.addr, d_reqd.we ? 2'd2 : 2'd1);

  assign xi_req  = i_req && i_ok;
  assign xi_reqd = i_reqd;
  assign i_gnt   = i_ok ? xi_gnt : i_req;
  assign xd_req  = d_req && d_ok;
  assign xd_reqd = d_reqd;
  assign d_gnt   = d_ok ? xd_gnt : d_req;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_deny_q <= 1'b0; d_deny_q <= 1'b0;
    end else begin
      i_deny_q <= i_req && !i_ok;
      d_deny_q <= d_req && !d_ok;
    end
  end

  assign i_rvalid = xi_rvalid || i_deny_q;
  assign i_rsp    = i_deny_q ? '{rdata: 32'h0, err: 1'b1} : xi_rsp;
  assign d_rvalid = xd_rvalid || d_deny_q;
  assign d_rsp    = d_deny_q ? '{rdata: 32'h0, err: 1'b1} : xd_rsp;
endmodule
