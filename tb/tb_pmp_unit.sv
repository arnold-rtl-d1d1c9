// Testbench for pmp_unit. Programs a mix of NAPOT, NA4 and TOR entries
// through the CSR port, then sends random fetches, loads and stores in user
// and machine mode and compares the outcome (passed to the crossbar side,
// or answered locally with err = 1) with an independent reference that
// walks the entries from the RISC-V rules. Also checks that a locked entry
// binds machine mode and ignores later writes.
module tb_pmp_unit;
  import arnold_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic priv_m, csr_we; logic [11:0] csr_addr; logic [31:0] csr_wdata, csr_rdata;
  logic i_req, i_gnt, i_rvalid, d_req, d_gnt, d_rvalid;
  tcdm_req_t i_reqd, d_reqd; tcdm_rsp_t i_rsp, d_rsp;
  logic xi_req, xi_gnt, xi_rvalid, xd_req, xd_gnt, xd_rvalid;
  tcdm_req_t xi_reqd, xd_reqd; tcdm_rsp_t xi_rsp, xd_rsp;

  pmp_unit dut (.*);

  // crossbar model: grant at once, answer with the address
  assign xi_gnt = xi_req; assign xd_gnt = xd_req;
  always_ff @(posedge clk) begin
    xi_rvalid <= xi_req; xi_rsp <= '{rdata: xi_reqd.addr, err: 0};
    xd_rvalid <= xd_req; xd_rsp <= '{rdata: xd_reqd.addr, err: 0};
  end

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // reference configuration
  logic [7:0]  rcfg [16];
  logic [31:0] raddr [16];

  task automatic csr(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk); csr_we = 1; csr_addr = a; csr_wdata = d;
    @(negedge clk); csr_we = 0;
  endtask

  function automatic bit ref_ok(input logic [31:0] a, input int kind, input bit m);
    for (int i = 0; i < 16; i++) begin
      longint lo, hi, aa;
      bit match;
      aa = longint'(a);
      match = 0;
      case (rcfg[i][4:3])
        2'd1: begin lo = (i == 0) ? 0 : longint'(raddr[i-1]) * 4; hi = longint'(raddr[i]) * 4; match = aa >= lo && aa < hi; end
        2'd2: match = (aa / 4) == longint'(raddr[i]);
        2'd3: begin
          int k; longint size;
          k = 0;
          while (k < 32 && raddr[i][k]) k++;
          size = longint'(1) << (k + 3);
          lo = (longint'(raddr[i]) * 4) & ~(size - 1);
          match = aa >= lo && aa < lo + size;
        end
        default: ;
      endcase
      if (match) begin
        if (m && !rcfg[i][7]) return 1;
        return rcfg[i][kind == 0 ? 2 : (kind == 1 ? 0 : 1)];
      end
    end
    return m;
  endfunction

  task automatic access(input int kind, input logic [31:0] a, input bit m);
    bit exp, passed;
    priv_m = m;
    exp = ref_ok(a, kind, m);
    @(negedge clk);
    if (kind == 0) begin i_req = 1; i_reqd = '{addr: a, we: 0, be: 4'hF, wdata: 0}; end
    else begin d_req = 1; d_reqd = '{addr: a, we: (kind == 2), be: 4'hF, wdata: 0}; end
    #1 passed = (kind == 0) ? xi_req : xd_req;
    check((kind == 0 ? i_gnt : d_gnt), "gnt");
    @(negedge clk); i_req = 0; d_req = 0;
    check(passed == exp, $sformatf("kind %0d addr %h m %0d: passed %0d exp %0d", kind, a, m, passed, exp));
    if (kind == 0) check(i_rvalid && (i_rsp.err == !exp) && (!exp || i_rsp.rdata == a), "fetch response");
    else           check(d_rvalid && (d_rsp.err == !exp) && (!exp || d_rsp.rdata == a), "data response");
  endtask

  initial begin
    i_req = 0; d_req = 0; i_reqd = '0; d_reqd = '0; csr_we = 0; csr_addr = 0; csr_wdata = 0; priv_m = 1;
    for (int i = 0; i < 16; i++) begin rcfg[i] = 0; raddr[i] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    // entry 0: NAPOT 32 kB at 0x1C000000, R+X
    raddr[0] = (32'h1C00_0000 >> 2) | ((32'h8000 >> 3) - 1); rcfg[0] = 8'h1D;  // A=3, X, R
    // entry 1: NA4 at 0x1C010000, R+W
    raddr[1] = 32'h1C01_0000 >> 2; rcfg[1] = 8'h13;
    // entries 2,3: TOR [0x1C010000, 0x1C080000) R+W
    raddr[2] = 32'h1C01_0000 >> 2; rcfg[2] = 8'h00;
    raddr[3] = 32'h1C08_0000 >> 2; rcfg[3] = 8'h0B;  // A=1, W, R
    // entry 4: NAPOT 64 kB at 0x1A100000 (APB), R only
    raddr[4] = (32'h1A10_0000 >> 2) | ((32'h1_0000 >> 3) - 1); rcfg[4] = 8'h19;
    for (int i = 0; i < 16; i++) csr(12'h3B0 + 12'(i), raddr[i]);
    for (int r = 0; r < 4; r++) csr(12'h3A0 + 12'(r), {rcfg[4*r+3], rcfg[4*r+2], rcfg[4*r+1], rcfg[4*r]});
    @(negedge clk); csr_addr = 12'h3A0; #1 check(csr_rdata == {rcfg[3], rcfg[2], rcfg[1], rcfg[0]}, "pmpcfg0 read-back");
    for (int n = 0; n < 400; n++) begin
      logic [31:0] a;
      case ($urandom % 5)
        0: a = 32'h1C00_0000 + ($urandom % 16'hA000);
        1: a = 32'h1C01_0000 + 4 * ($urandom % 3);
        2: a = 32'h1C07_FFF0 + 4 * ($urandom % 8);
        3: a = 32'h1A10_0000 + ($urandom % 32'h1_2000);
        default: a = $urandom;
      endcase
      a[1:0] = 0;
      access($urandom % 3, a, 1'($urandom));
    end
    // lock entry 0: machine mode now bound, and writes ignored
    rcfg[0] = 8'h9D & ~8'h04;  // L, A=NAPOT, R (no X)
    csr(12'h3A0, {rcfg[3], rcfg[2], rcfg[1], rcfg[0]});
    access(0, 32'h1C00_0100, 1);
    access(1, 32'h1C00_0100, 1);
    csr(12'h3A0, {rcfg[3], rcfg[2], rcfg[1], 8'h1F});
    csr(12'h3B0, 32'h0);
    access(0, 32'h1C00_0100, 1);
    access(2, 32'h1C00_0200, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
