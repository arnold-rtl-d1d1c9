// Boot ROM on the crossbar. The paper states only that a ROM holds the boot
// instructions run after reset; its size and content are not given. This
// ROM holds a two-instruction boot program, lui t0,0x1C008 / jalr x0,0x80(t0),
// which jumps to the start of private bank 1 (0x1C008080), followed by NOPs
// (addi x0,x0,0). Words are computed, not loaded from a file. Reads return
// the word one cycle after the grant; writes are granted, ignored and
// answered with err = 1.
module boot_rom
  import arnold_pkg::*;
#(
  parameter int unsigned ROM_WORDS = 2048
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req,
  output logic      gnt,
  input  tcdm_req_t reqd,
  output tcdm_rsp_t rsp
);
  localparam int unsigned AW = $clog2(ROM_WORDS);

  function automatic logic [31:0] rom_word(input logic [AW-1:0] i);
    case (i)
      AW'(0):  return 32'h1C00_82B7;  // lui  x5, 0x1C008
      AW'(1):  return 32'h0802_8067;  // jalr x0, 0x80(x5)
      default: return 32'h0000_0013;  // nop
    endcase
  endfunction

  logic [AW-1:0] idx;
  assign idx = AW'((reqd.addr - ROM_BASE) >> 2);
  assign gnt = req;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp <= '0;
    end else if (req) begin
      rsp.rdata <= reqd.we ? 32'h0 : rom_word(idx);
      rsp.err   <= reqd.we;
    end
  end
endmodule
