// Shared types and constants of the Arnold SoC.
//
// Two bus flavours recur everywhere:
//  * TCDM ports (the logarithmic-interconnect protocol): a master raises req
//    with a request payload and holds it until the slave returns gnt in the
//    same cycle; the response (rdata, err) is valid exactly one cycle after
//    the gnt cycle, flagged by rvalid.
//  * APB (AMBA 3) with a select/enable two-phase transfer and pready.
// The memory map below is this design's choice; the paper gives the sizes
// (512 kB SRAM = 4 interleaved banks of 112 kB + 2 private banks of 32 kB,
// built from 4096 x 32 bit cuts) but no addresses.
package arnold_pkg;

  typedef struct packed {
    logic [31:0] addr;
    logic        we;
    logic [3:0]  be;
    logic [31:0] wdata;
  } tcdm_req_t;

  typedef struct packed {
    logic [31:0] rdata;
    logic        err;
  } tcdm_rsp_t;

  typedef struct packed {
    logic [31:0] paddr;
    logic        pwrite;
    logic [31:0] pwdata;
    logic        psel;
    logic        penable;
  } apb_req_t;

  typedef struct packed {
    logic [31:0] prdata;
    logic        pready;
    logic        pslverr;
  } apb_rsp_t;

  // SRAM organisation (paper numbers)
  localparam int unsigned CUT_WORDS      = 4096;  // 16 kB cut
  localparam int unsigned ILV_BANKS      = 4;
  localparam int unsigned ILV_CUTS       = 7;     // 112 kB per interleaved bank
  localparam int unsigned PRIV_BANKS     = 2;
  localparam int unsigned PRIV_CUTS      = 2;     // 32 kB per private bank

  // Memory map (design choice)
  localparam logic [31:0] ROM_BASE   = 32'h1A00_0000;
  localparam logic [31:0] ROM_END    = 32'h1A00_2000;  // 8 kB boot ROM
  localparam logic [31:0] APB_BASE   = 32'h1A10_0000;
  localparam logic [31:0] APB_END    = 32'h1A11_0000;
  localparam logic [31:0] PRIV0_BASE = 32'h1C00_0000;
  localparam logic [31:0] PRIV1_BASE = 32'h1C00_8000;
  localparam logic [31:0] ILV_BASE   = 32'h1C01_0000;
  localparam logic [31:0] SRAM_BASE  = 32'h1C00_0000;
  localparam logic [31:0] SRAM_END   = 32'h1C08_0000;  // 512 kB

  // XBAR slave indices
  localparam int unsigned S_ILV0  = 0;  // 0..3 interleaved banks
  localparam int unsigned S_PRIV0 = 4;
  localparam int unsigned S_PRIV1 = 5;
  localparam int unsigned S_ROM   = 6;
  localparam int unsigned S_APB   = 7;
  localparam int unsigned N_SLAVES = 8;

  // XBAR master indices
  localparam int unsigned M_CPU_I  = 0;
  localparam int unsigned M_CPU_D  = 1;
  localparam int unsigned M_UDMA_RX = 2;
  localparam int unsigned M_UDMA_TX = 3;
  localparam int unsigned M_JTAG   = 4;
  localparam int unsigned M_FPGA0  = 5;  // 5..8 eFPGA memory ports
  localparam int unsigned N_MASTERS = 9;

  // APB slave indices (selected by paddr[15:12])
  localparam int unsigned P_SOCCTRL = 0;
  localparam int unsigned P_GPIO    = 1;
  localparam int unsigned P_TIMER   = 2;
  localparam int unsigned P_EVENT   = 3;
  localparam int unsigned P_UDMA    = 4;
  localparam int unsigned P_FPGA    = 5;  // user APB of the eFPGA
  localparam int unsigned P_FCB     = 6;  // eFPGA programming (FPGA PRG)
  localparam int unsigned N_APB     = 7;

  // Pads
  localparam int unsigned NUM_PADS = 41;

  // Decode an address to an XBAR slave. valid=0 for unmapped addresses.
  function automatic logic [3:0] addr_to_slave(input logic [31:0] a, output logic valid);
    valid = 1'b1;
    if (a >= ILV_BASE && a < SRAM_END)        return 4'(S_ILV0 + int'(a[3:2]));
    else if (a >= PRIV0_BASE && a < PRIV1_BASE) return 4'(S_PRIV0);
    else if (a >= PRIV1_BASE && a < ILV_BASE)   return 4'(S_PRIV1);
    else if (a >= ROM_BASE && a < ROM_END)      return 4'(S_ROM);
    else if (a >= APB_BASE && a < APB_END)      return 4'(S_APB);
    valid = 1'b0;
    return 4'd0;
  endfunction

  // Lay write data and byte enables of an 8/16/32-bit item at a byte offset.
  function automatic logic [3:0] size_be(input logic [1:0] size, input logic [1:0] off);
    case (size)
      2'd0:    return 4'b0001 << off;
      2'd1:    return 4'b0011 << off;
      default: return 4'b1111;
    endcase
  endfunction

endpackage
