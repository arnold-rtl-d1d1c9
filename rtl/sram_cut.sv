// One single-port SRAM cut of 4096 x 32 bit words (16 kB), the building
// block of every memory bank in the paper. Written as an array so that it
// simulates and synthesises as an inferred memory; in silicon it is a
// foundry macro. Byte-enabled writes; a read returns the word on rdata at
// the next rising edge (rdata holds its value while en is low).
module sram_cut #(
  parameter int unsigned WORDS = 4096
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [3:0]               be,
  input  logic [$clog2(WORDS)-1:0] addr,
  input  logic [31:0]              wdata,
  output logic [31:0]              rdata
);
  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        for (int b = 0; b < 4; b++)
          if (be[b]) mem[addr][8*b +: 8] <= wdata[8*b +: 8];
      end else begin
        rdata <= mem[addr];
      end
    end
  end
endmodule
