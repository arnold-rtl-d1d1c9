// Dual-clock FIFO used on every crossing between the MCU clock and the eFPGA
// or peripheral clocks (the paper uses 32 bit x 4 word dual-clock FIFOs).
//
// How it works: binary read/write pointers one bit wider than the address
// are kept in their own domain and published in Gray code; each side
// samples the other side's Gray pointer through two flops. The write side is
// full when the synchronised read pointer equals its own with the two top
// bits inverted; the read side is empty when the pointers are equal. Data is
// first-word-fall-through: r_data shows the head entry while r_valid is high.
//
// Interface: ready/valid on both sides; w_ready = not full, r_valid = not
// empty; an item moves when valid and ready are high at a rising edge.
// Timing: an item written at a wclk edge becomes visible on the read side
// two to three rclk edges later. The pointer scheme is a standard choice;
// the paper gives only width and depth. WIDTH is widened by the users where
// a request carries more than 32 bits.
module dc_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4   // power of two
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             w_valid,
  input  logic [WIDTH-1:0] w_data,
  output logic             w_ready,
  input  logic             rclk,
  input  logic             rrst_n,
  output logic             r_valid,
  output logic [WIDTH-1:0] r_data,
  input  logic             r_ready
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wptr_q, rptr_q, wgray_q, rgray_q;
  logic [AW:0] rgray_s1, rgray_s2, wgray_s1, wgray_s2;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write side
  logic [AW:0] wptr_n;
  assign w_ready = (wgray_q != {~rgray_s2[AW:AW-1], rgray_s2[AW-2:0]});
  assign wptr_n  = wptr_q + (AW+1)'(w_valid && w_ready);

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wptr_q <= '0; wgray_q <= '0; rgray_s1 <= '0; rgray_s2 <= '0;
    end else begin
      wptr_q   <= wptr_n;
      wgray_q  <= bin2gray(wptr_n);
      rgray_s1 <= rgray_q;
      rgray_s2 <= rgray_s1;
    end
  end

  always_ff @(posedge wclk) begin
    if (w_valid && w_ready) mem[wptr_q[AW-1:0]] <= w_data;
  end

  // read side
  logic [AW:0] rptr_n;
  assign r_valid = (rgray_q != wgray_s2);
  assign r_data  = mem[rptr_q[AW-1:0]];
  assign rptr_n  = rptr_q + (AW+1)'(r_valid && r_ready);

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rptr_q <= '0; rgray_q <= '0; wgray_s1 <= '0; wgray_s2 <= '0;
    end else begin
      rptr_q   <= rptr_n;
      rgray_q  <= bin2gray(rptr_n);
      wgray_s1 <= wgray_q;
      wgray_s2 <= wgray_s1;
    end
  end

  initial begin
    assert (DEPTH >= 2 && (1 << AW) == DEPTH) else $error("dc_fifo: DEPTH must be a power of two >= 2");
  end
endmodule
