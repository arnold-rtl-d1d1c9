// Round-robin arbiter. Picks one of N requesters; the search starts just
// after the requester granted last (the pointer advances only when the
// caller signals that the choice was accepted, adv). Combinational choice,
// one flop register for the pointer. Used per slave in the crossbar and per
// port in the uDMA.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 adv,     // choice accepted this cycle
  output logic                 valid,
  output logic [$clog2(N)-1:0] idx
);
  localparam int unsigned IW = $clog2(N);
  logic [IW-1:0] ptr_q;   // highest priority requester

  always_comb begin
    valid = 1'b0;
    idx   = '0;
    for (int unsigned k = 0; k < N; k++) begin
      int unsigned c;
      c = (int'(ptr_q) + k) % N;
      if (!valid && req[c]) begin
        valid = 1'b1;
        idx   = IW'(c);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr_q <= '0;
    else if (adv && valid) ptr_q <= (int'(idx) == N-1) ? '0 : idx + 1'b1;
  end
endmodule
