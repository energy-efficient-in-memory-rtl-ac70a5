// tiebreak_lfsr: pseudo-random bit source for the bundler's tie-break scan chain.
//
// When an even number of channels is bundled, a per-dimension majority can end
// in a tie; the bundler breaks those ties with a random hypervector that a
// scan chain assembles bit by bit from this linear feedback shift register.
// The design only names the LFSR; its length, polynomial and seed are this
// design's own choice: a 16-bit Fibonacci register for the maximal-length
// polynomial x^16 + x^14 + x^13 + x^11 + 1 (period 65,535), seeded with SEED
// at reset.
//
// Interface: while en is high the register advances once per clock; rnd_o is
// its most significant bit, so a new bit appears on rnd_o one cycle after
// each enabled edge. With en low the register holds.
module tiebreak_lfsr #(
  parameter int unsigned   W    = 16,
  parameter logic [W-1:0]  TAPS = 16'hB400, // bits 16,14,13,11 (1-based)
  parameter logic [W-1:0]  SEED = 16'hACE1  // any non-zero value
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic en_i,
  output logic rnd_o
);

  logic [W-1:0] state_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)   state_q <= SEED;
    else if (en_i) state_q <= {state_q[W-2:0], ^(state_q & TAPS)};
  end

  assign rnd_o = state_q[W-1];

  // An all-zero state would lock the register.
  a_never_zero : assert property (@(posedge clk_i) disable iff (!rst_ni) state_q != '0);

endmodule
