// binder: temporal encoding of one channel, T_m = rho^(N-1) I_1 ^ ... ^ I_N.
//
// The binder is a row of D one-bit registers, each preceded by an XOR gate.
// The XOR of dimension j combines the sense-amplifier bit of dimension j with
// the register of dimension j-1, so every update permutes the stored vector by
// one position (rho) and binds the new crossbar row to it. Fed the N
// channel-bound hypervectors of one channel oldest first, the register holds
// T_m after the N-th update.
//
// rho is a circular right shift: dimension 0 takes the bit of dimension D-1.
// The architecture drawing shows the first XOR's second input grounded, while
// the algorithm defines rho as circular; this design follows the algorithm.
// On the first update of a channel (first_i) the chained input is forced to
// zero, which loads the first row unchanged and needs no separate clear.
//
// Interface: when en_i is high at a clock edge, q_o becomes
// first_i ? din_i : rho(q_o) ^ din_i. One update per cycle, result visible the
// cycle after.
module binder #(
  parameter int unsigned D = hdc_pkg::D
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         en_i,
  input  logic         first_i,
  input  logic [D-1:0] din_i,
  output logic [D-1:0] q_o
);

  logic [D-1:0] q_q;
  logic [D-1:0] chain;   // register outputs shifted one dimension up

  always_comb begin
    chain = first_i ? '0 : {q_q[D-2:0], q_q[D-1]};
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)   q_q <= '0;
    else if (en_i) q_q <= chain ^ din_i;
  end

  assign q_o = q_q;

endmodule
