// bundler: per-dimension majority of the channel hypervectors T_1 .. T_M.
//
// Each of the D dimensions has a small accumulator and a comparator. At the
// start of an N-gram (clear_i) the accumulators are loaded through a 2:1 mux:
// with an even number of active channels they take the bit of a D-stage scan
// chain that shifts in pseudo-random bits from the LFSR, so that a tie among
// the channels is broken at random; with an odd number they start at zero.
// Every acc_en_i then adds the binder's D bits, once per channel. On latch_i
// every dimension compares its count with the reference
// ceil((M+1)/2) - 0.5, i.e. outputs 1 when count >= ceil((M+1)/2), and the D
// results are registered as the N-gram hypervector.
//
// The D accumulators are held as bit-planes (plane b = bit b of every
// counter), so each update and comparison is a few D-wide logic operations;
// per dimension this is the same half-adder chain and comparator.
// Accumulators are $clog2(M+2) bits wide so that M channels plus the tie-break
// bit cannot overflow (3 bits for M = 4). The description speaks of log2(M)-bit
// accumulators, which could not hold a count of M; this design uses the wider
// one. The scan chain shifts only while the tie-break is in use (even channel
// count); registering the comparator outputs is this design's choice.
//
// Interface: n_ch_i is the number of active channels (1 .. M). tb_en_o tells
// the LFSR to advance together with the scan chain. hv_o/hv_valid_o appear
// one cycle after latch_i.
module bundler #(
  parameter int unsigned D = hdc_pkg::D,
  parameter int unsigned M = hdc_pkg::M,
  localparam int unsigned AW = $clog2(M + 2),
  localparam int unsigned MW = $clog2(M + 1)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic [MW-1:0] n_ch_i,
  // tie-break scan chain
  input  logic          scan_in_i,
  output logic          tb_en_o,
  // accumulation control
  input  logic          clear_i,
  input  logic          acc_en_i,
  input  logic [D-1:0]  din_i,
  input  logic          latch_i,
  // N-gram hypervector
  output logic          hv_valid_o,
  output logic [D-1:0]  hv_o
);

  logic [D-1:0]         scan_q;
  logic [AW-1:0][D-1:0] acc_q;    // bit-plane b holds bit b of all D counters
  logic [AW-1:0][D-1:0] acc_d;
  logic [D-1:0]         ge;       // per-dimension comparator result
  logic [AW-1:0]        thr;

  assign tb_en_o = ~n_ch_i[0];
  // ceil((M+1)/2) for the active channel count.
  assign thr = AW'((32'(n_ch_i) + 2) / 2);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)      scan_q <= '0;
    else if (tb_en_o) scan_q <= {scan_q[D-2:0], scan_in_i};
  end

  // Accumulator update, all dimensions at once: the mux picks the scan-chain
  // bit (clear) or the running count, and a ripple of half adders adds the
  // binder bit.
  always_comb begin
    logic [D-1:0] carry;
    carry = acc_en_i ? din_i : '0;
    for (int b = 0; b < AW; b++) begin
      logic [D-1:0] base;
      if (clear_i) base = (b == 0) ? (tb_en_o ? scan_q : '0) : '0;
      else         base = acc_q[b];
      acc_d[b] = base ^ carry;
      carry    = base & carry;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                  acc_q <= '0;
    else if (clear_i || acc_en_i) acc_q <= acc_d;
  end

  // Comparators: count >= thr, most significant bit-plane first.
  always_comb begin
    logic [D-1:0] lt, eq;
    lt = '0;
    eq = '1;
    for (int b = AW - 1; b >= 0; b--) begin
      lt = lt | (eq & ~acc_q[b] & {D{thr[b]}});
      eq = eq & ~(acc_q[b] ^ {D{thr[b]}});
    end
    ge = ~lt;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      hv_valid_o <= 1'b0;
      hv_o       <= '0;
    end else begin
      hv_valid_o <= latch_i;
      if (latch_i) hv_o <= ge;
    end
  end

  a_n_ch_range : assert property (@(posedge clk_i) disable iff (!rst_ni)
                                  n_ch_i >= 1 && 32'(n_ch_i) <= M);

endmodule
