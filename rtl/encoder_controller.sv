// encoder_controller: sequencing of one N-gram encoding.
//
// The controller holds the run-time encoding parameters (active channel count
// and, per channel, N-gram size N_m and level count L_m). From them it derives
// the write-pointer range of every channel in the circular buffer (start
// m*N_MAX, end m*N_MAX + N_m - 1) and the crossbar row offset of every channel
// (the sum of the level counts of the channels before it; m*L when all
// channels use the same L).
//
// It watches the sample strobes. Once every active channel has delivered a new
// sample, and each channel's region holds at least N_m samples, it issues one
// buffer read per cycle: channel 0 oldest to newest, then channel 1, and so
// on, sum(N_m) reads in all. A bundle of flags follows each read down the
// pipeline so that the other blocks are told when to act:
//   cycle c   : buffer read (rd_en), accumulator clear on the first read
//   cycle c+1 : row address registered, crossbar read
//   cycle c+2 : sense-amplifier data valid, binder update (bind_en/first)
//   cycle c+3 : binder holds T_m after a channel's last read, accumulate
//   cycle c+4 : after the last channel, comparator outputs latched
// so the N-gram is valid sum(N_m) + 4 cycles after the first read. The
// sampling strobes are assumed synchronous to this clock.
//
// A new sample on an active channel while reads are still being issued would
// change the record being read; overrun_o flags that case (the internal clock
// is meant to be at least N*M times the sample rate so it does not happen).
// A cfg_valid_i pulse loads new parameters and restarts filling the buffer.
// The reset parameters (all channels, N_MAX, L_MAX), the record-complete rule
// and the overrun flag are this design's choices.
module encoder_controller
  import hdc_pkg::chan_cfg_t;
#(
  parameter int unsigned M     = hdc_pkg::M,
  parameter int unsigned N_MAX = hdc_pkg::N_MAX,
  parameter int unsigned L_MAX = hdc_pkg::L_MAX,
  localparam int unsigned MW   = $clog2(M + 1),
  localparam int unsigned NW   = $clog2(N_MAX + 1),
  localparam int unsigned BW   = $clog2(M * N_MAX),
  localparam int unsigned RW   = $clog2(M * L_MAX),
  localparam int unsigned CW   = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  // encoding parameters
  input  logic          cfg_valid_i,
  input  logic [MW-1:0] cfg_m_i,
  input  chan_cfg_t     cfg_ch_i   [M],
  output logic [MW-1:0] n_ch_o,
  // sample strobes
  input  logic [M-1:0]  s_valid_i,
  // circular buffer
  output logic          buf_clr_o,
  output logic [BW-1:0] start_addr_o [M],
  output logic [BW-1:0] end_addr_o   [M],
  output logic          rd_en_o,
  output logic          rd_first_o,
  output logic [CW-1:0] rd_ch_o,
  output logic [RW-1:0] offset_o,
  // binder
  output logic          bind_en_o,
  output logic          bind_first_o,
  // bundler
  output logic          acc_clear_o,
  output logic          acc_en_o,
  output logic          latch_o,
  // status
  output logic          busy_o,
  output logic          overrun_o
);

  typedef enum logic [0:0] {IDLE, ISSUE} state_e;

  typedef struct packed {
    logic valid;
    logic first;   // first read of a channel
    logic last;    // last read of a channel
    logic final_;  // last read of the record
  } flags_t;

  state_e        state_q;
  logic [MW-1:0] m_q;
  chan_cfg_t     ch_q     [M];
  logic [RW-1:0] offset_q [M];
  logic [RW-1:0] cfg_offset [M];
  logic [M-1:0]  pending_q;
  logic [NW-1:0] fill_q   [M];   // samples written since (re)start, saturating at N_MAX
  logic [CW-1:0] ch_cnt_q;
  logic [NW-1:0] n_cnt_q;
  flags_t        p0, p1_q, p2_q, p3_q;
  logic [M-1:0]  active;
  logic          record_ready, all_filled;

  always_comb begin
    for (int m = 0; m < M; m++) active[m] = (32'(m) < 32'(m_q));
    record_ready = ((pending_q & active) == active);
    all_filled   = 1'b1;
    for (int m = 0; m < M; m++) begin
      if (active[m] && (32'(fill_q[m]) < 32'(ch_q[m].n))) all_filled = 1'b0;
    end
  end

  // Row offset of each channel: the level counts of the channels before it.
  always_comb begin
    cfg_offset[0] = '0;
    for (int m = 1; m < M; m++) cfg_offset[m] = cfg_offset[m-1] + RW'(cfg_ch_i[m-1].l);
  end

  // Derived addresses.
  always_comb begin
    for (int m = 0; m < M; m++) begin
      start_addr_o[m] = BW'(m * N_MAX);
      end_addr_o[m]   = BW'(m * N_MAX) + BW'(ch_q[m].n) - 1'b1;
    end
  end

  // Issue stage.
  always_comb begin
    p0.valid  = (state_q == ISSUE);
    p0.first  = (n_cnt_q == 0);
    p0.last   = (32'(n_cnt_q) + 1 == 32'(ch_q[ch_cnt_q].n));
    p0.final_ = p0.last && (32'(ch_cnt_q) + 1 == 32'(m_q));
  end

  assign rd_en_o     = p0.valid;
  assign rd_first_o  = p0.first;
  assign rd_ch_o     = ch_cnt_q;
  assign offset_o    = offset_q[ch_cnt_q];
  assign acc_clear_o = p0.valid && p0.first && (ch_cnt_q == 0);
  assign bind_en_o    = p2_q.valid;
  assign bind_first_o = p2_q.first;
  assign acc_en_o     = p3_q.valid && p3_q.last;
  assign n_ch_o       = m_q;
  assign buf_clr_o    = cfg_valid_i && (state_q == IDLE);
  assign busy_o       = p0.valid | p1_q.valid | p2_q.valid | p3_q.valid | latch_o;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      m_q <= MW'(M);
      for (int m = 0; m < M; m++) begin
        ch_q[m].n   <= $bits(ch_q[m].n)'(N_MAX);
        ch_q[m].l   <= $bits(ch_q[m].l)'(L_MAX);
        offset_q[m] <= RW'(m * L_MAX);
      end
    end else if (cfg_valid_i && state_q == IDLE) begin
      m_q <= cfg_m_i;
      for (int m = 0; m < M; m++) begin
        ch_q[m]     <= cfg_ch_i[m];
        offset_q[m] <= cfg_offset[m];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q   <= IDLE;
      pending_q <= '0;
      ch_cnt_q  <= '0;
      n_cnt_q   <= '0;
      overrun_o <= 1'b0;
      for (int m = 0; m < M; m++) fill_q[m] <= '0;
    end else if (cfg_valid_i && state_q == IDLE) begin
      pending_q <= '0;
      overrun_o <= 1'b0;
      for (int m = 0; m < M; m++) fill_q[m] <= '0;
    end else begin
      overrun_o <= (state_q == ISSUE) && |(s_valid_i & active);
      for (int m = 0; m < M; m++) begin
        if (s_valid_i[m] && 32'(fill_q[m]) < N_MAX) fill_q[m] <= fill_q[m] + 1'b1;
      end
      case (state_q)
        IDLE: begin
          if (record_ready) begin
            pending_q <= s_valid_i;
            if (all_filled) begin
              state_q  <= ISSUE;
              ch_cnt_q <= '0;
              n_cnt_q  <= '0;
            end
          end else begin
            pending_q <= pending_q | s_valid_i;
          end
        end
        ISSUE: begin
          pending_q <= pending_q | s_valid_i;
          if (p0.final_) begin
            state_q <= IDLE;
          end else if (p0.last) begin
            ch_cnt_q <= ch_cnt_q + 1'b1;
            n_cnt_q  <= '0;
          end else begin
            n_cnt_q <= n_cnt_q + 1'b1;
          end
        end
        default: state_q <= IDLE;
      endcase
    end
  end

  // Flag pipeline alongside buffer, crossbar and binder.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      p1_q    <= '0;
      p2_q    <= '0;
      p3_q    <= '0;
      latch_o <= 1'b0;
    end else begin
      p1_q    <= p0;
      p2_q    <= p1_q;
      p3_q    <= p2_q;
      latch_o <= p3_q.valid && p3_q.final_;
    end
  end

  a_cfg_m : assert property (@(posedge clk_i) disable iff (!rst_ni)
                             cfg_valid_i |-> (cfg_m_i >= 1 && 32'(cfg_m_i) <= M));
  a_cfg_idle : assert property (@(posedge clk_i) disable iff (!rst_ni)
                                cfg_valid_i |-> !busy_o);

endmodule
