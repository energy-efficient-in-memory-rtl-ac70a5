// st_hdc_encoder: in-memory spatio-temporal hyperdimensional encoder (top).
//
// M channels deliver quantized samples (level indices). For every complete
// record of the last N_m samples of each active channel the encoder produces
// the D-bit N-gram hypervector
//     G' = Majority(T_1, ..., T_M),  T_m = rho^(N-1) I_{1,m} ^ ... ^ I_{N,m},
// where I_{n,m} is the channel-bound hypervector of channel m for the level of
// its n-th sample (oldest first). The channel-bound vectors are pre-computed
// off line and programmed into the rows of a crossbar memory, so the encoder
// itself only reads rows, permutes and XORs them (binder), and counts and
// thresholds them (bundler):
//
//   samples -> circular_buffer -> row address -> crossbar_array -> sense amps
//           -> binder (T_m) -> bundler (majority, LFSR tie-break) -> hv_o
//   encoder_controller sequences every step.
//
// Interface:
//   cfg_valid_i/cfg_m_i/cfg_ch_i  load the active channel count and per-channel
//                                 N and L (only while busy_o is low); reset
//                                 selects all channels with N_MAX and L_MAX.
//   prog_*                        program crossbar row r = offset_m + (l-1)
//                                 with I_m^l (offset_m = sum of the L of the
//                                 channels before m).
//   s_valid_i/s_level_i           one sample per channel, level 0 .. L_m-1.
//   hv_valid_o/hv_o               one-cycle pulse with the N-gram hypervector.
//   busy_o, overrun_o             encoding in progress; sample arrived while
//                                 a record was being read.
// Timing: one crossbar row read per clock; the N-gram appears sum(N_m) + 4
// cycles after the first buffer read, which starts the cycle after the last
// sample of a record arrives.
module st_hdc_encoder
  import hdc_pkg::chan_cfg_t;
#(
  parameter int unsigned D     = hdc_pkg::D,
  parameter int unsigned M     = hdc_pkg::M,
  parameter int unsigned N_MAX = hdc_pkg::N_MAX,
  parameter int unsigned L_MAX = hdc_pkg::L_MAX,
  localparam int unsigned LW   = $clog2(L_MAX),
  localparam int unsigned MW   = $clog2(M + 1),
  localparam int unsigned RW   = $clog2(M * L_MAX)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  // encoding parameters
  input  logic          cfg_valid_i,
  input  logic [MW-1:0] cfg_m_i,
  input  chan_cfg_t     cfg_ch_i  [M],
  // crossbar programming
  input  logic          prog_en_i,
  input  logic [RW-1:0] prog_row_i,
  input  logic [D-1:0]  prog_data_i,
  // samples
  input  logic [M-1:0]  s_valid_i,
  input  logic [LW-1:0] s_level_i [M],
  // N-gram hypervector (query for the associative memory)
  output logic          hv_valid_o,
  output logic [D-1:0]  hv_o,
  output logic          busy_o,
  output logic          overrun_o
);

  localparam int unsigned BW = $clog2(M * N_MAX);
  localparam int unsigned CW = (M > 1) ? $clog2(M) : 1;

  logic [MW-1:0] n_ch;
  logic          buf_clr;
  logic [BW-1:0] start_addr [M];
  logic [BW-1:0] end_addr   [M];
  logic          rd_en, rd_first;
  logic [CW-1:0] rd_ch;
  logic [RW-1:0] offset;
  logic          row_valid;
  logic [RW-1:0] row_addr;
  logic          sa_valid;
  logic [D-1:0]  sa_data;
  logic          bind_en, bind_first;
  logic [D-1:0]  t_vec;
  logic          acc_clear, acc_en, latch;
  logic          tb_en, rnd;

  encoder_controller #(.M(M), .N_MAX(N_MAX), .L_MAX(L_MAX)) u_ctrl (
    .clk_i, .rst_ni,
    .cfg_valid_i, .cfg_m_i, .cfg_ch_i,
    .n_ch_o       (n_ch),
    .s_valid_i,
    .buf_clr_o    (buf_clr),
    .start_addr_o (start_addr),
    .end_addr_o   (end_addr),
    .rd_en_o      (rd_en),
    .rd_first_o   (rd_first),
    .rd_ch_o      (rd_ch),
    .offset_o     (offset),
    .bind_en_o    (bind_en),
    .bind_first_o (bind_first),
    .acc_clear_o  (acc_clear),
    .acc_en_o     (acc_en),
    .latch_o      (latch),
    .busy_o, .overrun_o
  );

  circular_buffer #(.M(M), .N_MAX(N_MAX), .L_MAX(L_MAX)) u_buf (
    .clk_i, .rst_ni,
    .clr_i        (buf_clr),
    .start_addr_i (start_addr),
    .end_addr_i   (end_addr),
    .wr_en_i      (s_valid_i),
    .wr_level_i   (s_level_i),
    .rd_en_i      (rd_en),
    .rd_first_i   (rd_first),
    .rd_ch_i      (rd_ch),
    .offset_i     (offset),
    .row_valid_o  (row_valid),
    .row_addr_o   (row_addr)
  );

  crossbar_array #(.ROWS(M * L_MAX), .D(D)) u_xbar (
    .clk_i, .rst_ni,
    .prog_en_i, .prog_row_i, .prog_data_i,
    .rd_en_i    (row_valid),
    .rd_row_i   (row_addr),
    .sa_valid_o (sa_valid),
    .sa_data_o  (sa_data)
  );

  binder #(.D(D)) u_binder (
    .clk_i, .rst_ni,
    .en_i    (bind_en),
    .first_i (bind_first),
    .din_i   (sa_data),
    .q_o     (t_vec)
  );

  tiebreak_lfsr u_lfsr (
    .clk_i, .rst_ni,
    .en_i  (tb_en),
    .rnd_o (rnd)
  );

  bundler #(.D(D), .M(M)) u_bundler (
    .clk_i, .rst_ni,
    .n_ch_i     (n_ch),
    .scan_in_i  (rnd),
    .tb_en_o    (tb_en),
    .clear_i    (acc_clear),
    .acc_en_i   (acc_en),
    .din_i      (t_vec),
    .latch_i    (latch),
    .hv_valid_o,
    .hv_o
  );

  // The sense amplifiers deliver data exactly when the binder is told to use it.
  a_bind_aligned : assert property (@(posedge clk_i) disable iff (!rst_ni) bind_en |-> sa_valid);

endmodule
