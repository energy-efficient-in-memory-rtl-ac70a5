// tb_st_hdc_encoder: end-to-end test of the encoder at D = 512.
//
// Runs the reset configuration and four reconfigurations (odd and even
// channel counts, channel-specific N and L, N from 1 to 9, L from 3 to 21)
// against a bit-exact reference model, checking every N-gram's value and the
// cycle at which it appears. Warm-up, tie-breaking, pointer wrap-around,
// staggered channel arrivals and the overrun flag are each required to occur.
// The checks are described in st_hdc_tb_body.svh.
module tb_st_hdc_encoder;
  localparam int unsigned D = 512;
  localparam int REC_PER_PHASE = 12;
  localparam int WATCHDOG = 200_000;

  `include "st_hdc_tb_body.svh"

  st_hdc_encoder #(.D(D)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .cfg_valid_i(cfg_valid), .cfg_m_i(cfg_m), .cfg_ch_i(cfg_ch),
    .prog_en_i(prog_en), .prog_row_i(prog_row), .prog_data_i(prog_data),
    .s_valid_i(s_valid), .s_level_i(s_level),
    .hv_valid_o(hv_valid), .hv_o(hv), .busy_o(busy), .overrun_o(overrun));
endmodule
