// tb_st_hdc_encoder_full: end-to-end test of the encoder at its default size
// (D = 10,000, M = 4, N up to 9, L up to 21), no parameters overridden.
//
// Same sequence and reference model as tb_st_hdc_encoder (see
// st_hdc_tb_body.svh) with fewer records per configuration: the reset
// configuration (4 channels, N = 9, L = 21), then 3 channels with
// channel-specific N/L, 4 channels with N = 3, L = 21, 2 channels with N = 5,
// L = 15 and 1 channel with N = 9, L = 3.
module tb_st_hdc_encoder_full;
  localparam int unsigned D = hdc_pkg::D;
  localparam int REC_PER_PHASE = 3;
  localparam int WATCHDOG = 100_000;

  `include "st_hdc_tb_body.svh"

  st_hdc_encoder dut (
    .clk_i(clk), .rst_ni(rst_n),
    .cfg_valid_i(cfg_valid), .cfg_m_i(cfg_m), .cfg_ch_i(cfg_ch),
    .prog_en_i(prog_en), .prog_row_i(prog_row), .prog_data_i(prog_data),
    .s_valid_i(s_valid), .s_level_i(s_level),
    .hv_valid_o(hv_valid), .hv_o(hv), .busy_o(busy), .overrun_o(overrun));
endmodule
