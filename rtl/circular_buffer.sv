// circular_buffer: the last N quantized samples of every channel, and the
// crossbar row address of the sample being read.
//
// The buffer has M regions of N_MAX entries, one per channel. Each channel has
// its own write pointer wp_m that steps through the addresses start_addr[m] ..
// end_addr[m] given by the controller and wraps from end back to start, so a
// region of N_m entries always holds the last N_m samples of its channel. All
// channels can write in the same cycle. A single read pointer rp walks one
// channel at a time in chronological order: the first read of a channel
// (rd_first_i) starts at that channel's wp, which is the oldest sample once
// the region is full, and each further read moves one entry on, wrapping the
// same way. The level read out (0 .. L_m-1) is added to the controller's row
// offset for the channel, giving the crossbar row of I_m^l.
//
// Entries hold a level index of LW bits. Samples arrive already quantized and
// synchronised to this clock; one write strobe per channel and the registered
// address output are this design's choices. Writing and reading the same
// region while an N-gram is being read changes the record; the controller
// reports that as an overrun.
//
// Timing: row_addr_o/row_valid_o are registered, one cycle after rd_en_i.
// clr_i returns every write pointer to its start address.
module circular_buffer #(
  parameter int unsigned M     = hdc_pkg::M,
  parameter int unsigned N_MAX = hdc_pkg::N_MAX,
  parameter int unsigned L_MAX = hdc_pkg::L_MAX,
  localparam int unsigned LW   = $clog2(L_MAX),
  localparam int unsigned BW   = $clog2(M * N_MAX),
  localparam int unsigned RW   = $clog2(M * L_MAX),
  localparam int unsigned CW   = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          clr_i,
  // write-pointer ranges from the controller
  input  logic [BW-1:0] start_addr_i [M],
  input  logic [BW-1:0] end_addr_i   [M],
  // sample inputs, one per channel
  input  logic [M-1:0]  wr_en_i,
  input  logic [LW-1:0] wr_level_i   [M],
  // read side
  input  logic          rd_en_i,
  input  logic          rd_first_i,
  input  logic [CW-1:0] rd_ch_i,
  input  logic [RW-1:0] offset_i,
  output logic          row_valid_o,
  output logic [RW-1:0] row_addr_o
);

  logic [LW-1:0] mem [M * N_MAX];
  logic [BW-1:0] wp_q [M];
  logic [BW-1:0] rp_q;
  logic [BW-1:0] rd_addr;

  // Write side: one pointer per channel.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int m = 0; m < M; m++) wp_q[m] <= BW'(m * N_MAX);
    end else if (clr_i) begin
      for (int m = 0; m < M; m++) wp_q[m] <= start_addr_i[m];
    end else begin
      for (int m = 0; m < M; m++) begin
        if (wr_en_i[m]) wp_q[m] <= (wp_q[m] == end_addr_i[m]) ? start_addr_i[m] : wp_q[m] + 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i) begin
    for (int m = 0; m < M; m++) begin
      if (wr_en_i[m] && !clr_i) mem[wp_q[m]] <= wr_level_i[m];
    end
  end

  // Read side: the single read pointer.
  always_comb begin
    rd_addr = rd_first_i ? wp_q[rd_ch_i] : rp_q;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rp_q        <= '0;
      row_valid_o <= 1'b0;
      row_addr_o  <= '0;
    end else begin
      row_valid_o <= rd_en_i;
      if (rd_en_i) begin
        rp_q       <= (rd_addr == end_addr_i[rd_ch_i]) ? start_addr_i[rd_ch_i] : rd_addr + 1'b1;
        row_addr_o <= offset_i + RW'(mem[rd_addr]);
      end
    end
  end

  a_rd_ch_range : assert property (@(posedge clk_i) disable iff (!rst_ni)
                                   rd_en_i |-> 32'(rd_ch_i) < M);

endmodule
