// tb_circular_buffer: checks the per-channel write pointers, the read order
// and the row-address adder of the circular buffer.
//
// Each channel gets its own region size N_m (1 .. 9) and row offset. Random
// samples are written, channels at independent times and several in the same
// cycle, for more than one wrap of each region. Then the single read pointer
// reads every channel: the row addresses must be offset_m + level of the last
// N_m samples of that channel, oldest first, one cycle after each read.
module tb_circular_buffer;
  localparam int unsigned M = 4, N_MAX = 9, L_MAX = 21;
  localparam int unsigned LW = $clog2(L_MAX), BW = $clog2(M * N_MAX), RW = $clog2(M * L_MAX);
  logic clk = 0, rst_n = 0, clr = 0, rd_en = 0, rd_first = 0, row_valid;
  logic [BW-1:0] start_addr [M], end_addr [M];
  logic [M-1:0] wr_en;
  logic [LW-1:0] wr_level [M];
  logic [1:0] rd_ch;
  logic [RW-1:0] offset, row_addr;
  int checks = 0, failures = 0;
  int hist [M][$];

  circular_buffer #(.M(M), .N_MAX(N_MAX), .L_MAX(L_MAX)) dut (
    .clk_i(clk), .rst_ni(rst_n), .clr_i(clr), .start_addr_i(start_addr), .end_addr_i(end_addr),
    .wr_en_i(wr_en), .wr_level_i(wr_level), .rd_en_i(rd_en), .rd_first_i(rd_first), .rd_ch_i(rd_ch),
    .offset_i(offset), .row_valid_o(row_valid), .row_addr_o(row_addr));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n [M];
    int off [M];
    int nwr;
    wr_en = '0; rd_ch = '0; offset = '0;
    for (int m = 0; m < M; m++) begin start_addr[m] = '0; end_addr[m] = '0; wr_level[m] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 30; trial++) begin
      // new configuration
      for (int m = 0; m < M; m++) begin
        n[m] = $urandom_range(1, N_MAX);
        start_addr[m] = BW'(m * N_MAX);
        end_addr[m]   = BW'(m * N_MAX + n[m] - 1);
        off[m] = (m == 0) ? 0 : off[m-1] + $urandom_range(1, L_MAX);
        hist[m].delete();
      end
      clr = 1;
      @(negedge clk);
      clr = 0;
      // write phase
      nwr = $urandom_range(20, 40);
      for (int k = 0; k < nwr; k++) begin
        for (int m = 0; m < M; m++) begin
          wr_en[m] = 1'($urandom_range(0, 2) != 0);
          wr_level[m] = LW'($urandom_range(0, L_MAX - 1));
          if (wr_en[m]) hist[m].push_back(int'(wr_level[m]));
        end
        @(negedge clk);
      end
      wr_en = '0;
      // make sure every region is full
      for (int m = 0; m < M; m++) begin
        while (hist[m].size() < n[m]) begin
          wr_en = '0; wr_en[m] = 1; wr_level[m] = LW'($urandom_range(0, L_MAX - 1));
          hist[m].push_back(int'(wr_level[m]));
          @(negedge clk);
        end
      end
      wr_en = '0;
      // read phase: every channel, chronological, back to back
      for (int m = 0; m < M; m++) begin
        for (int i = 0; i < n[m]; i++) begin
          automatic int expl = hist[m][hist[m].size() - n[m] + i];
          rd_en = 1; rd_first = (i == 0); rd_ch = 2'(m); offset = RW'(off[m]);
          @(negedge clk);
          check(row_valid, "row_valid");
          check(int'(row_addr) == off[m] + expl,
                $sformatf("trial %0d ch %0d read %0d: row %0d, expected %0d", trial, m, i, row_addr, off[m] + expl));
        end
      end
      rd_en = 0; rd_first = 0;
      @(negedge clk);
      check(!row_valid, "row_valid drops");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
