// tb_encoder_controller: checks the sequencing produced by the controller.
//
// Random configurations (1 .. 4 active channels, per-channel N 1 .. 9 and
// L 1 .. 21) are loaded. Samples then arrive, all channels in one cycle or
// staggered. The testbench records the controller outputs every cycle and
// compares them with a schedule it works out itself:
//   * no reads until every active channel has N_m samples (warm-up);
//   * reads start two cycles after the last sample of a record is driven and
//     run for sum(N_m) back-to-back cycles, channel by channel, with
//     rd_first on each channel's first read and the channel's row offset
//     (sum of the L of the channels before it);
//   * accumulator clear with the very first read; binder enable two cycles
//     after every read; accumulate three cycles after each channel's last
//     read; latch four cycles after the final read;
//   * write-pointer ranges m*N_MAX .. m*N_MAX + N_m - 1;
//   * overrun when a sample arrives while reads are being issued.
module tb_encoder_controller;
  import hdc_pkg::chan_cfg_t;
  localparam int unsigned M = 4, N_MAX = 9, L_MAX = 21;
  localparam int unsigned BW = $clog2(M * N_MAX), RW = $clog2(M * L_MAX);
  localparam int unsigned TRACE = 64;

  logic clk = 0, rst_n = 0, cfg_valid = 0;
  logic [2:0] cfg_m, n_ch;
  chan_cfg_t cfg_ch [M];
  logic [M-1:0] s_valid;
  logic buf_clr, rd_en, rd_first, bind_en, bind_first, acc_clear, acc_en, latch, busy, overrun;
  logic [BW-1:0] start_addr [M], end_addr [M];
  logic [1:0] rd_ch;
  logic [RW-1:0] offset;
  int checks = 0, failures = 0, records = 0, warmups = 0, overruns = 0;

  encoder_controller #(.M(M), .N_MAX(N_MAX), .L_MAX(L_MAX)) dut (
    .clk_i(clk), .rst_ni(rst_n), .cfg_valid_i(cfg_valid), .cfg_m_i(cfg_m), .cfg_ch_i(cfg_ch),
    .n_ch_o(n_ch), .s_valid_i(s_valid), .buf_clr_o(buf_clr), .start_addr_o(start_addr),
    .end_addr_o(end_addr), .rd_en_o(rd_en), .rd_first_o(rd_first), .rd_ch_o(rd_ch),
    .offset_o(offset), .bind_en_o(bind_en), .bind_first_o(bind_first), .acc_clear_o(acc_clear),
    .acc_en_o(acc_en), .latch_o(latch), .busy_o(busy), .overrun_o(overrun));

  always #5 clk = ~clk;

  typedef struct packed {
    logic rd_en, rd_first, bind_en, bind_first, acc_clear, acc_en, latch;
    logic [1:0] rd_ch;
    logic [RW-1:0] offset;
  } obs_t;

  obs_t trace [TRACE];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  function automatic obs_t sample_outputs();
    obs_t o;
    o.rd_en = rd_en; o.rd_first = rd_first; o.bind_en = bind_en; o.bind_first = bind_first;
    o.acc_clear = acc_clear; o.acc_en = acc_en; o.latch = latch; o.rd_ch = rd_ch; o.offset = offset;
    return o;
  endfunction

  // Drive one sample on every active channel; the last one in the cycle
  // after which tracing starts. Returns with trace[0] = first cycle after it.
  task automatic deliver(int m_act, bit stagger);
    if (stagger) begin
      for (int m = 0; m < m_act; m++) begin
        s_valid = '0; s_valid[m] = 1'b1;
        @(negedge clk);
        s_valid = '0;
        if (m < m_act - 1) repeat ($urandom_range(0, 3)) @(negedge clk);
      end
    end else begin
      s_valid = '0;
      for (int m = 0; m < m_act; m++) s_valid[m] = 1'b1;
      @(negedge clk);
    end
    s_valid = '0;
    for (int c = 0; c < TRACE; c++) begin
      trace[c] = sample_outputs();
      @(negedge clk);
    end
  endtask

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n [M], l [M], off [M];
    int m_act, k;
    s_valid = '0;
    cfg_m = 3'd4;
    for (int m = 0; m < M; m++) cfg_ch[m] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // reset configuration
    check(n_ch == 3'd4 && end_addr[3] == BW'(3 * N_MAX + N_MAX - 1) && dut.offset_q[2] == RW'(2 * L_MAX),
          "reset configuration");
    for (int trial = 0; trial < 40; trial++) begin
      m_act = $urandom_range(1, M);
      k = 0;
      for (int m = 0; m < M; m++) begin
        n[m] = $urandom_range(1, N_MAX);
        l[m] = $urandom_range(1, L_MAX);
        off[m] = (m == 0) ? 0 : off[m-1] + l[m-1];
        if (m < m_act) k += n[m];
        cfg_ch[m].n = 4'(n[m]);
        cfg_ch[m].l = 5'(l[m]);
      end
      cfg_m = 3'(m_act);
      cfg_valid = 1;
      #1 check(buf_clr, "buffer cleared on configuration");
      @(negedge clk);
      cfg_valid = 0;
      for (int m = 0; m < M; m++) begin
        check(int'(start_addr[m]) == m * N_MAX && int'(end_addr[m]) == m * N_MAX + n[m] - 1,
              $sformatf("write-pointer range ch %0d", m));
      end
      check(n_ch == 3'(m_act), "active channel count");
      // samples: the first max(N)-1 records are warm-up
      for (int rec = 0; rec < N_MAX + 1; rec++) begin
        automatic bit full = 1;
        int t, ch, i, last_t;
        for (int m = 0; m < m_act; m++) if (rec + 1 < n[m]) full = 0;
        deliver(m_act, (rec % 3) == 1);
        if (!full) begin
          automatic bit any = 0;
          for (int c = 0; c < TRACE; c++) any |= trace[c].rd_en | trace[c].latch;
          check(!any, "no encoding during warm-up");
          warmups++;
          continue;
        end
        records++;
        // expected schedule, starting at trace index 1
        t = 1;
        for (int c = 0; c < 1; c++) check(!trace[c].rd_en, "no read before start");
        for (ch = 0; ch < m_act; ch++) begin
          for (i = 0; i < n[ch]; i++) begin
            check(trace[t].rd_en && trace[t].rd_first == (i == 0) && int'(trace[t].rd_ch) == ch &&
                  int'(trace[t].offset) == off[ch], $sformatf("read ch %0d #%0d (trial %0d)", ch, i, trial));
            check(trace[t].acc_clear == (t == 1), "accumulator clear with first read");
            check(trace[t+2].bind_en && trace[t+2].bind_first == (i == 0), "binder enable two cycles later");
            check(trace[t+3].acc_en == (i == n[ch] - 1), "accumulate after a channel's last read");
            last_t = t;
            t++;
          end
        end
        check(!trace[t].rd_en, "reads stop after sum(N)");
        check(t - 1 == k, "number of reads");
        for (int c = 0; c < TRACE; c++) begin
          check(trace[c].latch == (c == last_t + 4), "latch four cycles after final read");
        end
      end
      // overrun: a sample while reads are being issued
      if (k >= 3) begin
        s_valid = '0;
        for (int m = 0; m < m_act; m++) s_valid[m] = 1'b1;
        @(negedge clk);
        s_valid = '0;
        @(negedge clk);
        @(negedge clk);
        check(rd_en, "reading");
        s_valid[0] = 1'b1;
        @(negedge clk);
        s_valid = '0;
        check(overrun, "overrun flagged");
        overruns += overrun;
        @(negedge clk);
        check(!overrun, "overrun is a pulse");
        while (busy) @(negedge clk);
        // a new sample on channel 0 already arrived: complete the record
        for (int m = 1; m < m_act; m++) s_valid[m] = 1'b1;
        @(negedge clk);
        s_valid = '0;
        repeat (k + 8) @(negedge clk);
      end
      while (busy) @(negedge clk);
    end
    check(records > 0 && warmups > 0 && overruns > 0,
          $sformatf("mechanisms seen: records %0d warm-up %0d overrun %0d", records, warmups, overruns));
    $display("records=%0d warmup=%0d overruns=%0d", records, warmups, overruns);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
