// Body of the end-to-end encoder testbenches (included by tb_st_hdc_encoder
// and tb_st_hdc_encoder_full, which set D, REC_PER_PHASE and WATCHDOG and
// instantiate the encoder as dut).
//
// Reference model, written independently of the RTL:
//   * crossbar rows are random; row offset_m + l holds I_m^l;
//   * every sample written is kept per channel; for a record the channel
//     vector is T_m = XOR over the last N_m samples, oldest first, of the row
//     rotated right (towards higher dimensions, wrapping) once per newer
//     sample; the N-gram bit is 1 when the count of ones over the active
//     channels, plus a tie-break bit for an even channel count, reaches
//     ceil((M+1)/2);
//   * the tie-break bits are a copy of the LFSR x^16+x^14+x^13+x^11+1
//     (seed ACE1) shifted into a D-bit chain on every clock edge at which the
//     active channel count is even, sampled at the edge of the first read;
//   * timing: reads start two edges after the edge that captured the record's
//     last sample and the N-gram is valid after sum(N_m) + 5 edges from it.

  localparam int unsigned M = hdc_pkg::M, N_MAX = hdc_pkg::N_MAX, L_MAX = hdc_pkg::L_MAX;
  localparam int unsigned ROWS = M * L_MAX, RW = $clog2(ROWS), LW = $clog2(L_MAX);

  logic clk = 0, rst_n = 0;
  logic cfg_valid = 0;
  logic [2:0] cfg_m = 3'd4;
  hdc_pkg::chan_cfg_t cfg_ch [M];
  logic prog_en = 0;
  logic [RW-1:0] prog_row = '0;
  logic [D-1:0] prog_data;
  logic [M-1:0] s_valid = '0;
  logic [LW-1:0] s_level [M];
  logic hv_valid, busy, overrun;
  logic [D-1:0] hv;

  int checks = 0, failures = 0;
  longint cyc = 0;

  // mechanism counters
  int n_records = 0, n_warmup = 0, n_ties = 0, n_even = 0, n_odd = 0, n_overrun = 0;
  int n_wraps = 0, n_cfg = 0, n_mixed = 0, n_stagger = 0;

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- model
  logic [D-1:0] rows [ROWS];
  int cur_m = M;
  int cur_n [M];
  int cur_l [M];
  int cur_off [M];
  int hist [M][$];
  logic [15:0] m_lfsr = 16'hACE1;
  logic [D-1:0] m_scan = '0;
  logic [D-1:0] tie_bits;
  longint capture_at = -1, expect_at = -1;
  logic [D-1:0] exp_hv;
  int exp_cnt [D];
  bit exp_even;

  always @(posedge clk) begin
    if (rst_n) begin
      cyc++;
      if (cyc == capture_at) tie_bits = m_scan;
      if (cur_m % 2 == 0) begin
        m_scan = {m_scan[D-2:0], m_lfsr[15]};
        m_lfsr = {m_lfsr[14:0], m_lfsr[15] ^ m_lfsr[13] ^ m_lfsr[12] ^ m_lfsr[10]};
      end
    end
  end

  // Expected N-gram of the record now held in the model history.
  task automatic compute_expected();
    logic [D-1:0] t, r;
    for (int j = 0; j < D; j++) exp_cnt[j] = 0;
    for (int m = 0; m < cur_m; m++) begin
      t = '0;
      for (int i = 0; i < cur_n[m]; i++) begin
        r = rows[cur_off[m] + hist[m][hist[m].size() - cur_n[m] + i]];
        t = {t[D-2:0], t[D-1]} ^ r;   // rotate the older part, bind the new row
      end
      for (int j = 0; j < D; j++) exp_cnt[j] += int'(t[j]);
    end
    exp_even = (cur_m % 2 == 0);
  endtask

  // Monitor: every N-gram must be expected, on time and correct.
  always @(negedge clk) begin
    if (rst_n && hv_valid) begin
      check(expect_at >= 0 && cyc == expect_at,
            $sformatf("N-gram at edge %0d, expected at %0d", cyc, expect_at));
      for (int j = 0; j < D; j++) begin
        automatic int c = exp_cnt[j];
        if (exp_even && 2 * c == cur_m) n_ties++;
        if (exp_even) c += int'(tie_bits[j]);
        exp_hv[j] = (c >= (cur_m + 2) / 2);
      end
      check(hv == exp_hv, $sformatf("N-gram value (record %0d, M=%0d)", n_records, cur_m));
      expect_at = -1;
    end else if (rst_n && expect_at >= 0) begin
      check(cyc < expect_at, "N-gram late");
    end
  end

  // ---------------------------------------------------------------- stimulus
  task automatic configure(int m_act, int nn [M], int ll [M]);
    bit mixed = 0;
    for (int m = 0; m < M; m++) begin
      cfg_ch[m].n = 4'(nn[m]);
      cfg_ch[m].l = 5'(ll[m]);
      if (m > 0 && m < m_act && (nn[m] != nn[0] || ll[m] != ll[0])) mixed = 1;
    end
    cfg_m = 3'(m_act);
    cfg_valid = 1;
    @(posedge clk);
    cur_m = m_act;          // the model shifts with the old count on this edge
    @(negedge clk);
    cfg_valid = 0;
    for (int m = 0; m < M; m++) begin
      cur_n[m] = nn[m];
      cur_l[m] = ll[m];
      cur_off[m] = (m == 0) ? 0 : cur_off[m-1] + ll[m-1];
      hist[m].delete();
    end
    n_cfg++;
    n_mixed += mixed;
  endtask

  function automatic bit all_full();
    for (int m = 0; m < cur_m; m++) if (hist[m].size() < cur_n[m]) return 0;
    return 1;
  endfunction

  // One record: a sample on every active channel (inactive ones get noise).
  task automatic record(bit stagger, bit make_overrun);
    int k = 0;
    bit full_before;
    for (int m = 0; m < cur_m; m++) k += cur_n[m];
    if (stagger) begin
      for (int m = 0; m < cur_m; m++) begin
        s_valid = '0; s_valid[m] = 1'b1;
        s_level[m] = LW'($urandom_range(0, cur_l[m] - 1));
        hist[m].push_back(int'(s_level[m]));
        @(negedge clk);
        s_valid = '0;
        if (m < cur_m - 1) repeat ($urandom_range(0, 2)) @(negedge clk);
      end
      n_stagger++;
    end else begin
      for (int m = 0; m < M; m++) begin
        s_level[m] = LW'($urandom_range(0, (m < cur_m) ? cur_l[m] - 1 : L_MAX - 1));
        s_valid[m] = (m < cur_m) ? 1'b1 : 1'($urandom);
        if (m < cur_m) hist[m].push_back(int'(s_level[m]));
      end
      @(negedge clk);
      s_valid = '0;
    end
    // the edge just passed (number cyc) captured the last sample
    if (all_full()) begin
      compute_expected();
      capture_at = cyc + 2;
      expect_at  = cyc + k + 5;
      n_records++;
      if (cur_m % 2 == 0) n_even++; else n_odd++;
      for (int m = 0; m < cur_m; m++) if (hist[m].size() > cur_n[m]) begin n_wraps++; break; end
      if (make_overrun && cur_n[0] + 1 < k) begin
        // a new sample on channel 0 once its reads are done
        repeat (cur_n[0] + 2) @(negedge clk);
        s_valid[0] = 1'b1;
        s_level[0] = LW'($urandom_range(0, cur_l[0] - 1));
        @(negedge clk);
        s_valid = '0;
        check(overrun, "overrun flagged");
        n_overrun += int'(overrun);
        while (expect_at >= 0) @(negedge clk);
        hist[0].push_back(int'(s_level[0]));   // belongs to the next record
      end
      while (expect_at >= 0) @(negedge clk);
      check(!busy, "idle after the N-gram");
    end else begin
      n_warmup++;
      repeat (k + 8) begin
        @(negedge clk);
        check(!hv_valid && !busy, "no encoding during warm-up");
      end
    end
  endtask

  function automatic logic [D-1:0] rnd_vec();
    logic [D-1:0] v;
    for (int j = 0; j < D; j += 32) begin
      automatic logic [31:0] w = $urandom;
      for (int b = 0; b < 32 && j + b < D; b++) v[j + b] = w[b];
    end
    return v;
  endfunction

  task automatic run_phase(int m_act, int nn [M], int ll [M], int recs);
    configure(m_act, nn, ll);
    for (int r = 0; r < recs + N_MAX; r++) record(r % 4 == 2, r % 5 == 4);
  endtask

  initial begin
    int nn [M], ll [M];
    for (int m = 0; m < M; m++) begin
      cfg_ch[m] = '0; s_level[m] = '0;
      cur_n[m] = N_MAX; cur_l[m] = L_MAX; cur_off[m] = m * L_MAX;
    end
    prog_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // program the crossbar
    for (int r = 0; r < ROWS; r++) begin
      rows[r] = rnd_vec();
      prog_en = 1; prog_row = RW'(r); prog_data = rows[r];
      @(negedge clk);
    end
    prog_en = 0;
    // 1. reset configuration: all channels, N_MAX, L_MAX
    for (int r = 0; r < REC_PER_PHASE + N_MAX; r++) record(r % 4 == 2, r % 5 == 4);
    // 2. three channels (odd: no tie-break), channel-specific N and L
    nn = '{3, 5, 9, 1}; ll = '{3, 12, 21, 21};
    run_phase(3, nn, ll, REC_PER_PHASE);
    // 3. four channels, N = 3, L = 21
    nn = '{3, 3, 3, 3}; ll = '{21, 21, 21, 21};
    run_phase(4, nn, ll, REC_PER_PHASE);
    // 4. two channels, N = 5, L = 15
    nn = '{5, 5, 5, 5}; ll = '{15, 15, 15, 15};
    run_phase(2, nn, ll, REC_PER_PHASE);
    // 5. one channel, N = 9, L = 3
    nn = '{9, 9, 9, 9}; ll = '{3, 3, 3, 3};
    run_phase(1, nn, ll, REC_PER_PHASE);
    repeat (10) @(negedge clk);
    check(n_records > 0, "N-grams produced");
    check(n_warmup > 0, "warm-up seen");
    check(n_ties > 0, "ties broken by the scan chain");
    check(n_even > 0 && n_odd > 0, "even and odd channel counts");
    check(n_overrun > 0, "overrun seen");
    check(n_wraps > 0, "write pointers wrapped");
    check(n_cfg > 1 && n_mixed > 0, "reconfiguration with channel-specific N/L");
    check(n_stagger > 0, "staggered channel arrivals");
    $display("records=%0d warmup=%0d ties=%0d even=%0d odd=%0d overrun=%0d wraps=%0d cfg=%0d mixed=%0d stagger=%0d",
             n_records, n_warmup, n_ties, n_even, n_odd, n_overrun, n_wraps, n_cfg, n_mixed, n_stagger);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
