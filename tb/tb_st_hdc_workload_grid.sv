// tb_st_hdc_workload_grid: the encoder at its default size (D = 10,000,
// M = 4) on the nine (N, L) combinations N in {3, 5, 9} x L in {3, 12, 21}
// used for the energy comparison of the architecture, with EMG-like inputs.
//
// For every L the testbench builds what a host would program:
//   * a continuous item memory CiM(l), l = 0..L-1: CiM(0) random, CiM(l)
//     equal to CiM(0) with the first floor(D*l / (2(L-1))) positions of a
//     random permutation flipped, so HamD(CiM(i), CiM(j)) follows
//     floor(D|i-j| / (2(L-1))) up to rounding and CiM(0), CiM(L-1) are D/2
//     apart (checked);
//   * random channel vectors E_m;
//   * crossbar rows m*L + l = CiM(l) XOR E_m.
// Each channel is a bounded random walk over the levels. The expected N-gram
// is computed from CiM and E directly with the in-memory-friendly equations
//   T_m = XOR_n rho^(N-n) (CiM(s_{n,m}) XOR E_m),  G' = Majority(T_1..T_4),
// ties broken by a model of the LFSR scan chain. The number of cycles per
// N-gram (4N + 4) is checked and the rate at 440 MHz is printed.
module tb_st_hdc_workload_grid;
  import hdc_pkg::*;
  localparam int unsigned ROWS = M * L_MAX, RW = $clog2(ROWS), LW = $clog2(L_MAX);
  localparam int RECS = 2;            // N-grams checked per combination

  logic clk = 0, rst_n = 0, cfg_valid = 0;
  logic [2:0] cfg_m = 3'd4;
  chan_cfg_t cfg_ch [M];
  logic prog_en = 0;
  logic [RW-1:0] prog_row = '0;
  logic [D-1:0] prog_data = '0;
  logic [M-1:0] s_valid = '0;
  logic [LW-1:0] s_level [M];
  logic hv_valid, busy, overrun;
  logic [D-1:0] hv;
  int checks = 0, failures = 0, ties = 0;
  longint cyc = 0, capture_at = -1;

  st_hdc_encoder dut (
    .clk_i(clk), .rst_ni(rst_n),
    .cfg_valid_i(cfg_valid), .cfg_m_i(cfg_m), .cfg_ch_i(cfg_ch),
    .prog_en_i(prog_en), .prog_row_i(prog_row), .prog_data_i(prog_data),
    .s_valid_i(s_valid), .s_level_i(s_level),
    .hv_valid_o(hv_valid), .hv_o(hv), .busy_o(busy), .overrun_o(overrun));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // LFSR and scan-chain model (four channels: the chain always runs).
  logic [15:0] m_lfsr = 16'hACE1;
  logic [D-1:0] m_scan = '0, tie_bits;
  always @(posedge clk) begin
    if (rst_n) begin
      cyc++;
      if (cyc == capture_at) tie_bits = m_scan;
      m_scan = {m_scan[D-2:0], m_lfsr[15]};
      m_lfsr = {m_lfsr[14:0], m_lfsr[15] ^ m_lfsr[13] ^ m_lfsr[12] ^ m_lfsr[10]};
    end
  end

  logic [D-1:0] cim [L_MAX];
  logic [D-1:0] item [M];
  int perm [D];
  int hist [M][$];

  function automatic logic [D-1:0] rnd_vec();
    logic [D-1:0] v;
    for (int j = 0; j < D; j++) v[j] = 1'($urandom);
    return v;
  endfunction

  function automatic logic [D-1:0] rho(logic [D-1:0] v);
    return {v[D-2:0], v[D-1]};
  endfunction

  task automatic build_memories(int L);
    for (int j = 0; j < D; j++) perm[j] = j;
    for (int j = D - 1; j > 0; j--) begin
      automatic int k = $urandom_range(0, j);
      automatic int t = perm[j];
      perm[j] = perm[k]; perm[k] = t;
    end
    cim[0] = rnd_vec();
    for (int l = 1; l < L; l++) begin
      automatic int flips = (D * l) / (2 * (L - 1));
      cim[l] = cim[0];
      for (int f = 0; f < flips; f++) cim[l][perm[f]] = ~cim[0][perm[f]];
    end
    check($countones(cim[0] ^ cim[L-1]) == D / 2, "CiM end levels D/2 apart");
    for (int m = 0; m < M; m++) item[m] = rnd_vec();
    for (int m = 0; m < M; m++) begin
      for (int l = 0; l < L; l++) begin
        prog_en = 1; prog_row = RW'(m * L + l); prog_data = cim[l] ^ item[m];
        @(negedge clk);
      end
    end
    prog_en = 0;
  endtask

  initial begin
    int ns [3] = '{3, 5, 9};
    int ls [3] = '{3, 12, 21};
    for (int m = 0; m < M; m++) begin cfg_ch[m] = '0; s_level[m] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (ls[li]) begin
      automatic int L = ls[li];
      build_memories(L);
      foreach (ns[ni]) begin
        automatic int N = ns[ni];
        automatic int lvl [M];
        for (int m = 0; m < M; m++) begin
          cfg_ch[m].n = 4'(N); cfg_ch[m].l = 5'(L);
          hist[m].delete();
          lvl[m] = $urandom_range(0, L - 1);
        end
        cfg_valid = 1;
        @(negedge clk);
        cfg_valid = 0;
        for (int r = 0; r < N - 1 + RECS; r++) begin
          // random walk, one level step at most per sample
          for (int m = 0; m < M; m++) begin
            lvl[m] += $urandom_range(0, 2) - 1;
            if (lvl[m] < 0) lvl[m] = 0;
            if (lvl[m] > L - 1) lvl[m] = L - 1;
            s_level[m] = LW'(lvl[m]);
            hist[m].push_back(lvl[m]);
          end
          s_valid = '1;
          @(negedge clk);
          s_valid = '0;
          if (r >= N - 1) begin
            automatic longint t0 = cyc;
            automatic int cnt [D];
            automatic logic [D-1:0] expv;
            capture_at = cyc + 2;
            for (int j = 0; j < D; j++) cnt[j] = 0;
            for (int m = 0; m < M; m++) begin
              automatic logic [D-1:0] t = '0;
              for (int n = 0; n < N; n++) t = rho(t) ^ cim[hist[m][hist[m].size() - N + n]] ^ item[m];
              for (int j = 0; j < D; j++) cnt[j] += int'(t[j]);
            end
            while (!hv_valid) @(negedge clk);
            check(cyc - t0 == 4 * N + 5, $sformatf("N-gram after %0d edges, expected %0d", cyc - t0, 4 * N + 5));
            for (int j = 0; j < D; j++) begin
              if (cnt[j] == 2) ties++;
              expv[j] = (cnt[j] + int'(tie_bits[j]) >= 3);
            end
            check(hv == expv, $sformatf("N-gram N=%0d L=%0d record %0d", N, L, r));
            check(!overrun, "no overrun");
            @(negedge clk);
          end else begin
            repeat (4 * N + 6) begin
              @(negedge clk);
              check(!hv_valid, "no N-gram during warm-up");
            end
          end
        end
        $display("N=%0d L=%0d: %0d cycles per N-gram, %.1fM N-grams/s at 440 MHz", N, L, 4 * N + 4,
                 440.0 / real'(4 * N + 4));
      end
    end
    check(ties > 0, "ties broken");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
