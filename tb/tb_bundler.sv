// tb_bundler: checks the majority, its threshold and the random tie-break.
//
// For active channel counts 1 .. 4 the test clears the accumulators, adds
// that many random D-bit vectors and latches. The expected output is worked
// out per dimension: count the ones, add the tie-break bit for an even
// count, and compare with ceil((M+1)/2). The tie-break bit of dimension j is
// the scan-in bit driven j+1 enabled cycles before the clear, which the
// testbench records itself. It also checks that the scan chain is frozen for
// odd channel counts and counts how many ties were resolved each way.
module tb_bundler;
  localparam int unsigned D = 96, M = 4;
  logic clk = 0, rst_n = 0, scan_in = 0, tb_en, clear = 0, acc_en = 0, latch = 0, hv_valid;
  logic [2:0] n_ch;
  logic [D-1:0] din, hv;
  logic [D-1:0] scan_model;
  int checks = 0, failures = 0, ties0 = 0, ties1 = 0;

  bundler #(.D(D), .M(M)) dut (
    .clk_i(clk), .rst_ni(rst_n), .n_ch_i(n_ch), .scan_in_i(scan_in), .tb_en_o(tb_en),
    .clear_i(clear), .acc_en_i(acc_en), .din_i(din), .latch_i(latch), .hv_valid_o(hv_valid), .hv_o(hv));

  always #5 clk = ~clk;

  // Testbench copy of the scan chain: shifts the driven bit on every edge
  // at which the channel count is even.
  always @(posedge clk) if (rst_n && n_ch[0] == 1'b0) scan_model <= {scan_model[D-2:0], scan_in};

  function automatic logic [D-1:0] rnd_vec();
    logic [D-1:0] v;
    for (int j = 0; j < D; j++) v[j] = 1'($urandom);
    return v;
  endfunction

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
    logic [D-1:0] vecs [M];
    logic [D-1:0] tbits, expv;
    int cnt;
    scan_model = '0;
    din = '0;
    n_ch = 3'd4;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 60; trial++) begin
      n_ch = 3'(1 + trial % 4);
      // let the chain run for a while
      repeat ($urandom_range(D, 2 * D)) begin
        scan_in = 1'($urandom);
        @(negedge clk);
      end
      check(tb_en == ~n_ch[0], "tie-break enable follows parity");
      tbits = scan_model;
      if (n_ch[0]) begin
        automatic logic [D-1:0] frozen = dut.scan_q;
        scan_in = ~scan_in;
        @(negedge clk);
        check(dut.scan_q == frozen, "scan chain frozen for odd channel count");
        tbits = scan_model;
      end else begin
        check(dut.scan_q == scan_model, "scan chain contents");
      end
      clear = 1;
      @(negedge clk);
      clear = 0;
      for (int m = 0; m < n_ch; m++) begin
        vecs[m] = rnd_vec();
        din = vecs[m]; acc_en = 1;
        @(negedge clk);
        acc_en = 0; din = rnd_vec();   // ignored
        if (m % 2 == 0) @(negedge clk);
      end
      latch = 1;
      @(negedge clk);
      latch = 0;
      check(hv_valid, "hv_valid after latch");
      for (int j = 0; j < D; j++) begin
        cnt = 0;
        for (int m = 0; m < n_ch; m++) cnt += vecs[m][j];
        if (n_ch[0] == 0 && 2 * cnt == n_ch) begin
          if (tbits[j]) ties1++; else ties0++;
        end
        if (n_ch[0] == 0) cnt += tbits[j];
        expv[j] = (cnt >= (n_ch + 2) / 2);
      end
      check(hv == expv, $sformatf("majority of %0d channels", n_ch));
      @(negedge clk);
      check(!hv_valid, "hv_valid is a pulse");
    end
    check(ties0 > 0 && ties1 > 0, $sformatf("ties broken both ways (%0d/%0d)", ties0, ties1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
