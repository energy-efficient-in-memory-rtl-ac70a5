// tb_tiebreak_lfsr: checks the tie-break LFSR against a bit-level reference.
//
// The reference computes the feedback of x^16 + x^14 + x^13 + x^11 + 1 from
// the individual state bits. The test compares rnd_o every cycle over a whole
// period (65,535 steps), checks that the state returns to its seed after
// exactly one period and not before, and that the register holds while en_i
// is low.
module tb_tiebreak_lfsr;
  logic clk = 0, rst_n = 0, en = 0, rnd;
  int checks = 0, failures = 0;
  logic [15:0] ref_s;
  int first_repeat;

  tiebreak_lfsr dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .rnd_o(rnd));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_s = 16'hACE1;
    first_repeat = -1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(rnd == ref_s[15], "reset value");
    en = 1;
    for (int i = 1; i <= 65535; i++) begin
      @(negedge clk);
      ref_s = {ref_s[14:0], ref_s[15] ^ ref_s[13] ^ ref_s[12] ^ ref_s[10]};
      if (i % 7 == 0 || i < 200) check(rnd == ref_s[15], $sformatf("bit %0d", i));
      if (ref_s == 16'hACE1 && first_repeat < 0) first_repeat = i;
      if (dut.state_q == 16'hACE1 && i < 65535) check(0, $sformatf("early repeat at %0d", i));
    end
    check(first_repeat == 65535, $sformatf("reference period %0d", first_repeat));
    check(dut.state_q == 16'hACE1, "state back at seed after one period");
    // hold
    en = 0;
    ref_s = dut.state_q;
    repeat (5) @(negedge clk);
    check(dut.state_q == ref_s, "holds while disabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
