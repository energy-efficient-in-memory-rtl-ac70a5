// tb_binder: checks the binder's permute-and-XOR accumulation.
//
// For several channels with N-gram sizes 1 .. 9 the test feeds random rows
// oldest first, with first_i on the first, and compares the register with
// T = rho^(N-1) I_1 ^ ... ^ I_N computed in the testbench with an explicit
// circular right shift (dimension j moves to j+1, D-1 wraps to 0). It also
// checks that nothing changes while en_i is low.
module tb_binder;
  localparam int unsigned D = 67;
  logic clk = 0, rst_n = 0, en = 0, first = 0;
  logic [D-1:0] din, q;
  int checks = 0, failures = 0;

  binder #(.D(D)) dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .first_i(first), .din_i(din), .q_o(q));

  always #5 clk = ~clk;

  function automatic logic [D-1:0] rho(logic [D-1:0] v);
    logic [D-1:0] r;
    for (int j = 0; j < D; j++) r[(j + 1) % D] = v[j];
    return r;
  endfunction

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
    #100_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [D-1:0] rows [9];
    logic [D-1:0] expv, held;
    din = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 40; trial++) begin
      automatic int n = 1 + trial % 9;
      for (int i = 0; i < n; i++) rows[i] = rnd_vec();
      // reference: sum over i of rho^(n-1-i) rows[i]
      expv = '0;
      for (int i = 0; i < n; i++) begin
        automatic logic [D-1:0] t = rows[i];
        for (int k = 0; k < n - 1 - i; k++) t = rho(t);
        expv ^= t;
      end
      for (int i = 0; i < n; i++) begin
        en = 1; first = (i == 0); din = rows[i];
        @(negedge clk);
        // idle cycles in between must not change the result
        if (trial % 3 == 0) begin
          en = 0; din = rnd_vec(); held = q;
          @(negedge clk);
          check(q == held, "hold while disabled");
        end
      end
      en = 0;
      check(q == expv, $sformatf("T for N=%0d", n));
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
