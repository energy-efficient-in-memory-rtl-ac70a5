// tb_crossbar_array: checks programming and row reads of the crossbar model.
//
// All 84 rows are programmed with random vectors and read back in random
// order; the sense-amplifier output must match the programmed row one cycle
// after the read, with sa_valid_o following rd_en_i. Reprogramming a row and
// reading past the last row (all zeros) are checked too.
module tb_crossbar_array;
  localparam int unsigned ROWS = 84, D = 130, RW = $clog2(ROWS);
  logic clk = 0, rst_n = 0, prog_en = 0, rd_en = 0, sa_valid;
  logic [RW-1:0] prog_row, rd_row;
  logic [D-1:0] prog_data, sa_data;
  logic [D-1:0] model [ROWS];
  int checks = 0, failures = 0;

  crossbar_array #(.ROWS(ROWS), .D(D)) dut (
    .clk_i(clk), .rst_ni(rst_n), .prog_en_i(prog_en), .prog_row_i(prog_row), .prog_data_i(prog_data),
    .rd_en_i(rd_en), .rd_row_i(rd_row), .sa_valid_o(sa_valid), .sa_data_o(sa_data));

  always #5 clk = ~clk;

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

  task automatic read_check(int r);
    rd_en = 1; rd_row = RW'(r);
    @(negedge clk);
    rd_en = 0;
    check(sa_valid, "sa_valid after read");
    check(sa_data == ((r < ROWS) ? model[r] : '0), $sformatf("row %0d", r));
    @(negedge clk);
    check(!sa_valid, "sa_valid drops");
  endtask

  initial begin
    #200_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prog_row = '0; rd_row = '0; prog_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      model[r] = rnd_vec();
      prog_en = 1; prog_row = RW'(r); prog_data = model[r];
      @(negedge clk);
    end
    prog_en = 0;
    for (int i = 0; i < 200; i++) read_check($urandom_range(ROWS - 1));
    // back-to-back reads
    for (int r = 0; r < ROWS; r++) begin
      rd_en = 1; rd_row = RW'(r);
      @(negedge clk);
      check(sa_valid && sa_data == model[r], $sformatf("streamed row %0d", r));
    end
    rd_en = 0;
    model[5] = rnd_vec();
    prog_en = 1; prog_row = 5; prog_data = model[5];
    @(negedge clk);
    prog_en = 0;
    read_check(5);
    read_check(ROWS + 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
