// tb_engine_ctrl: runs the compute sequencer against a one-cycle ADC and a
// learning stub; checks the scan order of (bit, row) writes, the SAF
// load/shift sequence, the run time DBITS*(SETTLE+N)+3 and calibration.
module tb_engine_ctrl;
  import ctt_pkg::*;
  localparam int N = 5, DB = 8, SETTLE = 2;
  logic clk = 0, rst_n = 0, run = 0;
  mode_t mode = MODE_INFER;
  logic busy, done, saf_load, saf_shift, saf_en, adc_start, adc_valid = 0;
  logic [2:0] sel, acc_row;
  logic [2:0] acc_bit;
  logic acc_wr, acc_first, learn, learn_done = 0;
  int checks = 0, failures = 0;
  int writes, shifts, loads, learns, exp_row, exp_bit, order_err;

  engine_ctrl #(.N(N), .DBITS(DB), .SETTLE(SETTLE)) dut (
    .clk, .rst_n, .run_i(run), .mode_i(mode), .busy_o(busy), .done_o(done),
    .saf_load_o(saf_load), .saf_shift_o(saf_shift), .saf_enable_o(saf_en),
    .amux_sel_o(sel), .adc_start_o(adc_start), .adc_valid_i(adc_valid),
    .acc_wr_o(acc_wr), .acc_row_o(acc_row), .acc_bit_o(acc_bit), .acc_first_o(acc_first),
    .learn_o(learn), .learn_done_i(learn_done));

  always #5 clk = ~clk;
  always @(posedge clk) adc_valid <= adc_start;

  int learn_cnt = -1;
  always @(posedge clk) begin
    learn_done <= 1'b0;
    if (learn) learn_cnt <= 6;
    else if (learn_cnt > 0) learn_cnt <= learn_cnt - 1;
    else if (learn_cnt == 0) begin learn_done <= 1'b1; learn_cnt <= -1; end
  end

  always @(posedge clk) if (rst_n) begin
    if (acc_wr) begin
      if (int'(acc_row) != exp_row || int'(acc_bit) != exp_bit || acc_first != (exp_bit == 0)) order_err++;
      writes++;
      exp_row++;
      if (exp_row == N) begin exp_row = 0; exp_bit++; end
    end
    if (saf_shift) shifts++;
    if (saf_load) loads++;
    if (learn) learns++;
    if (adc_start && !saf_en) order_err++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic do_run(input mode_t m);
    int edges = 0;
    writes = 0; shifts = 0; loads = 0; learns = 0; exp_row = 0; exp_bit = 0; order_err = 0;
    @(negedge clk); mode = m; run = 1;
    @(posedge clk); #1 run = 0;
    while (!done && edges < 10000) begin @(posedge clk); #1 edges++; end
    check(writes == N * DB, $sformatf("writes %0d", writes));
    check(order_err == 0, $sformatf("scan order errors %0d", order_err));
    check(shifts == DB - 1, $sformatf("shifts %0d", shifts));
    check(loads == 1, "one SAF load");
    check(learns == (m == MODE_CALIB ? 1 : 0), "learning only in calibration mode");
    if (m == MODE_INFER)
      check(edges == DB * (SETTLE + N) + 3, $sformatf("run time %0d expected %0d", edges, DB * (SETTLE + N) + 3));
    else
      check(edges == DB * (SETTLE + N) + 3 + 9, $sformatf("calibration run time %0d expected %0d", edges, DB * (SETTLE + N) + 12));
    @(posedge clk); #1 check(!busy && !saf_en, "idle after done");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    do_run(MODE_INFER);
    do_run(MODE_CALIB);
    do_run(MODE_INFER);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
