// tb_offset_calib: stores expected results, learns the per-row offset
// slopes from measured accumulator values, and checks corrected reads and
// the learning time against an independent reference.
module tb_offset_calib;
  localparam int N = 3, AW = 16, SW = 11, FRAC = 16, RW = 24;
  localparam int DIV_W = AW + 1 + FRAC;
  logic clk = 0, rst_n = 0;
  logic exp_wr = 0, learn = 0, done, busy;
  logic [1:0] exp_addr = 0, res_addr = 0, acc_addr;
  logic [AW-1:0] exp_data = 0, acc_data;
  logic [SW-1:0] s_cal = 0, s_x = 0;
  logic signed [RW-1:0] res;
  int acc_mem [N];
  int exp_mem [N];
  longint slope_ref [N];
  int checks = 0, failures = 0;

  offset_calib #(.N(N), .SW(SW)) dut (
    .clk, .rst_n, .exp_wr_i(exp_wr), .exp_addr_i(exp_addr), .exp_data_i(exp_data),
    .learn_i(learn), .s_cal_i(s_cal), .done_o(done), .busy_o(busy),
    .s_x_i(s_x), .res_addr_i(res_addr), .res_data_o(res),
    .acc_addr_o(acc_addr), .acc_data_i(acc_data));

  always #5 clk = ~clk;
  always @(posedge clk) acc_data <= AW'(acc_mem[acc_addr]);   // accumulator read port

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic read_check(input bit calibrated);
    for (int j = 0; j < N; j++) begin
      longint e;
      @(negedge clk); res_addr = 2'(j);
      @(negedge clk); @(negedge clk);
      e = acc_mem[j];
      if (calibrated) e = e - ((slope_ref[j] * longint'(s_x)) >>> FRAC);
      check(res == RW'(e), $sformatf("row %0d result %0d expected %0d", j, res, e));
    end
  endtask

  initial begin
    int edges = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    acc_mem = '{1200, 300, 4000};
    exp_mem = '{1000, 450, 4000};
    s_x = 11'd77;
    read_check(0);                    // before calibration: raw values
    for (int j = 0; j < N; j++) begin
      @(negedge clk); exp_wr = 1; exp_addr = 2'(j); exp_data = AW'(exp_mem[j]);
    end
    @(negedge clk); exp_wr = 0;
    s_cal = 11'd300;
    for (int j = 0; j < N; j++) begin
      longint err, mag;
      err = acc_mem[j] - exp_mem[j];
      mag = ((err < 0 ? -err : err) << FRAC) / s_cal;
      slope_ref[j] = err < 0 ? -mag : mag;
    end
    learn = 1; @(posedge clk); #1 learn = 0;
    while (!done && edges < 10000) begin @(posedge clk); #1 edges++; end
    check(edges == N * (DIV_W + 3), $sformatf("learning took %0d edges, expected %0d", edges, N * (DIV_W + 3)));
    s_x = 11'd300;                    // same inputs as the calibration: expected back
    read_check(1);
    s_x = 11'd1023;
    read_check(1);
    acc_mem = '{0, 0, 10};
    s_x = 11'd5;
    read_check(1);
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
