// tb_pulse_gen_ctrl: programs columns through the controller and four
// counted pulse generators; checks per-row pulse counts, column select,
// polarity and the column programming time.
module tb_pulse_gen_ctrl;
  import ctt_pkg::*;
  localparam int N = 4, M = 6, H = 2, L = 2;
  logic clk = 0, rst_n = 0;
  logic wr = 0, start = 0, done, busy, pg_load;
  logic [1:0] wr_row = 0;
  logic [7:0] wr_count = 0;
  logic [2:0] col = 0, col_o;
  pol_t pol = POL_TRAP, pg_pol;
  logic [7:0] pg_count [N];
  logic [N-1:0] pg_busy, pulse, pulse_q = 0;
  pol_t pulse_pol [N];
  int rises [N];
  int checks = 0, failures = 0;

  pulse_gen_ctrl #(.N(N), .M(M)) dut (
    .clk, .rst_n, .wr_i(wr), .wr_row_i(wr_row), .wr_count_i(wr_count),
    .start_i(start), .col_i(col), .pol_i(pol), .done_o(done), .busy_o(busy),
    .pg_load_o(pg_load), .pg_count_o(pg_count), .pg_pol_o(pg_pol), .pg_busy_i(pg_busy),
    .col_o(col_o));

  for (genvar r = 0; r < N; r++) begin : g
    counted_pulse_gen #(.PULSE_HIGH(H), .PULSE_LOW(L)) u (
      .clk, .rst_n, .load_i(pg_load), .count_i(pg_count[r]), .pol_i(pg_pol),
      .pulse_o(pulse[r]), .pol_o(pulse_pol[r]), .busy_o(pg_busy[r]));
  end

  always #5 clk = ~clk;
  always @(posedge clk) begin
    pulse_q <= pulse;
    for (int r = 0; r < N; r++) if (pulse[r] && !pulse_q[r]) rises[r]++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic program_col(input int c, input pol_t p, input int cnt [N]);
    int mx = 0, edges = 0;
    for (int r = 0; r < N; r++) begin
      @(negedge clk); wr = 1; wr_row = 2'(r); wr_count = 8'(cnt[r]);
      if (cnt[r] > mx) mx = cnt[r];
    end
    @(negedge clk); wr = 0;
    for (int r = 0; r < N; r++) rises[r] = 0;
    col = 3'(c); pol = p; start = 1;
    @(posedge clk); #1 start = 0;
    while (!done && edges < 5000) begin @(posedge clk); #1 edges++; end
    check(edges == (mx == 0 ? 3 : mx * (H + L) + 4),
          $sformatf("column time %0d edges, expected %0d", edges, mx == 0 ? 3 : mx * (H + L) + 4));
    check(col_o == 3'(c), "column select");
    check(pg_pol == p, "polarity");
    for (int r = 0; r < N; r++)
      check(rises[r] == cnt[r], $sformatf("row %0d pulses %0d expected %0d", r, rises[r], cnt[r]));
    for (int r = 0; r < N; r++) check(pulse_pol[r] == p, "row polarity");
    @(posedge clk); #1 check(!busy, "idle after done");
  endtask

  initial begin
    int a [N] = '{3, 0, 5, 1};
    int b [N] = '{0, 0, 0, 0};
    int c [N] = '{2, 7, 7, 6};
    repeat (2) @(negedge clk);
    rst_n = 1;
    program_col(2, POL_TRAP, a);
    program_col(5, POL_DETRAP, b);
    program_col(0, POL_TRAP, c);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
