// tb_ctt_array_model: programs cells with trapping and de-trapping pulses
// and checks the row levels against an independent reference
// level[j] = vds * sum_i on[i] * (G_OFF + n[j][i]).
module tb_ctt_array_model;
  import ctt_pkg::*;
  localparam int M = 4, N = 3, G = 16;
  logic clk = 0;
  logic [N-1:0] pulse = 0;
  pol_t pol [N];
  logic [1:0] col = 0;
  logic [M-1:0] on = 0;
  analog_t vds = 0;
  analog_t lvl [N];
  int n_ref [N][M];
  int checks = 0, failures = 0;

  ctt_array_model #(.M(M), .N(N), .G_OFF(G)) dut (
    .clk, .prog_pulse_i(pulse), .prog_pol_i(pol), .prog_col_i(col),
    .drain_on_i(on), .vds_mv_i(vds), .row_level_o(lvl));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // k pulses of polarity p on the rows in mask, at column c
  task automatic pulses(input int c, input logic [N-1:0] mask, input pol_t p, input int k);
    col = 2'(c);
    for (int j = 0; j < N; j++) pol[j] = p;
    repeat (k) begin
      @(negedge clk); pulse = mask;
      @(negedge clk); pulse = 0;
      for (int j = 0; j < N; j++) if (mask[j]) begin
        if (p == POL_TRAP) n_ref[j][c] = (n_ref[j][c] == 255) ? 255 : n_ref[j][c] + 1;
        else               n_ref[j][c] = (n_ref[j][c] == 0) ? 0 : n_ref[j][c] - 1;
      end
    end
  endtask

  task automatic compare(input logic [M-1:0] o, input int v);
    @(negedge clk); on = o; vds = analog_t'(v);
    @(negedge clk);
    for (int j = 0; j < N; j++) begin
      longint e = 0;
      for (int i = 0; i < M; i++) if (o[i]) e += G + n_ref[j][i];
      e *= v;
      check(lvl[j] == analog_t'(e), $sformatf("row %0d level %0d expected %0d", j, lvl[j], e));
    end
  endtask

  initial begin
    for (int j = 0; j < N; j++) begin pol[j] = POL_TRAP; for (int i = 0; i < M; i++) n_ref[j][i] = 0; end
    repeat (2) @(negedge clk);
    compare(4'b1111, 10);            // erased array: offset term only
    pulses(0, 3'b111, POL_TRAP, 3);
    pulses(1, 3'b010, POL_TRAP, 5);
    pulses(2, 3'b101, POL_TRAP, 2);
    pulses(3, 3'b100, POL_TRAP, 7);
    compare(4'b0001, 20);
    compare(4'b1010, 30);
    compare(4'b1111, 40);
    compare(4'b0000, 40);
    pulses(3, 3'b100, POL_DETRAP, 4);
    pulses(2, 3'b001, POL_DETRAP, 5);  // saturates at zero
    compare(4'b1100, 50);
    compare(4'b1111, 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
