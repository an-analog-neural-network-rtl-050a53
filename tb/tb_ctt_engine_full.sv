// tb_ctt_engine_full: one complete operation of the engine at its default
// size, 784 x 784, with every top-level parameter at its default. The host
// programs a few columns (the rest stay erased, i.e. weight 0), tunes the
// LDO, calibrates with a known input vector and runs one inference on a
// full 784-byte input; all 784 results of both runs are checked against
// the reference model.
module tb_ctt_engine_full;
  import ctt_pkg::*;
  localparam int M = ARRAY_M, N = ARRAY_N, CPB = 16, G = 16, STEP = 10;
  localparam longint FS = 64'd1048576;
  localparam int NCOLS = 4;
  logic clk = 0, rst_n = 0, rx = 1, tx;
  logic [9:0] col;
  pol_t pol;
  logic [N-1:0] gate;
  int checks = 0, failures = 0;

  ctt_engine_top dut (
    .clk, .rst_n, .uart_rx_i(rx), .uart_tx_o(tx),
    .ddmux_col_o(col), .ddmux_pol_o(pol), .gate_pulse_o(gate));

  always #1 clk = ~clk;   // 2 time units per cycle

  `include "ctt_host_tasks.svh"

  initial begin
    int cnt [N];
    int x [M], xc [M], e [N];
    for (int j = 0; j < N; j++) for (int i = 0; i < M; i++) n_ref[j][i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    for (int k = 0; k < NCOLS; k++) begin
      for (int j = 0; j < N; j++) cnt[j] = $urandom_range(0, 3);
      host_prog_col(k * 197, POL_TRAP, cnt);
    end
    host_set_ldo(3);
    for (int i = 0; i < M; i++) xc[i] = (i % 3 == 0) ? 200 : 0;
    for (int j = 0; j < N; j++) e[j] = int'(ref_acc(j, xc, 0));
    host_load_in(xc);
    host_load_exp(e);
    host_run(MODE_CALIB, xc, e);
    for (int i = 0; i < M; i++) x[i] = $urandom_range(0, 255);
    host_load_in(x);
    host_run(MODE_INFER, x, e);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
