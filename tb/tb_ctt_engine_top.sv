// tb_ctt_engine_top: end-to-end test of the engine at a reduced array size.
// The ADC comparator is given an offset, which the host trims out first.
// A host model programs every column over the UART (trapping pulses, then a
// de-trapping correction), tunes the LDO, runs a calibration with a known
// input vector, then inferences, one of them with the LDO raised until the
// ADC clips, and an unknown command. Every result is compared with an
// independent reference; each mechanism must occur at least once.
module tb_ctt_engine_top;
  import ctt_pkg::*;
  localparam int M = 8, N = 6, CPB = 4, H = 3, L = 2, G = 16, STEP = 10;
  localparam longint FS = 16384;
  localparam int OFS = 150;  // comparator offset, over two ADC steps
  logic clk = 0, rst_n = 0, rx = 1, tx;
  logic [2:0] col;
  pol_t pol;
  logic [N-1:0] gate, gate_q = 0;
  int checks = 0, failures = 0;
  int gate_pulses = 0, sent_pulses = 0;
  int n_trap = 0, n_detrap = 0, n_calib = 0, n_infer = 0, n_ldo = 0, n_nak = 0, n_trim = 0;

  ctt_engine_top #(.M(M), .N(N), .CLKS_PER_BIT(CPB), .PULSE_HIGH(H), .PULSE_LOW(L),
                   .G_OFF(G), .ADC_FS(FS), .CMP_OFFSET(OFS)) dut (
    .clk, .rst_n, .uart_rx_i(rx), .uart_tx_o(tx),
    .ddmux_col_o(col), .ddmux_pol_o(pol), .gate_pulse_o(gate));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    gate_q <= gate;
    for (int j = 0; j < N; j++) if (gate[j] && !gate_q[j]) gate_pulses++;
  end

  `include "ctt_host_tasks.svh"

  initial begin
    int cnt [N];
    int x [M], xc [M], e [N];
    int t0;
    for (int j = 0; j < N; j++) for (int i = 0; i < M; i++) n_ref[j][i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);

    // cancel the comparator offset: every later result is checked exactly
    send(CMD_SET_TRIM); send(8'((-OFS) >> 8)); send(8'(-OFS));
    expect_byte(RSP_ACK, "set trim");
    check(dut.cmp_trim == -16'(OFS), "trim register");
    n_trim++;

    // weights: trapping pulses column by column, timed
    for (int c = 0; c < M; c++) begin
      int mx;
      mx = 0;
      for (int j = 0; j < N; j++) begin
        cnt[j] = $urandom_range(0, 31);
        mx = cnt[j] > mx ? cnt[j] : mx;
        sent_pulses += cnt[j];
      end
      t0 = $time;
      host_prog_col(c, POL_TRAP, cnt);
      // the ACK cannot come before all pulses (mx*(H+L) cycles) are done
      // the ACK follows the last pulse: bytes, then mx*(H+L) cycles of pulses
      check(($time - t0) / 10 >= (N + 4) * 10 * CPB - CPB + mx * (H + L) &&
            ($time - t0) / 10 <= (N + 4) * 10 * CPB + 10 * CPB + mx * (H + L) + 20,
            $sformatf("column %0d programming time %0d cycles", c, ($time - t0) / 10));
      check(col == 3'(c), "DDMUX column select");
      n_trap++;
    end
    for (int j = 0; j < N; j++) begin cnt[j] = $urandom_range(0, 6); sent_pulses += cnt[j]; end
    host_prog_col(3, POL_DETRAP, cnt);
    check(pol == POL_DETRAP, "DDMUX polarity");
    n_detrap++;
    check(gate_pulses == sent_pulses, $sformatf("gate pulses %0d sent %0d", gate_pulses, sent_pulses));

    host_set_ldo(3);
    n_ldo++;

    // calibration with a known input vector and its offset-free results
    for (int i = 0; i < M; i++) xc[i] = 128 + i;
    for (int j = 0; j < N; j++) begin
      e[j] = int'(ref_acc(j, xc, 0));
    end
    host_load_in(xc);
    host_load_exp(e);
    host_run(MODE_CALIB, xc, e);
    n_calib++;

    // inferences
    for (int r = 0; r < 3; r++) begin
      for (int i = 0; i < M; i++) x[i] = $urandom_range(0, 255);
      host_load_in(x);
      host_run(MODE_INFER, x, e);
      n_infer++;
    end
    // raise the drain voltage until the ADC clips
    host_set_ldo(12);
    n_ldo++;
    for (int i = 0; i < M; i++) x[i] = 255 - i;
    host_load_in(x);
    host_run(MODE_INFER, x, e);
    n_infer++;

    send(8'hEE);
    expect_byte(RSP_NAK, "unknown command");
    n_nak++;

    $display("mechanisms: trap=%0d detrap=%0d calib=%0d infer=%0d ldo=%0d clip=%0d nak=%0d trim=%0d",
             n_trap, n_detrap, n_calib, n_infer, n_ldo, clipped, n_nak, n_trim);
    check(n_trap > 0 && n_detrap > 0 && n_calib > 0 && n_infer > 0 && n_ldo > 1 && clipped > 0 && n_nak > 0 && n_trim > 0,
          "every mechanism exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
