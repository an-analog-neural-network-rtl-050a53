// tb_ctt_engine_mlp: a multi-layer network run on one array, scaled down
// from the 784-300-100-10 MNIST network to 16-8-4-2. All three layers are
// programmed into a 16 x 16 array at once, on different rows: layer 1 on
// rows 0-7 (columns 0-15), layer 2 on rows 8-11 (columns 0-7), layer 3 on
// rows 12-13 (columns 0-3). One calibration serves all rows. The host runs
// the layers in turn, applying ReLU and an 8-bit requantisation
// (clamp(y >> 6, 0, 255)) between them, and every row of every pass is
// checked against the reference model.
module tb_ctt_engine_mlp;
  import ctt_pkg::*;
  localparam int M = 16, N = 16, CPB = 4, H = 2, L = 1, G = 16, STEP = 10;
  localparam longint FS = 65536;
  localparam int NL = 3;
  localparam int L_IN   [NL] = '{16, 8, 4};
  localparam int L_OUT  [NL] = '{8, 4, 2};
  localparam int L_ROW0 [NL] = '{0, 8, 12};
  logic clk = 0, rst_n = 0, rx = 1, tx;
  logic [3:0] col;
  pol_t pol;
  logic [N-1:0] gate;
  int checks = 0, failures = 0, layers_done = 0, nonzero_hidden = 0;

  ctt_engine_top #(.M(M), .N(N), .CLKS_PER_BIT(CPB), .PULSE_HIGH(H), .PULSE_LOW(L),
                   .G_OFF(G), .ADC_FS(FS)) dut (
    .clk, .rst_n, .uart_rx_i(rx), .uart_tx_o(tx),
    .ddmux_col_o(col), .ddmux_pol_o(pol), .gate_pulse_o(gate));

  always #5 clk = ~clk;

  `include "ctt_host_tasks.svh"

  // weight of row j, column i in the layered map (0 outside every layer)
  function automatic int layer_weight(input int j, input int i);
    for (int l = 0; l < NL; l++)
      if (j >= L_ROW0[l] && j < L_ROW0[l] + L_OUT[l] && i < L_IN[l])
        return ((j * 7 + i * 13 + l * 5) % 16);
    return 0;
  endfunction

  // result of the last run, read from the reference (the run itself is
  // checked row by row inside host_run)
  function automatic longint ref_result(input int j, input int x [M]);
    longint acc = ref_acc(j, x, 1);
    if (cal_ref) acc = acc - ((k_ref[j] * sum_x(x)) >>> 16);
    return acc;
  endfunction

  initial begin
    int cnt [N];
    int x [M], xc [M], e [N];
    longint raw [N];
    longint mx;
    int sh;
    for (int j = 0; j < N; j++) for (int i = 0; i < M; i++) n_ref[j][i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    for (int c = 0; c < M; c++) begin
      for (int j = 0; j < N; j++) cnt[j] = layer_weight(j, c);
      host_prog_col(c, POL_TRAP, cnt);
    end
    host_set_ldo(1);
    for (int i = 0; i < M; i++) xc[i] = 100;
    for (int j = 0; j < N; j++) e[j] = int'(ref_acc(j, xc, 0));
    host_load_in(xc);
    host_load_exp(e);
    host_run(MODE_CALIB, xc, e);
    // input "image"
    for (int i = 0; i < M; i++) x[i] = (i * 37 + 11) % 256;
    for (int l = 0; l < NL; l++) begin
      int y [M];
      host_load_in(x);
      host_run(MODE_INFER, x, e);
      layers_done++;
      for (int i = 0; i < M; i++) y[i] = 0;
      // ReLU, then the host rescales by a power of two so that the
      // largest activation fits in 8 bits
      mx = 0;
      for (int o = 0; o < L_OUT[l]; o++) begin
        raw[o] = ref_result(L_ROW0[l] + o, x);
        if (raw[o] > mx) mx = raw[o];
      end
      sh = 0;
      while ((mx >>> sh) > 255) sh++;
      for (int o = 0; o < L_OUT[l]; o++) begin
        y[o] = (raw[o] < 0) ? 0 : int'(raw[o] >>> sh);
        if (l < NL - 1 && y[o] != 0) nonzero_hidden++;
      end
      $display("layer %0d (raw %0d, shift %0d): %0d %0d %0d %0d", l, mx, sh,
               y[0], y[1], y[2], y[3]);
      x = y;
    end
    check(layers_done == NL, "all layers run");
    check(nonzero_hidden > 0, "hidden activations are not all zero");
    $display("outputs: %0d %0d", x[0], x[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
