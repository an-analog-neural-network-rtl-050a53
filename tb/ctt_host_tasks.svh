// ctt_host_tasks.svh: host-side tasks and the reference model shared by the
// engine-level testbenches. The including module defines M, N, CPB, G
// (cell offset), FS (ADC full scale), STEP (LDO mV step), the signals clk,
// rx (to the engine) and tx (from the engine), and the counters checks and
// failures. The reference recomputes every result from the programmed pulse
// counts without looking inside the design:
//   level(j,b) = vds * sum_i x_i[b] * (G + n(j,i))
//   code(j,b)  = min(255, floor(level * 256 / FS))
//   acc(j)     = sum_b code(j,b) << b
//   result(j)  = acc(j) - ((k(j) * sum_i x_i) >>> 16)   after calibration,
// with k(j) = trunc((acc_cal(j) - expected(j)) * 2^16 / sum_i xcal_i).

int     n_ref   [N][M];
int     vds_ref = STEP;
longint k_ref   [N];
bit     cal_ref = 0;
int     clipped = 0;

task automatic check(input bit ok, input string what);
  checks++;
  if (!ok) begin failures++; $display("FAIL: %s", what); end
endtask

task automatic send(input logic [7:0] b);
  rx = 0; repeat (CPB) @(posedge clk);
  for (int i = 0; i < 8; i++) begin rx = b[i]; repeat (CPB) @(posedge clk); end
  rx = 1; repeat (CPB) @(posedge clk);
endtask

task automatic recv(output logic [7:0] b);
  int guard = 0;
  while (tx && guard < 50000000) begin @(posedge clk); guard++; end
  repeat (CPB / 2) @(posedge clk);
  for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge clk); b[i] = tx; end
  repeat (CPB) @(posedge clk);
endtask

task automatic expect_byte(input logic [7:0] e, input string what);
  logic [7:0] b;
  recv(b);
  check(b == e, $sformatf("%s: got %h expected %h", what, b, e));
endtask

// program one column: counts per row, trapping or de-trapping
task automatic host_prog_col(input int c, input pol_t p, input int cnt [N]);
  send(CMD_PROG_COL); send(8'(c >> 8)); send(8'(c)); send({7'd0, p});
  for (int j = 0; j < N; j++) send(8'(cnt[j]));
  expect_byte(RSP_ACK, $sformatf("program column %0d", c));
  for (int j = 0; j < N; j++) begin
    if (p == POL_TRAP) n_ref[j][c] = (n_ref[j][c] + cnt[j] > 255) ? 255 : n_ref[j][c] + cnt[j];
    else               n_ref[j][c] = (n_ref[j][c] - cnt[j] < 0) ? 0 : n_ref[j][c] - cnt[j];
  end
endtask

task automatic host_set_ldo(input int code);
  send(CMD_SET_LDO); send(8'(code));
  expect_byte(RSP_ACK, "set LDO");
  vds_ref = (code + 1) * STEP;
endtask

task automatic host_load_in(input int x [M]);
  send(CMD_LOAD_IN);
  for (int i = 0; i < M; i++) send(8'(x[i]));
  expect_byte(RSP_ACK, "load inputs");
endtask

task automatic host_load_exp(input int e [N]);
  send(CMD_LOAD_EXP);
  for (int j = 0; j < N; j++) begin send(8'(e[j] >> 8)); send(8'(e[j])); end
  expect_byte(RSP_ACK, "load expected results");
endtask

// raw accumulated result of row j for inputs x; with_offset = 0 gives
// the offset-free result the host stores as the calibration target
function automatic longint ref_acc(input int j, input int x [M], input bit with_offset);
  longint acc = 0;
  for (int b = 0; b < 8; b++) begin
    longint g = 0, lvl, code;
    for (int i = 0; i < M; i++)
      if (x[i][b]) g += (with_offset ? G : 0) + n_ref[j][i];
    lvl  = g * vds_ref;
    code = (lvl * 256) / FS;
    if (code > 255) begin code = 255; if (with_offset) clipped++; end
    acc += code << b;
  end
  return acc;
endfunction

function automatic int sum_x(input int x [M]);
  int s = 0;
  for (int i = 0; i < M; i++) s += x[i];
  return s;
endfunction

// run and compare all N results; in calibration mode learn k first
task automatic host_run(input mode_t m, input int x [M], input int e [N]);
  logic [7:0] b0, b1, b2;
  longint expv [N];
  int sx = sum_x(x);
  for (int j = 0; j < N; j++) begin
    longint acc = ref_acc(j, x, 1);
    if (m == MODE_CALIB) begin
      longint err = acc - e[j];
      longint mag = ((err < 0 ? -err : err) << 16) / (sx == 0 ? 1 : sx);
      k_ref[j] = (sx == 0) ? 0 : (err < 0 ? -mag : mag);
    end
    expv[j] = acc;
  end
  if (m == MODE_CALIB) cal_ref = 1;
  for (int j = 0; j < N; j++)
    if (cal_ref) expv[j] = expv[j] - ((k_ref[j] * sx) >>> 16);
  send(CMD_RUN); send({7'd0, m});
  for (int j = 0; j < N; j++) begin
    logic signed [23:0] got;
    recv(b0); recv(b1); recv(b2);
    got = {b0, b1, b2};
    check(longint'(got) == expv[j], $sformatf("row %0d result %0d expected %0d", j, got, expv[j]));
  end
  expect_byte(RSP_ACK, "run");
endtask
