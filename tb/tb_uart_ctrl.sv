// tb_uart_ctrl: acts as the host on the serial lines and as the engine on
// the parallel side; checks every command's effect, the ACK/NAK answers
// and the streamed results.
module tb_uart_ctrl;
  import ctt_pkg::*;
  localparam int M = 3, N = 2, CPB = 4;
  logic clk = 0, rst_n = 0, rx = 1, tx;
  logic [3:0] ldo;
  logic signed [15:0] trim;
  logic pg_wr, pg_start, pg_done = 0, saf_wr, exp_wr, run, run_done = 0;
  logic [0:0] pg_row, exp_addr, res_addr;
  logic [7:0] pg_cnt, saf_data;
  logic [1:0] pg_col, saf_addr;
  pol_t pg_pol;
  logic [15:0] exp_data;
  mode_t run_mode;
  logic signed [23:0] res_data, res_mem [N];
  logic [0:0] ra_q;
  int checks = 0, failures = 0;
  int pg_log [N], saf_log [M], exp_log [N], runs = 0, starts = 0;

  uart_ctrl #(.M(M), .N(N), .CLKS_PER_BIT(CPB)) dut (
    .clk, .rst_n, .rx_i(rx), .tx_o(tx), .ldo_code_o(ldo), .trim_o(trim),
    .pg_wr_o(pg_wr), .pg_wr_row_o(pg_row), .pg_wr_count_o(pg_cnt), .pg_start_o(pg_start),
    .pg_col_o(pg_col), .pg_pol_o(pg_pol), .pg_done_i(pg_done),
    .saf_wr_o(saf_wr), .saf_addr_o(saf_addr), .saf_data_o(saf_data),
    .exp_wr_o(exp_wr), .exp_addr_o(exp_addr), .exp_data_o(exp_data),
    .run_o(run), .run_mode_o(run_mode), .run_done_i(run_done),
    .res_addr_o(res_addr), .res_data_i(res_data));

  always #5 clk = ~clk;

  // engine side: logs writes, answers starts and runs after a delay,
  // result read with two cycles of latency
  always @(posedge clk) begin
    if (pg_wr) pg_log[pg_row] <= pg_cnt;
    if (saf_wr) saf_log[saf_addr] <= saf_data;
    if (exp_wr) exp_log[exp_addr] <= exp_data;
    ra_q <= res_addr;
    res_data <= res_mem[ra_q];
  end
  initial forever begin
    @(posedge clk);
    if (rst_n && pg_start) begin starts++; repeat (20) @(posedge clk); pg_done <= 1; @(posedge clk); pg_done <= 0; end
    if (rst_n && run)      begin runs++;   repeat (30) @(posedge clk); run_done <= 1; @(posedge clk); run_done <= 0; end
  end

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
    while (tx && guard < 100000) begin @(posedge clk); guard++; end
    repeat (CPB / 2) @(posedge clk);
    for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge clk); b[i] = tx; end
    repeat (CPB) @(posedge clk);
  endtask

  task automatic expect_byte(input logic [7:0] e, input string what);
    logic [7:0] b;
    recv(b);
    check(b == e, $sformatf("%s: got %h expected %h", what, b, e));
  endtask

  initial begin
    logic [7:0] b0, b1, b2;
    res_mem[0] = 24'sd123456; res_mem[1] = -24'sd77;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    // program column 2 with counts 9, 4, de-trapping
    send(CMD_PROG_COL); send(8'h00); send(8'h02); send(8'h01); send(8'd9); send(8'd4);
    expect_byte(RSP_ACK, "prog ack");
    check(pg_log[0] == 9 && pg_log[1] == 4, "column counts");
    check(pg_col == 2 && pg_pol == POL_DETRAP && starts == 1, "column, polarity, one start");
    send(CMD_SET_LDO); send(8'h0B);
    expect_byte(RSP_ACK, "ldo ack");
    send(CMD_SET_TRIM); send(8'hFE); send(8'h0C);
    expect_byte(RSP_ACK, "trim ack");
    check(trim == -16'sd500, $sformatf("trim = %0d", trim));
    check(ldo == 4'hB, "ldo code");
    send(CMD_LOAD_IN); send(8'h11); send(8'h22); send(8'h33);
    expect_byte(RSP_ACK, "input ack");
    check(saf_log[0] == 8'h11 && saf_log[1] == 8'h22 && saf_log[2] == 8'h33, "input bytes");
    send(CMD_LOAD_EXP); send(8'h12); send(8'h34); send(8'hAB); send(8'hCD);
    expect_byte(RSP_ACK, "exp ack");
    check(exp_log[0] == 16'h1234 && exp_log[1] == 16'hABCD, "expected results");
    send(8'h77);
    expect_byte(RSP_NAK, "unknown command");
    send(CMD_RUN); send(8'h01);
    for (int r = 0; r < N; r++) begin
      recv(b0); recv(b1); recv(b2);
      check({b0, b1, b2} == res_mem[r], $sformatf("result %0d = %h", r, {b0, b1, b2}));
    end
    expect_byte(RSP_ACK, "run ack");
    check(runs == 1 && run_mode == MODE_CALIB, "one calibration run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
