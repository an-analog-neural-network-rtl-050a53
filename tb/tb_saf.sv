// tb_saf: writes input neurons, checks the running input sum and the
// LSB-first bit sequence presented on the drain switch controls.
module tb_saf;
  import ctt_pkg::*;
  localparam int M = 5;
  logic clk = 0, rst_n = 0;
  logic wr = 0, load = 0, shift = 0, enable = 0;
  logic [2:0] addr = 0;
  logic [7:0] data = 0;
  logic [M-1:0] drain;
  logic [10:0] sum;
  logic [7:0] ref_x [M];
  int checks = 0, failures = 0;

  saf #(.M(M)) dut (.clk, .rst_n, .wr_i(wr), .wr_addr_i(addr), .wr_data_i(data),
    .load_i(load), .shift_i(shift), .enable_i(enable), .drain_on_o(drain), .sum_o(sum));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic write(input int a, input int d);
    @(negedge clk); wr = 1; addr = 3'(a); data = 8'(d); ref_x[a] = 8'(d);
    @(negedge clk); wr = 0;
  endtask

  task automatic sequence_check();
    int s = 0;
    for (int i = 0; i < M; i++) s += ref_x[i];
    check(sum == 11'(s), $sformatf("sum %0d expected %0d", sum, s));
    @(negedge clk); load = 1; enable = 1;
    @(negedge clk); load = 0;
    for (int b = 0; b < 8; b++) begin
      logic [M-1:0] e;
      for (int i = 0; i < M; i++) e[i] = ref_x[i][b];
      check(drain == e, $sformatf("bit %0d drains %b expected %b", b, drain, e));
      shift = 1; @(negedge clk); shift = 0;
      // hold one cycle without shift: nothing changes
      if (b == 3) begin
        logic [M-1:0] hold = drain;
        @(negedge clk);
        check(drain == hold, "hold without shift");
      end
    end
    enable = 0; #1;
    check(drain == '0, "switches open when disabled");
  endtask

  initial begin
    for (int i = 0; i < M; i++) ref_x[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    write(0, 8'hA5); write(1, 8'h0F); write(2, 8'hFF); write(3, 8'h00); write(4, 8'h81);
    sequence_check();
    write(2, 8'h3C); write(4, 8'h7E);
    for (int i = 0; i < 3; i++) write(i, $urandom_range(0, 255));
    sequence_check();
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
