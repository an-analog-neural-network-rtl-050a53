// tb_seq_accumulator: writes eight bit-plane codes per row in scan order
// and checks acc[row] = sum_b code(row,b) << b, two runs back to back.
module tb_seq_accumulator;
  localparam int N = 5;
  logic clk = 0, wr = 0, first = 0;
  logic [2:0] row = 0, bitn = 0, rd = 0;
  logic [7:0] code = 0;
  logic [15:0] q;
  int exp_acc [N];
  int checks = 0, failures = 0;

  seq_accumulator #(.N(N)) dut (.clk, .wr_i(wr), .wr_row_i(row), .wr_bit_i(bitn),
    .wr_first_i(first), .code_i(code), .rd_addr_i(rd), .rd_data_o(q));

  always #5 clk = ~clk;

  task automatic one_run();
    for (int j = 0; j < N; j++) exp_acc[j] = 0;
    for (int b = 0; b < 8; b++)
      for (int j = 0; j < N; j++) begin
        @(negedge clk);
        wr = 1; row = 3'(j); bitn = 3'(b); first = (b == 0);
        code = 8'($urandom_range(0, 255));
        if (j == 2) code = 8'hFF;
        exp_acc[j] += int'(code) << b;
      end
    @(negedge clk); wr = 0;
    for (int j = 0; j < N; j++) begin
      rd = 3'(j);
      @(negedge clk);
      checks++;
      if (q != 16'(exp_acc[j])) begin failures++; $display("FAIL: row %0d %0d exp %0d", j, q, exp_acc[j]); end
    end
  endtask

  initial begin
    one_run();
    one_run();
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
