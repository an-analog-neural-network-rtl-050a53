// tb_amux_model: checks that every select value routes its row level.
module tb_amux_model;
  import ctt_pkg::*;
  localparam int N = 6;
  analog_t in [N];
  logic [2:0] sel;
  analog_t out;
  int checks = 0, failures = 0;

  amux_model #(.N(N)) dut (.in_i(in), .sel_i(sel), .out_o(out));

  initial begin
    for (int j = 0; j < N; j++) in[j] = $urandom;
    for (int s = 0; s < 8; s++) begin
      sel = 3'(s); #1;
      checks++;
      if (out != (s < N ? in[s] : 0)) begin failures++; $display("FAIL: sel %0d", s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
