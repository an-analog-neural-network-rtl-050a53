// tb_ldo_model: checks the regulated drain voltage for every tuning code
// and its one-cycle settling.
module tb_ldo_model;
  import ctt_pkg::*;
  logic clk = 0;
  logic [LDO_W-1:0] code = 0;
  analog_t v;
  int checks = 0, failures = 0;

  ldo_model #(.STEP_MV(10)) dut (.clk, .code_i(code), .vout_mv_o(v));
  always #5 clk = ~clk;

  initial begin
    for (int c = 15; c >= 0; c--) begin
      @(negedge clk); code = 4'(c);
      @(negedge clk);
      checks++;
      if (v != analog_t'((c + 1) * 10)) begin
        failures++; $display("FAIL: code %0d gives %0d mV", c, v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
