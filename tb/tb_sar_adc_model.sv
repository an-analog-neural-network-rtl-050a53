// tb_sar_adc_model: checks conversion results against
// min(255, floor(v*256/FS)), saturation, and the one-cycle latency with a
// conversion started every cycle.
module tb_sar_adc_model;
  import ctt_pkg::*;
  localparam longint FS = 1000;
  logic clk = 0, rst_n = 0, start = 0;
  analog_t vin = 0;
  logic [7:0] code;
  logic valid;
  int exp_q [$];
  int checks = 0, failures = 0, sat = 0;

  sar_adc_model #(.FULL_SCALE(FS)) dut (.clk, .rst_n, .start_i(start), .vin_i(vin),
    .trim_i(0), .code_o(code), .valid_o(valid));

  always #5 clk = ~clk;

  function automatic int ref_code(longint v);
    longint c = (v * 256) / FS;
    return (c > 255) ? 255 : int'(c);
  endfunction

  // reference: the expected code of every conversion, queued when sampled
  always @(posedge clk) if (rst_n && start) begin
    exp_q.push_back(ref_code(longint'(vin)));
    if (vin >= analog_t'(FS)) sat++;
  end

  always @(negedge clk) if (rst_n) begin
    checks++;
    if (valid !== (exp_q.size() > 0)) begin failures++; $display("FAIL: valid timing"); end
    if (valid && exp_q.size() > 0) begin
      int e;
      e = exp_q.pop_front();
      checks++;
      if (code != 8'(e)) begin failures++; $display("FAIL: code %0d expected %0d", code, e); end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(posedge clk); #1;
      start = (t % 5 != 4);
      case (t % 7)
        0: vin = 0;
        1: vin = analog_t'(FS);            // at full scale: clips
        2: vin = analog_t'(FS * 3);
        default: vin = $urandom_range(0, int'(FS) - 1);
      endcase
    end
    @(posedge clk); #1 start = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (sat == 0) begin failures++; $display("FAIL: no clipped conversion"); end
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
