// tb_counted_pulse_gen: checks pulse count, pulse and gap widths, polarity
// and busy duration of one counted pulse generator.
module tb_counted_pulse_gen;
  import ctt_pkg::*;
  localparam int H = 3, L = 2;
  logic clk = 0, rst_n = 0, load = 0;
  logic [7:0] count = 0;
  pol_t pol = POL_TRAP;
  logic pulse, busy;
  pol_t pol_o;
  int checks = 0, failures = 0;

  counted_pulse_gen #(.PULSE_HIGH(H), .PULSE_LOW(L)) dut (
    .clk, .rst_n, .load_i(load), .count_i(count), .pol_i(pol),
    .pulse_o(pulse), .pol_o(pol_o), .busy_o(busy));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run_train(input int c, input pol_t p);
    int rises = 0, busy_cyc = 0, hi = 0, lo = 0, bad_w = 0;
    logic prev = 0;
    @(negedge clk); count = 8'(c); pol = p; load = 1;
    @(negedge clk); load = 0;
    // count cycles while busy
    for (int t = 0; t < 2000; t++) begin
      if (busy) busy_cyc++;
      if (pulse && !prev) begin rises++; if (lo != 0 && lo != L) bad_w++; lo = 0; end
      if (!pulse && prev) begin if (hi != H) bad_w++; hi = 0; end
      if (pulse) hi++; else if (rises > 0) lo++;
      prev = pulse;
      if (!busy && t > 2) break;
      @(negedge clk);
    end
    check(rises == c, $sformatf("pulse count %0d expected %0d", rises, c));
    check(bad_w == 0, $sformatf("pulse/gap width errors %0d", bad_w));
    check(busy_cyc == (c == 0 ? 0 : c * (H + L) + 1),
          $sformatf("busy cycles %0d expected %0d", busy_cyc, c == 0 ? 0 : c * (H + L) + 1));
    check(pol_o == p, "polarity");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_train(4, POL_TRAP);
    run_train(1, POL_DETRAP);
    run_train(0, POL_TRAP);
    run_train(9, POL_DETRAP);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
