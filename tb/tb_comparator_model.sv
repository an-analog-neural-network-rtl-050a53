// tb_comparator_model: checks the decision with and without intrinsic
// offset and offset-correction trim.
module tb_comparator_model;
  longint a, b;
  int trim;
  logic d0, d1;
  int checks = 0, failures = 0;

  comparator_model #(.OFFSET(0))  u0 (.vip_i(a), .vin_i(b), .trim_i(trim), .dout_o(d0));
  comparator_model #(.OFFSET(-7)) u1 (.vip_i(a), .vin_i(b), .trim_i(trim), .dout_o(d1));

  initial begin
    for (int t = 0; t < 200; t++) begin
      a = longint'($urandom_range(0, 1000));
      b = longint'($urandom_range(0, 1000));
      if (t % 4 == 0) b = a;
      trim = (t % 3 == 0) ? 7 : 0;
      #1;
      checks += 2;
      if (d0 != (a - b + trim >= 0)) begin failures++; $display("FAIL: cmp0 %0d %0d", a, b); end
      if (d1 != (a - b - 7 + trim >= 0)) begin failures++; $display("FAIL: cmp1 %0d %0d", a, b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
