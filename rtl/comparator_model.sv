// comparator_model: behavioural model of the SAR ADC's double-tail latch
// comparator. This is a behavioural model of an analog circuit, not
// synthesizable logic.
//
// The circuit in the paper integrates the input difference on a first stage
// and resolves it in a regenerative latch; a small differential pair injects
// a correction current at the latch input to cancel the input offset. The
// model keeps only the decision: dout_o = 1 when
//   vip_i - vin_i + OFFSET + trim_i >= 0,
// where OFFSET is the comparator's own input-referred offset and trim_i the
// offset-correction setting (both in the same units as the inputs). The
// decision is available in the same cycle: in the asynchronous SAR all
// comparisons complete inside one system clock. Signed-integer inputs and
// the trim range are this model's choice.
module comparator_model #(
  parameter int OFFSET = 0
) (
  input  longint    vip_i,
  input  longint    vin_i,
  input  int        trim_i,
  output logic      dout_o
);
  always_comb dout_o = (vip_i - vin_i + longint'(OFFSET) + longint'(trim_i)) >= 0;
endmodule
