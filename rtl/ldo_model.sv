// ldo_model: behavioural model of the tunable low-dropout regulator (LDO).
// This is a behavioural model of an analog block, not synthesizable logic.
//
// The LDO supplies the single fixed drain voltage that the sequential analog
// fabric switches onto the CTT columns. Because every selected cell current
// is proportional to that voltage, tuning it scales all row outputs and is
// the gain knob that fits the row levels into the ADC range. The output is
// the regulated voltage in mV, (code_i + 1) * STEP_MV, settled one cycle
// after code_i changes. The paper names a tunable LDO controlled from the
// UART controller (Fig. 1); the code width, step and settling are this
// model's own.
module ldo_model
  import ctt_pkg::*;
#(
  parameter int unsigned STEP_MV = 10
) (
  input  logic             clk,
  input  logic [LDO_W-1:0] code_i,
  output analog_t          vout_mv_o
);
  always_ff @(posedge clk) vout_mv_o <= analog_t'((32'(code_i) + 1) * STEP_MV);
endmodule
