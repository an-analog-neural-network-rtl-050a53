// amux_model: behavioural model of the analog multiplexer in front of the
// ADC. This is a behavioural model of an analog switch bank, not
// synthesizable logic.
//
// The engine has one ADC for all rows: the AMUX connects the buffered row
// voltage selected by sel_i to the ADC input, out_o = in_i[sel_i], with no
// delay (the switch settles within the cycle). A select beyond the last row
// gives 0. The unity-gain op-amp buffers of the rows and of the ADC input
// (Fig. 1 "BUF") are treated as ideal and not modelled. The paper names the
// AMUX in its block diagram and area breakdown only.
module amux_model
  import ctt_pkg::*;
#(
  parameter int unsigned N = ARRAY_N,
  localparam int unsigned NW = (N > 1) ? $clog2(N) : 1
) (
  input  analog_t       in_i [N],
  input  logic [NW-1:0] sel_i,
  output analog_t       out_o
);
  always_comb begin
    out_o = '0;
    if (32'(sel_i) < N) out_o = in_i[sel_i];
  end
endmodule
