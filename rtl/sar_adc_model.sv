// sar_adc_model: behavioural model of the 8-bit asynchronous SAR ADC.
// This is a behavioural model of a mixed-signal converter, not
// synthesizable logic.
//
// The ADC samples the AMUX output at the clock edge where start_i is high and
// presents the code right after that edge, with valid_o high for one cycle;
// a new conversion may start every cycle. The paper's ADC is asynchronous: its
// bit decisions are self-timed inside one system clock. The model unrolls
// that sequence into ADC_B comparator_model stages: stage k (MSB first)
// compares the input with the capacitor-DAC level of the code decided
// so far plus bit k, FULL_SCALE * code / 2^ADC_B (rounded up to the next
// level unit). Without comparator offset
// the result is min(2^ADC_B - 1, floor(vin * 2^ADC_B / FULL_SCALE)).
// Binary (radix-2) DAC weights are used: the paper's sub-radix two-capacitor
// DAC with its extra redundant cycle is not given in enough detail to model.
module sar_adc_model
  import ctt_pkg::*;
#(
  parameter int unsigned    ADC_B      = ADC_BITS,
  parameter longint         FULL_SCALE = 64'd1048576,  // 2^20 level units
  parameter int             CMP_OFFSET = 0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start_i,
  input  analog_t          vin_i,
  input  int               trim_i,
  output logic [ADC_B-1:0] code_o,
  output logic             valid_o
);
  logic [ADC_B-1:0]  result;

  for (genvar k = 0; k < int'(ADC_B); k++) begin : g_stage
    localparam int unsigned BITPOS = ADC_B - 1 - k;
    logic [ADC_B-1:0] prev;    // code decided by the stages before
    logic [ADC_B-1:0] trial;
    logic [ADC_B-1:0] dec;     // code after this stage
    logic             dout;
    longint           vdac;
    if (k == 0) begin : g_first
      assign prev = '0;
    end else begin : g_next
      assign prev = g_stage[k-1].dec;
    end
    assign trial = prev | (ADC_B'(1) << BITPOS);
    assign vdac  = longint'((longint'(FULL_SCALE) * longint'({1'b0, trial}) + (64'sd1 <<< ADC_B) - 1) >>> ADC_B);
    comparator_model #(.OFFSET(CMP_OFFSET)) u_cmp (
      .vip_i  (longint'({32'd0, vin_i})),
      .vin_i  (vdac),
      .trim_i (trim_i),
      .dout_o (dout)
    );
    // keep the bit when the input is at or above the trial level
    assign dec = dout ? trial : prev;
  end

  assign result = g_stage[ADC_B-1].dec;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code_o  <= '0;
      valid_o <= 1'b0;
    end else begin
      valid_o <= start_i;
      if (start_i) code_o <= result;
    end
  end
endmodule
