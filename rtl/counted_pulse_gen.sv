// counted_pulse_gen: counted pulse generator for one row of the CTT array.
//
// The paper programs each CTT's threshold voltage with a counted train of
// microsecond-long gate pulses: positive (trapping) pulses raise V_T and
// negative (de-trapping) pulses lower it, and the number of pulses encodes
// the weight. One generator serves one array row; a DDMUX routes its pulses
// to the device of the column being programmed.
//
// load_i (one cycle) latches count_i and pol_i. The generator then drives
// pulse_o high for PULSE_HIGH cycles and low for PULSE_LOW cycles, count_i
// times; busy_o is high from the cycle after load_i until the last low phase
// ends: C*(PULSE_HIGH+PULSE_LOW)+1 cycles for a train of C pulses (none for
// C = 0). The first pulse rises two cycles after load_i. pol_o holds the polarity of the train.
// Pulse width 500 cycles = 1 us at the paper's 500 MHz clock ("us-long
// pulses"); the equal gap is this design's choice.
module counted_pulse_gen
  import ctt_pkg::*;
#(
  parameter int unsigned CNT_WIDTH  = CNT_W,
  parameter int unsigned PULSE_HIGH = 500,
  parameter int unsigned PULSE_LOW  = 500
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load_i,
  input  logic [CNT_WIDTH-1:0] count_i,
  input  pol_t                 pol_i,
  output logic                 pulse_o,
  output pol_t                 pol_o,
  output logic                 busy_o
);
  localparam int unsigned PW = $clog2((PULSE_HIGH > PULSE_LOW ? PULSE_HIGH : PULSE_LOW) + 1);

  logic [CNT_WIDTH-1:0] remaining;  // pulses still to start
  logic [PW-1:0]        phase;      // cycles left in the current phase

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      remaining <= '0;
      phase     <= '0;
      pulse_o   <= 1'b0;
      pol_o     <= POL_TRAP;
      busy_o    <= 1'b0;
    end else if (load_i) begin
      pol_o     <= pol_i;
      pulse_o   <= 1'b0;
      busy_o    <= (count_i != 0);
      remaining <= count_i;
      phase     <= '0;
    end else if (busy_o) begin
      if (phase > 1) begin
        phase <= phase - 1'b1;
      end else if (!pulse_o && remaining != 0) begin
        pulse_o   <= 1'b1;                   // start the next pulse
        phase     <= PW'(PULSE_HIGH);
        remaining <= remaining - 1'b1;
      end else if (pulse_o) begin
        pulse_o <= 1'b0;                     // gap after the pulse
        phase   <= PW'(PULSE_LOW);
      end else begin
        busy_o <= 1'b0;                      // last gap over
      end
    end
  end
endmodule
