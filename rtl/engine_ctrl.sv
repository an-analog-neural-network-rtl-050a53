// engine_ctrl: compute sequencer of the CTT engine (the run part of the
// operation flow: load data into the SAF, compute, convert, accumulate and,
// in calibration mode, run the offset calibration).
//
// A run starts with run_i. The SAF copies its inputs into its bit-serial
// registers (saf_load_o) and the sequencer walks the bit planes, LSB first.
// For each plane it waits SETTLE cycles for the array to settle, then scans
// the rows: in each cycle the AMUX selects one row and the ADC starts a
// conversion; the code returned one cycle later is written to the
// accumulator tagged with its row and bit (the first plane overwrites). After
// the last row of a plane the SAF shifts to the next bit. After the last
// plane the SAF switches are opened; in MODE_CALIB the offset calibration then
// learns its per-row slopes. done_o pulses when everything has finished.
//
// Timing with one ADC shared by all rows (Fig. 1): a run takes
// DBITS*(1+SETTLE+N) + 3 cycles, plus the learning time in MODE_CALIB
// (checked by the testbench). The paper's "one bit per clock cycle" rate
// would need one ADC per row; this sequencer follows the single-ADC block
// diagram instead.
module engine_ctrl
  import ctt_pkg::*;
#(
  parameter int unsigned N      = ARRAY_N,
  parameter int unsigned DBITS  = DATA_BITS,
  parameter int unsigned SETTLE = 2,
  localparam int unsigned NW    = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned BW    = (DBITS > 1) ? $clog2(DBITS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          run_i,
  input  mode_t         mode_i,
  output logic          busy_o,
  output logic          done_o,
  // SAF
  output logic          saf_load_o,
  output logic          saf_shift_o,
  output logic          saf_enable_o,
  // AMUX and ADC
  output logic [NW-1:0] amux_sel_o,
  output logic          adc_start_o,
  input  logic          adc_valid_i,
  // accumulator write tags (data comes from the ADC)
  output logic          acc_wr_o,
  output logic [NW-1:0] acc_row_o,
  output logic [BW-1:0] acc_bit_o,
  output logic          acc_first_o,
  // offset calibration
  output logic          learn_o,
  input  logic          learn_done_i
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_SETTLE, S_SCAN, S_DRAIN, S_LEARN, S_DONE} state_t;
  state_t state;
  mode_t  mode;

  logic [NW-1:0] row;
  logic [BW-1:0] bitn;
  logic [$clog2(SETTLE+2)-1:0] wait_cnt;
  logic [NW-1:0] row_q;
  logic [BW-1:0] bit_q;

  assign busy_o      = (state != S_IDLE);
  assign amux_sel_o  = row;
  assign adc_start_o = (state == S_SCAN);
  assign saf_load_o  = (state == S_LOAD);

  // tags travel with the conversion
  always_ff @(posedge clk) begin
    row_q <= row;
    bit_q <= bitn;
  end
  assign acc_wr_o    = adc_valid_i;
  assign acc_row_o   = row_q;
  assign acc_bit_o   = bit_q;
  assign acc_first_o = (bit_q == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      mode         <= MODE_INFER;
      row          <= '0;
      bitn         <= '0;
      wait_cnt     <= '0;
      saf_shift_o  <= 1'b0;
      saf_enable_o <= 1'b0;
      learn_o      <= 1'b0;
      done_o       <= 1'b0;
    end else begin
      saf_shift_o <= 1'b0;
      learn_o     <= 1'b0;
      done_o      <= 1'b0;
      case (state)
        S_IDLE: if (run_i) begin
          mode  <= mode_i;
          state <= S_LOAD;
        end
        S_LOAD: begin
          saf_enable_o <= 1'b1;
          bitn         <= '0;
          row          <= '0;
          wait_cnt     <= '0;
          state        <= S_SETTLE;
        end
        S_SETTLE: begin
          if (32'(wait_cnt) == SETTLE - 1) state <= S_SCAN;
          wait_cnt <= wait_cnt + 1'b1;
        end
        S_SCAN: begin
          if (32'(row) == N - 1) begin
            row <= '0;
            if (32'(bitn) == DBITS - 1) begin
              state <= S_DRAIN;
            end else begin
              bitn        <= bitn + 1'b1;
              saf_shift_o <= 1'b1;
              wait_cnt    <= '0;
              state       <= S_SETTLE;
            end
          end else begin
            row <= row + 1'b1;
          end
        end
        S_DRAIN: begin                        // last code is being written
          saf_enable_o <= 1'b0;
          if (mode == MODE_CALIB) begin
            learn_o <= 1'b1;
            state   <= S_LEARN;
          end else begin
            state <= S_DONE;
          end
        end
        S_LEARN: if (learn_done_i) state <= S_DONE;
        S_DONE: begin
          done_o <= 1'b1;
          state  <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
