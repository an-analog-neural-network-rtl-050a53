// ctt_pkg: constants and types shared by the CTT analog computing engine.
//
// The engine is a 784 x 784 crossbar of charge-trap transistors (CTTs) that
// computes one fully-connected layer. Inputs are fed bit-serially (8 bits,
// LSB first) by the sequential analog fabric, one row at a time is digitised
// by a single 8-bit ADC, and the bit-partial codes are summed digitally.
// The array size, 8-bit data and 8-bit ADC follow the paper; the host command
// set, the analog value encoding and all other constants are this design's.
//
// Analog quantities (drain voltage, row output level) are carried between the
// behavioural models as unsigned integers (analog_t): the drain voltage in mV
// and a row level in mV x conductance units.
package ctt_pkg;

  localparam int unsigned ARRAY_M   = 784;  // input neurons (array columns)
  localparam int unsigned ARRAY_N   = 784;  // output neurons (array rows)
  localparam int unsigned DATA_BITS = 8;    // input data resolution
  localparam int unsigned ADC_BITS  = 8;    // ADC resolution
  localparam int unsigned CNT_W     = 8;    // pulse count per device (one weight)
  localparam int unsigned ACC_W     = DATA_BITS + ADC_BITS;  // accumulated row result
  localparam int unsigned RES_W     = 24;   // calibrated result sent to the host (signed)
  localparam int unsigned LDO_W     = 4;    // LDO tuning code

  typedef logic [31:0] analog_t;

  // Gate pulse polarity: trapping (positive gate pulse) raises V_T,
  // de-trapping (negative gate pulse) lowers it.
  typedef enum logic {POL_TRAP = 1'b0, POL_DETRAP = 1'b1} pol_t;

  // Compute mode of one run (Fig. 7 "Calibration Mode" decision).
  typedef enum logic {MODE_INFER = 1'b0, MODE_CALIB = 1'b1} mode_t;

  // Host command bytes received over the UART.
  typedef enum logic [7:0] {
    CMD_PROG_COL = 8'h01,  // col_hi, col_lo, polarity, then N pulse counts
    CMD_SET_LDO  = 8'h02,  // LDO tuning code
    CMD_LOAD_IN  = 8'h03,  // M input bytes into the SAF
    CMD_RUN      = 8'h04,  // mode byte; returns N results (3 bytes each, MSB first)
    CMD_LOAD_EXP = 8'h05,  // N expected calibration results (2 bytes each, MSB first)
    CMD_SET_TRIM = 8'h06   // comparator offset trim, signed 16 bits, MSB first
  } cmd_t;

  // Width of the comparator offset-correction setting.
  localparam int unsigned TRIM_W = 16;

  localparam logic [7:0] RSP_ACK = 8'hA5;  // command completed
  localparam logic [7:0] RSP_NAK = 8'h5A;  // unknown command byte

endpackage
