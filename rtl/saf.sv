// saf: digital part of the sequential analog fabric (SAF).
//
// The SAF lets one fixed drain voltage serve the whole array: each input
// neuron's 8-bit value is turned into a sequence of single bits, and each
// bit opens or closes the analog switch between the LDO output and that
// column's CTT drains. So every column sees either the fixed voltage or a
// floating drain, no DAC is needed, and one bit plane is computed per step.
//
// Inputs are written one per cycle through wr_* into the neuron registers;
// sum_o keeps the running sum of all stored inputs (used by the digital
// offset calibration). load_i copies all neurons into per-column shift
// registers in one cycle (the parallel-to-serial conversion); shift_i moves
// every column to its next bit, LSB first. drain_on_o[i] is the current bit
// of column i gated by enable_i; it changes right after the clock edge that
// takes load_i/shift_i. The switches themselves are analog and live in the array
// model. LSB-first order and the register structure are this design's
// choice; the paper gives the function and one bit per clock cycle.
module saf
  import ctt_pkg::*;
#(
  parameter int unsigned M     = ARRAY_M,
  parameter int unsigned DBITS = DATA_BITS,
  localparam int unsigned MW   = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned SW   = DBITS + $clog2(M + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_i,
  input  logic [MW-1:0]    wr_addr_i,
  input  logic [DBITS-1:0] wr_data_i,
  input  logic             load_i,
  input  logic             shift_i,
  input  logic             enable_i,
  output logic [M-1:0]     drain_on_o,
  output logic [SW-1:0]    sum_o
);
  logic [DBITS-1:0] neuron [M];
  logic [DBITS-1:0] seq    [M];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(M); i++) neuron[i] <= '0;
      sum_o <= '0;
    end else if (wr_i) begin
      neuron[wr_addr_i] <= wr_data_i;
      sum_o <= sum_o - SW'(neuron[wr_addr_i]) + SW'(wr_data_i);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(M); i++) seq[i] <= '0;
    end else if (load_i) begin
      seq <= neuron;
    end else if (shift_i) begin
      for (int i = 0; i < int'(M); i++) seq[i] <= seq[i] >> 1;
    end
  end

  always_comb begin
    for (int i = 0; i < int'(M); i++) drain_on_o[i] = enable_i & seq[i][0];
  end
endmodule
