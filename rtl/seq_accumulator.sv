// seq_accumulator: digital sequential accumulation of the bit-plane results.
//
// The SAF feeds the inputs one bit plane at a time, so the ADC returns, for
// each row, one code per input bit. Weighting each code by its bit position
// and summing restores the full-resolution dot product:
//   acc[row] = sum_b code(row, b) << b.
// A write (wr_i) adds code_i << wr_bit_i to the row's entry, or replaces the
// entry when wr_first_i marks the first bit plane of a run, so no separate
// clear pass is needed. One write per cycle; the read port returns acc[rd_addr_i]
// one cycle after the address. The function is the paper's ("sequential
// accumulation to recover complete resolution"); the storage organisation is
// this design's choice.
module seq_accumulator
  import ctt_pkg::*;
#(
  parameter int unsigned N     = ARRAY_N,
  parameter int unsigned DBITS = DATA_BITS,
  parameter int unsigned ADC_B = ADC_BITS,
  localparam int unsigned NW   = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned BW   = (DBITS > 1) ? $clog2(DBITS) : 1,
  localparam int unsigned AW   = DBITS + ADC_B
) (
  input  logic             clk,
  input  logic             wr_i,
  input  logic [NW-1:0]    wr_row_i,
  input  logic [BW-1:0]    wr_bit_i,
  input  logic             wr_first_i,
  input  logic [ADC_B-1:0] code_i,
  input  logic [NW-1:0]    rd_addr_i,
  output logic [AW-1:0]    rd_data_o
);
  logic [AW-1:0] acc [N];
  logic [AW-1:0] addend;

  assign addend = AW'(code_i) << wr_bit_i;

  always_ff @(posedge clk) begin
    if (wr_i) acc[wr_row_i] <= (wr_first_i ? '0 : acc[wr_row_i]) + addend;
    rd_data_o <= acc[rd_addr_i];
  end
endmodule
