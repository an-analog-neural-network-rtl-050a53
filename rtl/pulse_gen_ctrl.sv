// pulse_gen_ctrl: pulse generator controller of the CTT engine.
//
// The paper writes the pre-trained weights column by column: one counted
// pulse generator per row programs the device of the selected column, all
// rows in parallel, so one column takes as long as its largest pulse count.
// This controller holds the N pulse counts of one column in a register
// buffer (written one entry per cycle through wr_*), and on start_i loads
// them into the N generators, drives the column select of the DDMUX and the
// pulse polarity, and pulses done_o once every generator has finished.
//
// Timing: pg_load_o is high the cycle after start_i; done_o is high
// max(count)*(PULSE_HIGH+PULSE_LOW)+4 clock edges after the edge that takes
// start_i (3 edges when all counts are zero). The buffer may be rewritten while the generators
// run (they hold their own copy). Holding only one column (no weight SRAM)
// follows Table I ("SRAM size 0"); the buffer and handshake are this
// design's choice.
module pulse_gen_ctrl
  import ctt_pkg::*;
#(
  parameter int unsigned N         = ARRAY_N,
  parameter int unsigned M         = ARRAY_M,
  parameter int unsigned CNT_WIDTH = CNT_W,
  localparam int unsigned NW = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned MW = (M > 1) ? $clog2(M) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // column buffer write port
  input  logic                 wr_i,
  input  logic [NW-1:0]        wr_row_i,
  input  logic [CNT_WIDTH-1:0] wr_count_i,
  // programming command
  input  logic                 start_i,
  input  logic [MW-1:0]        col_i,
  input  pol_t                 pol_i,
  output logic                 done_o,
  output logic                 busy_o,
  // to the counted pulse generators
  output logic                 pg_load_o,
  output logic [CNT_WIDTH-1:0] pg_count_o [N],
  output pol_t                 pg_pol_o,
  input  logic [N-1:0]         pg_busy_i,
  // to the DDMUX
  output logic [MW-1:0]        col_o
);
  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_WAIT, S_RUN} state_t;
  state_t state;

  logic [CNT_WIDTH-1:0] buffer [N];

  always_ff @(posedge clk) begin
    if (wr_i) buffer[wr_row_i] <= wr_count_i;
  end

  assign pg_count_o = buffer;
  assign busy_o     = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      pg_load_o <= 1'b0;
      pg_pol_o  <= POL_TRAP;
      col_o     <= '0;
      done_o    <= 1'b0;
    end else begin
      pg_load_o <= 1'b0;
      done_o    <= 1'b0;
      case (state)
        S_IDLE: if (start_i) begin
          col_o    <= col_i;
          pg_pol_o <= pol_i;
          state    <= S_LOAD;
        end
        S_LOAD: begin
          pg_load_o <= 1'b1;
          state     <= S_WAIT;
        end
        S_WAIT: state <= S_RUN;           // generators see the load now
        S_RUN: if (pg_busy_i == '0) begin
          done_o <= 1'b1;
          state  <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
