// ctt_array_model: behavioural model of the M x N charge-trap-transistor
// crossbar. This is a behavioural model of an analog array, not
// synthesizable logic.
//
// Each cell (row j, column i) is one CTT. Its weight is stored as the net
// number of trapping pulses n(j,i) it has received (0..2^CNT_W-1,
// saturating); de-trapping pulses remove one each. The DDMUX that routes a
// row's gate pulses to the device of the selected column is folded in here:
// a rising edge of prog_pulse_i[j] changes cell (j, prog_col_i) by +1 or -1
// according to prog_pol_i[j]. A fresh array is erased (all n = 0).
//
// In compute mode the SAF connects column i's drains to the LDO voltage when
// drain_on_i[i] is set and leaves them floating otherwise. Each on-cell in the
// triode region conducts a current proportional to V_DS*(G_OFF + n), i.e. the
// wanted product V_DS*weight plus an input-dependent offset V_DS*G_OFF, the two
// terms of the paper's eq. (5). The row resistor sums the currents:
//   row_level_o[j] = vds_mv_i * sum_i drain_on_i[i] * (G_OFF + n(j,i)).
// Levels are re-evaluated at the clock edge after any input or weight change
// (settling within one cycle). Linear cell behaviour, the offset constant
// G_OFF and the unit scale are this model's assumptions.
module ctt_array_model
  import ctt_pkg::*;
#(
  parameter int unsigned M         = ARRAY_M,
  parameter int unsigned N         = ARRAY_N,
  parameter int unsigned CNT_WIDTH = CNT_W,
  parameter int unsigned G_OFF     = 16,
  localparam int unsigned MW = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  // programming (from the counted pulse generators through the DDMUX)
  input  logic [N-1:0]  prog_pulse_i,
  input  pol_t          prog_pol_i [N],
  input  logic [MW-1:0] prog_col_i,
  // compute (from the SAF and the LDO)
  input  logic [M-1:0]  drain_on_i,
  input  analog_t       vds_mv_i,
  output analog_t       row_level_o [N]
);
  localparam logic [CNT_WIDTH-1:0] NMAX = '1;

  logic [CNT_WIDTH-1:0] ntrap [N][M];
  logic [N-1:0]         pulse_q;
  logic [M-1:0]         drain_q;
  analog_t              vds_q;
  logic                 dirty;
  logic [N-1:0]         rise;

  initial begin
    for (int j = 0; j < int'(N); j++)
      for (int i = 0; i < int'(M); i++) ntrap[j][i] = '0;
    for (int j = 0; j < int'(N); j++) row_level_o[j] = '0;
    pulse_q = '0;
    drain_q = '0;
    vds_q   = '0;
    dirty   = 1'b1;
  end

  assign rise = prog_pulse_i & ~pulse_q;

  // Threshold programming: one step per gate pulse.
  always @(posedge clk) begin
    pulse_q <= prog_pulse_i;
    if (rise != '0) begin
      for (int j = 0; j < int'(N); j++) begin
        if (rise[j]) begin
          if (prog_pol_i[j] == POL_TRAP) begin
            if (ntrap[j][prog_col_i] != NMAX) ntrap[j][prog_col_i] <= ntrap[j][prog_col_i] + 1'b1;
          end else begin
            if (ntrap[j][prog_col_i] != '0) ntrap[j][prog_col_i] <= ntrap[j][prog_col_i] - 1'b1;
          end
        end
      end
    end
  end

  // Row currents summed on the row resistors.
  always @(posedge clk) begin
    if (rise != '0) begin
      dirty <= 1'b1;
    end else if (dirty || drain_on_i != drain_q || vds_mv_i != vds_q) begin
      dirty   <= 1'b0;
      drain_q <= drain_on_i;
      vds_q   <= vds_mv_i;
      for (int j = 0; j < int'(N); j++) begin
        longint unsigned g;
        g = 0;
        for (int i = 0; i < int'(M); i++)
          if (drain_on_i[i]) g += longint'(G_OFF) + longint'(ntrap[j][i]);
        row_level_o[j] <= analog_t'(g * longint'(vds_mv_i));
      end
    end
  end
endmodule
