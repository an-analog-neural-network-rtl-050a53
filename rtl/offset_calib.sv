// offset_calib: digital-domain offset calibration of the row results.
//
// Every CTT that sees a drain voltage conducts even at zero weight, so each
// row result carries an offset proportional to the sum of the inputs (the
// paper's eq. (5): "an unwanted input-data-dependent offset" that is
// "calibrated out after the ADC in the digital domain"). The calibration
// run feeds a known input vector whose correct results have been stored in
// advance (exp_wr_*). learn_i then measures, row by row, the error
// err = acc - expected and stores the slope k = (err << FRAC) / s_cal_i
// (restoring division, signed, truncated; 0 when s_cal_i is 0). Afterwards
// every result is read corrected:
//   res = acc - ((k * s_x_i) >>> FRAC),  saturated to RES_W bits signed,
// where s_x_i is the sum of the current inputs. Before the first
// calibration no correction is applied.
//
// Timing: learning takes N*(DIV_W+3)+1 cycles (DIV_W = ACC_W+1+FRAC) and ends
// with a done_o pulse. The result read port has two cycles of latency
// (one in the accumulator, one here) and is not available while learning.
// The paper gives the purpose and the calibration flow (Fig. 7); the linear
// slope model and the arithmetic are this design's choice.
module offset_calib
  import ctt_pkg::*;
#(
  parameter int unsigned N     = ARRAY_N,
  parameter int unsigned AW    = ACC_W,
  parameter int unsigned SW    = DATA_BITS + $clog2(ARRAY_M + 1),
  parameter int unsigned FRAC  = 16,
  parameter int unsigned RW    = RES_W,
  localparam int unsigned NW   = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned DIV_W = AW + 1 + FRAC,
  localparam int unsigned KW   = DIV_W + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // expected calibration results
  input  logic                 exp_wr_i,
  input  logic [NW-1:0]        exp_addr_i,
  input  logic [AW-1:0]        exp_data_i,
  // learning
  input  logic                 learn_i,
  input  logic [SW-1:0]        s_cal_i,
  output logic                 done_o,
  output logic                 busy_o,
  // corrected result read
  input  logic [SW-1:0]        s_x_i,
  input  logic [NW-1:0]        res_addr_i,
  output logic signed [RW-1:0] res_data_o,
  // accumulator read port
  output logic [NW-1:0]        acc_addr_o,
  input  logic [AW-1:0]        acc_data_i
);
  typedef enum logic [2:0] {L_IDLE, L_ADDR, L_READ, L_DIV, L_STORE} lstate_t;
  lstate_t state;

  logic [AW-1:0]            expected [N];
  logic signed [KW-1:0]     slope    [N];
  logic                     cal_valid;

  logic [NW-1:0]            row;
  logic [SW-1:0]            divisor;
  logic                     neg;
  logic [DIV_W-1:0]         dividend;   // shifts left into the remainder
  logic [DIV_W-1:0]         quotient;
  logic [SW-1:0]            remainder;  // always below the divisor
  logic [$clog2(DIV_W+1)-1:0] steps;

  always_ff @(posedge clk) begin
    if (exp_wr_i) expected[exp_addr_i] <= exp_data_i;
  end

  assign busy_o     = (state != L_IDLE);
  assign acc_addr_o = busy_o ? row : res_addr_i;

  // ---- learning: one restoring division per row ----
  logic signed [AW+1:0] err;
  logic signed [AW+1:0] err_mag;
  logic [SW:0]          rem_shift;
  assign err       = $signed({2'b00, acc_data_i}) - $signed({2'b00, expected[row]});
  assign err_mag   = (err < 0) ? -err : err;
  assign rem_shift = {remainder, dividend[DIV_W-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= L_IDLE;
      row       <= '0;
      divisor   <= '0;
      neg       <= 1'b0;
      dividend  <= '0;
      quotient  <= '0;
      remainder <= '0;
      steps     <= '0;
      done_o    <= 1'b0;
      cal_valid <= 1'b0;
    end else begin
      done_o <= 1'b0;
      case (state)
        L_IDLE: if (learn_i) begin
          row     <= '0;
          divisor <= s_cal_i;
          state   <= L_ADDR;
        end
        L_ADDR: state <= L_READ;            // accumulator read in flight
        L_READ: begin
          neg       <= err < 0;
          dividend  <= DIV_W'(unsigned'(err_mag)) << FRAC;
          quotient  <= '0;
          remainder <= '0;
          steps     <= '0;
          state     <= L_DIV;
        end
        L_DIV: begin
          if (rem_shift >= {1'b0, divisor} && divisor != 0) begin
            remainder <= SW'(rem_shift - {1'b0, divisor});
            quotient  <= {quotient[DIV_W-2:0], 1'b1};
          end else begin
            remainder <= SW'(rem_shift);
            quotient  <= {quotient[DIV_W-2:0], 1'b0};
          end
          dividend <= dividend << 1;
          steps    <= steps + 1'b1;
          if (32'(steps) == DIV_W - 1) state <= L_STORE;
        end
        L_STORE: begin
          if (32'(row) == N - 1) begin
            state     <= L_IDLE;
            done_o    <= 1'b1;
            cal_valid <= 1'b1;
          end else begin
            row   <= row + 1'b1;
            state <= L_ADDR;
          end
        end
        default: state <= L_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == L_STORE)
      slope[row] <= (divisor == 0) ? '0
                  : neg ? -$signed({1'b0, quotient}) : $signed({1'b0, quotient});
  end

  // ---- corrected read ----
  localparam int unsigned PW = KW + SW + 1;
  logic [NW-1:0]         addr_q;
  logic signed [PW-1:0]  prod;
  logic signed [PW-1:0]  corr;
  logic signed [PW-1:0]  value;

  always_ff @(posedge clk) addr_q <= res_addr_i;

  always_comb begin
    prod  = PW'(slope[addr_q]) * $signed({1'b0, s_x_i});
    corr  = prod >>> FRAC;
    if (!cal_valid) corr = '0;
    value = $signed(PW'(acc_data_i)) - corr;
  end

  localparam logic signed [PW-1:0] RMAX = PW'((64'sd1 <<< (RW - 1)) - 1);
  localparam logic signed [PW-1:0] RMIN = -PW'(64'sd1 <<< (RW - 1));

  always_ff @(posedge clk) begin
    if (value > RMAX)      res_data_o <= RW'(RMAX);
    else if (value < RMIN) res_data_o <= RW'(RMIN);
    else                   res_data_o <= RW'(value);
  end
endmodule
