// ctt_engine_top: the CTT analog neural-network computing engine.
//
// One fully-connected layer Y = W^T X of M inputs and N outputs is computed
// in an M x N array of charge-trap transistors that store the weights as
// programmed threshold shifts. Data path of a run (Fig. 1 of the paper):
// UART -> SAF input registers -> bit-serial drain switches (LSB first) ->
// CTT array (row currents summed on row resistors) -> AMUX (one row at a
// time) -> 8-bit SAR ADC -> sequential accumulator (code << bit) -> offset
// calibration -> UART. Weight path: UART -> pulse generator controller
// (one column of counts) -> N counted pulse generators -> DDMUX -> the
// selected column's gates. The LDO sets the drain voltage and is tuned over
// the UART, as is the offset trim of the ADC comparator (CMP_OFFSET models
// the comparator's own offset that the trim cancels).
//
// The array, LDO, AMUX and ADC are behavioural models (analog parts); the
// rest is synthesizable. The DDMUX is analog and is folded into the array
// model; its column select, polarity and row pulses are brought out as
// ports. Timing: programming a column takes max(count)*(PULSE_HIGH+PULSE_LOW)
// plus a few cycles; a run takes DATA_BITS*(SETTLE+N)+3 cycles (one ADC
// conversion per row and bit) plus N*(DIV_W+3)+1 cycles of learning in
// calibration mode; UART traffic is 10*CLKS_PER_BIT cycles per byte.
module ctt_engine_top
  import ctt_pkg::*;
#(
  parameter int unsigned M            = ARRAY_M,
  parameter int unsigned N            = ARRAY_N,
  parameter int unsigned CLKS_PER_BIT = 16,
  parameter int unsigned PULSE_HIGH   = 500,
  parameter int unsigned PULSE_LOW    = 500,
  parameter int unsigned G_OFF        = 16,
  parameter longint      ADC_FS       = 64'd1048576,
  parameter int          CMP_OFFSET   = 0,   // comparator offset, level units (model)
  localparam int unsigned MW = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned NW = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned SW = DATA_BITS + $clog2(M + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          uart_rx_i,
  output logic          uart_tx_o,
  // DDMUX control (the DDMUX itself is analog)
  output logic [MW-1:0] ddmux_col_o,
  output pol_t          ddmux_pol_o,
  output logic [N-1:0]  gate_pulse_o
);
  // ---------------- host link ----------------
  logic [LDO_W-1:0]        ldo_code;
  logic signed [TRIM_W-1:0] cmp_trim;
  logic                    pg_wr, pg_start, pg_done;
  logic [NW-1:0]           pg_wr_row;
  logic [CNT_W-1:0]        pg_wr_count;
  logic [MW-1:0]           pg_col;
  pol_t                    pg_pol;
  logic                    saf_wr;
  logic [MW-1:0]           saf_addr;
  logic [DATA_BITS-1:0]    saf_data;
  logic                    exp_wr;
  logic [NW-1:0]           exp_addr;
  logic [ACC_W-1:0]        exp_data;
  logic                    run, run_done;
  mode_t                   run_mode;
  logic [NW-1:0]           res_addr;
  logic signed [RES_W-1:0] res_data;

  uart_ctrl #(.M(M), .N(N), .CLKS_PER_BIT(CLKS_PER_BIT)) u_uart (
    .clk, .rst_n, .rx_i(uart_rx_i), .tx_o(uart_tx_o),
    .ldo_code_o(ldo_code), .trim_o(cmp_trim),
    .pg_wr_o(pg_wr), .pg_wr_row_o(pg_wr_row), .pg_wr_count_o(pg_wr_count),
    .pg_start_o(pg_start), .pg_col_o(pg_col), .pg_pol_o(pg_pol), .pg_done_i(pg_done),
    .saf_wr_o(saf_wr), .saf_addr_o(saf_addr), .saf_data_o(saf_data),
    .exp_wr_o(exp_wr), .exp_addr_o(exp_addr), .exp_data_o(exp_data),
    .run_o(run), .run_mode_o(run_mode), .run_done_i(run_done),
    .res_addr_o(res_addr), .res_data_i(res_data)
  );

  // ---------------- weight programming ----------------
  logic             pgc_busy;
  logic             pg_load;
  logic [CNT_W-1:0] pg_count [N];
  pol_t             pg_pol_bc;
  logic [N-1:0]     pg_busy;
  logic [N-1:0]     pulse;
  pol_t             pulse_pol [N];

  pulse_gen_ctrl #(.N(N), .M(M)) u_pgc (
    .clk, .rst_n,
    .wr_i(pg_wr), .wr_row_i(pg_wr_row), .wr_count_i(pg_wr_count),
    .start_i(pg_start), .col_i(pg_col), .pol_i(pg_pol),
    .done_o(pg_done), .busy_o(pgc_busy),
    .pg_load_o(pg_load), .pg_count_o(pg_count), .pg_pol_o(pg_pol_bc), .pg_busy_i(pg_busy),
    .col_o(ddmux_col_o)
  );

  for (genvar r = 0; r < int'(N); r++) begin : g_pg
    counted_pulse_gen #(.PULSE_HIGH(PULSE_HIGH), .PULSE_LOW(PULSE_LOW)) u_cpg (
      .clk, .rst_n, .load_i(pg_load), .count_i(pg_count[r]), .pol_i(pg_pol_bc),
      .pulse_o(pulse[r]), .pol_o(pulse_pol[r]), .busy_o(pg_busy[r])
    );
  end

  assign ddmux_pol_o  = pg_pol_bc;
  assign gate_pulse_o = pulse;

  // ---------------- compute path ----------------
  logic            eng_busy, eng_done;
  logic            saf_load, saf_shift, saf_enable;
  logic [M-1:0]    drain_on;
  logic [SW-1:0]   in_sum;
  logic [NW-1:0]   amux_sel;
  logic            adc_start, adc_valid;
  logic [ADC_BITS-1:0] adc_code;
  logic            acc_wr, acc_first;
  logic [NW-1:0]   acc_row;
  logic [$clog2(DATA_BITS)-1:0] acc_bit;
  logic            learn, learn_done, cal_busy;
  logic [NW-1:0]   acc_rd_addr;
  logic [ACC_W-1:0] acc_rd_data;
  analog_t         vds_mv;
  analog_t         row_level [N];
  analog_t         adc_in;
  logic [SW-1:0]   s_cal;

  ldo_model u_ldo (.clk, .code_i(ldo_code), .vout_mv_o(vds_mv));

  saf #(.M(M)) u_saf (
    .clk, .rst_n, .wr_i(saf_wr), .wr_addr_i(saf_addr), .wr_data_i(saf_data),
    .load_i(saf_load), .shift_i(saf_shift), .enable_i(saf_enable),
    .drain_on_o(drain_on), .sum_o(in_sum)
  );

  ctt_array_model #(.M(M), .N(N), .G_OFF(G_OFF)) u_array (
    .clk, .prog_pulse_i(pulse), .prog_pol_i(pulse_pol), .prog_col_i(ddmux_col_o),
    .drain_on_i(drain_on), .vds_mv_i(vds_mv), .row_level_o(row_level)
  );

  amux_model #(.N(N)) u_amux (.in_i(row_level), .sel_i(amux_sel), .out_o(adc_in));

  sar_adc_model #(.FULL_SCALE(ADC_FS), .CMP_OFFSET(CMP_OFFSET)) u_adc (
    .clk, .rst_n, .start_i(adc_start), .vin_i(adc_in), .trim_i(int'(cmp_trim)),
    .code_o(adc_code), .valid_o(adc_valid)
  );

  engine_ctrl #(.N(N)) u_eng (
    .clk, .rst_n, .run_i(run), .mode_i(run_mode), .busy_o(eng_busy), .done_o(eng_done),
    .saf_load_o(saf_load), .saf_shift_o(saf_shift), .saf_enable_o(saf_enable),
    .amux_sel_o(amux_sel), .adc_start_o(adc_start), .adc_valid_i(adc_valid),
    .acc_wr_o(acc_wr), .acc_row_o(acc_row), .acc_bit_o(acc_bit), .acc_first_o(acc_first),
    .learn_o(learn), .learn_done_i(learn_done)
  );
  assign run_done = eng_done;

  seq_accumulator #(.N(N)) u_acc (
    .clk, .wr_i(acc_wr), .wr_row_i(acc_row), .wr_bit_i(acc_bit), .wr_first_i(acc_first),
    .code_i(adc_code), .rd_addr_i(acc_rd_addr), .rd_data_o(acc_rd_data)
  );

  // the calibration input sum is the SAF sum at the time learning starts
  assign s_cal = in_sum;

  offset_calib #(.N(N), .SW(SW)) u_cal (
    .clk, .rst_n,
    .exp_wr_i(exp_wr), .exp_addr_i(exp_addr), .exp_data_i(exp_data),
    .learn_i(learn), .s_cal_i(s_cal), .done_o(learn_done), .busy_o(cal_busy),
    .s_x_i(in_sum), .res_addr_i(res_addr), .res_data_o(res_data),
    .acc_addr_o(acc_rd_addr), .acc_data_i(acc_rd_data)
  );

  // the host link serialises commands: the array is never programmed while
  // a run or a calibration is in progress
  a_prog_vs_run: assert property (@(posedge clk) disable iff (!rst_n)
                                  !(pgc_busy && (eng_busy || cal_busy)));
endmodule
