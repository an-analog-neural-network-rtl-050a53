// uart_ctrl: UART controller, the engine's only link to the host computer.
//
// The host keeps the weights, the input images and every inter-layer result;
// the chip keeps only the programmed CTT array. This controller receives
// byte commands over an 8N1 UART, drives the pulse generator controller, the
// LDO tuning code, the comparator offset trim, the SAF input registers and
// the expected calibration results, starts runs, and streams the results
// back. Commands (first byte, see ctt_pkg::cmd_t), each answered with
// RSP_ACK once complete:
//   CMD_PROG_COL col_hi col_lo pol c[0] .. c[N-1]   program one array column
//   CMD_SET_LDO  code                               set the LDO tuning code
//   CMD_SET_TRIM t_hi t_lo                          set the ADC comparator's
//                                                   signed offset trim
//   CMD_LOAD_IN  x[0] .. x[M-1]                     load the input neurons
//   CMD_LOAD_EXP {e_hi e_lo} x N                    expected calibration results
//   CMD_RUN      mode                               run; returns N signed
//                                                   24-bit results, MSB first
// An unknown command byte is answered with RSP_NAK. The host must wait for
// the answer before sending the next command (no receive buffering).
// The paper names only the UART link and says inter-layer data is kept on
// the PC; the command set and framing are this design's choice.
module uart_ctrl
  import ctt_pkg::*;
#(
  parameter int unsigned M            = ARRAY_M,
  parameter int unsigned N            = ARRAY_N,
  parameter int unsigned CLKS_PER_BIT = 16,
  localparam int unsigned MW = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned NW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    rx_i,
  output logic                    tx_o,
  // LDO
  output logic [LDO_W-1:0]        ldo_code_o,
  // ADC comparator offset-correction setting
  output logic signed [TRIM_W-1:0] trim_o,
  // pulse generator controller
  output logic                    pg_wr_o,
  output logic [NW-1:0]           pg_wr_row_o,
  output logic [CNT_W-1:0]        pg_wr_count_o,
  output logic                    pg_start_o,
  output logic [MW-1:0]           pg_col_o,
  output pol_t                    pg_pol_o,
  input  logic                    pg_done_i,
  // SAF inputs
  output logic                    saf_wr_o,
  output logic [MW-1:0]           saf_addr_o,
  output logic [DATA_BITS-1:0]    saf_data_o,
  // expected calibration results
  output logic                    exp_wr_o,
  output logic [NW-1:0]           exp_addr_o,
  output logic [ACC_W-1:0]        exp_data_o,
  // runs and results
  output logic                    run_o,
  output mode_t                   run_mode_o,
  input  logic                    run_done_i,
  output logic [NW-1:0]           res_addr_o,
  input  logic signed [RES_W-1:0] res_data_i
);
  typedef enum logic [3:0] {
    C_CMD, C_PHDR, C_PDATA, C_PWAIT, C_LDO, C_TRIM, C_IN, C_EXP, C_RUNMODE,
    C_RWAIT, C_RADDR, C_RLAT, C_RSEND, C_ACK, C_NAK
  } cstate_t;
  cstate_t state;

  logic [7:0]        rx_data;
  logic              rx_valid;
  logic              tx_ready;
  logic              tx_valid;
  logic [7:0]        tx_data;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk, .rst_n, .rx_i, .data_o(rx_data), .valid_o(rx_valid)
  );
  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk, .rst_n, .data_i(tx_data), .valid_i(tx_valid), .ready_o(tx_ready), .tx_o
  );

  localparam int unsigned IW = ((M > N) ? $clog2(2 * M + 1) : $clog2(2 * N + 1));
  logic [IW-1:0]      idx;      // byte / row index within a command
  logic [1:0]         hdr;      // header byte or result byte index
  logic [7:0]         hi_byte;
  logic [RES_W-1:0]   result;

  always_comb begin
    tx_valid = 1'b0;
    tx_data  = RSP_ACK;
    case (state)
      C_ACK:  tx_valid = 1'b1;
      C_NAK:  begin tx_valid = 1'b1; tx_data = RSP_NAK; end
      C_RSEND: begin
        tx_valid = 1'b1;
        tx_data  = (hdr == 2'd0) ? result[23:16] : (hdr == 2'd1) ? result[15:8] : result[7:0];
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= C_CMD;
      ldo_code_o    <= '0;
      trim_o        <= '0;
      pg_wr_o       <= 1'b0;
      pg_wr_row_o   <= '0;
      pg_wr_count_o <= '0;
      pg_start_o    <= 1'b0;
      pg_col_o      <= '0;
      pg_pol_o      <= POL_TRAP;
      saf_wr_o      <= 1'b0;
      saf_addr_o    <= '0;
      saf_data_o    <= '0;
      exp_wr_o      <= 1'b0;
      exp_addr_o    <= '0;
      exp_data_o    <= '0;
      run_o         <= 1'b0;
      run_mode_o    <= MODE_INFER;
      res_addr_o    <= '0;
      idx           <= '0;
      hdr           <= '0;
      hi_byte       <= '0;
      result        <= '0;
    end else begin
      pg_wr_o    <= 1'b0;
      pg_start_o <= 1'b0;
      saf_wr_o   <= 1'b0;
      exp_wr_o   <= 1'b0;
      run_o      <= 1'b0;
      case (state)
        C_CMD: if (rx_valid) begin
          idx <= '0;
          hdr <= '0;
          case (rx_data)
            CMD_PROG_COL: state <= C_PHDR;
            CMD_SET_LDO:  state <= C_LDO;
            CMD_SET_TRIM: state <= C_TRIM;
            CMD_LOAD_IN:  state <= C_IN;
            CMD_LOAD_EXP: state <= C_EXP;
            CMD_RUN:      state <= C_RUNMODE;
            default:      state <= C_NAK;
          endcase
        end
        C_PHDR: if (rx_valid) begin
          hdr <= hdr + 1'b1;
          case (hdr)
            2'd0: hi_byte <= rx_data;
            2'd1: pg_col_o <= MW'({hi_byte, rx_data});
            default: begin
              pg_pol_o <= pol_t'(rx_data[0]);
              state    <= C_PDATA;
            end
          endcase
        end
        C_PDATA: if (rx_valid) begin
          pg_wr_o       <= 1'b1;
          pg_wr_row_o   <= NW'(idx);
          pg_wr_count_o <= rx_data;
          idx           <= idx + 1'b1;
          if (32'(idx) == N - 1) begin
            pg_start_o <= 1'b1;
            state      <= C_PWAIT;
          end
        end
        C_PWAIT: if (pg_done_i) state <= C_ACK;
        C_LDO: if (rx_valid) begin
          ldo_code_o <= rx_data[LDO_W-1:0];
          state      <= C_ACK;
        end
        C_TRIM: if (rx_valid) begin
          hdr <= hdr + 1'b1;
          if (hdr == 2'd0) begin
            hi_byte <= rx_data;
          end else begin
            trim_o <= $signed({hi_byte, rx_data});
            state  <= C_ACK;
          end
        end
        C_IN: if (rx_valid) begin
          saf_wr_o   <= 1'b1;
          saf_addr_o <= MW'(idx);
          saf_data_o <= rx_data;
          idx        <= idx + 1'b1;
          if (32'(idx) == M - 1) state <= C_ACK;
        end
        C_EXP: if (rx_valid) begin
          idx <= idx + 1'b1;
          if (!idx[0]) begin
            hi_byte <= rx_data;
          end else begin
            exp_wr_o   <= 1'b1;
            exp_addr_o <= NW'(idx >> 1);
            exp_data_o <= ACC_W'({hi_byte, rx_data});
            if (32'(idx) == 2 * N - 1) state <= C_ACK;
          end
        end
        C_RUNMODE: if (rx_valid) begin
          run_o      <= 1'b1;
          run_mode_o <= mode_t'(rx_data[0]);
          state      <= C_RWAIT;
        end
        C_RWAIT: if (run_done_i) begin
          idx   <= '0;
          state <= C_RADDR;
        end
        C_RADDR: begin
          res_addr_o <= NW'(idx);
          hdr        <= '0;
          state      <= C_RLAT;
        end
        C_RLAT: begin                       // two cycles of read latency
          hdr <= hdr + 1'b1;
          if (hdr == 2'd2) begin
            result <= res_data_i;
            hdr    <= '0;
            state  <= C_RSEND;
          end
        end
        C_RSEND: if (tx_ready) begin
          hdr <= hdr + 1'b1;
          if (hdr == 2'd2) begin
            idx <= idx + 1'b1;
            state <= (32'(idx) == N - 1) ? C_ACK : C_RADDR;
          end
        end
        C_ACK, C_NAK: if (tx_ready) state <= C_CMD;
        default: state <= C_CMD;
      endcase
    end
  end
endmodule
