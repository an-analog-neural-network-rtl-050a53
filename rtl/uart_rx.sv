// uart_rx: 8N1 UART receiver used by the host link of the CTT engine.
//
// The line is synchronised with two flops. A falling edge starts a frame;
// the start bit is re-checked half a bit later, then the eight data bits
// (LSB first) are sampled in the middle of each bit period and the stop bit
// is waited out. data_o is valid for the single cycle in which valid_o is
// high, about 9.5 bit periods after the start edge. A frame with a low stop
// bit is dropped. The paper only names a "low-speed UART"; the 8N1 format
// and the clocks-per-bit parameter are this design's choice.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rx_i,
  output logic [7:0] data_o,
  output logic       valid_o
);
  typedef enum logic [1:0] {S_IDLE, S_START, S_DATA, S_STOP} state_t;

  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  state_t          state;
  logic [CW-1:0]   tick;
  logic [2:0]      bitn;
  logic [7:0]      shreg;
  logic [1:0]      sync;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sync <= 2'b11;
    else        sync <= {sync[0], rx_i};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      tick    <= '0;
      bitn    <= '0;
      shreg   <= '0;
      data_o  <= '0;
      valid_o <= 1'b0;
    end else begin
      valid_o <= 1'b0;
      case (state)
        S_IDLE: if (!sync[1]) begin
          state <= S_START;
          tick  <= CW'(CLKS_PER_BIT / 2);
        end
        S_START: if (tick == 0) begin
          if (!sync[1]) begin
            state <= S_DATA;
            tick  <= CW'(CLKS_PER_BIT - 1);
            bitn  <= '0;
          end else begin
            state <= S_IDLE;
          end
        end else tick <= tick - 1'b1;
        S_DATA: if (tick == 0) begin
          shreg <= {sync[1], shreg[7:1]};
          tick  <= CW'(CLKS_PER_BIT - 1);
          if (bitn == 3'd7) state <= S_STOP;
          bitn <= bitn + 1'b1;
        end else tick <= tick - 1'b1;
        S_STOP: if (tick == 0) begin
          state <= S_IDLE;
          if (sync[1]) begin
            data_o  <= shreg;
            valid_o <= 1'b1;
          end
        end else tick <= tick - 1'b1;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
