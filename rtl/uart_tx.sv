// uart_tx: 8N1 UART transmitter used by the host link of the CTT engine.
//
// A byte is accepted when valid_i and ready_o are both high; the frame
// (start bit, eight data bits LSB first, stop bit) then takes ten bit periods
// of CLKS_PER_BIT cycles each, during which ready_o is low. The line idles
// high. The frame format and rate are this design's choice (the paper names
// only a low-speed UART).
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] data_i,
  input  logic       valid_i,
  output logic       ready_o,
  output logic       tx_o
);
  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  logic          busy;
  logic [8:0]    shreg;  // data bits then the stop bit
  logic [3:0]    left;   // bits still to start after the current one
  logic [CW-1:0] tick;   // cycles left in the current bit

  assign ready_o = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      shreg <= '1;
      left  <= '0;
      tick  <= '0;
      tx_o  <= 1'b1;
    end else if (!busy) begin
      if (valid_i) begin
        busy  <= 1'b1;
        tx_o  <= 1'b0;              // start bit
        shreg <= {1'b1, data_i};
        left  <= 4'd9;
        tick  <= CW'(CLKS_PER_BIT - 1);
      end
    end else if (tick == 0) begin
      if (left == 0) begin
        busy <= 1'b0;               // stop bit completed
      end else begin
        tx_o  <= shreg[0];
        shreg <= {1'b1, shreg[8:1]};
        left  <= left - 1'b1;
        tick  <= CW'(CLKS_PER_BIT - 1);
      end
    end else begin
      tick <= tick - 1'b1;
    end
  end

  // A byte offered while busy must be held until it is taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           valid_i && !ready_o |=> valid_i);
endmodule
