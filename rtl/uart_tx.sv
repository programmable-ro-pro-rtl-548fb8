// uart_tx: transmitter of the PRO UART, which returns counter values and
// alarm flags to the host.
//
// Format 8N1, LSB first, idle high, CLKS_PER_BIT clocks per bit (default
// 208: 24 MHz / 115200 baud, an assumed rate). A byte is accepted when
// valid_i and ready_o are both 1; ready_o is low from then until the stop
// bit has been sent, ten bit times in all.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 208
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic [7:0] data_i,
  input  logic       valid_i,
  output logic       ready_o,
  output logic       tx_o
);
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  logic [9:0]    frame_q;   // stop, data[7:0], start; shifted out LSB first
  logic [3:0]    bits_q;    // bits still to send
  logic [CW-1:0] clk_cnt_q;

  assign ready_o = (bits_q == 4'd0);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      frame_q   <= '1;
      bits_q    <= '0;
      clk_cnt_q <= '0;
      tx_o      <= 1'b1;
    end else if (bits_q == 4'd0) begin
      tx_o <= 1'b1;
      if (valid_i) begin
        frame_q   <= {1'b1, data_i, 1'b0};
        bits_q    <= 4'd10;
        clk_cnt_q <= '0;
        tx_o      <= 1'b0;    // start bit goes out at once
      end
    end else if (clk_cnt_q == CW'(CLKS_PER_BIT - 1)) begin
      clk_cnt_q <= '0;
      bits_q    <= bits_q - 4'd1;
      frame_q   <= {1'b1, frame_q[9:1]};
      tx_o      <= (bits_q == 4'd1) ? 1'b1 : frame_q[1];
    end else begin
      clk_cnt_q <= clk_cnt_q + 1'b1;
    end
  end

endmodule
