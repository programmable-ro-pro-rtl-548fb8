// uart_rx: receiver of the PRO UART, the serial link over which a host
// configures the sensors and reads their counters.
//
// Format 8N1, LSB first, idle high. rx_i is synchronised by two flops. A
// falling edge starts a byte; the start bit is re-checked at its middle
// (CLKS_PER_BIT/2 cycles later) and the eight data bits and the stop bit
// are sampled at their middles. When the stop bit is 1, data_o holds the
// byte and valid_o pulses for one cycle, about 9.5 bit times after the
// start edge; a byte with a 0 stop bit is dropped. The published design
// uses a UART but gives no baud rate: the default, 24 MHz / 115200 baud =
// 208 clocks per bit, is assumed.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 208
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic       rx_i,
  output logic [7:0] data_o,
  output logic       valid_o
);
  timeunit 1ns; timeprecision 1ps;

  typedef enum logic [1:0] {R_IDLE, R_START, R_DATA, R_STOP} rstate_e;

  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  rstate_e       state_q;
  logic [1:0]    sync_q;
  logic [CW-1:0] clk_cnt_q;
  logic [2:0]    bit_q;
  logic [7:0]    shift_q;
  logic          rx_s;

  assign rx_s = sync_q[1];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      sync_q    <= 2'b11;
      state_q   <= R_IDLE;
      clk_cnt_q <= '0;
      bit_q     <= '0;
      shift_q   <= '0;
      data_o    <= '0;
      valid_o   <= 1'b0;
    end else begin
      sync_q  <= {sync_q[0], rx_i};
      valid_o <= 1'b0;
      unique case (state_q)
        R_IDLE: begin
          clk_cnt_q <= '0;
          bit_q     <= '0;
          if (!rx_s) state_q <= R_START;
        end
        R_START: begin
          if (clk_cnt_q == CW'(CLKS_PER_BIT / 2 - 1)) begin
            clk_cnt_q <= '0;
            state_q   <= rx_s ? R_IDLE : R_DATA;   // false start: back to idle
          end else begin
            clk_cnt_q <= clk_cnt_q + 1'b1;
          end
        end
        R_DATA: begin
          if (clk_cnt_q == CW'(CLKS_PER_BIT - 1)) begin
            clk_cnt_q <= '0;
            shift_q   <= {rx_s, shift_q[7:1]};
            bit_q     <= bit_q + 3'd1;
            if (bit_q == 3'd7) state_q <= R_STOP;
          end else begin
            clk_cnt_q <= clk_cnt_q + 1'b1;
          end
        end
        R_STOP: begin
          if (clk_cnt_q == CW'(CLKS_PER_BIT - 1)) begin
            clk_cnt_q <= '0;
            state_q   <= R_IDLE;
            if (rx_s) begin
              data_o  <= shift_q;
              valid_o <= 1'b1;
            end
          end else begin
            clk_cnt_q <= clk_cnt_q + 1'b1;
          end
        end
        default: state_q <= R_IDLE;
      endcase
    end
  end
endmodule
