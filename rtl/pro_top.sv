// pro_top: the PRO secure sensor network, a grid of programmable ring
// oscillators spread over a module under protection, with the logic that
// turns them into a side-channel hiding countermeasure, a power monitor and
// a fault detector.
//
// Blocks and data flow:
//   uart_rx -> pro_uart_ctrl -> uart_tx        host link (PRO UART)
//   pro_uart_ctrl -> per-PRO EN / SEL / rand_en, window and alarm settings
//   sel_prng      -> random SEL for every PRO whose rand_en is set, changed
//                    every rand_period clock cycles (hiding mode)
//   monitor_fsm   -> clear / run for the PRO counters and the reference
//                    counter, eval / capture for the comparator
//   pro_array     -> 36 PRO sensors (9 rows x 4), their counts and ring outputs
//   ref_counter   -> C_clk, the system-clock count of the same window
//   fault_compare -> per-PRO high / low alarms against a learned baseline
// The ring output of one PRO (chosen by the PAD command, PRO 0 after reset)
// leaves the chip on pro_pad_o: the published design drives an I/O pin with
// the PRO so that its random-frequency switching reaches the off-chip power
// network. The pad cell itself and the protected module (AES in the
// published prototype) are outside this RTL.
// Clock: clk_i is the system clock, 24 MHz in the published prototype, which
// sets the UART bit time (CLKS_PER_BIT) and the 2 ms SEL change period.
module pro_top
  import pro_pkg::*;
#(
  parameter int unsigned ROWS         = 9,
  parameter int unsigned COLS         = 4,
  parameter int unsigned CLKS_PER_BIT = 208,
  parameter logic [31:0] DEF_INTERVAL = 32'd24_000,
  parameter logic [31:0] DEF_TOL      = 32'd1024,
  parameter logic [31:0] DEF_RAND_PER = 32'd48_000,
  localparam int unsigned N           = ROWS * COLS
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         uart_rx_i,
  output logic         uart_tx_o,
  output logic         pro_pad_o,    // ring output to the I/O pad
  output logic         alarm_o,      // any PRO out of its normal range
  output logic [N-1:0] alarm_hi_o,   // count above range (e.g. EM pulse)
  output logic [N-1:0] alarm_lo_o    // count below range (e.g. voltage drop)
);
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned W = COUNT_W;

  // UART
  logic [7:0] rx_data, tx_data;
  logic       rx_valid, tx_valid, tx_ready;

  // configuration
  pro_cfg_t    cfg [N];
  logic [31:0] interval, tol, rand_period;
  logic [7:0]  pad_sel;
  logic        auto_mon, start_p, stop_p, char_p, alarm_clr;

  // counters and monitoring
  logic [W-1:0] count [N];
  logic [W-1:0] ref_count;
  logic         clr, run, eval, capture, busy;

  // sensors
  logic [N-1:0]     en;
  logic [SEL_W-1:0] sel [N];
  logic [SEL_W-1:0] rnd_sel;
  logic             rnd_update;
  logic [N-1:0]     ro;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk_i (clk_i), .rst_ni (rst_ni), .rx_i (uart_rx_i),
    .data_o (rx_data), .valid_o (rx_valid)
  );

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk_i (clk_i), .rst_ni (rst_ni), .data_i (tx_data), .valid_i (tx_valid),
    .ready_o (tx_ready), .tx_o (uart_tx_o)
  );

  pro_uart_ctrl #(
    .N (N), .W (W),
    .DEF_INTERVAL (DEF_INTERVAL), .DEF_TOL (DEF_TOL), .DEF_RAND_PER (DEF_RAND_PER)
  ) u_ctrl (
    .clk_i (clk_i), .rst_ni (rst_ni),
    .rx_data_i (rx_data), .rx_valid_i (rx_valid),
    .tx_data_o (tx_data), .tx_valid_o (tx_valid), .tx_ready_i (tx_ready),
    .count_i (count), .ref_count_i (ref_count),
    .alarm_hi_i (alarm_hi_o), .alarm_lo_i (alarm_lo_o),
    .cfg_o (cfg), .interval_o (interval), .tol_o (tol),
    .rand_period_o (rand_period), .pad_sel_o (pad_sel),
    .auto_o (auto_mon), .start_o (start_p), .stop_o (stop_p),
    .char_o (char_p), .alarm_clr_o (alarm_clr)
  );

  sel_prng u_prng (
    .clk_i (clk_i), .rst_ni (rst_ni), .period_i (rand_period),
    .sel_o (rnd_sel), .update_o (rnd_update)
  );

  // Effective EN / SEL of every PRO: the register value, or the PRNG's SEL
  // for PROs in hiding mode.
  always_comb begin
    for (int k = 0; k < N; k++) begin
      en[k]  = cfg[k].en;
      sel[k] = cfg[k].rand_en ? rnd_sel : cfg[k].sel;
    end
  end

  monitor_fsm #(.W(W)) u_mon (
    .clk_i (clk_i), .rst_ni (rst_ni),
    .start_i (start_p), .stop_i (stop_p), .auto_i (auto_mon), .char_i (char_p),
    .interval_i (interval), .ref_count_i (ref_count),
    .clr_o (clr), .run_o (run), .eval_o (eval), .capture_o (capture), .busy_o (busy)
  );

  ref_counter #(.W(W)) u_ref (
    .clk_i (clk_i), .rst_ni (rst_ni), .clr_i (clr), .run_i (run), .count_o (ref_count)
  );

  pro_array #(.ROWS(ROWS), .COLS(COLS), .W(W)) u_array (
    .clk_i (clk_i), .rst_ni (rst_ni), .en_i (en), .sel_i (sel),
    .clr_i (clr), .run_i (run), .count_o (count), .ro_o (ro)
  );

  fault_compare #(.N(N), .W(W)) u_cmp (
    .clk_i (clk_i), .rst_ni (rst_ni), .count_i (count),
    .capture_i (capture), .eval_i (eval), .clear_i (alarm_clr), .tol_i (tol),
    .alarm_hi_o (alarm_hi_o), .alarm_lo_o (alarm_lo_o), .alarm_o (alarm_o)
  );

  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  assign pro_pad_o = ro[pad_sel[IW-1:0]];
endmodule
