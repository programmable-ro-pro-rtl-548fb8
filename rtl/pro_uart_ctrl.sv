// pro_uart_ctrl: command decoder and register file behind the PRO UART. It
// holds the user configuration of every PRO (EN, SELs, counter start/stop)
// and of the monitoring logic, and answers read requests.
//
// Commands are byte sequences: a command byte (pro_pkg::pro_cmd_e) followed
// by its argument bytes, multi-byte values MSB first:
//   CFG idx cfg      set PRO idx's {rand_en, en, sel[5:0]}; idx FF = all PROs
//   START / STOP     start a free-running window / stop the counters
//   READ idx         reply 4 bytes: count of PRO idx (idx FF: reference)
//   MON m            m[0]: continuous timed monitoring, m[1]: characterise
//   INTERVAL v32     timed window length in clock cycles
//   TOL v32          alarm tolerance in counts
//   RAND_PER v32     PRNG SEL change period in clock cycles
//   READ_ALARM       reply NB bytes of high alarms then NB of low alarms,
//                    NB = ceil(N/8), each vector MSB byte first
//   CLR_ALARM        clear the sticky alarms
//   PAD idx          choose the PRO whose ring output drives the pad
// Unknown command bytes are skipped; an index >= N (other than FF) leaves
// everything unchanged. A read that arrives while a reply is still being
// sent is ignored, so the host waits for each reply. Register writes take
// effect the cycle after the last argument byte; start/stop/char/clear are
// one-cycle pulses. The published design controls the PROs over a UART from
// a host script but does not give the protocol: the whole command set, the
// byte layout and the reset values are this implementation's choices, except
// the SEL change period, which resets to 48,000 cycles (2 ms at 24 MHz) as in
// the published experiment.
module pro_uart_ctrl
  import pro_pkg::*;
#(
  parameter int unsigned N            = 36,
  parameter int unsigned W            = COUNT_W,
  parameter logic [31:0] DEF_INTERVAL = 32'd24_000,
  parameter logic [31:0] DEF_TOL      = 32'd1024,
  parameter logic [31:0] DEF_RAND_PER = 32'd48_000
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  // UART byte streams
  input  logic [7:0]   rx_data_i,
  input  logic         rx_valid_i,
  output logic [7:0]   tx_data_o,
  output logic         tx_valid_o,
  input  logic         tx_ready_i,
  // values to read
  input  logic [W-1:0] count_i [N],
  input  logic [W-1:0] ref_count_i,
  input  logic [N-1:0] alarm_hi_i,
  input  logic [N-1:0] alarm_lo_i,
  // configuration
  output pro_cfg_t     cfg_o [N],
  output logic [31:0]  interval_o,
  output logic [31:0]  tol_o,
  output logic [31:0]  rand_period_o,
  output logic [7:0]   pad_sel_o,
  output logic         auto_o,
  output logic         start_o,
  output logic         stop_o,
  output logic         char_o,
  output logic         alarm_clr_o
);
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned NB       = (N + 7) / 8;
  localparam int unsigned RB       = (2 * NB > 4) ? 2 * NB : 4;   // reply buffer bytes
  localparam int unsigned RW       = RB * 8;
  localparam int unsigned IW       = (N > 1) ? $clog2(N) : 1;

  typedef enum logic {P_CMD, P_ARG} pstate_e;

  pstate_e      pstate_q;
  logic [7:0]   cmd_q;
  logic [2:0]   need_q;     // argument bytes still expected
  logic [31:0]  arg_q;      // argument bytes, last one in the low byte
  logic         exec;       // a complete command is in cmd_q / arg_q
  logic [RW-1:0] resp_q;
  logic [7:0]   resp_cnt_q; // reply bytes still to send

  function automatic logic [2:0] n_args(input logic [7:0] c);
    case (c)
      CMD_CFG:                              return 3'd2;
      CMD_READ, CMD_MON, CMD_PAD:           return 3'd1;
      CMD_INTERVAL, CMD_TOL, CMD_RAND_PER:  return 3'd4;
      default:                              return 3'd0;
    endcase
  endfunction

  function automatic logic known(input logic [7:0] c);
    return (c >= CMD_CFG) && (c <= CMD_PAD);
  endfunction

  // ---------------- byte parser ----------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pstate_q <= P_CMD;
      cmd_q    <= '0;
      need_q   <= '0;
      arg_q    <= '0;
      exec     <= 1'b0;
    end else begin
      exec <= 1'b0;
      if (rx_valid_i) begin
        unique case (pstate_q)
          P_CMD: if (known(rx_data_i)) begin
            cmd_q  <= rx_data_i;
            need_q <= n_args(rx_data_i);
            arg_q  <= '0;
            if (n_args(rx_data_i) == 3'd0) exec <= 1'b1;
            else                           pstate_q <= P_ARG;
          end
          P_ARG: begin
            arg_q  <= {arg_q[23:0], rx_data_i};
            need_q <= need_q - 3'd1;
            if (need_q == 3'd1) begin
              exec     <= 1'b1;
              pstate_q <= P_CMD;
            end
          end
          default: pstate_q <= P_CMD;
        endcase
      end
    end
  end

  // ---------------- command execution ----------------
  logic [7:0] a_idx;    // index argument of CFG (first of two bytes)
  logic [7:0] a_last;   // last argument byte
  assign a_idx  = arg_q[15:8];
  assign a_last = arg_q[7:0];

  logic [8*NB-1:0] hi_pad, lo_pad;
  assign hi_pad = (8*NB)'(alarm_hi_i);
  assign lo_pad = (8*NB)'(alarm_lo_i);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int k = 0; k < N; k++) cfg_o[k] <= '0;
      interval_o    <= DEF_INTERVAL;
      tol_o         <= DEF_TOL;
      rand_period_o <= DEF_RAND_PER;
      pad_sel_o     <= '0;
      auto_o        <= 1'b0;
      start_o       <= 1'b0;
      stop_o        <= 1'b0;
      char_o        <= 1'b0;
      alarm_clr_o   <= 1'b0;
      resp_q        <= '0;
      resp_cnt_q    <= '0;
    end else begin
      start_o     <= 1'b0;
      stop_o      <= 1'b0;
      char_o      <= 1'b0;
      alarm_clr_o <= 1'b0;

      // reply stream
      if (tx_valid_o && tx_ready_i) begin
        resp_q     <= resp_q << 8;
        resp_cnt_q <= resp_cnt_q - 8'd1;
      end

      if (exec) begin
        unique case (cmd_q)
          CMD_CFG: begin
            for (int k = 0; k < N; k++)
              if (a_idx == IDX_ALL || a_idx == 8'(k)) cfg_o[k] <= pro_cfg_t'(a_last);
          end
          CMD_START:    start_o     <= 1'b1;
          CMD_STOP:     stop_o      <= 1'b1;
          CMD_MON: begin
            auto_o <= a_last[0];
            char_o <= a_last[1];
          end
          CMD_INTERVAL: interval_o    <= arg_q;
          CMD_TOL:      tol_o         <= arg_q;
          CMD_RAND_PER: rand_period_o <= arg_q;
          CMD_CLR_ALARM: alarm_clr_o  <= 1'b1;
          CMD_PAD:      if (a_last < 8'(N)) pad_sel_o <= a_last;
          CMD_READ: begin
            if (resp_cnt_q == '0) begin
              if (a_last == IDX_ALL) begin
                resp_q     <= RW'(32'(ref_count_i)) << (RW - 32);
                resp_cnt_q <= 8'd4;
              end else if (a_last < 8'(N)) begin
                resp_q     <= RW'(32'(count_i[a_last[IW-1:0]])) << (RW - 32);
                resp_cnt_q <= 8'd4;
              end
            end
          end
          CMD_READ_ALARM: begin
            if (resp_cnt_q == '0) begin
              resp_q     <= RW'({hi_pad, lo_pad}) << (RW - 16*NB);
              resp_cnt_q <= 8'(2 * NB);
            end
          end
          default: ;
        endcase
      end
    end
  end

  assign tx_valid_o = (resp_cnt_q != '0);
  assign tx_data_o  = resp_q[RW-1 -: 8];
endmodule
