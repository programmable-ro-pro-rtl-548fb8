// tb_pro_top_full: one complete operation of the PRO network at its default
// size: 36 sensors (9 x 4), 24 MHz clock, 115200 baud UART (208 clocks per
// bit), 24,000-cycle (1 ms) monitoring interval. Through the UART only:
//  1. enable all 36 PROs with three different SEL codes,
//  2. run a free window of 12,000 cycles, stop, switch the rings off, and
//     read C_clk and the counts of four sensors spread over the grid,
//     checking f_PRO = C_PRO / C_clk * f_clk against the ring model (within
//     5 counts + 0.02 %, the rounding of the model delays to 1 ps),
//  3. switch the rings back on, characterise one default interval, then
//     monitor with a 12 % supply drop on the sensor at row 7, column 3
//     (index 31): after one interval exactly that sensor must raise a low
//     alarm, read back through READ_ALARM.
module tb_pro_top_full;
  timeunit 1ns; timeprecision 1ps;
  import pro_pkg::*;

  localparam int N = 36, CPB = 208;
  localparam real T_INV = 333.5, T_MUX = 550.0, T_GATE = 417.0;

  logic clk = 0, rst_n = 0, rx = 1, tx, pad, alarm;
  logic [N-1:0] ahi, alo;
  int checks = 0, failures = 0;
  logic [7:0] replies [$];

  always #20.833ns clk = ~clk;

  pro_top dut (.clk_i(clk), .rst_ni(rst_n), .uart_rx_i(rx), .uart_tx_o(tx), .pro_pad_o(pad),
               .alarm_o(alarm), .alarm_hi_o(ahi), .alarm_lo_o(alo));

  task automatic put(input logic [7:0] b);
    @(posedge clk);
    rx = 0; repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rx = b[i]; repeat (CPB) @(posedge clk); end
    rx = 1; repeat (CPB) @(posedge clk);
  endtask

  initial begin
    logic [7:0] b;
    forever begin
      @(negedge tx);
      repeat (CPB / 2) @(posedge clk);
      for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge clk); b[i] = tx; end
      repeat (CPB) @(posedge clk);
      replies.push_back(b);
    end
  end

  task automatic get(input int n, output logic [79:0] v);
    int t;
    t = 0;
    while (replies.size() < n && t < 200000) begin @(posedge clk); t++; end
    v = '0;
    for (int i = 0; i < n && replies.size() > 0; i++) v = (v << 8) | 80'(replies.pop_front());
  endtask

  task automatic read_count(input logic [7:0] idx, output logic [31:0] v);
    logic [79:0] r;
    put(CMD_READ); put(idx);
    get(4, r);
    v = r[31:0];
  endtask

  function automatic real f_exp(input logic [5:0] s);
    int n = 1;
    int cinv [6] = '{4, 4, 8, 8, 16, 16};
    for (int c = 0; c < 6; c++) if (s[c]) n += cinv[c];
    return 1.0e12 / (2.0 * (T_GATE + n * T_INV + 6.0 * T_MUX));
  endfunction

  initial begin
    #12ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] c, cref;
    logic [79:0] r;
    logic [5:0]  sel_of [N];
    int idx [4];
    real expc;
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (10) @(posedge clk);

    // 1. configure
    put(CMD_CFG); put(IDX_ALL); put({2'b01, 6'h00});
    put(CMD_CFG); put(8'd17);   put({2'b01, 6'h3F});
    put(CMD_CFG); put(8'd35);   put({2'b01, 6'h2A});
    for (int k = 0; k < N; k++) sel_of[k] = 6'h00;
    sel_of[17] = 6'h3F; sel_of[35] = 6'h2A;

    // 2. free window
    put(CMD_START);
    repeat (12000) @(posedge clk);
    put(CMD_STOP);
    repeat (20) @(posedge clk);
    put(CMD_CFG); put(IDX_ALL); put(8'h00);      // rings off while reading
    read_count(IDX_ALL, cref);
    checks++;
    if (cref < 12000 || cref > 12000 + 11 * CPB) begin failures++; $display("FAIL C_clk %0d", cref); end
    idx = '{0, 17, 22, 35};
    foreach (idx[i]) begin
      read_count(8'(idx[i]), c);
      expc = f_exp(sel_of[idx[i]]) * real'(cref) / 24.0e6;
      $display("PRO %0d: C_PRO %0d C_clk %0d -> %f MHz", idx[i], c, cref, real'(c) / real'(cref) * 24.0);
      checks++;
      // 5 counts for the start/stop synchronisers, plus 0.02 % because the
      // model's sub-picosecond delays are rounded to the 1 ps time precision
      if (real'(c) > expc * 1.0002 + 5.0 || real'(c) < expc * 0.9998 - 5.0) begin
        failures++; $display("FAIL PRO %0d: C_PRO %0d expected %f", idx[i], c, expc);
      end
    end

    // 3. characterise and monitor at the default interval and tolerance
    put(CMD_CFG); put(IDX_ALL); put({2'b01, 6'h00});
    put(CMD_MON); put(8'h02);
    wait (dut.u_mon.capture_o);
    dut.u_array.g_row[7].g_col[3].u_pro.u_ring.delay_scale = 1.12;
    put(CMD_MON); put(8'h01);
    wait (dut.u_mon.eval_o);
    put(CMD_MON); put(8'h00);
    put(CMD_CFG); put(IDX_ALL); put(8'h00);
    checks++;
    if (alo != 36'(1) << 31 || ahi != '0) begin
      failures++; $display("FAIL alarms hi=%h lo=%h", ahi, alo);
    end
    put(CMD_READ_ALARM);
    get(10, r);
    checks++;
    if (r[39:0] != 40'h00_8000_0000 || r[79:40] != 40'h0) begin
      failures++; $display("FAIL READ_ALARM %h", r);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
