// tb_pro_workloads: the sensing and hiding experiments of the PRO network,
// run on the full 9 x 4 grid of 36 sensors. Only the UART is shortened
// (8 clocks per bit). The host model talks to the design through the UART
// only. Attacks are modelled by scaling the delays of individual rings
// (delay_scale): above 1.0 is a local supply drop, below 1.0 a speed-up.
//  1. Fault localisation. A power drop is centred on one spot of the die.
//     The drop is 10 % at the centre and falls with 1 / (1 + d^2) over the
//     grid distance d. It is placed first on rows 1-2 of the left half, then
//     on rows 6-7 of the right half. For each placement the host measures
//     all 36 counts without and with the drop, over windows of the same
//     length, and computes each sensor's frequency drop ratio
//     (f_off - f_on) / f_off. Checks: every ratio matches the applied drop,
//     the row with the largest average ratio is one of the two attacked
//     rows, and the attacked half has the larger average.
//  2. EM fault detection. After a characterisation window, monitoring runs
//     while sensors 0-15 run 3 % fast for the whole window (frequency shift),
//     and sensors 23-27 and 31-35 get a 20 us burst at four times their
//     speed (corrupted, far too large counts). Exactly those sensors must
//     raise high alarms and no sensor a low alarm, also as read back
//     through READ_ALARM.
//  3. Hiding. PRO 9 alone runs in random-SEL mode and drives the pad, with a
//     new SEL every 1200 clocks. In each of 24 periods the pad frequency
//     must equal one of the 15 ring frequencies, and at least 6 different
//     frequencies must appear.
// The sensor numbering, the 9 x 4 grid and the experiments follow the
// reference design. The drop profile, the drop sizes, the window lengths,
// the choice of the second location and the change period are this
// testbench's own.
module tb_pro_workloads;
  timeunit 1ns; timeprecision 1ps;
  import pro_pkg::*;

  localparam int ROWS = 9, COLS = 4, N = ROWS * COLS, CPB = 8;
  localparam int WIN = 2400;                    // measurement window, clocks
  localparam real T_INV = 333.5, T_MUX = 550.0, T_GATE = 417.0;

  logic clk = 0, rst_n = 0, rx = 1, tx, pad, alarm;
  logic [N-1:0] ahi, alo;
  int checks = 0, failures = 0;
  logic [7:0] replies [$];
  real scale [N];
  event apply_ev;
  int pad_edges = 0;

  always #20.833ns clk = ~clk;

  pro_top #(.CLKS_PER_BIT(CPB)) dut (
    .clk_i(clk), .rst_ni(rst_n), .uart_rx_i(rx), .uart_tx_o(tx), .pro_pad_o(pad),
    .alarm_o(alarm), .alarm_hi_o(ahi), .alarm_lo_o(alo));

  // Copy scale[] into the rings whenever apply_ev fires.
  for (genvar r = 0; r < ROWS; r++) begin : g_r
    for (genvar c = 0; c < COLS; c++) begin : g_c
      always @(apply_ev) dut.u_array.g_row[r].g_col[c].u_pro.u_ring.delay_scale = scale[r * COLS + c];
    end
  end

  always @(posedge pad) pad_edges++;

  // ---------------- host model ----------------
  task automatic put(input logic [7:0] b);
    @(posedge clk);
    rx = 0; repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rx = b[i]; repeat (CPB) @(posedge clk); end
    rx = 1; repeat (2 * CPB) @(posedge clk);
  endtask

  task automatic put32(input logic [7:0] c, input logic [31:0] v);
    put(c); put(v[31:24]); put(v[23:16]); put(v[15:8]); put(v[7:0]);
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
    while (replies.size() < n && t < 100000) begin @(posedge clk); t++; end
    v = '0;
    for (int i = 0; i < n && replies.size() > 0; i++) v = (v << 8) | 80'(replies.pop_front());
  endtask

  task automatic read_count(input logic [7:0] idx, output logic [31:0] v);
    logic [79:0] r;
    put(CMD_READ); put(idx);
    get(4, r);
    v = r[31:0];
  endtask

  task automatic set_scales();
    ->apply_ev;
    #1ps;
  endtask

  // One free window of WIN clocks with every ring on its fastest setting,
  // then the rings are switched off and all counts are read.
  task automatic measure(output logic [31:0] cnt [N], output logic [31:0] cref);
    put(CMD_CFG); put(IDX_ALL); put({2'b01, 6'h00});
    put(CMD_START);
    repeat (WIN) @(posedge clk);
    put(CMD_STOP);
    repeat (20) @(posedge clk);
    put(CMD_CFG); put(IDX_ALL); put(8'h00);
    read_count(IDX_ALL, cref);
    for (int k = 0; k < N; k++) read_count(8'(k), cnt[k]);
  endtask

  // Supply drop profile centred on (row rc, column cc), 10 % at the centre.
  function automatic real drop_scale(input int k, input real rc, input real cc);
    real dr, dc;
    dr = real'(k / COLS) - rc;
    dc = real'(k % COLS) - cc;
    return 1.0 + 0.10 / (1.0 + dr * dr + dc * dc);
  endfunction

  task automatic localise(input real rc, input real cc, input int row_a, input int row_b, input bit left);
    logic [31:0] c_off [N], c_on [N], r_off, r_on;
    real ratio [N], row_avg [ROWS], l_avg, r_avg, f_off, f_on, exp_ratio;
    int best;
    for (int k = 0; k < N; k++) scale[k] = 1.0;
    set_scales();
    measure(c_off, r_off);
    for (int k = 0; k < N; k++) scale[k] = drop_scale(k, rc, cc);
    set_scales();
    measure(c_on, r_on);
    for (int k = 0; k < N; k++) scale[k] = 1.0;
    set_scales();
    l_avg = 0.0; r_avg = 0.0;
    for (int r = 0; r < ROWS; r++) row_avg[r] = 0.0;
    for (int k = 0; k < N; k++) begin
      f_off = real'(c_off[k]) / real'(r_off);
      f_on  = real'(c_on[k]) / real'(r_on);
      ratio[k] = (f_off - f_on) / f_off;
      exp_ratio = 1.0 - 1.0 / drop_scale(k, rc, cc);
      checks++;
      if (ratio[k] > exp_ratio + 0.002 || ratio[k] < exp_ratio - 0.002) begin
        failures++; $display("FAIL sensor %0d: drop ratio %f expected %f", k, ratio[k], exp_ratio);
      end
      row_avg[k / COLS] += ratio[k] / real'(COLS);
      if (k % COLS < COLS / 2) l_avg += ratio[k] / real'(N / 2);
      else                     r_avg += ratio[k] / real'(N / 2);
    end
    best = 0;
    for (int r = 1; r < ROWS; r++) if (row_avg[r] > row_avg[best]) best = r;
    $display("drop centred at row %0.1f col %0.1f: worst row %0d (%f), left %f right %f",
             rc, cc, best, row_avg[best], l_avg, r_avg);
    checks++;
    if (best != row_a && best != row_b) begin failures++; $display("FAIL worst row %0d", best); end
    checks++;
    if (left ? !(l_avg > r_avg) : !(r_avg > l_avg)) begin failures++; $display("FAIL wrong half"); end
  endtask

  function automatic real f_ring(input int n);
    return 1.0e12 / (2.0 * (T_GATE + n * T_INV + 6.0 * T_MUX));
  endfunction

  initial begin
    #30ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [79:0] r;
    logic [N-1:0] exp_hi;
    int e0, e1, n_match, n_distinct;
    real f, seen [$];
    bit hit, known;
    for (int k = 0; k < N; k++) scale[k] = 1.0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (10) @(posedge clk);

    // 1. fault localisation at two places
    localise(1.5, 0.5, 1, 2, 1'b1);
    localise(6.5, 2.5, 6, 7, 1'b0);

    // 2. EM fault detection
    put32(CMD_INTERVAL, 32'(WIN));
    put32(CMD_TOL, 32'd64);
    put(CMD_CFG); put(IDX_ALL); put({2'b01, 6'h00});
    put(CMD_MON); put(8'h02);
    wait (dut.u_mon.capture_o);
    put(CMD_MON); put(8'h01);
    wait (dut.u_mon.run_o);
    exp_hi = '0;
    for (int k = 0; k <= 15; k++) begin scale[k] = 0.97; exp_hi[k] = 1'b1; end
    for (int k = 23; k <= 27; k++) begin scale[k] = 0.25; exp_hi[k] = 1'b1; end
    for (int k = 31; k <= 35; k++) begin scale[k] = 0.25; exp_hi[k] = 1'b1; end
    set_scales();
    #20us;
    for (int k = 23; k < N; k++) scale[k] = 1.0;
    set_scales();
    wait (dut.u_mon.eval_o);
    put(CMD_MON); put(8'h00);
    for (int k = 0; k < N; k++) scale[k] = 1.0;
    set_scales();
    put(CMD_CFG); put(IDX_ALL); put(8'h00);
    checks++;
    if (ahi != exp_hi || alo != '0) begin
      failures++; $display("FAIL EM alarms hi=%h lo=%h expected hi=%h", ahi, alo, exp_hi);
    end
    put(CMD_READ_ALARM);
    get(10, r);
    checks++;
    if (r[79:40] != 40'(exp_hi) || r[39:0] != 40'h0) begin
      failures++; $display("FAIL READ_ALARM %h", r);
    end
    put(CMD_CLR_ALARM);
    repeat (5) @(posedge clk);
    checks++;
    if (ahi != '0 || alarm) begin failures++; $display("FAIL alarms not cleared"); end

    // 3. hiding: PRO 9 in random mode on the pad
    put32(CMD_RAND_PER, 32'd1200);
    put(CMD_PAD); put(8'd9);
    put(CMD_CFG); put(8'd9); put({2'b11, 6'h00});
    n_match = 0;
    do @(posedge clk); while (!dut.u_prng.update_o);
    for (int p = 0; p < 24; p++) begin
      repeat (20) @(posedge clk);
      e0 = pad_edges;
      do @(posedge clk); while (!dut.u_prng.update_o);
      e1 = pad_edges;
      f = real'(e1 - e0) / (1180.0 / 24.0e6);
      hit = 1'b0;
      for (int n = 1; n <= 57; n += 4)
        if (f > f_ring(n) * 0.99 && f < f_ring(n) * 1.01) hit = 1'b1;
      checks++;
      if (!hit) begin failures++; $display("FAIL period %0d: pad at %f MHz", p, f / 1.0e6); end
      else n_match++;
      known = 1'b0;
      foreach (seen[i]) if (f > seen[i] * 0.99 && f < seen[i] * 1.01) known = 1'b1;
      if (!known) seen.push_back(f);
    end
    put(CMD_CFG); put(8'd9); put(8'h00);
    n_distinct = seen.size();
    $display("hiding: %0d of 24 periods at a ring frequency, %0d distinct frequencies", n_match, n_distinct);
    checks++;
    if (n_distinct < 6) begin failures++; $display("FAIL only %0d distinct frequencies", n_distinct); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
