// tb_pro_top: end-to-end test of the PRO sensor network through its UART
// only, on a reduced 3 x 2 grid with a fast UART (8 clocks per bit). A host
// model sends commands and decodes replies. Sequence:
//  1. configure every PRO (broadcast and individual CFG),
//  2. free-running window (START ... STOP), read C_PRO and C_clk, and check
//     f_PRO = C_PRO / C_clk * f_clk for every sensor,
//  3. hiding mode: PRO 0 takes random SEL values every 200 cycles and drives
//     the pad; the pad's edge count per period must match one of the 15
//     ring frequencies and several different frequencies must appear,
//  4. characterisation window, then continuous monitoring with no fault:
//     no alarm,
//  5. a supply drop on sensor 3 (row 1, column 1) and a speed-up on sensor 4
//     (row 2, column 0) while monitoring: low alarm on 3, high alarm on 4,
//     read back through READ_ALARM, then cleared.
// Each mechanism is counted and a mechanism that never happened counts as a
// failure.
module tb_pro_top;
  timeunit 1ns; timeprecision 1ps;
  import pro_pkg::*;

  localparam int ROWS = 3, COLS = 2, N = ROWS * COLS, CPB = 8;
  localparam real T_INV = 333.5, T_MUX = 550.0, T_GATE = 417.0;

  logic clk = 0, rst_n = 0, rx = 1, tx, pad, alarm;
  logic [N-1:0] ahi, alo;
  int checks = 0, failures = 0;
  logic [7:0] replies [$];

  // mechanism counters
  int m_cfg = 0, m_free = 0, m_rand = 0, m_char = 0, m_eval = 0;
  int m_alarm_lo = 0, m_alarm_hi = 0, m_alarm_read = 0, m_alarm_clr = 0, m_pad = 0;

  always #20.833ns clk = ~clk;

  pro_top #(.ROWS(ROWS), .COLS(COLS), .CLKS_PER_BIT(CPB)) dut (
    .clk_i(clk), .rst_ni(rst_n), .uart_rx_i(rx), .uart_tx_o(tx), .pro_pad_o(pad),
    .alarm_o(alarm), .alarm_hi_o(ahi), .alarm_lo_o(alo));

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
    int t = 0;
    while (replies.size() < n && t < 100000) begin @(posedge clk); t++; end
    v = '0;
    for (int i = 0; i < n; i++) v = (v << 8) | 80'(replies.pop_front());
  endtask

  task automatic read_count(input logic [7:0] idx, output logic [31:0] v);
    logic [79:0] r;
    put(CMD_READ); put(idx);
    get(4, r);
    v = r[31:0];
  endtask

  function automatic real f_exp(input logic [5:0] s, input real scale);
    int n = 1;
    int cinv [6] = '{4, 4, 8, 8, 16, 16};
    for (int c = 0; c < 6; c++) if (s[c]) n += cinv[c];
    return 1.0e12 / (2.0 * scale * (T_GATE + n * T_INV + 6.0 * T_MUX));
  endfunction

  // observers
  always @(posedge clk) if (rst_n && dut.u_mon.eval_o) m_eval++;

  initial begin
    #40ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] c, cref;
    logic [79:0] r;
    logic [5:0]  sel_of [N];
    real expc;
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (10) @(posedge clk);

    // 1. configuration
    put(CMD_CFG); put(IDX_ALL); put(8'b0100_0000);               // all on, all short paths
    for (int k = 0; k < N; k++) sel_of[k] = 6'h00;
    put(CMD_CFG); put(8'd2); put({2'b01, 6'h3F}); sel_of[2] = 6'h3F;
    put(CMD_CFG); put(8'd5); put({2'b01, 6'h15}); sel_of[5] = 6'h15;
    m_cfg++;

    // 2. free-running window, about 100 us
    put(CMD_START);
    repeat (2400) @(posedge clk);
    put(CMD_STOP);
    repeat (20) @(posedge clk);
    read_count(IDX_ALL, cref);
    checks++;
    if (cref < 2400 || cref > 2400 + 30 * CPB) begin failures++; $display("FAIL C_clk %0d", cref); end
    for (int k = 0; k < N; k++) begin
      read_count(8'(k), c);
      expc = f_exp(sel_of[k], 1.0) * real'(cref) / 24.0e6;
      checks++;
      if (real'(c) > expc + 5.0 || real'(c) < expc - 5.0) begin
        failures++; $display("FAIL PRO %0d: C_PRO %0d, expected %f", k, c, expc);
      end
    end
    m_free++;

    // 3. hiding mode on PRO 0, pad driven by PRO 0
    put32(CMD_RAND_PER, 32'd200);
    put(CMD_PAD); put(8'd0);
    put(CMD_CFG); put(8'd0); put(8'b1100_0000);
    begin
      int edges, distinct, ok;
      bit seen [int];
      for (int p = 0; p < 12; p++) begin
        @(posedge dut.u_prng.update_o);
        repeat (3) @(posedge clk);
        edges = 0;
        fork
          begin repeat (190) @(posedge clk); end
          forever @(posedge pad) edges++;
        join_any
        disable fork;
        // pad edges in 190 clocks must match one of the 15 ring frequencies
        ok = 0;
        for (int n = 0; n < 15; n++) begin
          real e;
          e = 1.0e12 / (2.0 * (T_GATE + (1 + 4 * n) * T_INV + 6.0 * T_MUX)) * 190.0 / 24.0e6;
          if (real'(edges) <= e + 2.0 && real'(edges) >= e - 2.0) ok = 1;
        end
        checks++;
        if (!ok) begin failures++; $display("FAIL pad edges %0d match no ring frequency", edges); end
        seen[edges] = 1;
        m_rand++;
      end
      distinct = seen.num();
      checks++;
      if (distinct < 4) begin failures++; $display("FAIL only %0d distinct pad frequencies", distinct); end
    end
    // pad switches to PRO 2 (22 MHz)
    put(CMD_CFG); put(8'd0); put(8'b0100_0000);
    put(CMD_PAD); put(8'd2);
    begin
      int edges;
      edges = 0;
      fork
        begin repeat (240) @(posedge clk); end
        forever @(posedge pad) edges++;
      join_any
      disable fork;
      checks++;
      if (edges < 215 || edges > 225) begin failures++; $display("FAIL pad on PRO 2: %0d edges", edges); end
      else m_pad++;
    end

    // 4. characterise, then monitor without a fault
    put32(CMD_INTERVAL, 32'd1200);
    put32(CMD_TOL, 32'd40);
    put(CMD_MON); put(8'h02);
    wait (dut.u_mon.capture_o); m_char++;
    put(CMD_MON); put(8'h01);
    wait (m_eval >= 3);
    checks++;
    if (alarm) begin failures++; $display("FAIL alarm without a fault: hi=%b lo=%b", ahi, alo); end

    // 5. faults: supply drop on sensor 3, speed-up on sensor 4
    dut.u_array.g_row[1].g_col[1].u_pro.u_ring.delay_scale = 1.15;
    dut.u_array.g_row[2].g_col[0].u_pro.u_ring.delay_scale = 0.85;
    begin
      int e0;
      e0 = m_eval;
      wait (m_eval >= e0 + 2);
    end
    put(CMD_MON); put(8'h00);
    checks++;
    if (alo != 6'b001000) begin failures++; $display("FAIL low alarms %b", alo); end
    else m_alarm_lo++;
    checks++;
    if (ahi != 6'b010000) begin failures++; $display("FAIL high alarms %b", ahi); end
    else m_alarm_hi++;
    put(CMD_READ_ALARM);
    get(2, r);
    checks++;
    if (r[15:0] != {8'b0001_0000, 8'b0000_1000}) begin failures++; $display("FAIL READ_ALARM %h", r[15:0]); end
    else m_alarm_read++;
    dut.u_array.g_row[1].g_col[1].u_pro.u_ring.delay_scale = 1.0;
    dut.u_array.g_row[2].g_col[0].u_pro.u_ring.delay_scale = 1.0;
    put(CMD_CLR_ALARM);
    repeat (5) @(posedge clk);
    checks++;
    if (alarm) begin failures++; $display("FAIL alarm not cleared"); end
    else m_alarm_clr++;

    // every mechanism must have happened
    begin
      int m [10];
      string names [10];
      m = '{m_cfg, m_free, m_rand, m_char, m_eval, m_alarm_lo, m_alarm_hi, m_alarm_read, m_alarm_clr, m_pad};
      names = '{"config", "free window", "random SEL", "characterise", "timed eval",
                            "low alarm", "high alarm", "alarm read", "alarm clear", "pad select"};
      for (int i = 0; i < 10; i++) begin
        $display("mechanism %-13s happened %0d times", names[i], m[i]);
        checks++;
        if (m[i] == 0) begin failures++; $display("FAIL mechanism %s never happened", names[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
