// tb_fault_compare: checks the per-PRO normal-range comparison. Baselines
// are captured from one set of counts; later counts inside, above and below
// baseline +/- tolerance must set no alarm, a high alarm and a low alarm on
// exactly the right sensors. Also checks that alarms are sticky, that clear
// resets them, that nothing alarms before a capture, and the edges of the
// range (baseline +/- tol is still normal).
module tb_fault_compare;
  timeunit 1ns; timeprecision 1ps;

  localparam int N = 6;
  logic clk = 0, rst_n = 0, cap = 0, ev = 0, clr = 0;
  logic [31:0] cnt [N];
  logic [31:0] tol;
  logic [N-1:0] hi, lo;
  logic any;
  int checks = 0, failures = 0;

  always #20.833ns clk = ~clk;

  fault_compare #(.N(N)) dut (.clk_i(clk), .rst_ni(rst_n), .count_i(cnt), .capture_i(cap),
    .eval_i(ev), .clear_i(clr), .tol_i(tol), .alarm_hi_o(hi), .alarm_lo_o(lo), .alarm_o(any));

  task automatic pulse(ref logic s);
    @(negedge clk); s = 1; @(negedge clk); s = 0;
  endtask

  task automatic expect_alarms(input logic [N-1:0] eh, input logic [N-1:0] el, input string what);
    checks++;
    if (hi != eh || lo != el || any != (|{eh, el})) begin
      failures++; $display("FAIL %s: hi=%b lo=%b expected hi=%b lo=%b", what, hi, lo, eh, el);
    end
  endtask

  initial begin
    #1ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tol = 100;
    for (int k = 0; k < N; k++) cnt[k] = 32'(10000 + 1000 * k);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Before characterisation: a wild value raises nothing.
    cnt[0] = 32'hFFFF_FFFF;
    pulse(ev); expect_alarms('0, '0, "uncharacterised");
    cnt[0] = 10000;
    pulse(cap); expect_alarms('0, '0, "capture");
    // Same counts and range edges: normal.
    cnt[1] = 11000 + 100; cnt[2] = 12000 - 100;
    pulse(ev); expect_alarms('0, '0, "edges of range");
    // One above, one below.
    cnt[3] = 13000 + 101;       // EM pulse: count jumps up
    cnt[4] = 14000 - 101;       // voltage starving: count falls
    pulse(ev); expect_alarms(6'b001000, 6'b010000, "one high one low");
    // Back to normal: alarms are sticky.
    cnt[3] = 13000; cnt[4] = 14000;
    pulse(ev); expect_alarms(6'b001000, 6'b010000, "sticky");
    pulse(clr); expect_alarms('0, '0, "cleared");
    // Huge faulty count on sensor 5 (overflowed / corrupted counter).
    cnt[5] = 32'hF000_0000;
    pulse(ev); expect_alarms(6'b100000, '0, "huge count");
    // Counts near zero against a small baseline must not wrap.
    pulse(clr);
    for (int k = 0; k < N; k++) cnt[k] = 32'(k * 10);
    pulse(cap);
    cnt[0] = 0; cnt[5] = 0;
    pulse(ev); expect_alarms('0, '0, "small values, no wrap");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
