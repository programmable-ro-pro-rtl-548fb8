// tb_monitor_fsm: checks the measurement-window controller against a
// reference counter modelled in the testbench. Checks: a timed window keeps
// run high for exactly interval cycles and ends with one eval pulse; a
// characterisation window ends with one capture pulse and no eval; auto mode
// repeats windows back to back, each preceded by a clear; a free-running
// window runs until stop and is not evaluated; stop aborts a timed window
// without evaluation.
module tb_monitor_fsm;
  timeunit 1ns; timeprecision 1ps;

  logic clk = 0, rst_n = 0;
  logic start = 0, stop = 0, auto_m = 0, chr = 0;
  logic [31:0] interval, refc;
  logic clr, run, ev, cap, busy;
  int checks = 0, failures = 0;
  int run_len, n_eval, n_cap, n_clr_edges;

  always #20.833ns clk = ~clk;

  monitor_fsm dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .stop_i(stop), .auto_i(auto_m),
    .char_i(chr), .interval_i(interval), .ref_count_i(refc), .clr_o(clr), .run_o(run),
    .eval_o(ev), .capture_o(cap), .busy_o(busy));

  // Reference counter model.
  always_ff @(posedge clk)
    if (clr) refc <= 0; else if (run) refc <= refc + 1;

  // Observers.
  logic clr_d;
  always_ff @(posedge clk) begin
    clr_d <= clr;
    if (run) run_len <= run_len + 1;
    if (ev)  n_eval  <= n_eval + 1;
    if (cap) n_cap   <= n_cap + 1;
    if (clr && !clr_d) n_clr_edges <= n_clr_edges + 1;
  end

  task automatic reset_obs;
    @(negedge clk); run_len = 0; n_eval = 0; n_cap = 0; n_clr_edges = 0;
  endtask

  task automatic pulse(ref logic s);
    @(negedge clk); s = 1; @(negedge clk); s = 0;
  endtask

  task automatic expect_eq(input int got, input int e, input string what);
    checks++;
    if (got != e) begin failures++; $display("FAIL %s: %0d expected %0d", what, got, e); end
  endtask

  task automatic wait_idle;
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  initial begin
    #5ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    interval = 100; refc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Characterisation window.
    reset_obs; pulse(chr); wait_idle;
    expect_eq(run_len, 100, "char window length");
    expect_eq(refc, 100, "reference count at end");
    expect_eq(n_cap, 1, "capture pulses"); expect_eq(n_eval, 0, "eval pulses in char");
    // Auto mode: three windows.
    reset_obs; interval = 57;
    @(negedge clk); auto_m = 1;
    while (n_eval < 3) @(negedge clk);
    // The fourth window has already begun; dropping auto lets it finish.
    auto_m = 0; wait_idle;
    expect_eq(n_eval, 4, "auto windows evaluated");
    expect_eq(run_len, 4 * 57, "auto run cycles");
    expect_eq(n_clr_edges, 4, "clears before each window");
    expect_eq(n_cap, 0, "no capture in auto");
    // Free-running window.
    reset_obs; pulse(start);
    repeat (500) @(negedge clk);
    pulse(stop); wait_idle;
    checks++;
    if (run_len < 495 || run_len > 500) begin failures++; $display("FAIL free window %0d", run_len); end
    expect_eq(n_eval, 0, "free window not evaluated");
    expect_eq(refc, run_len, "reference equals run length");
    // Abort a timed window.
    reset_obs; interval = 1000;
    @(negedge clk); auto_m = 1;
    repeat (200) @(negedge clk);
    auto_m = 0; pulse(stop); wait_idle;
    expect_eq(n_eval, 0, "aborted window not evaluated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
