// tb_ref_counter: checks that the reference counter counts one per clock
// while run is high, holds while low, clears, and saturates at all ones
// (checked at an 8-bit width).
module tb_ref_counter;
  timeunit 1ns; timeprecision 1ps;

  logic clk = 0, rst_n = 0, clr = 0, run = 0;
  logic [31:0] c32;
  logic [7:0]  c8;
  int checks = 0, failures = 0;

  always #20.833ns clk = ~clk;

  ref_counter           dut   (.clk_i(clk), .rst_ni(rst_n), .clr_i(clr), .run_i(run), .count_o(c32));
  ref_counter #(.W(8))  dut8  (.clk_i(clk), .rst_ni(rst_n), .clr_i(clr), .run_i(run), .count_o(c8));

  task automatic expect32(input logic [31:0] e, input string what);
    checks++;
    if (c32 != e) begin failures++; $display("FAIL %s: %0d expected %0d", what, c32, e); end
  endtask

  initial begin
    #1ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); expect32(0, "after reset");
    run = 1; repeat (100) @(negedge clk); run = 0;
    expect32(100, "100 cycles");
    repeat (20) @(negedge clk); expect32(100, "hold");
    run = 1; repeat (250) @(negedge clk); run = 0;
    expect32(350, "350 cycles");
    checks++;
    if (c8 != 8'hFF) begin failures++; $display("FAIL 8-bit counter did not saturate: %0d", c8); end
    clr = 1; @(negedge clk); clr = 0;
    expect32(0, "clear");
    run = 1; clr = 1; @(negedge clk); clr = 0; run = 0;
    expect32(0, "clear beats run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
