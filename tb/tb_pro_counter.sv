// tb_pro_counter: checks the ring-clocked counter and its crossing into the
// system clock domain. A test clock stands in for the ring (once faster and
// once slower than the 24 MHz system clock). Expected counts come from the
// window length and the test clock period; the start/stop synchroniser
// allows a few counts of slack. Also checks clear, hold after stop, and
// that values sampled while counting only ever grow by small steps (the
// Gray-code crossing never shows a torn value).
module tb_pro_counter;
  timeunit 1ns; timeprecision 1ps;

  logic clk = 0, rst_n = 0, ro = 0, clr = 0, run = 0;
  logic [31:0] count;
  realtime ro_half = 5ns;
  int checks = 0, failures = 0;

  always #20.833ns clk = ~clk;
  always #(ro_half) ro = ~ro;

  pro_counter dut (.clk_i(clk), .rst_ni(rst_n), .ro_clk_i(ro), .clr_i(clr),
                   .run_i(run), .count_o(count));

  task automatic window(input realtime half, input int cycles);
    longint expv;
    logic [31:0] prev, held;
    int bad_steps = 0;
    ro_half = half;
    @(posedge clk); clr <= 1; repeat (3) @(posedge clk); clr <= 0;
    repeat (3) @(posedge clk);
    checks++;
    if (count != 0) begin failures++; $display("FAIL count %0d after clear", count); end
    run <= 1;
    prev = 0;
    repeat (cycles) begin
      @(posedge clk);
      if (count < prev || count - prev > 32'(int'(41.667ns / (2 * half)) + 2)) bad_steps++;
      prev = count;
    end
    run <= 0;
    repeat (10) @(posedge clk);
    expv = longint'((cycles * 41.6667ns) / (2 * half));
    checks++;
    if (bad_steps != 0) begin failures++; $display("FAIL %0d torn/oversized steps while counting", bad_steps); end
    checks++;
    if (longint'(count) > expv + 4 || longint'(count) < expv - 4) begin
      failures++; $display("FAIL half=%0t count %0d expected about %0d", half, count, expv);
    end
    held = count;
    repeat (50) @(posedge clk);
    checks++;
    if (count != held) begin failures++; $display("FAIL count moved after stop"); end
  endtask

  initial begin
    #2ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    window(4.05ns, 2000);    // ~123 MHz ring
    window(22.7ns, 2000);    // ~22 MHz ring, slower than the system clock
    window(10ns, 500);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
