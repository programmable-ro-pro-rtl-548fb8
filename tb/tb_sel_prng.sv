// tb_sel_prng: checks that a new SEL value appears exactly every period_i
// cycles, that the value equals the top six bits of a reference model of
// the LFSR (x^32 + x^22 + x^2 + x + 1, Galois form) at that cycle, and that
// the values spread over many of the 64 codes.
module tb_sel_prng;
  timeunit 1ns; timeprecision 1ps;

  logic clk = 0, rst_n = 0;
  logic [31:0] period;
  logic [5:0]  sel;
  logic        upd;
  logic [31:0] model;
  int checks = 0, failures = 0;
  int since, n_upd;
  bit seen [int];

  always #20.833ns clk = ~clk;

  sel_prng dut (.clk_i(clk), .rst_ni(rst_n), .period_i(period), .sel_o(sel), .update_o(upd));

  // Reference LFSR, stepping with the DUT from reset.
  logic [31:0] model_prev;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin model <= 32'hACE1_2468; model_prev <= 32'hACE1_2468; end
    else begin
      model_prev <= model;
      model <= model[0] ? ((model >> 1) ^ 32'h8020_0003) : (model >> 1);
    end

  initial begin
    #5ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    period = 13;
    repeat (3) @(posedge clk);
    rst_n = 1;
    since = 0; n_upd = 0;
    repeat (13 * 200) begin
      @(negedge clk);
      since++;
      if (upd) begin
        n_upd++;
        // sel was latched from the LFSR state of the previous cycle
        checks++;
        if (sel != model_prev[31 -: 6] && n_upd > 0) begin
          failures++; $display("FAIL sel %02h expected %02h", sel, model_prev[31 -: 6]);
        end
        if (n_upd > 1) begin
          checks++;
          if (since != 13) begin failures++; $display("FAIL update spacing %0d", since); end
        end
        since = 0;
        seen[int'(sel)] = 1;
      end
    end
    checks++;
    if (n_upd < 199) begin failures++; $display("FAIL only %0d updates", n_upd); end
    checks++;
    if (seen.num() < 40) begin failures++; $display("FAIL only %0d distinct SEL codes", seen.num()); end
    // Paper period: 48,000 cycles (2 ms at 24 MHz).
    period = 48000;
    @(posedge upd); @(negedge clk); since = 0;
    do begin @(negedge clk); since++; end while (!upd);
    checks++;
    if (since != 48000) begin failures++; $display("FAIL 2 ms period gave %0d cycles", since); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
