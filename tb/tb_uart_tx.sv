// tb_uart_tx: samples the transmitter's line in the middle of each bit and
// checks start bit, data bits (LSB first), stop bit, the bit time of 16
// clocks, that ready is low for exactly ten bit times per byte and that
// back-to-back bytes all arrive in order.
module tb_uart_tx;
  timeunit 1ns; timeprecision 1ps;

  localparam int CPB = 16;
  logic clk = 0, rst_n = 0, valid = 0, ready, tx;
  logic [7:0] data;
  int checks = 0, failures = 0;
  logic [7:0] got [$];

  always #20.833ns clk = ~clk;

  uart_tx #(.CLKS_PER_BIT(CPB)) dut (.clk_i(clk), .rst_ni(rst_n), .data_i(data), .valid_i(valid),
                                     .ready_o(ready), .tx_o(tx));

  // Line decoder: wait for a falling edge, sample at bit centres.
  initial begin
    logic [7:0] b;
    forever begin
      @(negedge tx);
      repeat (CPB / 2) @(posedge clk);
      checks++;
      if (tx !== 1'b0) begin failures++; $display("FAIL start bit"); end
      for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge clk); b[i] = tx; end
      repeat (CPB) @(posedge clk);
      checks++;
      if (tx !== 1'b1) begin failures++; $display("FAIL stop bit"); end
      got.push_back(b);
    end
  end

  initial begin
    #2ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] pattern [5] = '{8'hC3, 8'h00, 8'hFF, 8'h96, 8'h21};
    int busy;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    checks++;
    if (tx !== 1'b1 || ready !== 1'b1) begin failures++; $display("FAIL idle state"); end
    foreach (pattern[i]) begin
      @(negedge clk);
      while (!ready) @(negedge clk);
      data = pattern[i]; valid = 1;
      @(negedge clk); valid = 0;
      busy = 0;   // cycles after the accepting edge
      while (!ready) begin @(negedge clk); busy++; end
      checks++;
      if (busy != 10 * CPB) begin failures++; $display("FAIL byte took %0d cycles", busy); end
    end
    repeat (3 * CPB) @(posedge clk);
    checks++;
    if (got.size() != 5) begin failures++; $display("FAIL %0d bytes decoded", got.size()); end
    foreach (pattern[i]) begin
      checks++;
      if (i < got.size() && got[i] != pattern[i]) begin
        failures++; $display("FAIL byte %0d %02h expected %02h", i, got[i], pattern[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
