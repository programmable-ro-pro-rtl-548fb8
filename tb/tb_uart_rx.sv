// tb_uart_rx: bit-bangs 8N1 frames into the receiver at 16 clocks per bit
// and checks every received byte, the one-cycle valid pulse, its latency
// (about 9.5 bit times after the start edge), that a frame with a broken
// stop bit is dropped and that a short low glitch is not taken as a start.
module tb_uart_rx;
  timeunit 1ns; timeprecision 1ps;

  localparam int CPB = 16;
  logic clk = 0, rst_n = 0, rx = 1;
  logic [7:0] data;
  logic valid;
  int checks = 0, failures = 0;
  int n_valid = 0;
  logic [7:0] got [$];

  always #20.833ns clk = ~clk;

  uart_rx #(.CLKS_PER_BIT(CPB)) dut (.clk_i(clk), .rst_ni(rst_n), .rx_i(rx), .data_o(data), .valid_o(valid));

  always @(posedge clk) if (rst_n && valid) begin n_valid++; got.push_back(data); end

  task automatic send(input logic [7:0] b, input logic stop_bit);
    rx = 0; repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rx = b[i]; repeat (CPB) @(posedge clk); end
    rx = stop_bit; repeat (CPB) @(posedge clk);
    rx = 1; repeat (2 * CPB) @(posedge clk);
  endtask

  initial begin
    #2ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat;
    logic [7:0] pattern [6] = '{8'h00, 8'hFF, 8'hA5, 8'h5A, 8'h01, 8'h80};
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    foreach (pattern[i]) send(pattern[i], 1'b1);
    checks++;
    if (got.size() != 6) begin failures++; $display("FAIL %0d bytes received", got.size()); end
    foreach (pattern[i]) begin
      checks++;
      if (i < got.size() && got[i] != pattern[i]) begin
        failures++; $display("FAIL byte %0d: %02h expected %02h", i, got[i], pattern[i]);
      end
    end
    // Latency of valid after the start edge.
    fork
      send(8'h3C, 1'b1);
      begin
        lat = 0;
        while (!valid) begin @(posedge clk); lat++; end
      end
    join
    checks++;
    if (lat < 9 * CPB + CPB / 2 || lat > 9 * CPB + CPB / 2 + 4) begin
      failures++; $display("FAIL latency %0d cycles", lat);
    end
    // Framing error is dropped.
    got.delete();
    send(8'h77, 1'b0);
    repeat (4 * CPB) @(posedge clk);
    checks++;
    if (got.size() != 0) begin failures++; $display("FAIL byte with bad stop bit accepted"); end
    // Glitch shorter than half a bit.
    rx = 0; repeat (3) @(posedge clk); rx = 1;
    repeat (20 * CPB) @(posedge clk);
    checks++;
    if (got.size() != 0) begin failures++; $display("FAIL glitch taken as a byte"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
