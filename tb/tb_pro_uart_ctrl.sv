// tb_pro_uart_ctrl: feeds command bytes to the controller as the UART
// receiver would and checks every command: per-PRO and broadcast CFG,
// START / STOP / MON pulses and levels, the 32-bit registers and their
// reset values, PAD, and the READ / READ_ALARM replies byte by byte against
// values set up here. The transmitter is modelled as busy for 5 cycles per
// byte. Also checks that bad indices and unknown commands change nothing.
module tb_pro_uart_ctrl;
  timeunit 1ns; timeprecision 1ps;
  import pro_pkg::*;

  localparam int N = 36;
  logic clk = 0, rst_n = 0;
  logic [7:0] rxd, txd;
  logic rxv = 0, txv, txr;
  logic [31:0] counts [N];
  logic [31:0] refc;
  logic [N-1:0] ahi, alo;
  pro_cfg_t cfg [N];
  logic [31:0] interval, tol, rper;
  logic [7:0] pad;
  logic auto_m, start, stop, chr, aclr;
  int checks = 0, failures = 0;
  int n_start = 0, n_stop = 0, n_char = 0, n_aclr = 0;
  logic [7:0] replies [$];
  int busy = 0;

  always #20.833ns clk = ~clk;

  pro_uart_ctrl dut (.clk_i(clk), .rst_ni(rst_n), .rx_data_i(rxd), .rx_valid_i(rxv),
    .tx_data_o(txd), .tx_valid_o(txv), .tx_ready_i(txr), .count_i(counts), .ref_count_i(refc),
    .alarm_hi_i(ahi), .alarm_lo_i(alo), .cfg_o(cfg), .interval_o(interval), .tol_o(tol),
    .rand_period_o(rper), .pad_sel_o(pad), .auto_o(auto_m), .start_o(start), .stop_o(stop),
    .char_o(chr), .alarm_clr_o(aclr));

  // Transmitter model.
  assign txr = (busy == 0);
  always @(posedge clk) if (rst_n) begin
    if (txv && txr) begin replies.push_back(txd); busy <= 5; end
    else if (busy != 0) busy <= busy - 1;
    if (start) n_start++;
    if (stop)  n_stop++;
    if (chr)   n_char++;
    if (aclr)  n_aclr++;
  end

  task automatic put(input logic [7:0] b);
    @(negedge clk); rxd = b; rxv = 1;
    @(negedge clk); rxv = 0;
    repeat (3) @(negedge clk);
  endtask

  task automatic put32(input logic [7:0] c, input logic [31:0] v);
    put(c); put(v[31:24]); put(v[23:16]); put(v[15:8]); put(v[7:0]);
  endtask

  task automatic expect_eq(input logic [63:0] got, input logic [63:0] e, input string what);
    checks++;
    if (got != e) begin failures++; $display("FAIL %s: %h expected %h", what, got, e); end
  endtask

  task automatic wait_replies(input int n);
    int t = 0;
    while (replies.size() < n && t < 1000) begin @(negedge clk); t++; end
    repeat (10) @(negedge clk);
    expect_eq(replies.size(), n, "reply length");
  endtask

  initial begin
    #2ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v;
    for (int k = 0; k < N; k++) counts[k] = 32'(k * 1000 + 7);
    refc = 32'hDEAD_BEEF;
    ahi = 36'h8_0000_0021; alo = 36'h0_1234_5600;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    expect_eq(interval, 24000, "reset interval");
    expect_eq(rper, 48000, "reset rand period");
    expect_eq(tol, 1024, "reset tol");
    expect_eq(cfg[5], 0, "reset cfg");
    // CFG one PRO, then broadcast, then a bad index.
    put(CMD_CFG); put(8'd5); put(8'b0110_1011);
    expect_eq(cfg[5], 8'b0110_1011, "cfg[5]");
    expect_eq(cfg[4], 0, "cfg[4] untouched");
    put(CMD_CFG); put(8'hFF); put(8'b1100_0001);
    for (int k = 0; k < N; k += 7) expect_eq(cfg[k], 8'b1100_0001, $sformatf("broadcast cfg[%0d]", k));
    put(CMD_CFG); put(8'd36); put(8'h00);
    expect_eq(cfg[35], 8'b1100_0001, "bad index ignored");
    // Unknown command byte is skipped; the next command still works.
    put(8'h7E);
    put32(CMD_INTERVAL, 32'h0001_2345); expect_eq(interval, 32'h0001_2345, "interval");
    put32(CMD_TOL, 32'd77);            expect_eq(tol, 77, "tol");
    put32(CMD_RAND_PER, 32'd1000);     expect_eq(rper, 1000, "rand period");
    put(CMD_PAD); put(8'd17);          expect_eq(pad, 17, "pad");
    put(CMD_PAD); put(8'd200);         expect_eq(pad, 17, "bad pad ignored");
    put(CMD_START); put(CMD_STOP); put(CMD_CLR_ALARM);
    put(CMD_MON); put(8'h03);
    expect_eq(auto_m, 1, "auto on");
    put(CMD_MON); put(8'h00);
    expect_eq(auto_m, 0, "auto off");
    expect_eq(n_start, 1, "start pulses"); expect_eq(n_stop, 1, "stop pulses");
    expect_eq(n_char, 1, "char pulses");   expect_eq(n_aclr, 1, "clear pulses");
    // Reads.
    replies.delete();
    put(CMD_READ); put(8'd23);
    wait_replies(4);
    v = {replies[0], replies[1], replies[2], replies[3]};
    expect_eq(v, 23 * 1000 + 7, "read PRO 23");
    replies.delete();
    put(CMD_READ); put(8'hFF);
    wait_replies(4);
    v = {replies[0], replies[1], replies[2], replies[3]};
    expect_eq(v, 32'hDEAD_BEEF, "read reference");
    replies.delete();
    put(CMD_READ_ALARM);
    wait_replies(10);
    expect_eq({replies[0], replies[1], replies[2], replies[3], replies[4]}, 40'h08_0000_0021, "alarm hi");
    expect_eq({replies[5], replies[6], replies[7], replies[8], replies[9]}, 40'h00_1234_5600, "alarm lo");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
