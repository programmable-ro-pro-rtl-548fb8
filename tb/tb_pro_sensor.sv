// tb_pro_sensor: runs one complete PRO (ring model plus counter) over
// measurement windows of 2400 system clock cycles (100 us at 24 MHz) and
// checks that C_PRO / C_clk * f_clk matches the ring frequency expected for
// the SEL code, f = 1 / (2 * (T_GATE + n * T_INV + 6 * T_MUX)), within the
// few counts the start/stop synchroniser costs. Checks the two published
// frequency limits, a middle code, that EN = 0 gives a zero count, and that
// a 20 % slower supply shows as a 1/1.2 lower count (power sensing).
module tb_pro_sensor;
  timeunit 1ns; timeprecision 1ps;

  localparam real T_INV = 333.5, T_MUX = 550.0, T_GATE = 417.0;
  localparam int  WIN = 2400;
  localparam real F_CLK = 24.0e6;

  logic clk = 0, rst_n = 0, en = 0, clr = 0, run = 0, ro;
  logic [5:0] sel = '0;
  logic [31:0] count;
  int checks = 0, failures = 0;

  always #20.833ns clk = ~clk;

  pro_sensor dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .sel_i(sel), .clr_i(clr),
                  .run_i(run), .count_o(count), .ro_o(ro));

  function automatic real f_exp(input logic [5:0] s, input real scale);
    int n = 1;
    int cinv [6] = '{4, 4, 8, 8, 16, 16};
    for (int c = 0; c < 6; c++) if (s[c]) n += cinv[c];
    return 1.0e12 / (2.0 * scale * (T_GATE + n * T_INV + 6.0 * T_MUX));
  endfunction

  task automatic measure(input logic [5:0] s, input logic e, input real scale);
    real expc;
    sel = s; en = e; dut.u_ring.delay_scale = scale;
    repeat (5) @(negedge clk);
    clr = 1; repeat (3) @(negedge clk); clr = 0;
    repeat (2) @(negedge clk);
    run = 1; repeat (WIN) @(negedge clk); run = 0;
    repeat (10) @(negedge clk);
    expc = e ? f_exp(s, scale) * WIN / F_CLK : 0.0;
    checks++;
    if (real'(count) > expc + 4.0 || real'(count) < expc - 4.0) begin
      failures++; $display("FAIL sel=%02h en=%0b scale=%f count %0d expected %f", s, e, scale, count, expc);
    end
  endtask

  initial begin
    #20ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    measure(6'h00, 1'b1, 1.0);   // 123.44 MHz
    measure(6'h3F, 1'b1, 1.0);   // 22 MHz
    measure(6'h2A, 1'b1, 1.0);
    measure(6'h2A, 1'b0, 1.0);   // disabled
    measure(6'h00, 1'b1, 1.2);   // supply drop
    // Frequency computed as the published f_PRO = C_PRO / C_clk * f_clk.
    measure(6'h00, 1'b1, 1.0);
    checks++;
    if ((real'(count) / WIN * 24.0) < 123.0 || (real'(count) / WIN * 24.0) > 123.9) begin
      failures++; $display("FAIL f_PRO %f MHz", real'(count) / WIN * 24.0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
