// tb_pro_array: runs the full 9 x 4 grid with a different SEL code on every
// sensor and a local supply drop on one sensor (row 2, column 1), then
// checks each of the 36 counts against the frequency expected for its code
// and supply. This checks the row/column wiring: each count must belong to
// the sensor at its index.
module tb_pro_array;
  timeunit 1ns; timeprecision 1ps;
  import pro_pkg::*;

  localparam real T_INV = 333.5, T_MUX = 550.0, T_GATE = 417.0;
  localparam int  WIN = 1200, N = 36;

  logic clk = 0, rst_n = 0, clr = 0, run = 0;
  logic [N-1:0] en;
  logic [5:0] sel [N];
  logic [31:0] count [N];
  logic [N-1:0] ro;
  int checks = 0, failures = 0;

  always #20.833ns clk = ~clk;

  pro_array dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .sel_i(sel), .clr_i(clr),
                 .run_i(run), .count_o(count), .ro_o(ro));

  function automatic real f_exp(input logic [5:0] s, input real scale);
    int n = 1;
    int cinv [6] = '{4, 4, 8, 8, 16, 16};
    for (int c = 0; c < 6; c++) if (s[c]) n += cinv[c];
    return 1.0e12 / (2.0 * scale * (T_GATE + n * T_INV + 6.0 * T_MUX));
  endfunction

  initial begin
    #20ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real expc, scale;
    for (int k = 0; k < N; k++) begin
      sel[k] = 6'((k * 7) % 64);
      en[k]  = (k != 30);          // sensor 30 stays off
    end
    dut.g_row[2].g_col[1].u_pro.u_ring.delay_scale = 1.3;   // sensor 9
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    clr = 1; repeat (3) @(negedge clk); clr = 0;
    repeat (2) @(negedge clk);
    run = 1; repeat (WIN) @(negedge clk); run = 0;
    repeat (10) @(negedge clk);
    for (int k = 0; k < N; k++) begin
      scale = (k == 9) ? 1.3 : 1.0;
      expc  = en[k] ? f_exp(sel[k], scale) * WIN / 24.0e6 : 0.0;
      checks++;
      if (real'(count[k]) > expc + 4.0 || real'(count[k]) < expc - 4.0) begin
        failures++; $display("FAIL sensor %0d count %0d expected %f", k, count[k], expc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
