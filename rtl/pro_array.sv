// pro_array: the grid of PRO sensors spread evenly over the protected
// module, 9 rows of 4 sensors (36 PROs) as in the published prototype.
//
// Sensor k sits at row k / COLS, column k % COLS; its alarm bit and its
// counter therefore tell where on the chip a power anomaly happened. Every
// sensor has its own EN and SEL; all counters share one clear and one run
// control so that they measure over the same window as the reference
// counter. The array adds no logic of its own beyond the grid wiring.
module pro_array
  import pro_pkg::*;
#(
  parameter int unsigned ROWS = 9,
  parameter int unsigned COLS = 4,
  localparam int unsigned N   = ROWS * COLS,
  parameter int unsigned W    = COUNT_W
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic [N-1:0]     en_i,
  input  logic [SEL_W-1:0] sel_i   [N],
  input  logic             clr_i,
  input  logic             run_i,
  output logic [W-1:0]     count_o [N],
  output logic [N-1:0]     ro_o
);
  timeunit 1ns; timeprecision 1ps;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int unsigned K = r * COLS + c;
      pro_sensor #(.W(W)) u_pro (
        .clk_i   (clk_i),
        .rst_ni  (rst_ni),
        .en_i    (en_i[K]),
        .sel_i   (sel_i[K]),
        .clr_i   (clr_i),
        .run_i   (run_i),
        .count_o (count_o[K]),
        .ro_o    (ro_o[K])
      );
    end
  end
endmodule
