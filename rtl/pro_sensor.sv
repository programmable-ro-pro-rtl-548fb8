// pro_sensor: one Programmable Ring Oscillator sensor, the ring and its
// counter as drawn in the published design.
//
// en_i starts and stops the oscillation, sel_i picks the delay path (1) or
// the shorting path (0) of each of the six delay cells, clr_i / run_i reset
// and gate the counter, and count_o is the counter value in the clk_i
// domain (see pro_counter for the crossing). ro_o is the raw ring output,
// used to drive an output pad for the side-channel hiding mode. The ring is
// a behavioural model (pro_ring); the counter is synthesizable.
module pro_sensor
  import pro_pkg::*;
#(
  parameter int unsigned W = COUNT_W
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             en_i,
  input  logic [SEL_W-1:0] sel_i,
  input  logic             clr_i,
  input  logic             run_i,
  output logic [W-1:0]     count_o,
  output logic             ro_o
);
  timeunit 1ns; timeprecision 1ps;

  pro_ring u_ring (
    .en_i  (en_i),
    .sel_i (sel_i),
    .ro_o  (ro_o)
  );

  pro_counter #(.W(W)) u_counter (
    .clk_i    (clk_i),
    .rst_ni   (rst_ni),
    .ro_clk_i (ro_o),
    .clr_i    (clr_i),
    .run_i    (run_i),
    .count_o  (count_o)
  );
endmodule
