// pro_ring: behavioural model of the Programmable Ring Oscillator loop. Not
// synthesizable: a ring oscillator is a combinational loop whose frequency
// is set by gate delays, and it is placed and routed by hand.
//
// Structure (published design): an enable gate combines EN with the fed-back
// ring output, one inverter follows, then the delay cells D0 D0 D1 D1 D2 D2
// of 4, 4, 8, 8, 16 and 16 inverters, each with its own SEL bit. The single
// inverter keeps the loop inversion odd, so the ring oscillates whenever
// en_i = 1. The ring output ro_o is taken after the last cell and drives the
// PRO counter. With all SEL bits 0 the loop holds 1 inverter (highest
// frequency, 123.44 MHz); with all 1 it holds 57 (lowest, 22 MHz). The 64
// SEL codes map onto 15 inverter counts {1, 5, ..., 57}.
//
// The enable gate is modelled as an AND of en_i and the feedback; while
// en_i = 0 the loop rests with ro_o = 1. T_GATE_PS covers the gate and the
// single inverter's fixed part; it is derived, with the cell delays, from
// the two published frequency limits. The variable delay_scale (1.0 by
// default) multiplies every delay of the ring and models its local supply;
// a testbench writes it hierarchically to model a voltage drop (> 1.0) or
// a disturbance that speeds the ring up (< 1.0).
module pro_ring #(
  parameter int unsigned N_CELLS             = 6,
  parameter int unsigned CELL_INV [N_CELLS]  = '{4, 4, 8, 8, 16, 16},
  parameter real         T_INV_PS            = 333.5,
  parameter real         T_MUX_PS            = 550.0,
  parameter real         T_GATE_PS           = 417.0
) (
  input  logic               en_i,
  input  logic [N_CELLS-1:0] sel_i,
  output logic               ro_o
);
  timeunit 1ns; timeprecision 1ps;

  real     delay_scale = 1.0;
  realtime t_head;
  logic [N_CELLS:0] node;   // node[0]: after the inverter, node[N_CELLS]: ring output

  // Enable gate and the single inverter, lumped into one delay.
  always_comb t_head = ((T_GATE_PS + T_INV_PS) * delay_scale) * 1ps;

  assign #(t_head) node[0] = ~(en_i & node[N_CELLS]);

  for (genvar c = 0; c < N_CELLS; c++) begin : g_cell
    pro_delay_cell #(
      .N_INV    (CELL_INV[c]),
      .T_INV_PS (T_INV_PS),
      .T_MUX_PS (T_MUX_PS)
    ) u_cell (
      .a_i   (node[c]),
      .sel_i (sel_i[c]),
      .scale_i (delay_scale),
      .y_o   (node[c+1])
    );
  end

  assign ro_o = node[N_CELLS];
endmodule
