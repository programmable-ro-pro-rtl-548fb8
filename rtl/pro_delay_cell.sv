// pro_delay_cell: behavioural model of one PRO delay cell. It is not
// synthesizable logic: a real cell is a chain of inverters and a 2:1
// multiplexer placed by hand, and its function lies in its propagation delay.
//
// The cell has two paths from a_i to y_o. The delay path is N_INV inverters
// in series (N_INV is even, so the path does not invert); the shorting path
// bypasses them. sel_i = 1 selects the delay path, sel_i = 0 the shorting
// path, as in the published design. Propagation delay:
//   sel_i = 1 : N_INV * T_INV_PS + T_MUX_PS
//   sel_i = 0 : T_MUX_PS
// The cell is lumped into one inertial delay whose value follows sel_i, so
// that a ring of cells simulates quickly (one event per cell per edge). T_INV_PS and T_MUX_PS default to values derived
// from the published 22 MHz / 123.44 MHz frequency range of the six-cell ring.
// scale_i multiplies both and stands for the cell's supply pin: 1.0 is the
// nominal supply, above 1.0 a voltage drop (slower cell), below 1.0 a
// disturbance that speeds the cell up.
module pro_delay_cell #(
  parameter int unsigned N_INV    = 4,
  parameter real         T_INV_PS = 333.5,
  parameter real         T_MUX_PS = 550.0
) (
  input  logic a_i,
  input  logic sel_i,
  input  real  scale_i,
  output logic y_o
);
  timeunit 1ns; timeprecision 1ps;

  realtime t_cell;

  // Delay path: N_INV inverters (an even number, so logically a buffer) and
  // the multiplexer. Shorting path: the multiplexer and its routing only.
  always_comb t_cell = ((sel_i ? real'(N_INV) * T_INV_PS : 0.0) + T_MUX_PS) * scale_i * 1ps;

  assign #(t_cell) y_o = a_i;
endmodule
