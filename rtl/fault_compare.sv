// fault_compare: the "compare" stage of the PRO network. At the end of each
// monitoring interval it checks every PRO count against that PRO's normal
// range and raises an alarm for each count outside it.
//
// Per the published detection principle, a PRO count grows linearly within
// a narrow band during the interval; a pulse fault (EM pulse) pushes the
// count above the band, continuous stress (voltage starving) leaves it
// below. Because process variation differs per sensor, the band is learned
// per PRO: on capture_i each count is stored as that PRO's baseline, and on
// eval_i each count is compared with [baseline - tol_i, baseline + tol_i].
// alarm_hi_o / alarm_lo_o are sticky (set on eval, cleared by clear_i) and
// name the sensor, hence the location. A PRO that has not been
// characterised (no capture since reset) never alarms. Results appear one
// cycle after eval_i; capture_i and eval_i in the same cycle capture only.
// The baseline-plus-tolerance form of the normal range is this
// implementation's choice; the published design leaves the
// characterisation procedure open.
module fault_compare
  import pro_pkg::*;
#(
  parameter int unsigned N = 36,
  parameter int unsigned W = COUNT_W
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic [W-1:0] count_i [N],
  input  logic         capture_i,
  input  logic         eval_i,
  input  logic         clear_i,
  input  logic [W-1:0] tol_i,
  output logic [N-1:0] alarm_hi_o,
  output logic [N-1:0] alarm_lo_o,
  output logic         alarm_o
);
  timeunit 1ns; timeprecision 1ps;

  logic [W-1:0] base_q [N];
  logic [N-1:0] valid_q;
  logic [N-1:0] above, below;

  always_comb begin
    for (int k = 0; k < N; k++) begin
      // Widen by one bit so that base +/- tol cannot wrap.
      above[k] = valid_q[k] && ({1'b0, count_i[k]} > {1'b0, base_q[k]} + {1'b0, tol_i});
      below[k] = valid_q[k] && ({1'b0, count_i[k]} + {1'b0, tol_i} < {1'b0, base_q[k]});
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int k = 0; k < N; k++) base_q[k] <= '0;
      valid_q    <= '0;
      alarm_hi_o <= '0;
      alarm_lo_o <= '0;
    end else if (capture_i) begin
      for (int k = 0; k < N; k++) base_q[k] <= count_i[k];
      valid_q <= '1;
    end else if (clear_i) begin
      alarm_hi_o <= '0;
      alarm_lo_o <= '0;
    end else if (eval_i) begin
      alarm_hi_o <= alarm_hi_o | above;
      alarm_lo_o <= alarm_lo_o | below;
    end
  end

  assign alarm_o = |{alarm_hi_o, alarm_lo_o};
endmodule
