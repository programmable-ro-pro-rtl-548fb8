// ref_counter: the reference counter C_clk of the published design. It
// counts system clock cycles over the same window as the PRO counters, so
// that a PRO frequency follows as f_PRO = C_PRO / C_clk * f_clk.
//
// clr_i clears it synchronously (clear wins over run), run_i lets it count
// one per clk_i cycle. It saturates at all ones instead of wrapping, so an
// over-long window cannot alias to a short one. Both controls come from the
// same register as the PRO counters' controls; the PRO counters start two or
// three ring periods later (their synchroniser), a fixed offset of a few
// counts that a calibration absorbs. Width and saturation are this
// implementation's choices.
module ref_counter
  import pro_pkg::*;
#(
  parameter int unsigned W = COUNT_W
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         clr_i,
  input  logic         run_i,
  output logic [W-1:0] count_o
);
  timeunit 1ns; timeprecision 1ps;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                  count_o <= '0;
    else if (clr_i)               count_o <= '0;
    else if (run_i && !(&count_o)) count_o <= count_o + 1'b1;
  end
endmodule
