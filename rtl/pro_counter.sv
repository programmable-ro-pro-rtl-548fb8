// pro_counter: the PRO's own counter, clocked by the ring output, with the
// start/stop and reset controls of the published design and a read port in
// the system clock domain.
//
// How it works: the counter lives in the ring's clock domain (ro_clk_i) and
// counts ring periods while run_i is 1. run_i comes from the system domain
// and passes a two-flop synchroniser in the ring domain first, so the counter
// starts and stops two or three ring periods after run_i changes. clr_i (a
// system-domain register output) clears the counter and the synchroniser
// asynchronously, so a clear also works while the ring is stopped (EN = 0).
// The count is kept in Gray code, so that the system domain can sample it
// through a two-flop synchroniser at any time and always sees a value that
// the counter really held (at most one count old). count_o is that sample
// converted back to binary; it trails the ring counter by two clk_i cycles.
//
// The published design names the counter and its start/stop/reset/read
// controls only; the Gray-code crossing, the synchronisers and the 32-bit
// width are this implementation's choices.
module pro_counter
  import pro_pkg::*;
#(
  parameter int unsigned W = COUNT_W
) (
  input  logic         clk_i,      // system clock
  input  logic         rst_ni,     // system reset, active low
  input  logic         ro_clk_i,   // ring oscillator output
  input  logic         clr_i,      // clear counter (system domain, level)
  input  logic         run_i,      // count while 1 (system domain, level)
  output logic [W-1:0] count_o     // counter value, system domain, binary
);
  timeunit 1ns; timeprecision 1ps;

  // ---------------- ring-oscillator domain ----------------
  logic [1:0]   run_sync;
  logic [W-1:0] gray_q;
  logic [W-1:0] bin_cur;

  always_ff @(posedge ro_clk_i or posedge clr_i) begin
    if (clr_i) run_sync <= '0;
    else       run_sync <= {run_sync[0], run_i};
  end

  always_comb begin
    bin_cur[W-1] = gray_q[W-1];
    for (int i = W - 2; i >= 0; i--) bin_cur[i] = bin_cur[i+1] ^ gray_q[i];
  end

  always_ff @(posedge ro_clk_i or posedge clr_i) begin
    if (clr_i)            gray_q <= '0;
    else if (run_sync[1]) gray_q <= (bin_cur + 1'b1) ^ ((bin_cur + 1'b1) >> 1);
  end

  // ---------------- system-clock domain ----------------
  logic [W-1:0] gray_s1, gray_s2;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      gray_s1 <= '0;
      gray_s2 <= '0;
    end else begin
      gray_s1 <= gray_q;
      gray_s2 <= gray_s1;
    end
  end

  always_comb begin
    count_o[W-1] = gray_s2[W-1];
    for (int i = W - 2; i >= 0; i--) count_o[i] = count_o[i+1] ^ gray_s2[i];
  end
endmodule
