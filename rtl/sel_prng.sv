// sel_prng: the on-chip source of random SEL patterns for the side-channel
// hiding mode ("active SCA countermeasure control").
//
// The published prototype changes the PRO's SEL bits to a random value every
// 2 ms (48,000 cycles of its 24 MHz clock) and notes that an on-chip PRNG may
// replace the host script that did this. Here a 32-bit Galois LFSR
// (polynomial x^32 + x^22 + x^2 + x + 1, never all zero) steps every clock
// cycle. A period counter reloads from period_i; each time it expires the
// top SEL_W bits of the LFSR are latched into sel_o and update_o pulses for
// one cycle. period_i = 0 is treated as 1 (a new value every cycle).
// sel_o changes exactly period_i cycles apart. The LFSR, its polynomial and
// seed (parameter SEED, non-zero) are this implementation's choices; an LFSR
// is predictable, so a deployment wanting unpredictable noise would seed it
// from a true random source.
module sel_prng
  import pro_pkg::*;
#(
  parameter logic [31:0] SEED = 32'hACE1_2468
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic [31:0]      period_i,
  output logic [SEL_W-1:0] sel_o,
  output logic             update_o
);
  timeunit 1ns; timeprecision 1ps;

  localparam logic [31:0] POLY = 32'h8020_0003;

  logic [31:0] lfsr_q;
  logic [31:0] tick_q;
  logic        expire;

  assign expire = (tick_q + 32'd1 >= period_i);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      lfsr_q   <= SEED;
      tick_q   <= '0;
      sel_o    <= '0;
      update_o <= 1'b0;
    end else begin
      if (lfsr_q[0]) lfsr_q <= (lfsr_q >> 1) ^ POLY;
      else                lfsr_q <= lfsr_q >> 1;
      update_o <= expire;
      if (expire) begin
        tick_q <= '0;
        sel_o  <= lfsr_q[31 -: SEL_W];
      end else begin
        tick_q <= tick_q + 32'd1;
      end
    end
  end
endmodule
