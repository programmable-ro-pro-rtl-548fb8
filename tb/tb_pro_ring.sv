// tb_pro_ring: checks the programmable ring's oscillation period for all 64
// SEL codes against T = 2 * (T_GATE + n * T_INV + 6 * T_MUX), where n is the
// number of inverters in the loop (1 plus those of the selected cells). It
// also checks the two published frequency limits (22 MHz with every delay
// path, 123.44 MHz with every shorting path), that the 64 codes give 15
// distinct frequencies, that EN = 0 stops the ring, and that a slower supply
// (delay_scale) lowers the frequency.
module tb_pro_ring;
  timeunit 1ns; timeprecision 1ps;

  localparam real T_INV = 333.5, T_MUX = 550.0, T_GATE = 417.0;
  localparam int unsigned CELL [6] = '{4, 4, 8, 8, 16, 16};

  logic       en;
  logic [5:0] sel;
  logic       ro;
  int checks = 0, failures = 0;
  int edges;

  pro_ring dut (.en_i(en), .sel_i(sel), .ro_o(ro));

  always @(posedge ro) edges++;

  function automatic int n_inv(input logic [5:0] s);
    int n = 1;
    for (int c = 0; c < 6; c++) if (s[c]) n += CELL[c];
    return n;
  endfunction

  // Average period over 20 periods, in ps.
  task automatic period_ps(output real p);
    realtime t0;
    @(posedge ro);
    t0 = $realtime;
    repeat (20) @(posedge ro);
    p = (($realtime - t0) / 1ps) / 20.0;
  endtask

  task automatic check_close(input string what, input real got, input real expv, input real tol);
    checks++;
    if (got > expv + tol || got < expv - tol) begin
      failures++;
      $display("FAIL %s: got %f expected %f", what, got, expv);
    end
  endtask

  initial begin
    #200us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real p, expv;
    bit  seen [int];
    en = 0; sel = '0;
    #100ns;
    // Disabled ring does not oscillate.
    edges = 0;
    #500ns;
    checks++;
    if (edges != 0 || ro !== 1'b1) begin failures++; $display("FAIL ring oscillates with EN=0"); end
    en = 1;
    for (int s = 0; s < 64; s++) begin
      sel = 6'(s);
      #100ns;
      period_ps(p);
      expv = 2.0 * (T_GATE + n_inv(6'(s)) * T_INV + 6.0 * T_MUX);
      check_close($sformatf("period sel=%02h", s), p, expv, 5.0);
      seen[n_inv(6'(s))] = 1'b1;
    end
    checks++;
    if (seen.num() != 15) begin failures++; $display("FAIL %0d distinct configurations, expected 15", seen.num()); end
    // Published limits.
    sel = 6'h00; #100ns; period_ps(p);
    check_close("f_max MHz", 1.0e6 / p, 123.44, 0.2);
    sel = 6'h3F; #100ns; period_ps(p);
    check_close("f_min MHz", 1.0e6 / p, 22.0, 0.1);
    // Supply drop: 10 % slower gates, 10 % lower frequency.
    dut.delay_scale = 1.1;
    sel = 6'h15; #100ns; period_ps(p);
    check_close("period at scale 1.1", p, 1.1 * 2.0 * (T_GATE + n_inv(6'h15) * T_INV + 6.0 * T_MUX), 6.0);
    dut.delay_scale = 1.0;
    // Disable again: the ring stops.
    en = 0; #100ns; edges = 0; #500ns;
    checks++;
    if (edges != 0) begin failures++; $display("FAIL ring did not stop"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
