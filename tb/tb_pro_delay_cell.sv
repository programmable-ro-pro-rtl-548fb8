// tb_pro_delay_cell: checks the propagation delay of one delay cell on both
// paths, with the nominal supply and with a slowed supply. Expected delays
// are computed here from the cell's parameters: delay path N*T_INV + T_MUX,
// shorting path T_MUX, both multiplied by the supply factor.
module tb_pro_delay_cell;
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned N_INV = 8;
  localparam real T_INV = 333.5, T_MUX = 550.0;

  logic a, sel, y;
  real  scale;
  int   checks = 0, failures = 0;

  pro_delay_cell #(.N_INV(N_INV), .T_INV_PS(T_INV), .T_MUX_PS(T_MUX)) dut (
    .a_i(a), .sel_i(sel), .scale_i(scale), .y_o(y));

  task automatic measure(input logic s, input real sc);
    realtime t0, t1, exp_ps;
    sel = s; scale = sc;
    #50ns;
    for (int e = 0; e < 2; e++) begin
      t0 = $realtime;
      a = ~a;
      @(y);
      t1 = $realtime;
      exp_ps = (s ? (N_INV * T_INV + T_MUX) : T_MUX) * sc;
      checks++;
      if (((t1 - t0) / 1ps) > exp_ps + 2.0 || ((t1 - t0) / 1ps) < exp_ps - 2.0) begin
        failures++;
        $display("FAIL sel=%0b scale=%f delay=%f ps expected %f ps", s, sc, (t1 - t0) / 1ps, exp_ps);
      end
      checks++;
      if (y !== a) begin failures++; $display("FAIL cell inverted the signal"); end
      #50ns;
    end
  endtask

  initial begin
    #100us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = 0; sel = 0; scale = 1.0;
    #100ns;
    measure(1'b1, 1.0);
    measure(1'b0, 1.0);
    measure(1'b1, 1.25);
    measure(1'b0, 0.8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
