// tb_params - self-checking testbench of params.
//
// Steps the parameter generator through each mode and compares its outputs
// after every tick with a behavioural model kept in the testbench: constant
// base values; a ramp of p1 from 1.0 down to 0.652; an oscillation of m
// between 0 and 0.1; and switching of p1 among 1.0, 0.8 and 0.6 every 7
// symbols. Non-selected parameters must keep their base values.
module tb_params;
  import rc_pkg::*;
  logic clk = 0, rst = 1, tick = 0;
  par_t base_p1 = P_ONE, base_p2 = P2_DEF, base_p3 = P3_DEF, base_m = '0;
  drift_mode_e mode = DRIFT_CONST;
  drift_sel_e  sel = SEL_P1;
  par_t v0, v1, v2, delta;
  logic [23:0] period;
  par_t p1, p2, p3, m;
  int checks = 0, failures = 0;

  params dut (.*);
  always #5 clk = ~clk;

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic restart();
    rst <= 1; @(posedge clk); @(posedge clk); rst <= 0; @(posedge clk);
  endtask

  task automatic tk();
    tick <= 1; @(posedge clk); tick <= 0; @(posedge clk); #1;
  endtask

  task automatic expect4(input par_t e1, e2, e3, em, input string what);
    checks++;
    if (p1 !== e1 || p2 !== e2 || p3 !== e3 || m !== em) begin
      failures++;
      if (failures < 6)
        $display("%s: got %0d %0d %0d %0d expected %0d %0d %0d %0d", what,
                 p1, p2, p3, m, e1, e2, e3, em);
    end
  endtask

  initial begin
    longint e;
    int dir;
    // constant
    v0 = 24'sd700000; v1 = 24'sd800000; v2 = 24'sd900000; delta = 24'sd1000; period = 24'd7;
    restart();
    for (int i = 0; i < 5; i++) begin tk(); expect4(P_ONE, P2_DEF, P3_DEF, '0, "const"); end
    // ramp of p1: 1.0 -> 0.652 in steps of 0.01 (ends exactly at 0.652)
    mode = DRIFT_RAMP; sel = SEL_P1;
    v0 = P_ONE; v1 = 24'sd683671; delta = 24'sd10486;
    restart();
    expect4(P_ONE, P2_DEF, P3_DEF, '0, "ramp start");
    e = P_ONE;
    for (int i = 0; i < 45; i++) begin
      tk();
      e = e - 10486; if (e < 683671) e = 683671;
      expect4(par_t'(e), P2_DEF, P3_DEF, '0, "ramp");
    end
    // oscillation of m between 0 and 0.1 in steps of 0.03
    mode = DRIFT_OSC; sel = SEL_M;
    v0 = '0; v1 = 24'sd104858; delta = 24'sd31457;
    restart();
    e = 0; dir = 1;
    for (int i = 0; i < 30; i++) begin
      tk();
      if (dir == 1) begin e += 31457; if (e >= 104858) begin e = 104858; dir = -1; end end
      else          begin e -= 31457; if (e <= 0)      begin e = 0;      dir = 1;  end end
      expect4(P_ONE, P2_DEF, P3_DEF, par_t'(e), "osc");
    end
    // switching p1: 1.0, 0.8, 0.6 each for 7 symbols
    mode = DRIFT_SWITCH; sel = SEL_P1;
    v0 = P_ONE; v1 = 24'sd838861; v2 = 24'sd629146; period = 24'd7;
    restart();
    for (int i = 1; i <= 50; i++) begin
      par_t ex;
      tk();
      case ((i / 7) % 3)
        0: ex = P_ONE;
        1: ex = 24'sd838861;
        default: ex = 24'sd629146;
      endcase
      expect4(ex, P2_DEF, P3_DEF, '0, "switch");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
