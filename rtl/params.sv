// params - channel parameter generator (the "Params" module).
//
// Supplies the four channel parameters p1, p2, p3 and m to the channel model,
// once per symbol (`tick`). In DRIFT_CONST mode all four are the base values
// written by the host. In the other modes one parameter, chosen by `sel`,
// follows a schedule while the other three keep their base values:
//   DRIFT_RAMP   starts at V0 and moves by DELTA per symbol towards V1, where
//                it stays (monotonic increase or decrease);
//   DRIFT_OSC    moves linearly by DELTA per symbol back and forth between
//                V0 and V1 (periodic linear oscillation);
//   DRIFT_SWITCH holds V0, V1, V2 in turn, each for PERIOD symbols
//                (the switching channel, e.g. p1 = 1.0, 0.8, 0.6 every 266k).
// The three schedules are the drifting and switching experiments of the
// paper; the paper gives what they do but not how the module is built, so
// the register set, the one-parameter select and the step-per-symbol drift
// are this design's own.
//
// Timing: outputs are registered and change one cycle after `tick`.
// `rst` (synchronous) restarts the schedule at V0.
module params
  import rc_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        tick,
  input  par_t        base_p1,
  input  par_t        base_p2,
  input  par_t        base_p3,
  input  par_t        base_m,
  input  drift_mode_e mode,
  input  drift_sel_e  sel,
  input  par_t        v0,
  input  par_t        v1,
  input  par_t        v2,
  input  par_t        delta,
  input  logic [23:0] period,
  output par_t        p1,
  output par_t        p2,
  output par_t        p3,
  output par_t        m
);

  par_t        cur;
  logic        to_v1;       // oscillation heading towards V1
  logic [1:0]  idx;         // switch index
  logic [23:0] cnt;         // symbols spent at the current switch value

  // One step of size `step` from `a` towards `b`, without overshoot.
  function automatic par_t move(input par_t a, input par_t b, input par_t step);
    logic signed [PAR_W:0] n;
    if (a < b) begin
      n = (PAR_W+1)'(a) + (PAR_W+1)'(step);
      return (n >= (PAR_W+1)'(b)) ? b : par_t'(n);
    end else if (a > b) begin
      n = (PAR_W+1)'(a) - (PAR_W+1)'(step);
      return (n <= (PAR_W+1)'(b)) ? b : par_t'(n);
    end
    return a;
  endfunction

  par_t nxt;
  assign nxt = move(cur, to_v1 ? v1 : v0, delta);

  always_ff @(posedge clk) begin
    if (rst) begin
      cur   <= v0;
      to_v1 <= 1'b1;
      idx   <= '0;
      cnt   <= '0;
    end else if (tick) begin
      unique case (mode)
        DRIFT_RAMP: cur <= move(cur, v1, delta);
        DRIFT_OSC: begin
          cur <= nxt;
          if (nxt == (to_v1 ? v1 : v0)) to_v1 <= ~to_v1;
        end
        DRIFT_SWITCH: begin
          if (cnt + 24'd1 >= period) begin
            cnt <= '0;
            idx <= (idx == 2'd2) ? 2'd0 : idx + 2'd1;
            unique case (idx)
              2'd0:    cur <= v1;
              2'd1:    cur <= v2;
              default: cur <= v0;
            endcase
          end else begin
            cnt <= cnt + 24'd1;
          end
        end
        default: ;
      endcase
    end
  end

  always_comb begin
    p1 = base_p1;
    p2 = base_p2;
    p3 = base_p3;
    m  = base_m;
    if (mode != DRIFT_CONST) begin
      unique case (sel)
        SEL_P1: p1 = cur;
        SEL_P2: p2 = cur;
        SEL_P3: p3 = cur;
        default: m = cur;
      endcase
    end
  end

endmodule
