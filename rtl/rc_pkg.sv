// rc_pkg - shared types and constants of the online-trained reservoir computer
// readout/input-layer FPGA design.
//
// Fixed-point formats. Quantities that stay inside ]-1,1[ (learning rate,
// its start value, the decay rate, the input gain, the input mask and the
// reservoir states) are 18-bit signed Q0.17 words. Wider quantities (the
// channel output u(n), the reservoir output y(n), the error and the readout
// weights) are 25-bit signed Q4.20 words covering [-16,16[. These two formats
// follow the paper, and match a 25 x 18 multiplier. Channel parameters
// (p1, p2, p3, m) and the noise amplitude A are this design's own 24-bit
// signed Q3.20 format, chosen to fit the 24-bit payload of a host command.
//
// Symbols d(n) in {-3,-1,+1,+3} are 3-bit signed integers.
//
// Host commands are 4 bytes: an opcode byte followed by a 24-bit value, most
// significant byte first. Opcodes 0x80..0xFF write mask element (op & 0x7F).
// The opcode map is this design's own; the paper only says commands are
// 4 bytes long and write parameters or toggle reset/run.
package rc_pkg;

  localparam int Q17_W = 18;   // Q0.17
  localparam int Q17_F = 17;
  localparam int Q20_W = 25;   // Q4.20
  localparam int Q20_F = 20;
  localparam int PAR_W = 24;   // Q3.20
  localparam int PAR_F = 20;

  typedef logic signed [Q17_W-1:0] q17_t;
  typedef logic signed [Q20_W-1:0] q20_t;
  typedef logic signed [PAR_W-1:0] par_t;
  typedef logic signed [2:0]       sym_t;

  // Saturating conversion of a wide signed value (already aligned to 20
  // fractional bits) to Q4.20.
  function automatic q20_t sat_q20(input logic signed [63:0] v);
    if (v > 64'sd16777215)       return 25'sh0FFFFFF;
    else if (v < -64'sd16777216) return 25'sh1000000;
    else                         return q20_t'(v);
  endfunction

  function automatic q17_t sat_q17(input logic signed [63:0] v);
    if (v > 64'sd131071)       return 18'sh1FFFF;
    else if (v < -64'sd131072) return 18'sh20000;
    else                       return q17_t'(v);
  endfunction

  // Drift / switch generator modes (Params block).
  typedef enum logic [1:0] {
    DRIFT_CONST  = 2'd0,  // all parameters at their base values
    DRIFT_RAMP   = 2'd1,  // selected parameter moves from V0 to V1, then stays
    DRIFT_OSC    = 2'd2,  // selected parameter oscillates linearly V0 <-> V1
    DRIFT_SWITCH = 2'd3   // selected parameter cycles V0,V1,V2 every period
  } drift_mode_e;

  typedef enum logic [1:0] {
    SEL_P1 = 2'd0, SEL_P2 = 2'd1, SEL_P3 = 2'd2, SEL_M = 2'd3
  } drift_sel_e;

  // Host command opcodes.
  typedef enum logic [7:0] {
    OP_RUN        = 8'h01,  // value[0]: 1 = run, 0 = reset
    OP_NOISE_A    = 8'h10,  // noise amplitude A, Q3.20
    OP_BETA       = 8'h11,  // input gain beta, Q0.17
    OP_LAMBDA0    = 8'h12,  // initial learning rate, Q0.17
    OP_LAMBDA_MIN = 8'h13,  // final learning rate, Q0.17
    OP_GAMMA      = 8'h14,  // decay rate, Q0.17
    OP_K          = 8'h15,  // symbols between lambda updates
    OP_SER_TH     = 8'h16,  // error count per window that re-arms lambda
    OP_SYNC_OFS   = 8'h17,  // clocks from sync detection to first state
    OP_TGT_DELAY  = 8'h18,  // target delay in symbols
    OP_P1         = 8'h20,
    OP_P2         = 8'h21,
    OP_P3         = 8'h22,
    OP_M          = 8'h23,
    OP_DRIFT      = 8'h24,  // value[1:0] mode, value[3:2] selected parameter
    OP_V0         = 8'h25,
    OP_V1         = 8'h26,
    OP_V2         = 8'h27,
    OP_DELTA      = 8'h28,  // drift step per symbol, Q3.20, positive
    OP_PERIOD     = 8'h29   // switch period in symbols
  } opcode_e;

  localparam logic [7:0] SER_TX_HEADER = 8'h53;  // "S", then 24-bit count

  // Run-time configuration written by the host.
  typedef struct packed {
    logic        run;
    par_t        noise_a;
    q17_t        beta;
    q17_t        lambda0;
    q17_t        lambda_min;
    q17_t        gamma;
    logic [23:0] k;
    logic [23:0] ser_th;
    logic [23:0] sync_ofs;
    logic [7:0]  tgt_delay;
    par_t        p1;
    par_t        p2;
    par_t        p3;
    par_t        m;
    drift_mode_e drift_mode;
    drift_sel_e  drift_sel;
    par_t        v0;
    par_t        v1;
    par_t        v2;
    par_t        delta;
    logic [23:0] period;
  } rc_cfg_t;

  // Default values: channel of equations (3)-(4) without noise, Table I
  // learning parameters with k = 10 and beta = 0.225 (best input gain).
  localparam par_t P_ONE = 24'sd1048576;        // 1.0 in Q3.20
  localparam par_t P2_DEF = 24'sd37749;         // 0.036
  localparam par_t P3_DEF = -24'sd11534;        // -0.011
  localparam q17_t L0_DEF = 18'sd52429;         // 0.4 in Q0.17
  localparam q17_t GAMMA_DEF = 18'sd130941;     // 0.999
  localparam q17_t BETA_DEF = 18'sd29491;       // 0.225

endpackage
