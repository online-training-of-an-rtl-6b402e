// chan - nonlinear wireless channel model (the "Chan" module).
//
// Each `sym_req` pulse draws one new random symbol and produces one channel
// output sample:
//   q(n) = (0.08+m)d(n+2) - (0.12+m)d(n+1) + d(n) + (0.18+m)d(n-1)
//          - (0.1+m)d(n-2) + (0.091+m)d(n-3) - (0.05+m)d(n-4)
//          + (0.04+m)d(n-5) + (0.03+m)d(n-6) + (0.01+m)d(n-7)
//   u(n) = p1 q(n) + p2 q(n)^2 + p3 q(n)^3 + A r(n)
// With m = 0, p1 = 1, p2 = 0.036, p3 = -0.011 this is the standard channel of
// the paper; other values give its generalised, drifting and switching
// channels. The tap coefficients, the polynomial, the uniform noise A r(n),
// r in [-1,1[, and the use of two Galois LFSRs for the symbols (joint period
// about 1e9) and one for the noise (period about 2e5) follow the paper.
// The LFSR polynomials, the bit-to-symbol map (00->-3, 01->-1, 10->+1,
// 11->+3), the 48-bit internal precision and the pipeline are this design's
// own choices.
//
// Symbols enter a 10-deep shift register; the newest is d(n+2), so the target
// d(n) output with u(n) is the third entry. Because the channel looks two
// symbols ahead, the first two outputs after reset are built partly from the
// zero-filled line.
//
// Timing: `valid` pulses 4 cycles after `sym_req`, with `u` (Q4.20,
// saturated) and `d` held until the next update. `rst` is synchronous.
module chan
  import rc_pkg::*;
(
  input  logic clk,
  input  logic rst,
  input  logic sym_req,
  input  par_t p1,
  input  par_t p2,
  input  par_t p3,
  input  par_t m,
  input  par_t noise_a,
  output q20_t u,
  output sym_t d,
  output logic valid
);

  localparam int TAPS = 10;
  localparam int W    = 48;          // internal width, 20 fractional bits
  typedef logic signed [W-1:0] wide_t;

  // |coefficient| of each tap in Q3.20 and its sign, d(n+2) first.
  localparam par_t BASE [TAPS] = '{24'sd83886, 24'sd125829, 24'sd1048576,
                                   24'sd188744, 24'sd104858, 24'sd95420,
                                   24'sd52429,  24'sd41943,  24'sd31457,
                                   24'sd10486};
  localparam logic NEG  [TAPS] = '{1'b0, 1'b1, 1'b0, 1'b0, 1'b1, 1'b0,
                                   1'b1, 1'b0, 1'b0, 1'b0};
  localparam int CENTRE = 2;         // position of d(n), coefficient fixed 1

  function automatic wide_t mulq(input wide_t a, input wide_t b);
    logic signed [2*W-1:0] p;
    p = a * b;
    return wide_t'(p >>> 20);
  endfunction

  // ---------------------------------------------------------------- sources
  logic [12:0] sa_state;
  logic [16:0] sb_state;
  logic [17:0] nz_state;
  logic        sa_bit, sb_bit, nz_bit;

  glfsr #(.WIDTH(13), .TAPS(13'h100D), .SEED(13'h0ACE)) u_sym_a (
    .clk, .rst, .step(sym_req), .state(sa_state), .bit_out(sa_bit));
  glfsr #(.WIDTH(17), .TAPS(17'h12000), .SEED(17'h1B5A3)) u_sym_b (
    .clk, .rst, .step(sym_req), .state(sb_state), .bit_out(sb_bit));
  glfsr #(.WIDTH(18), .TAPS(18'h20400), .SEED(18'h2F0C5)) u_noise (
    .clk, .rst, .step(sym_req), .state(nz_state), .bit_out(nz_bit));

  sym_t new_sym;
  always_comb begin
    unique case ({sa_bit, sb_bit})
      2'b00:   new_sym = -3'sd3;
      2'b01:   new_sym = -3'sd1;
      2'b10:   new_sym =  3'sd1;
      default: new_sym =  3'sd3;
    endcase
  end

  sym_t sr [TAPS];
  q17_t r_q;                          // noise sample r(n), Q0.17
  logic v0, v1, v2;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < TAPS; k++) sr[k] <= '0;
      r_q <= '0;
      v0  <= 1'b0;
    end else begin
      v0 <= sym_req;
      if (sym_req) begin
        sr[0] <= new_sym;
        for (int k = 1; k < TAPS; k++) sr[k] <= sr[k-1];
        r_q <= q17_t'(nz_state);
      end
    end
  end

  // ------------------------------------------------------------ stage 1: FIR
  wide_t q_sum;
  always_comb begin
    q_sum = '0;
    for (int k = 0; k < TAPS; k++) begin
      wide_t h;
      if (k == CENTRE) h = wide_t'(BASE[k]);
      else             h = wide_t'(BASE[k]) + wide_t'(m);
      if (NEG[k]) h = -h;
      q_sum = q_sum + h * wide_t'(sr[k]);
    end
  end

  wide_t q_1, nu_1;
  sym_t  d_1;
  wide_t q_2, q2_2, nu_2;
  sym_t  d_2;

  wide_t poly;
  assign poly = mulq(wide_t'(p1), q_2) + mulq(wide_t'(p2), q2_2) +
                mulq(wide_t'(p3), mulq(q2_2, q_2)) + nu_2;

  always_ff @(posedge clk) begin
    if (rst) begin
      q_1 <= '0; nu_1 <= '0; d_1 <= '0; v1 <= 1'b0;
      q_2 <= '0; q2_2 <= '0; nu_2 <= '0; d_2 <= '0; v2 <= 1'b0;
      u <= '0; d <= '0; valid <= 1'b0;
    end else begin
      // stage 1
      v1 <= v0;
      if (v0) begin
        q_1  <= q_sum;
        d_1  <= sr[CENTRE];
        nu_1 <= (wide_t'(noise_a) * wide_t'(r_q)) >>> 17;
      end
      // stage 2: square
      v2 <= v1;
      if (v1) begin
        q_2  <= q_1;
        q2_2 <= mulq(q_1, q_1);
        nu_2 <= nu_1;
        d_2  <= d_1;
      end
      // stage 3: polynomial and noise
      valid <= v2;
      if (v2) begin
        u <= sat_q20(64'(poly));
        d <= d_2;
      end
    end
  end

endmodule
