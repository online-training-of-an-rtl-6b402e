// glfsr - Galois linear feedback shift register.
//
// On each cycle with `step` high the register shifts right by one; when the
// bit shifted out is 1 the register is XORed with the tap mask TAPS. With a
// primitive feedback polynomial the state walks through all 2^WIDTH-1
// non-zero values. `state` is the current register, `bit_out` its least
// significant bit (the bit shifted out at the next step).
//
// The paper uses Galois LFSRs for the symbol and noise sources of the channel
// model but does not give their polynomials; the widths and tap masks set by
// the instantiating module are this design's own (maximal-length polynomials
// from standard tables). `rst` is synchronous and loads SEED, which must be
// non-zero. No latency beyond the register itself.
module glfsr #(
  parameter int               WIDTH = 18,
  parameter logic [WIDTH-1:0] TAPS  = 18'h20400,   // x^18 + x^11 + 1
  parameter logic [WIDTH-1:0] SEED  = 1
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             step,
  output logic [WIDTH-1:0] state,
  output logic             bit_out
);

  always_ff @(posedge clk) begin
    if (rst)
      state <= SEED;
    else if (step)
      state <= (state >> 1) ^ (state[0] ? TAPS : '0);
  end

  assign bit_out = state[0];

  initial assert (SEED != 0) else $error("glfsr: SEED must be non-zero");

endmodule
