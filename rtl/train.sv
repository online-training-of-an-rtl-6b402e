// train - online readout training by gradient descent (the "Train" module).
//
// For every symbol period, when exp2fpga presents the N reservoir states
// x_i(n) (`x_valid`), the module
//   1. forms the products w_i x_i for all i in parallel,
//   2. sums them into the reservoir output y(n) = sum_i w_i x_i,
//   3. takes the error d'(n) - y(n) against the delayed target and scales it
//      by the learning rate: g = lambda (d'(n) - y(n)),
//   4. updates every weight in parallel: w_i <- w_i + g x_i.
// This is the paper's update rule w_i(n+1) = w_i(n) + lambda (d(n) - y(n))
// x_i(n). The target d(n) from the channel model is delayed by `tgt_delay`
// symbols (a register set by the host) to line it up with the reservoir
// states, which lag the channel output by the input layer, the reservoir and
// the readout; the paper says only that the delay is several periods.
//
// Formats follow the paper: x and lambda Q0.17, weights, y and the error
// Q4.20. Products are truncated (arithmetic shift) and results saturated,
// which is this design's own choice. Weights start at zero after reset.
//
// Timing: y(n) and d'(n) are valid (`y_valid`) 2 cycles after `x_valid`; the
// weights are updated 4 cycles after `x_valid`, so x must hold for at least
// 4 cycles (it holds for a whole symbol period). DMAX bounds the delay.
module train
  import rc_pkg::*;
#(
  parameter int N    = 50,
  parameter int DMAX = 16
) (
  input  logic       clk,
  input  logic       rst,
  input  q17_t       x [N],
  input  logic       x_valid,
  input  sym_t       d_in,
  input  logic       d_valid,
  input  logic [7:0] tgt_delay,
  input  q17_t       lambda,
  output q20_t       y,
  output sym_t       d_tgt,
  output logic       y_valid,
  output q20_t       w [N]
);

  localparam int PW = Q20_W + Q17_W;   // product width, Q5.37
  localparam int DW = $clog2(DMAX);

  // ------------------------------------------------------ target delay line
  sym_t dl [DMAX];
  logic [DW-1:0] tap;
  assign tap = (int'(tgt_delay) >= DMAX) ? DW'(DMAX - 1) : DW'(tgt_delay);

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < DMAX; k++) dl[k] <= '0;
    end else if (d_valid) begin
      dl[0] <= d_in;
      for (int k = 1; k < DMAX; k++) dl[k] <= dl[k-1];
    end
  end

  // ------------------------------------------------------------- pipeline
  logic signed [PW-1:0] prod [N];
  sym_t d1;
  logic v1, v2;
  q20_t g;

  logic signed [63:0] acc;
  always_comb begin
    acc = '0;
    for (int i = 0; i < N; i++) acc = acc + 64'(prod[i]);
  end

  logic signed [63:0] err;
  logic signed [63:0] lam_err;
  always_comb begin
    err     = (64'(d_tgt) <<< Q20_F) - 64'(y);
    lam_err = (64'(lambda) * 64'(sat_q20(err))) >>> Q17_F;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < N; i++) begin
        prod[i] <= '0;
        w[i]    <= '0;
      end
      d1 <= '0; v1 <= 1'b0; v2 <= 1'b0;
      y <= '0; d_tgt <= '0; y_valid <= 1'b0; g <= '0;
    end else begin
      // stage 1: products
      v1 <= x_valid;
      if (x_valid) begin
        for (int i = 0; i < N; i++) prod[i] <= w[i] * x[i];
        d1 <= dl[tap];
      end
      // stage 2: output y(n)
      y_valid <= v1;
      if (v1) begin
        y     <= sat_q20(acc >>> Q17_F);
        d_tgt <= d1;
      end
      // stage 3: scaled error
      v2 <= y_valid;
      if (y_valid) g <= sat_q20(lam_err);
      // stage 4: weight update
      if (v2) begin
        for (int i = 0; i < N; i++)
          w[i] <= sat_q20(64'(w[i]) + ((64'(g) * 64'(x[i])) >>> Q17_F));
      end
    end
  end

endmodule
