// step - learning-rate schedule (the "Step" module).
//
// Holds the gradient-descent step size lambda. It starts at lambda0 and,
// after every k symbols (`tick`), moves towards lambda_min as in the paper:
//   lambda(m+1) = lambda_min + gamma (lambda(m) - lambda_min).
// With lambda_min = 0 the training stops after the decay (stationary
// channel); with lambda_min > 0 it keeps tracking a drifting channel; with
// gamma = 0 lambda drops to lambda_min after the first k symbols (the
// paper's simplified version is then lambda0 = lambda_min).
// The module also watches the symbol error count of each window from the
// check block: when a count above `ser_th` arrives (`ser_valid`), lambda is
// set back to lambda0 and the k-counter restarts, so the readout is trained
// anew after a channel switch. `rearm` pulses when that happens.
//
// All values are Q0.17; the product is truncated. The decay then reaches
// lambda_min exactly, because truncation keeps lowering a positive
// difference by at least one LSB. `rst` is synchronous. lambda changes one
// cycle after the `tick` or `ser_valid` that causes it. k = 0 acts as k = 1.
module step
  import rc_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        tick,
  input  q17_t        lambda0,
  input  q17_t        lambda_min,
  input  q17_t        gamma,
  input  logic [23:0] k,
  input  logic [23:0] ser_th,
  input  logic [23:0] ser_count,
  input  logic        ser_valid,
  output q17_t        lambda,
  output logic        rearm,
  output logic        decay
);

  logic [23:0] cnt;

  logic signed [Q17_W:0]     diff;
  logic signed [2*Q17_W+1:0] scaled;
  q17_t                      next_lambda;

  always_comb begin
    diff        = (Q17_W+1)'(lambda) - (Q17_W+1)'(lambda_min);
    scaled      = gamma * diff;
    next_lambda = sat_q17(64'(lambda_min) + 64'(scaled >>> Q17_F));
  end

  assign decay = tick && !(ser_valid && ser_count > ser_th) && cnt + 24'd1 >= k;

  always_ff @(posedge clk) begin
    if (rst) begin
      lambda <= lambda0;
      cnt    <= '0;
      rearm  <= 1'b0;
    end else begin
      rearm <= 1'b0;
      if (ser_valid && ser_count > ser_th) begin
        lambda <= lambda0;
        cnt    <= '0;
        rearm  <= 1'b1;
      end else if (tick) begin
        if (decay) begin
          cnt    <= '0;
          lambda <= next_lambda;
        end else begin
          cnt <= cnt + 24'd1;
        end
      end
    end
  end

endmodule
