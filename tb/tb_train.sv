// tb_train - self-checking testbench of train.
//
// N = 4 weights. Each step the testbench pushes one new target symbol into
// the delay line, presents a random state vector x (|x_i| < 1) with
// `x_valid`, and compares the block with a floating-point model of the
// gradient-descent rule: y = sum w_i x_i against the block's y (tolerance
// 2e-3), the delayed target d' (the symbol pushed `tgt_delay` pushes
// earlier, exact) and every weight after the update w_i += lambda (d'-y) x_i
// (tolerance 2e-3). The latency is checked too: y_valid two cycles after
// x_valid. A run with lambda = 0 checks that the weights then stay frozen,
// and the error must fall as the weights learn a fixed linear target.
module tb_train;
  import rc_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst = 1;
  q17_t x [N];
  logic x_valid = 0;
  sym_t d_in = 0;
  logic d_valid = 0;
  logic [7:0] tgt_delay = 8'd3;
  q17_t lambda;
  q20_t y; sym_t d_tgt; logic y_valid;
  q20_t w [N];
  int checks = 0, failures = 0;

  train #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real wm [N];
  real xr [N];
  int  hist [$];

  function automatic real ab(input real v); return v < 0 ? -v : v; endfunction

  task automatic one_step(input int sym, input bit rand_x, output real err);
    real ym, lam;
    int lat, dexp;
    d_in <= sym_t'(sym); d_valid <= 1; @(posedge clk); d_valid <= 0;
    hist.push_front(sym);
    @(posedge clk);
    for (int i = 0; i < N; i++) begin
      if (rand_x) x[i] <= q17_t'(int'($urandom_range(0, 200000)) - 100000);
    end
    @(posedge clk); #1;
    for (int i = 0; i < N; i++) xr[i] = real'(x[i]) / 131072.0;
    x_valid <= 1; @(posedge clk); #1; x_valid <= 0;
    lat = 0;
    while (!y_valid && lat < 10) begin @(posedge clk); #1; lat++; end
    checks++;
    if (lat != 1) begin failures++; $display("y latency %0d", lat + 1); end
    ym = 0;
    for (int i = 0; i < N; i++) ym += wm[i] * xr[i];
    dexp = (hist.size() > 3) ? hist[3] : 0;
    checks++;
    if (ab(ym - real'(y) / 1048576.0) > 2e-3 || int'(d_tgt) != dexp) begin
      failures++; $display("y=%f model %f d'=%0d expected %0d", real'(y) / 1048576.0, ym, d_tgt, dexp);
    end
    err = real'(dexp) - ym;
    lam = real'(lambda) / 131072.0;
    for (int i = 0; i < N; i++) wm[i] += lam * err * xr[i];
    repeat (4) @(posedge clk); #1;
    for (int i = 0; i < N; i++) begin
      checks++;
      if (ab(wm[i] - real'(w[i]) / 1048576.0) > 2e-3) begin
        failures++; $display("w[%0d]=%f model %f", i, real'(w[i]) / 1048576.0, wm[i]);
      end
    end
  endtask

  initial begin
    real e, e_early, e_late;
    int s;
    for (int i = 0; i < N; i++) begin wm[i] = 0; x[i] = '0; end
    lambda = 18'sd13107;   // 0.1
    repeat (2) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    // random symbols and states
    for (int n = 0; n < 40; n++) one_step(2 * int'($urandom_range(0, 3)) - 3, 1, e);
    // frozen weights with lambda = 0
    lambda = '0;
    for (int n = 0; n < 5; n++) one_step(2 * int'($urandom_range(0, 3)) - 3, 1, e);
    // learn a fixed linear map: target d'(n) is reproduced by x = d'/4 * ones
    lambda = 18'sd52429;   // 0.4
    e_early = 0; e_late = 0;
    for (int n = 0; n < 60; n++) begin
      s = 2 * int'($urandom_range(0, 3)) - 3;
      // x depends on the symbol that will be the target of this step
      for (int i = 0; i < N; i++)
        x[i] = q17_t'(((hist.size() > 2 ? hist[2] : 1) * 131072 / 4) * (i + 1) / N);
      one_step(s, 0, e);
      if (n >= 5 && n < 10) e_early += ab(e);
      if (n >= 55) e_late += ab(e);
    end
    checks++;
    if (!(e_late < 0.2 * e_early)) begin failures++; $display("no learning: %f -> %f", e_early, e_late); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
