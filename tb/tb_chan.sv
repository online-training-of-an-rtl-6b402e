// tb_chan - self-checking testbench of chan.
//
// Requests symbols from the channel model and records the (d, u) pairs. For
// every output whose ten surrounding symbols are known (the sequence of d
// outputs gives them, since d(n+2) and d(n+1) appear two and one outputs
// later), the expected u(n) is computed in floating point from the paper's
// channel equations and compared within 1e-4. Three runs: the standard
// noiseless channel, a generalised one (m = 0.05, p1 = 0.8, p2 = 0.05,
// p3 = -0.02) and the standard channel with noise A = 0.5, where the
// difference to the noiseless run with identical symbols must stay within
// A and have about zero mean. Also checked: the 4-cycle latency and an even
// symbol distribution.
module tb_chan;
  import rc_pkg::*;
  logic clk = 0, rst = 1, sym_req = 0;
  par_t p1, p2, p3, m, noise_a;
  q20_t u; sym_t d; logic valid;
  int checks = 0, failures = 0;

  chan dut (.*);
  always #5 clk = ~clk;

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NS = 3000;
  real  ulog [3][NS];
  int   dlog [3][NS];

  function automatic real tofix(input par_t v); return real'(v) / 1048576.0; endfunction

  task automatic run(input int idx);
    int lat;
    rst <= 1; repeat (2) @(posedge clk); rst <= 0; @(posedge clk);
    for (int n = 0; n < NS; n++) begin
      sym_req <= 1; @(posedge clk); #1; sym_req <= 0;
      lat = 0;
      while (!valid) begin @(posedge clk); #1; lat++; if (lat > 20) break; end
      if (n < 5) begin
        checks++;
        if (lat != 3) begin failures++; $display("latency %0d", lat + 1); end
      end
      ulog[idx][n] = real'(u) / 1048576.0;
      dlog[idx][n] = int'(d);
      repeat (2) @(posedge clk);
    end
  endtask

  task automatic compare(input int idx, input real rp1, rp2, rp3, rm);
    real c[10] = '{0.08, -0.12, 1.0, 0.18, -0.1, 0.091, -0.05, 0.04, 0.03, 0.01};
    int bad = 0;
    for (int n = 8; n < NS - 2; n++) begin
      real q = 0.0, uu;
      for (int k = 0; k < 10; k++) begin
        real h = c[k];
        if (k != 2) h = (h < 0) ? h - rm : h + rm;
        q += h * real'(dlog[idx][n + 2 - k]);
      end
      uu = rp1 * q + rp2 * q * q + rp3 * q * q * q;
      checks++;
      if ((uu - ulog[idx][n]) > 1e-4 || (ulog[idx][n] - uu) > 1e-4) begin
        failures++; bad++;
        if (bad < 4) $display("run %0d n=%0d u=%f expected %f", idx, n, ulog[idx][n], uu);
      end
    end
  endtask

  initial begin
    int cnt[4];
    real mean, mx;
    // run 0: standard channel, noiseless
    p1 = P_ONE; p2 = P2_DEF; p3 = P3_DEF; m = '0; noise_a = '0;
    run(0);
    compare(0, 1.0, 0.036, -0.011, 0.0);
    foreach (cnt[i]) cnt[i] = 0;
    for (int n = 0; n < NS; n++) cnt[(dlog[0][n] + 3) / 2]++;
    foreach (cnt[i]) begin
      checks++;
      if (cnt[i] < NS / 4 - NS / 20 || cnt[i] > NS / 4 + NS / 20) begin
        failures++; $display("symbol %0d count %0d", 2 * i - 3, cnt[i]);
      end
    end
    // run 1: generalised channel
    m = 24'sd52429; p1 = 24'sd838861; p2 = 24'sd52429; p3 = -24'sd20972;
    run(1);
    compare(1, tofix(p1), tofix(p2), tofix(p3), tofix(m));
    // run 2: standard channel with noise A = 0.5, same symbols as run 0
    p1 = P_ONE; p2 = P2_DEF; p3 = P3_DEF; m = '0; noise_a = 24'sd524288;
    run(2);
    mean = 0; mx = 0;
    for (int n = 0; n < NS; n++) begin
      real dv;
      dv = ulog[2][n] - ulog[0][n];
      checks++;
      if (dlog[2][n] != dlog[0][n] || dv > 0.5 || dv < -0.5) failures++;
      mean += dv;
      if (dv > mx) mx = dv;
    end
    mean = mean / NS;
    checks++;
    if (mean > 0.05 || mean < -0.05 || mx < 0.4) begin
      failures++; $display("noise mean %f max %f", mean, mx);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
