// tb_step - self-checking testbench of step.
//
// 1. Decay with lambda0 = 0.4, lambda_min = 0.01, gamma = 0.9, k = 3:
//    lambda must change only on every third tick and follow the
//    floating-point recursion lambda <- lambda_min + gamma (lambda -
//    lambda_min) within 1e-3.
// 2. Window error counts at or below the threshold must not touch lambda;
//    one above it must restore lambda0 at once, pulse `rearm`, and restart
//    the k-count.
// 3. Table I values (gamma = 0.999, lambda_min = 0, k = 1): lambda must
//    reach exactly 0 and stay there (training switched off).
module tb_step;
  import rc_pkg::*;
  logic clk = 0, rst = 1, tick = 0;
  q17_t lambda0 = 18'sd52429, lambda_min = 18'sd1311, gamma = 18'sd117965;
  logic [23:0] k = 24'd3, ser_th = 24'd100, ser_count = '0;
  logic ser_valid = 0;
  q17_t lambda; logic rearm, decay;
  int checks = 0, failures = 0;

  step dut (.*);
  always #5 clk = ~clk;

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real ab(input real v); return v < 0 ? -v : v; endfunction
  function automatic real lr(); return real'(lambda) / 131072.0; endfunction

  task automatic tk(); tick <= 1; @(posedge clk); tick <= 0; @(posedge clk); #1; endtask

  task automatic ser(input int c);
    ser_count <= 24'(c); ser_valid <= 1; @(posedge clk); ser_valid <= 0; #1;
  endtask

  initial begin
    real lm;
    int n_rearm, zero_at;
    repeat (2) @(posedge clk);
    rst <= 0;
    @(posedge clk); #1;
    checks++; if (lambda != lambda0) failures++;
    lm = 0.4;
    for (int n = 1; n <= 60; n++) begin
      tk();
      if (n % 3 == 0) lm = 0.01 + 0.9 * (lm - 0.01);
      checks++;
      if (ab(lr() - lm) > 1e-3) begin failures++; $display("tick %0d lambda %f model %f", n, lr(), lm); end
    end
    // threshold monitor
    ser(100);
    @(posedge clk); #1;
    checks++; if (ab(lr() - lm) > 1e-3 || rearm) begin failures++; $display("rearm at threshold"); end
    n_rearm = 0;
    ser(101);
    if (rearm) n_rearm++;
    checks++; if (lambda != lambda0) begin failures++; $display("no rearm, lambda %f", lr()); end
    @(posedge clk); #1;
    checks++; if (n_rearm != 1) begin failures++; $display("rearm pulse missing"); end
    // k-count restarted: two ticks leave lambda0, the third decays
    tk(); tk();
    checks++; if (lambda != lambda0) failures++;
    tk();
    checks++; if (ab(lr() - (0.01 + 0.9 * 0.39)) > 1e-3) begin failures++; $display("after rearm %f", lr()); end
    // Table I: gamma 0.999, lambda_min 0, k = 1, until exactly zero
    rst <= 1; gamma <= 18'sd130941; lambda_min <= '0; k <= 24'd1;
    @(posedge clk); @(posedge clk); rst <= 0; @(posedge clk); #1;
    zero_at = -1;
    for (int n = 1; n <= 12000 && zero_at < 0; n++) begin
      tick <= 1; @(posedge clk); #1;
      if (lambda == 0) zero_at = n;
    end
    tick <= 0;
    repeat (10) begin tick <= 1; @(posedge clk); #1; end
    tick <= 0;
    checks++;
    if (zero_at < 0 || lambda != 0) begin failures++; $display("lambda never reached 0 (%f)", lr()); end
    else $display("lambda reached 0 after %0d updates", zero_at);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
