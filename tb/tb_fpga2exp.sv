// tb_fpga2exp - self-checking testbench of fpga2exp.
//
// Small instance: N = 4 states of SPS = 5 samples. The testbench writes a
// random mask while the block is in reset, then releases it and plays the
// channel: every `sym_req` is answered 4 cycles later with the next value of
// a random list u(0), u(1), ... The DAC stream is recorded and checked:
// the sync pulse (PULSE_CODE for SPS samples), silence until LEAD = N*SPS
// samples after the pulse began, then for each period n and state i, SPS
// samples equal to beta*M_i*u(n) in units of 2^-14 (computed in floating
// point, 2 LSB tolerance, saturated at 16 bits). The symbol request rate
// (one per N*SPS cycles) is checked as well.
module tb_fpga2exp;
  import rc_pkg::*;
  localparam int N = 4, SPS = 5, LEAD = N * SPS, PERIODS = 12;
  logic clk = 0, rst = 1;
  logic mask_we = 0; logic [6:0] mask_addr = 0; q17_t mask_data = 0;
  q17_t beta;
  q20_t u = 0;
  logic sym_req, frame_start, running;
  logic signed [15:0] dac_data;
  int checks = 0, failures = 0;

  fpga2exp #(.N(N), .SPS(SPS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real  mreal [N];
  q20_t ulist [PERIODS + 4];
  int   req_n = 0;
  int   req_t [PERIODS + 4];
  int   cyc = 0;
  logic signed [15:0] dlog [LEAD + PERIODS * N * SPS + 40];

  // channel stand-in
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst && sym_req) begin
      if (req_n < PERIODS + 4) req_t[req_n] = cyc;
      fork
        automatic int k = req_n;
        begin repeat (4) @(posedge clk); u <= ulist[k]; end
      join_none
      req_n++;
    end
  end

  initial begin
    int t0, bad;
    real mdl;
    beta = 18'sd29491;   // 0.225
    for (int k = 0; k < PERIODS + 4; k++) ulist[k] = q20_t'($urandom_range(0, 7340032)) - 25'sd2936013; // [-2.8,4.2]
    ulist[3] = 25'sd16000000;   // large value to hit saturation
    repeat (2) @(posedge clk);
    for (int i = 0; i < N; i++) begin
      mask_data <= q17_t'($urandom_range(0, 262143) - 131072);
      mask_addr <= 7'(i); mask_we <= 1;
      @(posedge clk); #1;
      mreal[i] = real'(mask_data) / 131072.0;
    end
    mask_we <= 0;
    @(posedge clk);
    rst <= 0;
    for (int t = 0; t < $size(dlog); t++) begin
      @(posedge clk); #1;
      dlog[t] = dac_data;
    end
    // find the pulse
    t0 = -1;
    for (int t = 0; t < 10; t++) if (t0 < 0 && dlog[t] == 16'sh4000) t0 = t;
    checks++;
    if (t0 != 1) begin failures++; $display("pulse starts at %0d", t0); end
    if (t0 < 0) t0 = 0;
    for (int t = 0; t < LEAD; t++) begin
      checks++;
      if (dlog[t0 + t] != ((t < SPS) ? 16'sh4000 : 16'sh0)) begin
        failures++; $display("lead sample %0d = %0d", t, dlog[t0 + t]);
      end
    end
    bad = 0;
    for (int n = 0; n < PERIODS; n++)
      for (int i = 0; i < N; i++)
        for (int s = 0; s < SPS; s++) begin
          int got;
          got = dlog[t0 + LEAD + (n * N + i) * SPS + s];
          mdl = real'(beta) / 131072.0 * mreal[i] * real'(ulist[n]) / 1048576.0 * 16384.0;
          if (mdl > 32767.0) mdl = 32767.0;
          if (mdl < -32768.0) mdl = -32768.0;
          checks++;
          if (real'(got) - mdl > 2.0 || mdl - real'(got) > 2.0) begin
            failures++; bad++;
            if (bad < 5) $display("n=%0d i=%0d s=%0d dac=%0d expected %f", n, i, s, got, mdl);
          end
        end
    // request rate
    for (int k = 1; k < PERIODS; k++) begin
      checks++;
      if (k >= 2 && req_t[k] - req_t[k-1] != N * SPS) begin
        failures++; $display("request %0d interval %0d", k, req_t[k] - req_t[k-1]);
      end
    end
    checks++;
    if (req_t[1] - req_t[0] != LEAD) begin failures++; $display("first interval %0d", req_t[1] - req_t[0]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
