// tb_exp2fpga - self-checking testbench of exp2fpga.
//
// N = 4 states with the paper's sampling (SPS = 20, 6 + 6 samples dropped).
// The ADC stream is quiet (below the threshold), then carries a sync pulse
// at a random time, then random samples. The testbench computes, for every
// state, twice the sum of samples 6..13 (the 8-sample mean in Q0.17) and
// compares it exactly with the block's output. It also checks that
// `x_valid` rises exactly one cycle after the last sample of each period,
// i.e. once every N*SPS cycles, and that nothing locks before the pulse.
module tb_exp2fpga;
  import rc_pkg::*;
  localparam int N = 4, SPS = 20, DISCARD = 6, FRAMES = 10, OFS = 40;
  localparam int T = 200 + OFS + (FRAMES + 1) * N * SPS;
  logic clk = 0, rst = 1;
  logic signed [13:0] adc = 0;
  logic [23:0] sync_ofs = 24'(OFS);
  q17_t x [N];
  logic x_valid, locked;
  int checks = 0, failures = 0;

  exp2fpga #(.N(N), .SPS(SPS), .DISCARD(DISCARD)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [13:0] seq [T];

  initial begin
    int tp, frame, early, tl, sum;
    tp = 50 + int'($urandom_range(0, 60));
    for (int t = 0; t < T; t++) begin
      if (t < tp)           seq[t] = 14'(int'($urandom_range(0, 6000)) - 3000);
      else if (t < tp + 20) seq[t] = 14'sd6000;
      else                  seq[t] = 14'(int'($urandom_range(0, 16383)) - 8192);
    end
    repeat (3) @(posedge clk);
    rst <= 0;
    frame = 0; early = 0;
    for (int t = 0; t < T; t++) begin
      adc <= seq[t];
      @(posedge clk); #1;
      // edge t has sampled seq[t]
      if (x_valid) begin
        tl = tp + OFS + (frame + 1) * N * SPS - 1;
        checks++;
        if (t != tl) begin failures++; $display("x_valid at %0d expected %0d", t, tl); end
        for (int i = 0; i < N; i++) begin
          sum = 0;
          for (int s = DISCARD; s < SPS - DISCARD; s++)
            sum += int'(seq[tp + OFS + (frame * N + i) * SPS + s]);
          checks++;
          if (int'(x[i]) != 2 * sum) begin
            failures++; $display("frame %0d x[%0d]=%0d expected %0d", frame, i, x[i], 2 * sum);
          end
        end
        frame++;
      end
      if (t < tp) begin
        checks++;
        if (locked) early++;
      end
    end
    failures += early;
    checks++;
    if (frame < FRAMES) begin failures++; $display("frames %0d", frame); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
