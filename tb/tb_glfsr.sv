// tb_glfsr - self-checking testbench of glfsr.
//
// Runs a 13-bit and an 18-bit register (the symbol and noise generators of
// the channel model) through their whole sequence. Each step is compared
// with a reference written as polynomial arithmetic (multiplication by x^-1
// modulo the feedback polynomial, given as its list of exponents); the
// period must be exactly 2^W - 1 and the all-zero state must never occur.
// The 1-in-4 stepping check confirms `step` gates the register.
module tb_glfsr;
  logic clk = 0, rst = 1, step = 0;
  logic [12:0] s13; logic b13;
  logic [17:0] s18; logic b18;
  int checks = 0, failures = 0;

  glfsr #(.WIDTH(13), .TAPS(13'h100D), .SEED(13'h1)) dut13 (
    .clk, .rst, .step, .state(s13), .bit_out(b13));
  glfsr dut18 (.clk, .rst, .step, .state(s18), .bit_out(b18));

  always #5 clk = ~clk;

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference: right shift, and when the dropped bit is 1 add the
  // polynomial terms x^e for e in exps (bit e-1).
  function automatic logic [31:0] ref_next(input logic [31:0] s, input int w,
                                           input int exps[$]);
    logic [31:0] n = s >> 1;
    if (s[0]) foreach (exps[i]) n[exps[i]-1] = ~n[exps[i]-1];
    return n & ((32'd1 << w) - 1);
  endfunction

  initial begin
    logic [31:0] r13, r18;
    int p13, p18, mism;
    logic zero_seen;
    int e13[$] = '{13, 4, 3, 1};
    int e18[$] = '{18, 11};
    repeat (2) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    r13 = 1; r18 = 1; p13 = 0; p18 = 0; zero_seen = 0; mism = 0;
    step <= 1;
    for (int i = 1; i <= 262143; i++) begin
      @(posedge clk); #1;
      r13 = ref_next(r13, 13, e13);
      r18 = ref_next(r18, 18, e18);
      if (s13 != r13[12:0] || s18 != r18[17:0]) begin
        if (mism < 5) $display("mismatch at step %0d", i);
        mism++;
      end
      if (s13 == 0 || s18 == 0) zero_seen = 1;
      if (p13 == 0 && s13 == 13'd1) p13 = i;
      if (p18 == 0 && s18 == 18'd1) p18 = i;
    end
    checks++; if (mism != 0) begin failures++; $display("%0d steps differ from the reference", mism); end
    checks++;
    checks++; if (p13 != 8191)   begin failures++; $display("period13=%0d", p13); end
    checks++; if (p18 != 262143) begin failures++; $display("period18=%0d", p18); end
    checks++; if (zero_seen) failures++;
    checks++; if (b18 != s18[0]) failures++;
    // step gating: hold for 3 cycles, the state must not change
    step <= 0;
    @(posedge clk); #1;
    r18 = s18;
    repeat (3) @(posedge clk); #1;
    checks++; if (s18 != r18[17:0]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
