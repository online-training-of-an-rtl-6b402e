// tb_check - self-checking testbench of check.
//
// Window of 16 symbols. The testbench drives reservoir outputs y (random
// over [-5,5], plus the exact slicing boundaries -2, 0, +2 and values one
// LSB either side) with random targets, decides each symbol itself, and
// compares: the sliced symbol, each window's error count when `ser_valid`
// pulses (exactly once per 16 symbols), and the running totals.
module tb_check;
  import rc_pkg::*;
  localparam int WINDOW = 16;
  logic clk = 0, rst = 1;
  q20_t y = '0; sym_t d_tgt = '0; logic y_valid = 0;
  sym_t y_sym;
  logic [23:0] ser_count; logic ser_valid;
  logic [31:0] total_symbols, total_errors;
  int checks = 0, failures = 0;

  check #(.WINDOW(WINDOW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int decide(input real v);
    if (v < -2.0) return -3;
    if (v < 0.0)  return -1;
    if (v < 2.0)  return 1;
    return 3;
  endfunction

  initial begin
    int errs_w, errs_t, nwin, ds, yi;
    int special [9] = '{-2097152, -2097151, -2097153, 0, 1, -1, 2097152, 2097151, 2097153};
    repeat (2) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    errs_w = 0; errs_t = 0; nwin = 0;
    for (int n = 0; n < 400; n++) begin
      yi = (n < 9) ? special[n] : int'($urandom_range(0, 10485760)) - 5242880;
      ds = 2 * int'($urandom_range(0, 3)) - 3;
      if (n % 3 == 0) ds = decide(real'(yi) / 1048576.0);   // many correct ones
      y <= q20_t'(yi); d_tgt <= sym_t'(ds); y_valid <= 1;
      #1;
      checks++;
      if (int'(y_sym) != decide(real'(yi) / 1048576.0)) begin
        failures++; $display("y=%0d sliced %0d", yi, y_sym);
      end
      if (decide(real'(yi) / 1048576.0) != ds) begin errs_w++; errs_t++; end
      @(posedge clk); y_valid <= 0; #1;
      if ((n + 1) % WINDOW == 0) begin
        checks++;
        if (!ser_valid || int'(ser_count) != errs_w) begin
          failures++; $display("window %0d: valid %0d count %0d expected %0d", nwin, ser_valid, ser_count, errs_w);
        end
        errs_w = 0; nwin++;
      end else begin
        checks++;
        if (ser_valid) begin failures++; $display("spurious ser_valid at %0d", n); end
      end
      if (n % 2 == 0) @(posedge clk);   // gaps between symbols
    end
    checks++;
    if (total_symbols != 400 || int'(total_errors) != errs_t) begin
      failures++; $display("totals %0d %0d expected 400 %0d", total_symbols, total_errors, errs_t);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
