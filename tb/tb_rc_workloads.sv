// tb_rc_workloads - the design's evaluated operating modes, end to end at
// reduced size (N = 20 states of 4 samples, windows of 500 symbols, 8 clocks
// per serial bit), with the behavioural reservoir model in the loop and the
// testbench acting as the host over the serial line. Each phase restarts the
// run from reset with a fresh set of weights:
//   1. noisy channel: uniform noise of amplitude A = 0.25 (about 24 dB
//      signal-to-noise ratio for the default channel), full training
//      schedule; the last windows must be far below chance (75%);
//   2. simplified training: gamma = 0 and lambda_min = lambda0 = 0.05, so
//      the learning rate never changes (the original used 0.01 over 100k
//      symbols; a larger constant shortens the run); lambda must stay
//      constant and the readout must still learn;
//   3. oscillating channel: the memory parameter m (added to every channel
//      tap but the one on d(n)) swings linearly between 0 and 0.05 and back
//      while training continues with lambda_min = 0.01; m must reach both
//      ends and the error rate must stay low.
// Mechanisms counted: sync locks (one per phase), decay steps, and the
// symbols m spends at each end of its swing in phase 3.
module tb_rc_workloads;
  import rc_pkg::*;
  localparam int N = 20, SPS = 4, DISCARD = 1, WINDOW = 500, CPB = 8;
  localparam int PERIOD = N * SPS;

  logic clk = 0, rst_n = 0, uart_rxd = 1, uart_txd;
  logic signed [13:0] adc_data;
  logic signed [15:0] dac_data;
  int checks = 0, failures = 0;

  rc_fpga_top #(.N(N), .SPS(SPS), .DISCARD(DISCARD), .WINDOW(WINDOW),
                .CLKS_PER_BIT(CPB)) dut (.*);
  reservoir_model #(.LOOP((N + 1) * SPS), .LAT(5)) res (
    .clk, .dac(dac_data), .adc(adc_data));

  always #5 clk = ~clk;

  initial begin
    #400_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ host side
  task automatic send_byte(input logic [7:0] b);
    logic [9:0] f;
    f = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      uart_rxd <= f[i];
      repeat (CPB) @(posedge clk);
    end
  endtask

  task automatic cmd(input logic [7:0] op, input logic [23:0] v);
    send_byte(op); send_byte(v[23:16]); send_byte(v[15:8]); send_byte(v[7:0]);
    repeat (2) @(posedge clk);
  endtask

  // serial receiver for reports
  int rep_vals [$];
  initial begin
    int b, nb;
    logic [31:0] word;
    nb = 0; word = 0;
    forever begin
      @(negedge uart_txd);
      repeat (CPB / 2) @(posedge clk);
      b = 0;
      for (int i = 0; i < 8; i++) begin
        repeat (CPB) @(posedge clk);
        b |= int'(uart_txd) << i;
      end
      repeat (CPB) @(posedge clk);
      word = {word[23:0], 8'(b)};
      nb++;
      if (nb == 4) begin
        nb = 0;
        if (word[31:24] == SER_TX_HEADER) rep_vals.push_back(int'(word[23:0]));
        else begin failures++; $display("bad report header %h", word); end
      end
    end
  end

  // ----------------------------------------------------- mechanism counters
  int n_lock = 0, n_decay = 0, n_rearm = 0, n_switch = 0, n_drift = 0, n_mask = 0;
  int win_log [$];
  logic locked_d = 0;
  logic run_ok;
  assign run_ok = rst_n && dut.cfg.run;
  par_t p1_d;
  always @(posedge clk) begin
    locked_d <= dut.locked && run_ok;
    if (run_ok && dut.locked && !locked_d) n_lock++;
    if (run_ok && dut.decay) n_decay++;
    if (run_ok && dut.rearm) n_rearm++;
    if (rst_n && dut.mask_we) n_mask++;
    p1_d <= dut.p1;
    if (run_ok && p1_d != dut.p1) begin
      if (dut.cfg.drift_mode == DRIFT_SWITCH) n_switch++;
      if (dut.cfg.drift_mode == DRIFT_RAMP) n_drift++;
    end
    if (run_ok && dut.ser_valid) win_log.push_back(int'(dut.ser_count));
  end

  task automatic run_symbols(input int n);
    repeat (n * PERIOD) @(posedge clk);
  endtask

  function automatic logic [23:0] q17v(input real r); return 24'($rtoi(r * 131072.0)); endfunction
  function automatic logic [23:0] q20v(input real r); return 24'($rtoi(r * 1048576.0)); endfunction
  initial begin
    int nw, last, n_top, n_bot;
    real mr;
    repeat (4) @(posedge clk);
    rst_n <= 1;
    repeat (4) @(posedge clk);
    for (int i = 0; i < N; i++)
      cmd(8'h80 + 8'(i), 24'(int'($urandom_range(0, 262142)) - 131071) & 24'h03FFFF);
    cmd(OP_BETA, q17v(0.3));
    cmd(OP_K, 24'd1);
    // ---------------------------------------------- phase 1: noisy channel
    cmd(OP_NOISE_A, q20v(0.25));
    cmd(OP_RUN, 24'd1);
    run_symbols(12000);
    nw = win_log.size();
    last = (win_log[nw-1] + win_log[nw-2] + win_log[nw-3]) / 3;
    $display("noisy channel: first window %0d, last windows %0d errors per %0d", win_log[0], last, WINDOW);
    checks++;
    if (nw < 20 || last > WINDOW / 8) begin failures++; $display("noisy channel not equalised"); end
    // ---------------------------------------------- phase 2: constant lambda
    cmd(OP_RUN, 24'd0);
    win_log.delete();
    cmd(OP_NOISE_A, 24'd0);
    cmd(OP_GAMMA, 24'd0);
    cmd(OP_LAMBDA0, q17v(0.05));
    cmd(OP_LAMBDA_MIN, q17v(0.05));
    cmd(OP_RUN, 24'd1);
    run_symbols(12000);
    nw = win_log.size();
    last = (win_log[nw-1] + win_log[nw-2] + win_log[nw-3]) / 3;
    $display("simplified training: first window %0d, last windows %0d, lambda %f",
             win_log[0], last, real'(dut.lambda) / 131072.0);
    checks++;
    if (dut.lambda != q17_t'(q17v(0.05))) begin failures++; $display("lambda not constant"); end
    checks++;
    if (nw < 20 || last > WINDOW / 10) begin failures++; $display("simplified training did not learn"); end
    // ---------------------------------------------- phase 3: oscillating m
    cmd(OP_RUN, 24'd0);
    win_log.delete();
    cmd(OP_GAMMA, q17v(0.999));
    cmd(OP_LAMBDA0, q17v(0.4));
    cmd(OP_LAMBDA_MIN, q17v(0.01));
    cmd(OP_DRIFT, 24'(DRIFT_OSC) | (24'(SEL_M) << 2));
    cmd(OP_V0, q20v(0.0)); cmd(OP_V1, q20v(0.05));
    cmd(OP_DELTA, 24'd12);                    // 0.05 in about 4400 symbols
    cmd(OP_RUN, 24'd1);
    n_top = 0; n_bot = 0;
    for (int s = 0; s < 14000; s++) begin
      run_symbols(1);
      mr = real'(dut.m) / 1048576.0;
      if (mr > 0.0499) n_top++;
      if (mr < 0.0001) n_bot++;
    end
    nw = win_log.size();
    $display("oscillating m: windows %p", win_log);
    $display("m at 0.05 for %0d symbols, at 0 for %0d symbols", n_top, n_bot);
    checks++;
    if (n_top == 0 || n_bot == 0) begin failures++; $display("m did not oscillate"); end
    checks++;
    last = 0;
    for (int i = nw / 2; i < nw; i++) if (win_log[i] > last) last = win_log[i];
    if (nw < 20 || last > WINDOW / 5) begin failures++; $display("oscillating channel not followed (worst %0d)", last); end
    // -------------------------------------------------------- mechanisms
    $display("mechanisms: lock %0d decay %0d", n_lock, n_decay);
    checks++; if (n_lock != 3) begin failures++; $display("lock count"); end
    checks++; if (n_decay == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
