// tb_rc_fpga_top - end-to-end testbench of the whole FPGA design.
//
// The design runs in a closed loop with a behavioural model of the
// opto-electronic reservoir between its DAC and ADC ports; the testbench is
// the host, talking to the design only through the serial line. Reduced
// size for speed: N = 20 states of SPS = 4 samples (1 dropped each side),
// error-count windows of 500 symbols, 8 clocks per serial bit. Phases:
//   1. stationary noiseless channel: masks and parameters loaded, run; the
//      readout must learn: the error rate of the last windows must be below
//      10% (chance is 75%) and well below that of the first window;
//   2. switching channel: p1 cycles 1.0 -> 0.8 -> 0.6 every 4000 symbols
//      with the error threshold armed; each switch must be followed by a
//      re-arm of lambda and by recovery of the error rate;
//   3. drifting channel: p1 ramps down with lambda_min > 0; training must
//      keep the error rate low.
// Mechanisms counted (each must occur): sync lock, lambda decay steps,
// lambda re-arms, channel switches, drift steps, error reports received over
// the serial line, mask writes. The report values are checked against the
// check block's window counts.
module tb_rc_fpga_top;
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
    int first, last, nw, reps_before, wi, sw_ok;
    repeat (4) @(posedge clk);
    rst_n <= 1;
    repeat (4) @(posedge clk);
    // input mask, uniform in [-1, 1]
    for (int i = 0; i < N; i++)
      cmd(8'h80 + 8'(i), 24'(int'($urandom_range(0, 262142)) - 131071) & 24'h03FFFF);
    cmd(OP_BETA, q17v(0.3));
    cmd(OP_K, 24'd1);
    cmd(OP_GAMMA, q17v(0.999));
    // ---------------------------------------------- phase 1: stationary
    cmd(OP_RUN, 24'd1);
    run_symbols(12000);
    nw = win_log.size();
    checks++;
    if (nw < 20) begin failures++; $display("only %0d windows", nw); end
    else begin
      first = win_log[0];
      last  = (win_log[nw-1] + win_log[nw-2] + win_log[nw-3]) / 3;
      $display("phase 1: first window %0d errors, last windows %0d errors per %0d", first, last, WINDOW);
      checks++;
      if (!(last < WINDOW / 10 && last * 3 < first)) begin failures++; $display("no equalisation"); end
    end
    checks++;
    if (real'(dut.lambda) / 131072.0 > 0.01) begin failures++; $display("lambda did not decay"); end
    // ---------------------------------------------- phase 2: switching
    cmd(OP_RUN, 24'd0);
    win_log.delete();
    cmd(OP_DRIFT, 24'(DRIFT_SWITCH) | (24'(SEL_P1) << 2));
    cmd(OP_V0, q20v(1.0)); cmd(OP_V1, q20v(0.8)); cmd(OP_V2, q20v(0.6));
    cmd(OP_PERIOD, 24'd6000);
    cmd(OP_SER_TH, 24'(WINDOW / 5));
    cmd(OP_RUN, 24'd1);
    run_symbols(18000);
    $display("phase 2: windows %p", win_log);
    $display("phase 2: %0d switches, %0d re-arms", n_switch, n_rearm);
    checks++;
    if (n_switch < 2 || n_rearm < 2) begin failures++; $display("switch/re-arm missing"); end
    // error rate recovers before each switch: window just before 6000 and 12000
    sw_ok = 0;
    for (int s = 1; s <= 2; s++) begin
      wi = s * 6000 / WINDOW - 1;
      if (wi < win_log.size() && win_log[wi] < WINDOW / 5) sw_ok++;
    end
    checks++;
    if (sw_ok != 2) begin failures++; $display("no recovery after switches"); end
    // ---------------------------------------------- phase 3: drift
    cmd(OP_RUN, 24'd0);
    win_log.delete();
    cmd(OP_DRIFT, 24'(DRIFT_RAMP) | (24'(SEL_P1) << 2));
    cmd(OP_V0, q20v(1.0)); cmd(OP_V1, q20v(0.8));
    cmd(OP_DELTA, 24'd20);                    // 0.2 over ~10500 symbols
    cmd(OP_SER_TH, 24'hFFFFFF);
    cmd(OP_LAMBDA_MIN, q17v(0.01));
    cmd(OP_RUN, 24'd1);
    run_symbols(12000);
    nw = win_log.size();
    $display("phase 3: windows %p", win_log);
    checks++;
    if (nw < 20 || win_log[nw-1] > WINDOW / 5 || n_drift < 100) begin
      failures++; $display("drift not followed (%0d steps)", n_drift);
    end
    reps_before = rep_vals.size();
    repeat (2000) @(posedge clk);
    // -------------------------------------------------------- mechanisms
    $display("mechanisms: lock %0d decay %0d rearm %0d switch %0d drift %0d reports %0d masks %0d",
             n_lock, n_decay, n_rearm, n_switch, n_drift, rep_vals.size(), n_mask);
    checks++; if (n_lock != 3)        begin failures++; $display("sync lock count"); end
    checks++; if (n_decay == 0)       failures++;
    checks++; if (n_rearm == 0)       failures++;
    checks++; if (n_switch == 0)      failures++;
    checks++; if (n_drift == 0)       failures++;
    checks++; if (n_mask != N)        failures++;
    checks++; if (rep_vals.size() < 40) begin failures++; $display("reports %0d", rep_vals.size()); end
    // last reports equal the last windows of phase 3
    checks++;
    if (rep_vals.size() > 0 && rep_vals[rep_vals.size()-1] != win_log[win_log.size()-1]) begin
      failures++; $display("report %0d vs window %0d", rep_vals[rep_vals.size()-1], win_log[win_log.size()-1]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
