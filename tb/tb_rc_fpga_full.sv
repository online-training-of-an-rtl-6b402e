// tb_rc_fpga_full - full-size testbench of rc_fpga_top at its default
// parameters (N = 50 states of 20 samples, 6 dropped each side, error windows
// of 10,000 symbols, 1115 clocks per serial bit, i.e. 115200 baud at
// 128.4635 MHz).
//
// The design runs in a closed loop with the behavioural reservoir model,
// whose loop is (N+1)*SPS = 1020 samples, one state longer than the input
// period as in the desynchronised reservoir. The testbench is the host: over
// the serial line it loads the 50 input-mask values (uniform in [-1, 1]) and
// starts the run; everything else keeps the reset values, which are the
// paper's Table I values (lambda0 = 0.4, lambda_min = 0, gamma = 0.999,
// k = 10) and the noiseless channel of eq. (6). It then trains for 30,000
// symbols and checks:
//   - the 50 mask writes arrived and the reservoir input was locked to once;
//   - three window error counts were reported over the serial line, each
//     equal to the count produced inside the design;
//   - the last window's symbol error rate is below 10% (chance is 75%) and
//     below that of the first window; lambda has decayed below 0.05.
module tb_rc_fpga_full;
  import rc_pkg::*;
  localparam int N = 50, SPS = 20, CPB = 1115, NSYM = 30000;

  logic clk = 0, rst_n = 0, uart_rxd = 1, uart_txd;
  logic signed [13:0] adc_data;
  logic signed [15:0] dac_data;
  int checks = 0, failures = 0;

  rc_fpga_top dut (.*);
  reservoir_model #(.LOOP((N + 1) * SPS), .LAT(5)) res (
    .clk, .dac(dac_data), .adc(adc_data));

  // 128.4635 MHz is approximated by a 7.8 ns period
  always #3.9ns clk = ~clk;

  initial begin
    #400ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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

  // serial receiver for the error reports
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

  int n_lock = 0, n_mask = 0, n_decay = 0;
  int win_log [$];
  logic locked_d = 0;
  logic run_ok;
  assign run_ok = rst_n && dut.cfg.run;
  always @(posedge clk) begin
    locked_d <= dut.locked && run_ok;
    if (run_ok && dut.locked && !locked_d) n_lock++;
    if (run_ok && dut.decay) n_decay++;
    if (rst_n && dut.mask_we) n_mask++;
    if (run_ok && dut.ser_valid) begin
      win_log.push_back(int'(dut.ser_count));
      $display("window %0d: %0d errors in 10000 symbols", win_log.size(), dut.ser_count);
    end
  end

  initial begin
    int nw;
    repeat (4) @(posedge clk);
    rst_n <= 1;
    repeat (4) @(posedge clk);
    for (int i = 0; i < N; i++)
      cmd(8'h80 + 8'(i), 24'(int'($urandom_range(0, 262142)) - 131071) & 24'h03FFFF);
    cmd(OP_RUN, 24'd1);
    repeat (NSYM * N * SPS + 3000) @(posedge clk);
    repeat (60 * CPB) @(posedge clk);          // let the last report finish
    nw = win_log.size();
    $display("locks %0d masks %0d decay steps %0d windows %0d reports %0d lambda %f",
             n_lock, n_mask, n_decay, nw, rep_vals.size(), real'(dut.lambda) / 131072.0);
    checks++; if (n_mask != N) begin failures++; $display("mask writes %0d", n_mask); end
    checks++; if (n_lock != 1) begin failures++; $display("locks %0d", n_lock); end
    checks++;
    if (nw != 3 || rep_vals.size() != 3) begin failures++; $display("window/report count"); end
    else begin
      for (int i = 0; i < 3; i++) begin
        checks++;
        if (rep_vals[i] != win_log[i]) begin failures++; $display("report %0d: %0d vs %0d", i, rep_vals[i], win_log[i]); end
      end
      checks++;
      if (!(win_log[2] < 1000 && win_log[2] < win_log[0])) begin failures++; $display("no equalisation"); end
    end
    checks++;
    if (real'(dut.lambda) / 131072.0 > 0.05) begin failures++; $display("lambda did not decay"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
