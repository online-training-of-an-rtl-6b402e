// tb_uart - self-checking testbench of uart (with uart_rx and uart_tx).
//
// Serial line at 8 clocks per bit. The testbench acts as the host: it checks
// the reset defaults, sends 4-byte commands bit by bit (parameter writes,
// three mask writes, the drift mode, run on), and checks every register and
// each mask write pulse against the values sent. An unknown opcode must
// change nothing. It then pulses a window error count while running and
// decodes the reply on the transmit line: header 0x53 and the three count
// bytes, MSB first, each frame with a correct stop bit. A count offered
// while in reset must not be sent.
module tb_uart;
  import rc_pkg::*;
  localparam int CPB = 8;
  logic clk = 0, rst = 1, rxd = 1, txd;
  logic [23:0] ser_count = '0; logic ser_valid = 0;
  rc_cfg_t cfg;
  logic mask_we; logic [6:0] mask_addr; q17_t mask_data; logic cmd_done;
  int checks = 0, failures = 0;

  uart #(.CLKS_PER_BIT(CPB), .SYNC_OFS_DEF(24'd77), .TGT_DELAY_DEF(8'd5)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mask write monitor
  int mw_n = 0; int mw_addr [$]; int mw_data [$];
  always @(posedge clk) if (mask_we) begin
    mw_n++; mw_addr.push_back(int'(mask_addr)); mw_data.push_back(int'(mask_data));
  end

  task automatic send_byte(input logic [7:0] b);
    logic [9:0] f = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      rxd <= f[i];
      repeat (CPB) @(posedge clk);
    end
  endtask

  task automatic cmd(input logic [7:0] op, input logic [23:0] v);
    send_byte(op); send_byte(v[23:16]); send_byte(v[15:8]); send_byte(v[7:0]);
    repeat (4) @(posedge clk); #1;
  endtask

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // receive one byte from txd; returns -1 on a framing error or timeout
  task automatic get_byte(output int b);
    int t = 0;
    b = 0;
    while (txd && t < 2000) begin @(posedge clk); #1; t++; end
    if (t >= 2000) begin b = -1; return; end
    repeat (CPB / 2) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      repeat (CPB) @(posedge clk); #1;
      b |= int'(txd) << i;
    end
    repeat (CPB) @(posedge clk); #1;
    if (!txd) b = -1;
  endtask

  initial begin
    int b [4];
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk); #1;
    chk(!cfg.run && cfg.lambda0 == L0_DEF && cfg.gamma == GAMMA_DEF && cfg.k == 10 &&
        cfg.p1 == P_ONE && cfg.p2 == P2_DEF && cfg.p3 == P3_DEF && cfg.sync_ofs == 77 &&
        cfg.tgt_delay == 5 && cfg.period == 266000 && cfg.ser_th == 24'hFFFFFF, "defaults");
    cmd(OP_BETA,       24'h007333);  chk(cfg.beta == 18'sh07333, "beta");
    cmd(OP_LAMBDA0,    24'h00CCCD);  chk(cfg.lambda0 == 18'sh0CCCD, "lambda0");
    cmd(OP_LAMBDA_MIN, 24'h00051F);  chk(cfg.lambda_min == 18'sh0051F, "lambda_min");
    cmd(OP_GAMMA,      24'h01FFBD);  chk(cfg.gamma == 18'sh1FFBD, "gamma");
    cmd(OP_K,          24'd37);      chk(cfg.k == 37, "k");
    cmd(OP_SER_TH,     24'd250);     chk(cfg.ser_th == 250, "ser_th");
    cmd(OP_SYNC_OFS,   24'd1234);    chk(cfg.sync_ofs == 1234, "sync_ofs");
    cmd(OP_TGT_DELAY,  24'd3);       chk(cfg.tgt_delay == 3, "tgt_delay");
    cmd(OP_NOISE_A,    24'h0FEDCB);  chk(cfg.noise_a == 24'sh0FEDCB, "noise_a");
    cmd(OP_P1,         24'h0CCCCD);  chk(cfg.p1 == 24'sh0CCCCD, "p1");
    cmd(OP_P2,         24'h00B000);  chk(cfg.p2 == 24'sh00B000, "p2");
    cmd(OP_P3,         24'hFFD2F2);  chk(cfg.p3 == 24'shFFD2F2, "p3");
    cmd(OP_M,          24'h00199A);  chk(cfg.m == 24'sh00199A, "m");
    cmd(OP_DRIFT,      24'h00000B);  chk(cfg.drift_mode == DRIFT_SWITCH && cfg.drift_sel == SEL_P3, "drift");
    cmd(OP_V0,         24'h111111);  chk(cfg.v0 == 24'sh111111, "v0");
    cmd(OP_V1,         24'h222222);  chk(cfg.v1 == 24'sh222222, "v1");
    cmd(OP_V2,         24'h333333);  chk(cfg.v2 == 24'sh333333, "v2");
    cmd(OP_DELTA,      24'h000100);  chk(cfg.delta == 24'sh000100, "delta");
    cmd(OP_PERIOD,     24'd5000);    chk(cfg.period == 5000, "period");
    cmd(8'h7E,         24'hFFFFFF);  chk(cfg.k == 37 && cfg.period == 5000 && !cfg.run, "unknown opcode");
    cmd(8'h80,         24'h01ABCD);
    cmd(8'h80 + 8'd49, 24'h000123);
    cmd(8'h85,         24'h03FFFF);
    chk(mw_n == 3, "mask write count");
    if (mw_n == 3) begin
      chk(mw_addr[0] == 0  && mw_data[0] == 109517, "mask 0");
      chk(mw_addr[1] == 49 && mw_data[1] == 291,    "mask 49");
      chk(mw_addr[2] == 5  && mw_data[2] == -1,     "mask 5");
    end
    // no report while in reset
    ser_count <= 24'h00ABCD; ser_valid <= 1; @(posedge clk); ser_valid <= 0;
    repeat (20 * CPB) @(posedge clk); #1;
    chk(txd == 1'b1, "no report in reset");
    cmd(OP_RUN, 24'd1);  chk(cfg.run, "run");
    ser_count <= 24'h123456; ser_valid <= 1; @(posedge clk); ser_valid <= 0;
    for (int i = 0; i < 4; i++) get_byte(b[i]);
    chk(b[0] == 'h53 && b[1] == 'h12 && b[2] == 'h34 && b[3] == 'h56, "report bytes");
    $display("report %h %h %h %h", b[0], b[1], b[2], b[3]);
    cmd(OP_RUN, 24'd0);  chk(!cfg.run, "reset state");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
