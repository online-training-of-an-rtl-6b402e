// rc_fpga_top - FPGA part of an online-trained opto-electronic reservoir
// computer for nonlinear channel equalisation.
//
// The FPGA forms the input and output layers around an analogue delay-line
// reservoir. Input layer: params and chan generate random symbols d(n) and
// the distorted, noisy channel output u(n); fpga2exp multiplies u(n) by the
// input mask and gain and sends it, time-multiplexed over N virtual nodes,
// to the DAC. Output layer: exp2fpga samples and averages the reservoir
// states from the ADC; train computes y(n) = sum w_i x_i(n) and updates the
// weights by gradient descent against the delayed d(n); step schedules the
// learning rate and re-arms it when the error rate jumps; check counts symbol
// errors. The uart block holds all host-written parameters and reports the
// error count. This follows the module structure of the paper's design.
//
// Interface: one clock `clk` (the converters' sampling clock, 128.4635 MHz
// in the paper), active-low board reset `rst_n`, serial lines to the host,
// the 14-bit ADC samples and the 16-bit DAC samples, one per clock each.
// The datapath blocks are held in reset while the host has the board in its
// reset state (cfg.run = 0); the mask and parameter registers are not.
//
// Timing: a symbol period is N*SPS clock cycles (1000 at the defaults, 7.8 us
// at 128.4635 MHz); one symbol is equalised and one training step made per
// period. The sync offset and the target delay are host registers whose
// defaults (N*SPS clocks and 2 symbols) suit a reservoir whose ADC response
// lags the DAC by 3 or more cycles within one state.
//
// Several internal status signals (sync lock, frame start, lambda re-arm and
// decay events, the weights, the decided symbol, the running totals, command
// completion) are left without a load here. They are observation points for
// an on-chip logic analyser, as the paper's set-up had, and for the
// testbenches; synthesis removes the logic that only feeds them.
module rc_fpga_top
  import rc_pkg::*;
#(
  parameter int N            = 50,
  parameter int SPS          = 20,
  parameter int DISCARD      = 6,
  parameter int WINDOW       = 10000,
  parameter int CLKS_PER_BIT = 1115,
  parameter int DMAX         = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               uart_rxd,
  output logic               uart_txd,
  input  logic signed [13:0] adc_data,
  output logic signed [15:0] dac_data
);

  logic    board_rst, run_rst;
  rc_cfg_t cfg;
  logic    mask_we, cmd_done;
  logic [6:0] mask_addr;
  q17_t    mask_data;

  logic [23:0] ser_count;
  logic        ser_valid;

  assign board_rst = !rst_n;
  assign run_rst   = board_rst || !cfg.run;

  uart #(
    .CLKS_PER_BIT (CLKS_PER_BIT),
    .SYNC_OFS_DEF (24'(N * SPS)),
    .TGT_DELAY_DEF(8'd2)
  ) u_uart (
    .clk, .rst(board_rst), .rxd(uart_rxd), .txd(uart_txd),
    .ser_count, .ser_valid, .cfg,
    .mask_we, .mask_addr, .mask_data, .cmd_done
  );

  // ------------------------------------------------------------ input layer
  logic sym_req, frame_start, tx_running;
  par_t p1, p2, p3, m;
  q20_t u;
  sym_t d;
  logic d_valid;

  params u_params (
    .clk, .rst(run_rst), .tick(sym_req),
    .base_p1(cfg.p1), .base_p2(cfg.p2), .base_p3(cfg.p3), .base_m(cfg.m),
    .mode(cfg.drift_mode), .sel(cfg.drift_sel),
    .v0(cfg.v0), .v1(cfg.v1), .v2(cfg.v2), .delta(cfg.delta),
    .period(cfg.period),
    .p1, .p2, .p3, .m
  );

  chan u_chan (
    .clk, .rst(run_rst), .sym_req,
    .p1, .p2, .p3, .m, .noise_a(cfg.noise_a),
    .u, .d, .valid(d_valid)
  );

  fpga2exp #(.N(N), .SPS(SPS)) u_fpga2exp (
    .clk, .rst(run_rst),
    .mask_we, .mask_addr, .mask_data, .beta(cfg.beta),
    .u, .sym_req, .dac_data, .frame_start, .running(tx_running)
  );

  // ----------------------------------------------------------- output layer
  q17_t x [N];
  logic x_valid, locked;
  q17_t lambda;
  q20_t y;
  sym_t d_tgt, y_sym;
  logic y_valid, rearm, decay;
  q20_t w [N];
  logic [31:0] total_symbols, total_errors;

  exp2fpga #(.N(N), .SPS(SPS), .DISCARD(DISCARD)) u_exp2fpga (
    .clk, .rst(run_rst), .adc(adc_data), .sync_ofs(cfg.sync_ofs),
    .x, .x_valid, .locked
  );

  train #(.N(N), .DMAX(DMAX)) u_train (
    .clk, .rst(run_rst), .x, .x_valid,
    .d_in(d), .d_valid, .tgt_delay(cfg.tgt_delay), .lambda,
    .y, .d_tgt, .y_valid, .w
  );

  step u_step (
    .clk, .rst(run_rst), .tick(y_valid),
    .lambda0(cfg.lambda0), .lambda_min(cfg.lambda_min), .gamma(cfg.gamma),
    .k(cfg.k), .ser_th(cfg.ser_th), .ser_count, .ser_valid,
    .lambda, .rearm, .decay
  );

  check #(.WINDOW(WINDOW)) u_check (
    .clk, .rst(run_rst), .y, .d_tgt, .y_valid,
    .y_sym, .ser_count, .ser_valid, .total_symbols, .total_errors
  );

endmodule
