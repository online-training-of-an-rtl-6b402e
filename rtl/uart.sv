// uart - host interface and parameter registers (the "UART" module).
//
// The host computer controls the board over a serial line. It sends 4-byte
// commands: an opcode byte, then a 24-bit value, most significant byte first
// (see rc_pkg::opcode_e). A command either writes one parameter register,
// writes one element of the input mask (opcodes 0x80 + i, value[17:0] =
// M_i in Q0.17, passed on through the mask port as a one-cycle write), or
// switches the board between reset (value 0) and running (value 1) with
// OP_RUN. Unknown opcodes are ignored. While the board runs, every window
// error count from the check block is sent back as 4 bytes: SER_TX_HEADER and
// the 24-bit count, MSB first; a count that arrives while the previous one is
// still being sent is dropped (at 115200 baud a report takes about 45k
// cycles, far less than a 10k-symbol window).
//
// The paper gives the 4-byte command size, the reset/run toggle, the
// parameter writes and the periodic error-rate report; the opcode map, the
// response format, the register defaults and the baud rate are this design's
// own. The paper notes the host sends commands only while the board is in
// reset; the module accepts them at any time.
//
// Timing: a register takes its new value one cycle after the stop bit of the
// command's fourth byte has been sampled. `rst` (synchronous, board reset)
// loads the defaults: the channel of equations (3)-(4) without noise, Table I
// learning parameters with k = 10, beta = 0.225, the switching values
// p1 = 1.0 / 0.8 / 0.6 every 266000 symbols, and the error-count threshold at
// its maximum (re-arming off).
module uart
  import rc_pkg::*;
#(
  parameter int          CLKS_PER_BIT  = 1115,
  parameter logic [23:0] SYNC_OFS_DEF  = 24'd1000,
  parameter logic [7:0]  TGT_DELAY_DEF = 8'd2
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        rxd,
  output logic        txd,
  input  logic [23:0] ser_count,
  input  logic        ser_valid,
  output rc_cfg_t     cfg,
  output logic        mask_we,
  output logic [6:0]  mask_addr,
  output q17_t        mask_data,
  output logic        cmd_done
);

  // ----------------------------------------------------------- receive side
  logic [7:0] rx_data;
  logic       rx_valid;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk, .rst, .rxd, .data(rx_data), .valid(rx_valid));

  logic [1:0]  nbytes;
  logic [23:0] buf_lo;
  logic [7:0]  op;

  always_ff @(posedge clk) begin
    if (rst) begin
      nbytes   <= '0;
      buf_lo   <= '0;
      op       <= '0;
      cmd_done <= 1'b0;
      mask_we  <= 1'b0;
      mask_addr <= '0;
      mask_data <= '0;
      cfg.run        <= 1'b0;
      cfg.noise_a    <= '0;
      cfg.beta       <= BETA_DEF;
      cfg.lambda0    <= L0_DEF;
      cfg.lambda_min <= '0;
      cfg.gamma      <= GAMMA_DEF;
      cfg.k          <= 24'd10;
      cfg.ser_th     <= 24'hFFFFFF;
      cfg.sync_ofs   <= SYNC_OFS_DEF;
      cfg.tgt_delay  <= TGT_DELAY_DEF;
      cfg.p1         <= P_ONE;
      cfg.p2         <= P2_DEF;
      cfg.p3         <= P3_DEF;
      cfg.m          <= '0;
      cfg.drift_mode <= DRIFT_CONST;
      cfg.drift_sel  <= SEL_P1;
      cfg.v0         <= P_ONE;
      cfg.v1         <= 24'sd838861;   // 0.8
      cfg.v2         <= 24'sd629146;   // 0.6
      cfg.delta      <= '0;
      cfg.period     <= 24'd266000;
    end else begin
      cmd_done <= 1'b0;
      mask_we  <= 1'b0;
      if (rx_valid) begin
        nbytes <= nbytes + 2'd1;
        unique case (nbytes)
          2'd0: op <= rx_data;
          2'd1: buf_lo[23:16] <= rx_data;
          2'd2: buf_lo[15:8]  <= rx_data;
          default: begin
            automatic logic [23:0] v = {buf_lo[23:8], rx_data};
            cmd_done <= 1'b1;
            if (op[7]) begin
              mask_we   <= 1'b1;
              mask_addr <= op[6:0];
              mask_data <= q17_t'(v[17:0]);
            end else begin
              case (op)
                OP_RUN:        cfg.run        <= v[0];
                OP_NOISE_A:    cfg.noise_a    <= par_t'(v);
                OP_BETA:       cfg.beta       <= q17_t'(v[17:0]);
                OP_LAMBDA0:    cfg.lambda0    <= q17_t'(v[17:0]);
                OP_LAMBDA_MIN: cfg.lambda_min <= q17_t'(v[17:0]);
                OP_GAMMA:      cfg.gamma      <= q17_t'(v[17:0]);
                OP_K:          cfg.k          <= v;
                OP_SER_TH:     cfg.ser_th     <= v;
                OP_SYNC_OFS:   cfg.sync_ofs   <= v;
                OP_TGT_DELAY:  cfg.tgt_delay  <= v[7:0];
                OP_P1:         cfg.p1         <= par_t'(v);
                OP_P2:         cfg.p2         <= par_t'(v);
                OP_P3:         cfg.p3         <= par_t'(v);
                OP_M:          cfg.m          <= par_t'(v);
                OP_DRIFT: begin
                  cfg.drift_mode <= drift_mode_e'(v[1:0]);
                  cfg.drift_sel  <= drift_sel_e'(v[3:2]);
                end
                OP_V0:         cfg.v0         <= par_t'(v);
                OP_V1:         cfg.v1         <= par_t'(v);
                OP_V2:         cfg.v2         <= par_t'(v);
                OP_DELTA:      cfg.delta      <= par_t'(v);
                OP_PERIOD:     cfg.period     <= v;
                default: ;
              endcase
            end
          end
        endcase
      end
    end
  end

  // ---------------------------------------------------------- transmit side
  logic [7:0]  tx_data;
  logic        tx_start, tx_busy;
  logic [23:0] tx_val;
  logic [2:0]  tx_left;     // bytes still to send

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk, .rst, .data(tx_data), .start(tx_start), .txd, .busy(tx_busy));

  always_ff @(posedge clk) begin
    if (rst) begin
      tx_left  <= '0;
      tx_val   <= '0;
      tx_start <= 1'b0;
      tx_data  <= '0;
    end else begin
      tx_start <= 1'b0;
      if (tx_left == '0) begin
        if (ser_valid && cfg.run && !tx_busy && !tx_start) begin
          tx_val   <= ser_count;
          tx_data  <= SER_TX_HEADER;
          tx_start <= 1'b1;
          tx_left  <= 3'd3;
        end
      end else if (!tx_busy && !tx_start) begin
        tx_start <= 1'b1;
        tx_left  <= tx_left - 3'd1;
        unique case (tx_left)
          3'd3:    tx_data <= tx_val[23:16];
          3'd2:    tx_data <= tx_val[15:8];
          default: tx_data <= tx_val[7:0];
        endcase
      end
    end
  end

endmodule
