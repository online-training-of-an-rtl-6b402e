// uart_rx - asynchronous serial receiver, 8 data bits, no parity, 1 stop bit.
//
// The line is synchronised by two flip-flops. A falling edge starts a frame;
// the start bit is confirmed at its middle, then each data bit (LSB first) is
// sampled in the middle of its bit time, CLKS_PER_BIT clock cycles apart.
// `valid` pulses for one cycle with `data` when the stop bit has been
// sampled high; a frame with a low stop bit is dropped. The default of
// CLKS_PER_BIT is 115200 baud at the 128.4635 MHz sampling clock; the paper
// does not give the baud rate, so this is an assumption.
module uart_rx #(
  parameter int CLKS_PER_BIT = 1115
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       rxd,
  output logic [7:0] data,
  output logic       valid
);

  localparam int CW = $clog2(CLKS_PER_BIT + 1);

  typedef enum logic [1:0] {R_IDLE, R_START, R_DATA, R_STOP} rstate_e;
  rstate_e       st;
  logic [1:0]    sync;
  logic [CW-1:0] cnt;
  logic [2:0]    bitn;
  logic [7:0]    sh;

  always_ff @(posedge clk) begin
    if (rst) sync <= 2'b11;
    else     sync <= {sync[0], rxd};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st    <= R_IDLE;
      cnt   <= '0;
      bitn  <= '0;
      sh    <= '0;
      data  <= '0;
      valid <= 1'b0;
    end else begin
      valid <= 1'b0;
      unique case (st)
        R_IDLE: if (!sync[1]) begin st <= R_START; cnt <= '0; end
        R_START:
          if (cnt == CW'(CLKS_PER_BIT / 2 - 1)) begin
            cnt  <= '0;
            bitn <= '0;
            st   <= sync[1] ? R_IDLE : R_DATA;   // glitch: back to idle
          end else cnt <= cnt + 1'b1;
        R_DATA:
          if (cnt == CW'(CLKS_PER_BIT - 1)) begin
            cnt <= '0;
            sh  <= {sync[1], sh[7:1]};
            if (bitn == 3'd7) st <= R_STOP;
            bitn <= bitn + 3'd1;
          end else cnt <= cnt + 1'b1;
        default:  // R_STOP
          if (cnt == CW'(CLKS_PER_BIT - 1)) begin
            st <= R_IDLE;
            if (sync[1]) begin
              data  <= sh;
              valid <= 1'b1;
            end
          end else cnt <= cnt + 1'b1;
      endcase
    end
  end

endmodule
