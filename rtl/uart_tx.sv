// uart_tx - asynchronous serial transmitter, 8 data bits, no parity, 1 stop
// bit, LSB first.
//
// A one-cycle `start` with `data` while `busy` is low sends one frame: start
// bit, 8 data bits and stop bit, each CLKS_PER_BIT cycles long. `busy` is
// high from the cycle after `start` until the stop bit has ended; `start`
// while busy is ignored. The line idles high. Baud rate as in uart_rx.
module uart_tx #(
  parameter int CLKS_PER_BIT = 1115
) (
  input  logic       clk,
  input  logic       rst,
  input  logic [7:0] data,
  input  logic       start,
  output logic       txd,
  output logic       busy
);

  localparam int CW = $clog2(CLKS_PER_BIT + 1);

  logic [CW-1:0] cnt;
  logic [3:0]    bitn;    // 0 start, 1..8 data, 9 stop
  logic [9:0]    frame;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy  <= 1'b0;
      txd   <= 1'b1;
      cnt   <= '0;
      bitn  <= '0;
      frame <= '1;
    end else if (!busy) begin
      txd <= 1'b1;
      if (start) begin
        busy  <= 1'b1;
        frame <= {1'b1, data, 1'b0};
        txd   <= 1'b0;
        cnt   <= '0;
        bitn  <= '0;
      end
    end else begin
      if (cnt == CW'(CLKS_PER_BIT - 1)) begin
        cnt <= '0;
        if (bitn == 4'd9) begin
          busy <= 1'b0;
          txd  <= 1'b1;
        end else begin
          bitn <= bitn + 4'd1;
          txd  <= frame[bitn + 4'd1];
        end
      end else cnt <= cnt + 1'b1;
    end
  end

endmodule
