// check - symbol decision and error counting (the "Check" module).
//
// Each reservoir output y(n) (`y_valid`) is rounded to the nearest channel
// symbol, i.e. sliced at -2, 0 and +2 into {-3,-1,+1,+3}, and compared with
// the delayed target d'(n). Misclassified symbols are counted over windows of
// WINDOW symbols (10k in the paper's error-rate plots); at the end of each
// window the count is presented on `ser_count` with a one-cycle `ser_valid`,
// for the learning-rate monitor and for the host. The symbol error rate of a
// window is ser_count / WINDOW. Running totals of symbols and errors since
// reset are kept as well, so a host can read the error rate over a whole
// test sequence.
//
// The paper gives the rounding and the comparison; the slicing thresholds
// (a value exactly on a boundary goes to the upper symbol), the window
// mechanism and the totals are this design's own.
//
// Timing: `ser_valid` rises one cycle after the `y_valid` that closes the
// window. `rst` is synchronous.
module check
  import rc_pkg::*;
#(
  parameter int WINDOW = 10000
) (
  input  logic        clk,
  input  logic        rst,
  input  q20_t        y,
  input  sym_t        d_tgt,
  input  logic        y_valid,
  output sym_t        y_sym,
  output logic [23:0] ser_count,
  output logic        ser_valid,
  output logic [31:0] total_symbols,
  output logic [31:0] total_errors
);

  localparam q20_t TWO = 25'sd2097152;   // 2.0 in Q4.20

  always_comb begin
    if (y < -TWO)     y_sym = -3'sd3;
    else if (y < 0)   y_sym = -3'sd1;
    else if (y < TWO) y_sym =  3'sd1;
    else              y_sym =  3'sd3;
  end

  logic        wrong;
  logic [23:0] win_cnt, err_cnt;
  assign wrong = y_sym != d_tgt;

  always_ff @(posedge clk) begin
    if (rst) begin
      win_cnt       <= '0;
      err_cnt       <= '0;
      ser_count     <= '0;
      ser_valid     <= 1'b0;
      total_symbols <= '0;
      total_errors  <= '0;
    end else begin
      ser_valid <= 1'b0;
      if (y_valid) begin
        total_symbols <= total_symbols + 32'd1;
        total_errors  <= total_errors + 32'(wrong);
        if (win_cnt == 24'(WINDOW - 1)) begin
          win_cnt   <= '0;
          err_cnt   <= '0;
          ser_count <= err_cnt + 24'(wrong);
          ser_valid <= 1'b1;
        end else begin
          win_cnt <= win_cnt + 24'd1;
          err_cnt <= err_cnt + 24'(wrong);
        end
      end
    end
  end

endmodule
