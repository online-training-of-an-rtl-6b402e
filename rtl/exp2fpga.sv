// exp2fpga - readout of the reservoir states from the ADC (the "Exp2Fpga"
// module).
//
// After reset the module watches the ADC for the sync pulse sent by fpga2exp.
// The first sample at or above SYNC_TH marks the pulse; SYNC_OFS clocks after
// that sample the first state of the first symbol period begins. From then on
// it runs freely: every state lasts SPS samples, of which the first DISCARD
// and the last DISCARD are dropped (they hold the transients of the
// converters) and the remaining SPS-2*DISCARD are averaged. After N states the
// N averages are presented together on `x` for one symbol period, with a
// one-cycle `x_valid`. With the paper's numbers (SPS = 20, DISCARD = 6) the
// average is over 8 samples, as in the paper; the average of 14-bit samples
// (Q0.13) is extended to the 18-bit Q0.17 state format.
//
// Own choices: the threshold detector, the sync offset as a host register,
// and the double buffering of the outputs. SPS-2*DISCARD must be a power of
// two so that the average is a shift.
//
// Timing: `x_valid` rises one cycle after the last sample of state N-1; `x`
// then holds until the next `x_valid`. `locked` is high once the pulse has
// been seen. `rst` is synchronous and re-arms the pulse detector.
module exp2fpga
  import rc_pkg::*;
#(
  parameter int          N       = 50,
  parameter int          SPS     = 20,
  parameter int          DISCARD = 6,
  parameter logic signed [13:0] SYNC_TH = 14'sd4096
) (
  input  logic               clk,
  input  logic               rst,
  input  logic signed [13:0] adc,
  input  logic [23:0]        sync_ofs,
  output q17_t               x [N],
  output logic               x_valid,
  output logic               locked
);

  localparam int AVG  = SPS - 2 * DISCARD;
  localparam int AVGL = $clog2(AVG);
  localparam int IW   = $clog2(N);
  localparam int SW   = $clog2(SPS);
  localparam int AW   = 14 + $clog2(AVG) + 1;

  typedef enum logic [1:0] {S_WAIT, S_DELAY, S_SAMPLE} state_e;
  state_e state;

  logic [23:0]          cnt;
  logic [SW-1:0]        slot;
  logic [IW-1:0]        idx;
  logic signed [AW-1:0] acc, acc_next;
  q17_t                 xbuf [N];
  logic                 sample_en, in_win, state_end;

  assign sample_en = (state == S_SAMPLE) || (state == S_DELAY && cnt == sync_ofs);
  assign in_win    = int'(slot) >= DISCARD && int'(slot) < SPS - DISCARD;
  assign acc_next  = acc + (in_win ? AW'(adc) : AW'(0));
  assign state_end = sample_en && slot == SW'(SPS - 1);
  assign locked    = state != S_WAIT;

  // Average in Q0.17: (acc / AVG) * 2^4.
  function automatic q17_t scale(input logic signed [AW-1:0] a);
    logic signed [AW+3:0] t;
    t = (AW+4)'(a) <<< 4;
    return q17_t'(t >>> AVGL);
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= S_WAIT;
      cnt     <= '0;
      slot    <= '0;
      idx     <= '0;
      acc     <= '0;
      x_valid <= 1'b0;
    end else begin
      x_valid <= 1'b0;
      unique case (state)
        S_WAIT:  if (adc >= SYNC_TH) begin state <= S_DELAY; cnt <= 24'd1; end
        S_DELAY: begin
          cnt <= cnt + 24'd1;
          if (cnt == sync_ofs) state <= S_SAMPLE;
        end
        default: ;
      endcase
      if (sample_en) begin
        if (state_end) begin
          xbuf[idx] <= scale(acc_next);
          acc       <= '0;
          slot      <= '0;
          if (idx == IW'(N - 1)) begin
            idx     <= '0;
            x_valid <= 1'b1;
          end else begin
            idx <= idx + 1'b1;
          end
        end else begin
          acc  <= acc_next;
          slot <= slot + 1'b1;
        end
      end
    end
  end

  // Output register: all N states of one period, updated together.
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < N; i++) x[i] <= '0;
    end else if (state_end && idx == IW'(N - 1)) begin
      for (int i = 0; i < N - 1; i++) x[i] <= xbuf[i];
      x[N-1] <= scale(acc_next);
    end
  end

  initial assert ((1 << AVGL) == AVG && AVG > 0)
    else $error("exp2fpga: SPS-2*DISCARD must be a power of two");

endmodule
