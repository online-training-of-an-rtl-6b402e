// fpga2exp - input layer towards the experiment (the "Fpga2Exp" module).
//
// Time-multiplexes each channel sample u(n) over the N virtual nodes of the
// delay reservoir: a symbol period is N states of SPS clock cycles each, and
// during state i the DAC is driven with beta * M_i * u(n). The input mask M_i
// (Q0.17, written by the host through the mask port, also while in reset) and
// the input gain beta (Q0.17) follow the paper, as does the sync pulse: when
// the run starts (rst falls) the module first sends a short pulse into the
// reservoir and then a quiet lead-in, so that exp2fpga can lock its sampling
// to the returning pulse.
//
// Own choices (the paper gives none of these): the pulse is PULSE_LEN cycles
// at PULSE_CODE, the lead-in from pulse start to the first state is LEAD
// cycles, and the DAC code is the product in units of 2^-14 (full scale
// +-2.0), saturated to 16 bits.
//
// Timing: `sym_req` pulses once at the first lead-in cycle (to fetch u(0)) and
// then at the first cycle of every symbol period, at the moment the previous
// output of chan is latched; chan must answer within SPS*N cycles (it takes
// 4). `frame_start` marks the first cycle of each period on the counters.
// The DAC path adds 2 cycles of latency to the counters, for the pulse and
// for the data alike.
module fpga2exp
  import rc_pkg::*;
#(
  parameter int          N          = 50,
  parameter int          SPS        = 20,
  parameter int          PULSE_LEN  = SPS,
  parameter int          LEAD       = N * SPS,
  parameter logic [15:0] PULSE_CODE = 16'h4000
) (
  input  logic               clk,
  input  logic               rst,
  // mask write port (host)
  input  logic               mask_we,
  input  logic [6:0]         mask_addr,
  input  q17_t               mask_data,
  input  q17_t               beta,
  // channel
  input  q20_t               u,
  output logic               sym_req,
  // DAC
  output logic signed [15:0] dac_data,
  output logic               frame_start,
  output logic               running
);

  localparam int IW = $clog2(N);
  localparam int SW = $clog2(SPS);
  localparam int LW = $clog2(LEAD + 1);

  q17_t mask [N];

  always_ff @(posedge clk) begin
    if (mask_we && int'(mask_addr) < N) mask[IW'(mask_addr)] <= mask_data;
  end

  logic [LW-1:0] lead_cnt;
  logic [SW-1:0] slot;
  logic [IW-1:0] idx;
  q20_t          u_cur;

  assign frame_start = running && slot == '0 && idx == '0;

  always_ff @(posedge clk) begin
    if (rst) begin
      lead_cnt <= '0;
      running  <= 1'b0;
      slot     <= '0;
      idx      <= '0;
      u_cur    <= '0;
      sym_req  <= 1'b0;
    end else begin
      sym_req <= 1'b0;
      if (!running) begin
        if (lead_cnt == '0) sym_req <= 1'b1;
        if (lead_cnt == LW'(LEAD - 1)) running <= 1'b1;
        lead_cnt <= lead_cnt + 1'b1;
      end else begin
        if (frame_start) begin
          u_cur   <= u;
          sym_req <= 1'b1;
        end
        if (slot == SW'(SPS - 1)) begin
          slot <= '0;
          idx  <= (idx == IW'(N - 1)) ? '0 : idx + 1'b1;
        end else begin
          slot <= slot + 1'b1;
        end
      end
    end
  end

  // ------------------------------------------------------------ DAC pipeline
  logic          pulse_d, run_d;
  logic [IW-1:0] idx_d;

  always_ff @(posedge clk) begin
    if (rst) begin
      pulse_d <= 1'b0;
      run_d   <= 1'b0;
      idx_d   <= '0;
    end else begin
      pulse_d <= !running && lead_cnt < LW'(PULSE_LEN);
      run_d   <= running;
      idx_d   <= idx;
    end
  end

  logic signed [Q20_W+Q17_W-1:0] mu_full;
  logic signed [Q20_W+Q17_W-1:0] bmu_full;
  q20_t                          mu, bmu;
  logic signed [Q20_W-7:0]       code;

  always_comb begin
    mu_full  = mask[idx_d] * u_cur;            // Q4.37
    mu       = q20_t'(mu_full >>> Q17_F);      // |M| < 1: fits
    bmu_full = beta * mu;
    bmu      = q20_t'(bmu_full >>> Q17_F);
    code     = bmu[Q20_W-1:6];                 // units of 2^-14
  end

  always_ff @(posedge clk) begin
    if (rst)
      dac_data <= '0;
    else if (pulse_d)
      dac_data <= PULSE_CODE;
    else if (run_d) begin
      if (code > 19'sd32767)       dac_data <= 16'sh7FFF;
      else if (code < -19'sd32768) dac_data <= 16'sh8000;
      else                         dac_data <= code[15:0];
    end else
      dac_data <= '0;
  end

endmodule
