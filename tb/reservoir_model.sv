// reservoir_model - behavioural model of the opto-electronic delay reservoir,
// seen from the FPGA through the DAC and the ADC. Simulation only.
//
// The analogue loop (light source, Mach-Zehnder modulator as the sine
// nonlinearity, fibre delay of LOOP sample times, attenuator setting the
// feedback gain ALPHA, photodiodes, combiner) is reduced to one sample-level
// recursion:
//   v(t) = sin(ALPHA * v(t - LOOP) + IN_GAIN * dac(t - LAT) / 2^14 + PHI)
//   adc(t) = round(ADC_SCALE * v(t)), clipped to 14 bits.
// With LOOP = (N+1)*SPS, one state longer than the input period of N states,
// each state couples to its neighbour in the next period, which gives the
// ring topology of the desynchronised reservoir. PHI is the bias of the
// modulator. Converter bandwidths, noise and drifts of the real set-up are
// not modelled: all samples of a state are equal.
module reservoir_model #(
  parameter int  LOOP      = 84,
  parameter int  LAT       = 5,
  parameter real ALPHA     = 0.6,
  parameter real PHI       = 0.3,
  parameter real IN_GAIN   = 1.0,
  parameter real ADC_SCALE = 6000.0
) (
  input  logic               clk,
  input  logic signed [15:0] dac,
  output logic signed [13:0] adc
);

  real v [LOOP];
  logic signed [15:0] dq [LAT];
  int  wp = 0;

  initial begin
    for (int i = 0; i < LOOP; i++) v[i] = 0.0;
    for (int i = 0; i < LAT; i++) dq[i] = '0;
    adc = '0;
  end

  always @(posedge clk) begin
    real nv, a;
    nv = $sin(ALPHA * v[wp] + IN_GAIN * real'(dq[LAT-1]) / 16384.0 + PHI);
    v[wp] = nv;
    wp = (wp == LOOP - 1) ? 0 : wp + 1;
    for (int i = LAT - 1; i > 0; i--) dq[i] = dq[i-1];
    dq[0] = dac;
    a = ADC_SCALE * nv;
    if (a > 8191.0) a = 8191.0;
    if (a < -8192.0) a = -8192.0;
    adc <= 14'($rtoi(a < 0 ? a - 0.5 : a + 0.5));
  end

endmodule
