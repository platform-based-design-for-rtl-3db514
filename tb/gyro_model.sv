// gyro_model: behavioural model of the vibrating gyro together with the
// analog front end, for testbenches only (not synthesizable).
//
// Every FS_DIV clocks (one ADC sample) the model:
//  * takes the primary drive amplitude as a first-order (TAU_P samples)
//    follower of the mean absolute primary DAC swing, so the pick-off
//    amplitude in ADC counts equals the drive amplitude in DAC counts;
//  * outputs adc_p = A_p sin(phi), phi advancing F_RES cycles per sample
//    (the resonance of the primary mode);
//  * demodulates the secondary DAC against sin(phi) to get the force-feedback
//    amplitude fb_amp (first order, 64 samples) and outputs
//    adc_s = (SENS*rate - 2*fb_amp) sin(phi) + QUAD cos(phi);
//  * holds the temperature code at TEMP.
// The drive phase and the mechanical Q are not modelled: the pick-off is at
// the resonance frequency whatever the drive frequency, which is enough to
// exercise locking, amplitude control and the rate loops.
module gyro_model #(
  parameter int  FS_DIV = 100,
  parameter real F_RES  = 0.0752,
  parameter real SENS   = 2.0,     // ADC counts per deg/s
  parameter real QUAD   = 50.0,
  parameter int  TEMP   = 0,
  parameter real TAU_P  = 128.0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [11:0]        dac_p,
  input  logic [11:0]        dac_s,
  input  real                rate_dps,
  output logic signed [11:0] adc_p,
  output logic signed [11:0] adc_s,
  output logic signed [11:0] temp
);
  real pi = 3.14159265358979;
  real phi, env_p, fb_amp, dp, ds, a_s;
  int  cnt;

  function automatic logic signed [11:0] clip12(input real v);
    if (v > 2047.0) return 12'sd2047;
    if (v < -2048.0) return -12'sd2048;
    return 12'($rtoi(v));
  endfunction

  assign temp = 12'(TEMP);

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phi = 0.0; env_p = 0.0; fb_amp = 0.0; cnt = 0;
      adc_p <= '0; adc_s <= '0;
    end else if (cnt == FS_DIV - 1) begin
      cnt = 0;
      dp = real'(int'(dac_p)) - 2048.0;
      ds = real'(int'(dac_s)) - 2048.0;
      env_p  = env_p + ((dp < 0 ? -dp : dp) * pi / 2.0 - env_p) / TAU_P;
      fb_amp = fb_amp + (2.0 * ds * $sin(phi) - fb_amp) / 64.0;
      a_s    = SENS * rate_dps - 2.0 * fb_amp;
      phi    = phi + 2.0 * pi * F_RES;
      if (phi > 2.0 * pi) phi = phi - 2.0 * pi;
      adc_p <= clip12(env_p * $sin(phi));
      adc_s <= clip12(a_s * $sin(phi) + QUAD * $cos(phi));
    end else begin
      cnt = cnt + 1;
    end
  end
endmodule
