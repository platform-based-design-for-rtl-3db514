// rate_chain: secondary (sense) chain that turns the Coriolis vibration into
// a compensated yaw-rate value.
//
// The sense ADC stream is demodulated with the PLL references (iq_demod): the
// in-phase part raw_i carries the rate, raw_q the quadrature error.
//  * Open loop (closed = 0): the measure is raw_i and the secondary DAC rests
//    at mid-scale.
//  * Closed loop (closed = 1): a PI controller driven by raw_i sets a force-
//    feedback amplitude fb; the modulator sends fb * sin to the secondary DAC
//    so that the secondary vibration is nulled, and the measure is fb.
// Compensation: comp = ((measure - offset - tc*temp/256) * gain) / 256,
// saturated to 16 bits, then a first-order output low-pass
// y += (comp - y)/2^lpf_sh sets the rate bandwidth (shift 9 at 200 kHz is
// about 62 Hz). All updates happen on sample_en; rate_o lags the demodulator
// by two strobes. The chain contents (demodulator, filters, temperature and
// offset compensation, modulator for secondary drive, open/closed loop) are
// those the paper lists; the arithmetic and number formats are this design's.
module rate_chain #(
  parameter int IN_W  = 12,
  parameter int DAC_W = 12
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    sample_en,
  input  logic signed [IN_W-1:0]  x,
  input  logic signed [15:0]      ref_sin,
  input  logic signed [15:0]      ref_cos,
  input  logic signed [11:0]      temp,
  input  logic                    closed,
  input  logic signed [15:0]      offset,
  input  logic signed [15:0]      tc,
  input  logic signed [15:0]      gain,
  input  logic [4:0]              kp_sh,
  input  logic [4:0]              ki_sh,
  input  logic [4:0]              lpf_sh,
  output logic signed [15:0]      raw_i,
  output logic signed [15:0]      raw_q,
  output logic signed [15:0]      fb,
  output logic signed [15:0]      rate_o,
  output logic [DAC_W-1:0]        sec_dac
);
  import gyro_pkg::*;

  logic signed [15:0] meas, comp;
  logic signed [39:0] corr, diff, scaled;
  logic signed [31:0] prod;
  logic signed [15:0] mod;
  logic signed [47:0] lpf_acc;

  iq_demod #(.IN_W(IN_W), .DW(16), .K(6)) u_demod (
    .clk, .rst_n, .sample_en, .x, .ref_sin, .ref_cos, .i_o(raw_i), .q_o(raw_q)
  );

  // force-feedback controller, held at zero in open loop
  pi_ctrl #(.DW(16), .OW(16), .IW(32)) u_pi (
    .clk, .rst_n, .sample_en, .clr(!closed),
    .err(raw_i), .kp_sh, .ki_sh,
    .lo(-16'sd32767), .hi(16'sd32767), .u(fb)
  );

  always_comb begin
    meas   = closed ? fb : raw_i;
    corr   = (40'(tc) * 40'(temp)) >>> 8;
    diff   = 40'(meas) - 40'(offset) - corr;
    scaled = (diff * 40'(gain)) >>> 8;
    comp   = sat16(scaled);
    prod   = fb * ref_sin;
    mod    = 16'(prod >>> 15);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lpf_acc <= '0;
      sec_dac <= {1'b1, {(DAC_W-1){1'b0}}};
    end else if (sample_en) begin
      lpf_acc <= lpf_acc + 48'(comp) - (lpf_acc >>> lpf_sh);
      sec_dac <= closed ? {~mod[15], mod[14 -: DAC_W-1]} : {1'b1, {(DAC_W-1){1'b0}}};
    end
  end

  assign rate_o = 16'(lpf_acc >>> lpf_sh);

endmodule
