// agc: automatic gain control of the primary (drive) vibration.
//
// amp_err = setpoint - amp_meas, where amp_meas is the measured pick-off
// amplitude (twice the in-phase demodulator output). A PI controller, clamped
// to 0..32767, gives the amplitude control, which scales the drive reference
// sine: drive = amp_ctrl * ref / 2^15. The primary DAC receives the top DAC_W
// bits of drive in offset binary (mid-scale = zero drive).
// Timing: amp_err is combinational; amp_ctrl is registered on the strobe
// (pi_ctrl) and drive_dac one strobe later. The paper requires an AGC for the
// drive amplitude; the PI law and DAC coding are this design's choices.
module agc #(
  parameter int DAC_W = 12
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    sample_en,
  input  logic signed [15:0]      amp_meas,
  input  logic signed [15:0]      setpoint,
  input  logic signed [15:0]      ref_sin,
  input  logic [4:0]              kp_sh,
  input  logic [4:0]              ki_sh,
  output logic signed [15:0]      amp_err,
  output logic signed [15:0]      amp_ctrl,
  output logic [DAC_W-1:0]        drive_dac
);
  import gyro_pkg::*;

  logic signed [31:0] prod;
  logic signed [15:0] drive;

  assign amp_err = sat16(40'(setpoint) - 40'(amp_meas));

  pi_ctrl #(.DW(16), .OW(16), .IW(32)) u_pi (
    .clk, .rst_n, .sample_en, .clr(1'b0),
    .err(amp_err), .kp_sh, .ki_sh,
    .lo(16'sd0), .hi(16'sd32767), .u(amp_ctrl)
  );

  assign prod  = amp_ctrl * ref_sin;
  assign drive = 16'(prod >>> 15);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         drive_dac <= {1'b1, {(DAC_W-1){1'b0}}};
    else if (sample_en) drive_dac <= {~drive[15], drive[14 -: DAC_W-1]};
  end

endmodule
