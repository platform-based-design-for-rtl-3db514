// drive_pll: loop filter and lock detector of the primary-drive PLL.
//
// The phase error is the quadrature output of the primary demodulator
// ((A/2) sin of the phase between pick-off and NCO sine). A PI loop filter
// turns it into the "VCO control" word, and the NCO step is
// freq_word = f_center + vco_ctrl, so a pick-off that leads the NCO raises
// the frequency until the two are in phase and the ring is kept at resonance.
// The loop filter output is limited to +/- 2^(PHASE_W-3) (+/-25 kHz at
// 200 kHz sampling). locked rises on the (LOCK_CNT+1)-th consecutive sample
// with |phase_err| <= lock_th and falls at the first sample above it.
// Timing: vco_ctrl and locked are registered on the sample strobe; freq_word
// is combinational from vco_ctrl. The paper requires a PLL that keeps the
// ring at its ~15 kHz resonance and whose lock the CPU checks; the loop-filter
// type and the lock rule are this design's choices.
module drive_pll #(
  parameter int PHASE_W  = 24,
  parameter int LOCK_CNT = 1024
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      sample_en,
  input  logic signed [15:0]        phase_err,
  input  logic [PHASE_W-1:0]        f_center,
  input  logic [4:0]                kp_sh,
  input  logic [4:0]                ki_sh,
  input  logic [15:0]               lock_th,
  output logic [PHASE_W-1:0]        freq_word,
  output logic signed [PHASE_W-1:0] vco_ctrl,
  output logic                      locked
);

  localparam logic signed [PHASE_W-1:0] LIM = PHASE_W'(1) <<< (PHASE_W - 3);

  logic [$clog2(LOCK_CNT+1)-1:0] cnt;
  logic [15:0]                   abs_err;

  pi_ctrl #(.DW(16), .OW(PHASE_W), .IW(PHASE_W + 12)) u_lf (
    .clk, .rst_n, .sample_en, .clr(1'b0),
    .err(phase_err), .kp_sh, .ki_sh,
    .lo(-LIM), .hi(LIM), .u(vco_ctrl)
  );

  assign freq_word = f_center + vco_ctrl;
  assign abs_err   = phase_err[15] ? 16'(-phase_err) : 16'(phase_err);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt    <= '0;
      locked <= 1'b0;
    end else if (sample_en) begin
      if (abs_err > lock_th) begin
        cnt    <= '0;
        locked <= 1'b0;
      end else if (cnt == ($clog2(LOCK_CNT+1))'(LOCK_CNT)) begin
        locked <= 1'b1;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

endmodule
