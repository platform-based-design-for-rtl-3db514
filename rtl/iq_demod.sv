// iq_demod: synchronous (I/Q) demodulator for a vibrating-gyro pick-off signal.
//
// The signed ADC sample x is scaled to DW bits and multiplied by the sine and
// cosine references (signed Q1.15). Each product is low-pass filtered by two
// cascaded first-order IIR stages, acc += in - acc/2^K, whose output is
// acc/2^K; at fs = 200 kHz and K = 6 each stage has a corner near 500 Hz and
// the cascade removes the 2f (30 kHz) mixing product. For x = A sin(wt + phi)
// and references sin/cos(wt), i_o settles at (A/2) cos(phi) and q_o at
// (A/2) sin(phi), in DW-bit units of the scaled input.
// Everything advances on sample_en; the outputs are registered, so the chain
// from x to i_o is three strobes deep (mixer register, stage 1, stage 2).
// The paper names demodulators and FIR/IIR filters; the filter type, order
// and widths are this design's choices.
module iq_demod #(
  parameter int IN_W = 12,
  parameter int DW   = 16,
  parameter int K    = 6
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  sample_en,
  input  logic signed [IN_W-1:0] x,
  input  logic signed [DW-1:0]  ref_sin,
  input  logic signed [DW-1:0]  ref_cos,
  output logic signed [DW-1:0]  i_o,
  output logic signed [DW-1:0]  q_o
);

  localparam int AW = DW + K + 1;

  logic signed [DW-1:0]   xs;
  logic signed [2*DW-1:0] prod_i, prod_q;
  logic signed [DW-1:0]   mix_i, mix_q;
  logic signed [AW-1:0]   acc_i1, acc_q1, acc_i2, acc_q2;
  logic signed [DW-1:0]   y_i1, y_q1;

  assign xs     = DW'(x) <<< (DW - IN_W);
  assign prod_i = xs * ref_sin;
  assign prod_q = xs * ref_cos;
  assign y_i1   = DW'(acc_i1 >>> K);
  assign y_q1   = DW'(acc_q1 >>> K);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mix_i  <= '0;
      mix_q  <= '0;
      acc_i1 <= '0;
      acc_q1 <= '0;
      acc_i2 <= '0;
      acc_q2 <= '0;
    end else if (sample_en) begin
      mix_i  <= DW'(prod_i >>> (DW - 1));
      mix_q  <= DW'(prod_q >>> (DW - 1));
      acc_i1 <= acc_i1 + AW'(mix_i) - (acc_i1 >>> K);
      acc_q1 <= acc_q1 + AW'(mix_q) - (acc_q1 >>> K);
      acc_i2 <= acc_i2 + AW'(y_i1) - (acc_i2 >>> K);
      acc_q2 <= acc_q2 + AW'(y_q1) - (acc_q2 >>> K);
    end
  end

  assign i_o = DW'(acc_i2 >>> K);
  assign q_o = DW'(acc_q2 >>> K);

endmodule
