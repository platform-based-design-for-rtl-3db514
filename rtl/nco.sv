// nco: numerically controlled oscillator, the digital "VCO" of the drive PLL.
//
// A PHASE_W-bit phase accumulator advances by freq_word on every sample strobe
// (f_out = freq_word * fs / 2^PHASE_W). The top 16 phase bits are turned into a
// sine without a table: within each half period a parabola 4x(1-x) is formed
// and corrected by y - 0.2266*y*(1-y), which stays within 0.2 % of full scale
// of a true sine. The cosine uses the same function a quarter turn ahead.
// Outputs are signed Q1.15 (OUT_W = 16) and registered: on a strobe, sin_o and
// cos_o take the value of the phase held before that strobe, and the phase
// then advances, so the outputs change one clock after sample_en.
// The paper asks for a PLL with a VCO control signal; the NCO structure and
// the sine approximation are this design's choice.
module nco #(
  parameter int PHASE_W = 24,
  parameter int OUT_W   = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      sample_en,
  input  logic [PHASE_W-1:0]        freq_word,
  output logic signed [OUT_W-1:0]   sin_o,
  output logic signed [OUT_W-1:0]   cos_o,
  output logic [PHASE_W-1:0]        phase_o
);

  // Sine of a 16-bit phase (full turn = 65536), Q1.15 result
  function automatic logic signed [15:0] sine16(input logic [15:0] p);
    logic [14:0] x;
    logic [31:0] prod;
    logic [16:0] y;
    logic [33:0] corr;
    logic [16:0] y2;
    x    = p[14:0];
    prod = 32'(x) * 32'(17'd32768 - 17'(x));
    y    = 17'(prod >> 13);                       // 4x(1-x) in Q15
    if (y > 17'd32767) y = 17'd32767;
    corr = 34'(y) * 34'(17'd32768 - y) * 34'd29;  // 29/128 * y * (1-y)
    y2   = y - 17'(corr >> 22);
    return p[15] ? -$signed({1'b0, y2[14:0]}) : $signed({1'b0, y2[14:0]});
  endfunction

  logic [PHASE_W-1:0] phase;
  logic [15:0]        p_sin, p_cos;

  assign p_sin = phase[PHASE_W-1 -: 16];
  assign p_cos = p_sin + 16'h4000;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= '0;
      sin_o <= '0;
      cos_o <= '0;
    end else if (sample_en) begin
      sin_o <= OUT_W'(sine16(p_sin));
      cos_o <= OUT_W'(sine16(p_cos));
      phase <= phase + freq_word;
    end
  end

  assign phase_o = phase;

endmodule
