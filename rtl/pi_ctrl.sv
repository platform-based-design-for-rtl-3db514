// pi_ctrl: proportional-integral controller with power-of-two gains.
//
// On each sample strobe the integrator adds err, and the registered output
// becomes u = err/2^kp_sh + integ/2^ki_sh, clamped to [lo, hi]. When the output
// sits at a limit and err would push it further, the integrator holds
// (anti-windup). A synchronous clr empties the integrator and the output.
// Gains are shifts so they can be trimmed from registers at run time.
// Latency: u changes one clock after the strobe that brought err.
// Used as the loop filter of the drive PLL, the AGC controller and the
// secondary (force-feedback) loop controller. The paper does not give the
// controller type; PI with shift gains is this design's choice.
module pi_ctrl #(
  parameter int DW = 16,   // error width
  parameter int OW = 24,   // output width
  parameter int IW = 32    // integrator width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 sample_en,
  input  logic                 clr,       // synchronous clear of integrator and output
  input  logic signed [DW-1:0] err,
  input  logic [4:0]           kp_sh,
  input  logic [4:0]           ki_sh,
  input  logic signed [OW-1:0] lo,
  input  logic signed [OW-1:0] hi,
  output logic signed [OW-1:0] u
);

  logic signed [IW-1:0] integ, integ_nx;
  logic signed [IW+1:0] sum;
  logic signed [OW-1:0] u_nx;
  logic                 at_hi, at_lo;

  always_comb begin
    integ_nx = integ + IW'(err);
    sum      = (IW+2)'(err >>> kp_sh) + (IW+2)'(integ_nx >>> ki_sh);
    at_hi    = sum > (IW+2)'(hi);
    at_lo    = sum < (IW+2)'(lo);
    if (at_hi)      u_nx = hi;
    else if (at_lo) u_nx = lo;
    else            u_nx = OW'(sum);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      integ <= '0;
      u     <= '0;
    end else if (clr) begin
      integ <= '0;
      u     <= '0;
    end else if (sample_en) begin
      u <= u_nx;
      // anti-windup: integrate unless saturated in the direction of err
      if (!((at_hi && err > 0) || (at_lo && err < 0)))
        integ <= integ_nx;
    end
  end

endmodule
