// tb_pi_ctrl: drives random errors and compares the output with an integer
// model of u = err/2^kp + integ/2^ki with clamping and anti-windup; then
// checks saturation at both limits, integrator hold and the clear input.
module tb_pi_ctrl;
  logic clk = 0, rst_n = 0, sample_en = 0, clr = 0;
  logic signed [15:0] err;
  logic [4:0] kp, ki;
  logic signed [23:0] lo, hi, u;
  int checks = 0, failures = 0;
  longint integ_m, sum, u_m;

  pi_ctrl #(.DW(16), .OW(24), .IW(32)) dut (.clk, .rst_n, .sample_en, .clr, .err, .kp_sh(kp), .ki_sh(ki), .lo, .hi, .u);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic step(input int e);
    longint in;
    err = 16'(e);
    in = integ_m + e;
    sum = (longint'(e) >>> kp) + (in >>> ki);
    if (sum > hi) u_m = hi; else if (sum < lo) u_m = lo; else u_m = sum;
    if (!((sum > hi && e > 0) || (sum < lo && e < 0))) integ_m = in;
    @(negedge clk); sample_en = 1; @(negedge clk); sample_en = 0;
    checks++;
    if (longint'(u) != u_m) begin failures++; $display("u=%0d model=%0d e=%0d", u, u_m, e); end
  endtask

  initial begin
    err = 0; kp = 2; ki = 6; lo = -24'sd100000; hi = 24'sd100000; integ_m = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 300; k++) step($signed($urandom_range(0, 65535)) - 32768);
    // push into the upper limit and hold there
    for (int k = 0; k < 800; k++) step(20000);
    checks++; if (u != hi) begin failures++; $display("no upper saturation"); end
    // coming back must be immediate thanks to anti-windup
    step(-20000);
    checks++; if (u == hi) begin failures++; $display("windup"); end
    for (int k = 0; k < 1200; k++) step(-30000);
    checks++; if (u != lo) begin failures++; $display("no lower saturation"); end
    // clear
    @(negedge clk); clr = 1; @(negedge clk); clr = 0; integ_m = 0;
    checks++; if (u != 0) begin failures++; $display("clear failed"); end
    kp = 0; ki = 3;
    for (int k = 0; k < 100; k++) step($signed($urandom_range(0, 4000)) - 2000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
