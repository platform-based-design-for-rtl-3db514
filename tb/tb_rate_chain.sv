// tb_rate_chain: open loop, a sense signal R*sin(wt) + Qd*cos(wt) must give
// raw_i = 8R, raw_q = 8Qd and, after compensation and the output filter,
// rate = (8R - offset - tc*temp/256)*gain/256, with the secondary DAC idle.
// Closed loop, the plant subtracts fb/8 from the amplitude; the loop must
// null raw_i, settle fb at 8R, report it as the rate and modulate dac_s.
module tb_rate_chain;
  logic clk = 0, rst_n = 0, sample_en = 0, closed = 0;
  logic signed [11:0] x, temp;
  logic signed [15:0] rs, rc, offs, tc, gain, raw_i, raw_q, fb, rate;
  logic [11:0] dac;
  int checks = 0, failures = 0;
  real pi = 3.14159265358979;
  int n = 0;
  int dac_min = 4095, dac_max = 0;

  rate_chain #(.IN_W(12), .DAC_W(12)) dut (.clk, .rst_n, .sample_en, .x, .ref_sin(rs), .ref_cos(rc), .temp,
    .closed, .offset(offs), .tc, .gain, .kp_sh(5'd2), .ki_sh(5'd6), .lpf_sh(5'd6),
    .raw_i, .raw_q, .fb, .rate_o(rate), .sec_dac(dac));

  always #5 clk = ~clk;
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic real fabs(input real v); return v < 0 ? -v : v; endfunction

  task automatic run(input real r, input real qd, input int len);
    real w, amp;
    w = 2.0 * pi * 0.075;
    for (int k = 0; k < len; k++) begin
      amp = closed ? r - real'(fb) / 8.0 : r;
      x  = 12'($rtoi(amp * $sin(w * n) + qd * $cos(w * n)));
      rs = 16'($rtoi(32767.0 * $sin(w * n)));
      rc = 16'($rtoi(32767.0 * $cos(w * n)));
      n++;
      @(negedge clk); sample_en = 1; @(negedge clk); sample_en = 0;
      if (k > len / 2) begin
        if (int'(dac) < dac_min) dac_min = int'(dac);
        if (int'(dac) > dac_max) dac_max = int'(dac);
      end
    end
  endtask

  task automatic near(input string what, input real got, input real exp, input real tol);
    checks++;
    if (fabs(got - exp) > tol) begin failures++; $display("%s got %f exp %f", what, got, exp); end
    else $display("%s %f (exp %f)", what, got, exp);
  endtask

  initial begin
    x = 0; rs = 0; rc = 0; temp = 12'sd100; offs = 16'sd200; tc = 16'sd512; gain = 16'sd384;
    repeat (3) @(posedge clk); rst_n = 1;
    run(600.0, 300.0, 4000);
    near("raw_i", real'(raw_i), 4800.0, 100.0);
    near("raw_q", real'(raw_q), 2400.0, 100.0);
    // (4800 - 200 - 512*100/256) * 384/256 = 6600
    near("rate open", real'(rate), (real'(raw_i) - 200.0 - 200.0) * 1.5, 30.0);
    checks++; if (dac_min != 2048 || dac_max != 2048) begin failures++; $display("dac not idle in open loop"); end
    // closed loop
    closed = 1; offs = 0; tc = 0; gain = 16'sd256; dac_min = 4095; dac_max = 0;
    run(600.0, 0.0, 6000);
    near("fb", real'(fb), 4800.0, 150.0);
    near("raw_i nulled", real'(raw_i), 0.0, 100.0);
    near("rate closed", real'(rate), real'(fb), 60.0);
    // dac swings +/- fb/16 around mid-scale (12-bit of a 16-bit value)
    near("dac max", real'(dac_max), 2048.0 + 4800.0 / 16.0, 25.0);
    near("dac min", real'(dac_min), 2048.0 - 4800.0 / 16.0, 25.0);
    // back to open loop: fb cleared
    closed = 0; run(0.0, 0.0, 10);
    checks++; if (fb != 0) begin failures++; $display("fb not cleared"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
