// tb_nco: checks the NCO sine and cosine against $sin/$cos of the ideal
// phase for two frequency words, and the phase step per strobe.
module tb_nco;
  logic clk = 0, rst_n = 0, sample_en = 0;
  logic [23:0] fw;
  logic signed [15:0] s, c;
  logic [23:0] ph;
  int checks = 0, failures = 0;
  real pi = 3.14159265358979;

  nco #(.PHASE_W(24), .OUT_W(16)) dut (.clk, .rst_n, .sample_en, .freq_word(fw), .sin_o(s), .cos_o(c), .phase_o(ph));

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(input logic [23:0] f, input int n);
    logic [23:0] p_before;
    real ang, es, ec;
    fw = f;
    for (int k = 0; k < n; k++) begin
      p_before = ph;
      @(negedge clk); sample_en = 1; @(negedge clk); sample_en = 0;
      // outputs hold the sine of the phase before the strobe
      ang = 2.0 * pi * real'(p_before) / 16777216.0;
      es = 32767.0 * $sin(ang); ec = 32767.0 * $cos(ang);
      checks += 3;
      if ((real'(s) - es) > 80.0 || (es - real'(s)) > 80.0) begin failures++; $display("sin err ph=%0d got %0d exp %f", p_before, s, es); end
      if ((real'(c) - ec) > 80.0 || (ec - real'(c)) > 80.0) begin failures++; $display("cos err ph=%0d got %0d exp %f", p_before, c, ec); end
      if (ph != p_before + f) begin failures++; $display("phase step wrong"); end
    end
  endtask

  initial begin
    fw = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(24'd262144, 70);     // 64 samples per period
    run(24'd1258291, 200);   // 15 kHz at 200 kHz
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
