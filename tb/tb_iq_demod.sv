// tb_iq_demod: feeds A*sin(wt+phi) with ideal references and checks that the
// filtered outputs settle at 16*(A/2)*cos(phi) and 16*(A/2)*sin(phi) (the
// input is scaled by 2^4 to 16 bits) within 2 % of full amplitude.
module tb_iq_demod;
  logic clk = 0, rst_n = 0, sample_en = 0;
  logic signed [11:0] x;
  logic signed [15:0] rs, rc, i_o, q_o;
  int checks = 0, failures = 0;
  real pi = 3.14159265358979;
  function automatic real fabs(input real v); return v < 0 ? -v : v; endfunction

  iq_demod #(.IN_W(12), .DW(16), .K(6)) dut (.clk, .rst_n, .sample_en, .x, .ref_sin(rs), .ref_cos(rc), .i_o, .q_o);

  always #5 clk = ~clk;
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(input real a, input real phi_deg, input int n);
    real w, phi, ei, eq;
    w = 2.0 * pi * 0.075; phi = phi_deg * pi / 180.0;
    for (int k = 0; k < n; k++) begin
      x  = 12'($rtoi(a * $sin(w * k + phi)));
      rs = 16'($rtoi(32767.0 * $sin(w * k)));
      rc = 16'($rtoi(32767.0 * $cos(w * k)));
      @(negedge clk); sample_en = 1; @(negedge clk); sample_en = 0;
    end
    ei = 8.0 * a * $cos(phi); eq = 8.0 * a * $sin(phi);
    checks += 2;
    if (fabs(real'(i_o) - ei) > 0.02 * 8.0 * a) begin failures++; $display("I got %0d exp %f", i_o, ei); end
    if (fabs(real'(q_o) - eq) > 0.02 * 8.0 * a) begin failures++; $display("Q got %0d exp %f", q_o, eq); end
    $display("A=%f phi=%f I=%0d (%f) Q=%0d (%f)", a, phi_deg, i_o, ei, q_o, eq);
  endtask

  initial begin
    x = 0; rs = 0; rc = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(1000.0, 30.0, 3000);
    run(1800.0, -60.0, 3000);
    run(500.0, 180.0, 3000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
