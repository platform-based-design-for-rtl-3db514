// tb_drive_pll: with a constant phase error the frequency word must follow
// f_center + err/2^kp + n*err/2^ki; the lock flag must rise after exactly
// LOCK_CNT+1 quiet samples and drop on the first large error; the loop filter
// must stop at +/- 2^21.
module tb_drive_pll;
  localparam int LC = 16;
  logic clk = 0, rst_n = 0, sample_en = 0;
  logic signed [15:0] pe;
  logic [23:0] fc, fw;
  logic signed [23:0] vco;
  logic locked;
  int checks = 0, failures = 0;

  drive_pll #(.PHASE_W(24), .LOCK_CNT(LC)) dut (.clk, .rst_n, .sample_en, .phase_err(pe), .f_center(fc),
    .kp_sh(5'd1), .ki_sh(5'd4), .lock_th(16'd100), .freq_word(fw), .vco_ctrl(vco), .locked);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic strobe(); @(negedge clk); sample_en = 1; @(negedge clk); sample_en = 0; endtask

  initial begin
    int n_lock;
    pe = 0; fc = 24'd1258291;
    repeat (3) @(posedge clk); rst_n = 1;
    // quiet: lock after LC+1 samples
    n_lock = 0;
    while (!locked && n_lock < 100) begin strobe(); n_lock++; end
    checks++; if (n_lock != LC + 1) begin failures++; $display("lock after %0d samples, expected %0d", n_lock, LC + 1); end
    checks++; if (fw != fc) begin failures++; $display("fw %0d != fc", fw); end
    // constant error 160: integrator 160*n, u = 80 + 10n
    pe = 16'sd160;
    for (int n = 1; n <= 50; n++) begin
      strobe();
      checks++;
      if (fw != fc + 24'(80 + 10 * n)) begin failures++; $display("n=%0d fw=%0d exp %0d", n, fw, fc + 80 + 10 * n); end
      if (n == 1) begin checks++; if (locked) begin failures++; $display("lock not dropped"); end end
    end
    // negative error drives to the lower limit
    pe = -16'sd30000;
    for (int n = 0; n < 2000; n++) strobe();
    checks++; if (vco != -24'sd2097152) begin failures++; $display("limit %0d", vco); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
