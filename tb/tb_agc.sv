// tb_agc: checks amp_err = setpoint - amp_meas (with saturation), the clamp
// of amp_ctrl at 0, the offset-binary drive code for a known amp_ctrl and
// reference, and that the loop around a first-order plant
// (amp_meas follows amp_ctrl/2) settles at the set-point.
module tb_agc;
  logic clk = 0, rst_n = 0, sample_en = 0;
  logic signed [15:0] meas, setp, refs, aerr, actrl;
  logic [11:0] dac;
  int checks = 0, failures = 0;
  real plant;

  agc #(.DAC_W(12)) dut (.clk, .rst_n, .sample_en, .amp_meas(meas), .setpoint(setp), .ref_sin(refs),
    .kp_sh(5'd2), .ki_sh(5'd6), .amp_err(aerr), .amp_ctrl(actrl), .drive_dac(dac));

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic strobe(); @(negedge clk); sample_en = 1; @(negedge clk); sample_en = 0; endtask

  initial begin
    int exp_dac;
    meas = 0; setp = 16'sd12000; refs = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    #1;
    checks++; if (aerr != 16'sd12000) begin failures++; $display("aerr %0d", aerr); end
    checks++; if (dac != 12'h800) begin failures++; $display("reset dac %h", dac); end
    // saturation of the error
    meas = -16'sd30000; #1;
    checks++; if (aerr != 16'sd32767) begin failures++; $display("aerr sat %0d", aerr); end
    // too much amplitude: control clamps at 0
    meas = 16'sd30000;
    for (int k = 0; k < 50; k++) strobe();
    checks++; if (actrl != 0) begin failures++; $display("clamp %0d", actrl); end
    // closed loop around plant: meas follows actrl/2 with time constant 32 samples
    plant = 0.0; refs = 16'sd32767;
    for (int k = 0; k < 6000; k++) begin
      plant = plant + (real'(actrl) / 2.0 - plant) / 32.0;
      meas = 16'($rtoi(plant));
      strobe();
    end
    checks++; if (meas < 16'sd11900 || meas > 16'sd12100) begin failures++; $display("settled at %0d", meas); end
    checks++; if (actrl < 16'sd23700 || actrl > 16'sd24300) begin failures++; $display("ctrl %0d", actrl); end
    // drive code for a known reference: top 12 bits of actrl*ref/2^15, offset binary
    refs = -16'sd20000; strobe(); strobe();
    exp_dac = ((int'(actrl) * -20000) >>> 15) >>> 4;
    checks++; if (dac != 12'(exp_dac + 2048)) begin failures++; $display("dac %0d exp %0d", dac, exp_dac + 2048); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
