// tb_dsp: the DSP block against the behavioural gyro model, at a reduced
// sample divider (FS_DIV = 4, same frequencies relative to fs). Checks
// register defaults and read-back, PLL lock and its frequency, AGC settling
// at the set-point, the open-loop rate, the closed-loop rate (mode switch),
// rate compensation, node capture output and the sample rate.
module tb_dsp;
  import gyro_pkg::*;
  localparam int FSD = 4;
  logic clk = 0, rst_n = 0;
  bus16_req_t req;
  logic [15:0] rdata, node_data;
  logic signed [11:0] adc_p, adc_s, temp;
  logic [11:0] dac_p, dac_s;
  logic node_valid, locked;
  real rate_dps = 0.0;
  int checks = 0, failures = 0;

  dsp #(.FS_DIV(FSD), .LOCK_CNT(256)) dut (.clk, .rst_n, .req, .rdata, .adc_p, .adc_s, .temp,
    .dac_p, .dac_s, .node_data, .node_valid, .locked);
  gyro_model #(.FS_DIV(FSD), .F_RES(0.0752), .SENS(2.0), .QUAD(50.0), .TEMP(40)) model (.clk, .rst_n,
    .dac_p, .dac_s, .rate_dps, .adc_p, .adc_s, .temp);

  always #25 clk = ~clk;
  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic real fabs(input real v); return v < 0 ? -v : v; endfunction

  task automatic wr(input logic [4:0] a, input logic [15:0] d);
    @(negedge clk); req = '{sel: 1'b1, wr: 1'b1, addr: a, wdata: d};
    @(negedge clk); req = '0;
  endtask
  task automatic rd(input logic [4:0] a, output logic [15:0] d);
    @(negedge clk); req = '{sel: 1'b1, wr: 1'b0, addr: a, wdata: '0};
    #1 d = rdata;
    @(negedge clk); req = '0;
  endtask
  task automatic near(input string what, input real got, input real exp, input real tol);
    checks++;
    if (fabs(got - exp) > tol) begin failures++; $display("FAIL %s got %f exp %f", what, got, exp); end
    else $display("%s %f (exp %f)", what, got, exp);
  endtask
  task automatic samples(input int n); repeat (n * FSD) @(posedge clk); endtask

  initial begin
    logic [15:0] v, v2;
    int t0, t1, nv;
    real f_meas;
    req = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    rd(D_FC_LO, v); rd(D_FC_HI, v2);
    checks++; if ({v2[7:0], v} != F_CENTER_DEF) begin failures++; $display("FC default"); end
    wr(D_R_TC, 16'h1234); rd(D_R_TC, v);
    checks++; if (v != 16'h1234) begin failures++; $display("reg rw"); end
    wr(D_R_TC, 16'h0000);
    // sample rate: count node_valid over 400 clocks
    nv = 0; repeat (400) begin @(posedge clk); if (node_valid) nv++; end
    checks++; if (nv != 400 / FSD) begin failures++; $display("strobes %0d", nv); end
    // lock
    t0 = 0;
    while (!locked && t0 < 60000) begin samples(10); t0 += 10; end
    $display("locked after %0d samples", t0);
    checks++; if (!locked) begin failures++; $display("no lock"); end
    rd(D_STATUS, v); checks++; if (v[0] != 1'b1) begin failures++; $display("status lock bit"); end
    samples(4000);
    rd(D_FW_LO, v); rd(D_FW_HI, v2);
    f_meas = real'({v2[7:0], v}) / 16777216.0;
    near("pll freq (cycles/sample)", f_meas, 0.0752, 0.00002);
    rd(D_AMP, v); near("amplitude", real'($signed(v)), 16000.0, 320.0);
    rd(D_AMP_CTRL, v); near("amp ctrl", real'($signed(v)), 16000.0, 800.0);
    // open-loop rate: 100 deg/s -> 200 ADC counts -> raw 1600
    rate_dps = 100.0; samples(6000);
    rd(D_RATE_RAW, v); near("raw rate", real'($signed(v)), 1600.0, 80.0);
    rd(D_QUAD, v); near("quadrature", real'($signed(v)), 400.0, 60.0);
    rd(D_RATE, v); near("rate open", real'($signed(v)), 1600.0, 80.0);
    // compensation: offset 100, tc 640 with temp 40 -> 100 + 100, gain 512
    wr(D_R_OFFS, 16'd100); wr(D_R_TC, 16'd640); wr(D_R_GAIN, 16'd512); samples(6000);
    rd(D_RATE_RAW, v2); rd(D_RATE, v);
    near("rate compensated", real'($signed(v)), (real'($signed(v2)) - 200.0) * 2.0, 60.0);
    wr(D_R_OFFS, 16'd0); wr(D_R_TC, 16'd0); wr(D_R_GAIN, 16'd256);
    // closed loop
    wr(D_CTRL, 16'd1); samples(8000);
    rd(D_RATE_RAW, v); near("closed: raw nulled", real'($signed(v)), 0.0, 80.0);
    rd(D_RATE, v); near("rate closed", real'($signed(v)), 1600.0, 100.0);
    rate_dps = -150.0; samples(8000);
    rd(D_RATE, v); near("rate closed -150", real'($signed(v)), -2400.0, 120.0);
    checks++; if (!locked) begin failures++; $display("lost lock"); end
    // node capture follows the selected node
    wr(D_NODE_SEL, 16'd8);
    @(posedge node_valid); @(posedge node_valid); @(negedge clk);
    rd(D_RATE, v);
    checks++; if (node_data != v) begin failures++; $display("node %0d rate %0d", node_data, v); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
