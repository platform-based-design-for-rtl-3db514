// tb_gyro_top: end-to-end test of the digital section at its default
// parameters (20 MHz clock, 200 kHz sample rate). The testbench plays the
// 8051: every access goes over the SFR bus, and through the bridge for the
// 16-bit peripherals. A behavioural gyro + front-end model closes the drive
// and sense loops; an SRAM model, a UART loop-back and an SPI loop-back stand
// in for the external parts. Sequence: program both AFE settings words by
// JTAG and read them back, wait for PLL lock and AGC settling, read the
// open-loop rate, capture the NCO sine into SRAM and read it back, switch to
// closed loop and read the rate, run timer, watchdog, UART, SPI and the
// memories. Each mechanism is counted; one that never happens is a failure.
module tb_gyro_top;
  import gyro_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [7:0] sfr_addr = 0, sfr_wdata = 0, sfr_rdata;
  logic sfr_wr = 0, sfr_rd = 0, sfr_hit;
  logic [10:0] rom_addr = 0;
  logic [7:0] rom_data, ram_wdata = 0, ram_rdata;
  logic [9:0] ram_addr = 0;
  logic ram_we = 0;
  logic timer_irq, wdt_rst, txd, tx_en, spi_sck, spi_mosi, spi_cs_n;
  logic [14:0] sram_addr;
  logic [15:0] sram_dq_o, sram_dq_i;
  logic sram_dq_oe, sram_we_n, sram_oe_n, sram_ce_n;
  logic signed [11:0] adc_p, adc_s, temp;
  logic [11:0] dac_p, dac_s, dac_p_n, dac_s_n;
  int n_pair_bad = 0;
  logic [31:0] afe_cfg0, afe_cfg1;
  logic pll_locked;
  real rate_dps = 0.0;
  int checks = 0, failures = 0, serr;

  // mechanism counters
  int n_lock = 0, n_agc = 0, n_closed = 0, n_capture = 0, n_jtag = 0, n_irq = 0, n_wdt = 0,
      n_uart = 0, n_spi = 0, n_comp = 0;

  gyro_top dut (.*, .rxd(txd), .spi_miso(spi_mosi));
  gyro_model #(.FS_DIV(FS_DIV_DEF), .F_RES(0.0751), .SENS(2.0), .QUAD(50.0), .TEMP(40)) model (.clk, .rst_n,
    .dac_p, .dac_s, .rate_dps, .adc_p, .adc_s, .temp);
  sram_model #(.AW(15)) ext_sram (.addr(sram_addr), .dq_o(sram_dq_o), .dq_oe(sram_dq_oe), .dq_i(sram_dq_i),
    .we_n(sram_we_n), .oe_n(sram_oe_n), .ce_n(sram_ce_n), .errors(serr));

  always #25 clk = ~clk;     // 20 MHz
  always @(posedge clk) begin
    if (timer_irq) n_irq <= n_irq + 1;
    if (wdt_rst) n_wdt <= n_wdt + 1;
    if (int'(dac_p) + int'(dac_p_n) != 4095 || int'(dac_s) + int'(dac_s_n) != 4095) n_pair_bad <= n_pair_bad + 1;
  end
  initial begin
    repeat (12000000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic real fabs(input real v); return v < 0 ? -v : v; endfunction

  // ---- CPU side: SFR and bridged 16-bit accesses ----
  task automatic sfr_w(input logic [7:0] a, input logic [7:0] d);
    @(negedge clk); sfr_addr = a; sfr_wdata = d; sfr_wr = 1; @(negedge clk); sfr_wr = 0;
  endtask
  task automatic sfr_r(input logic [7:0] a, output logic [7:0] d);
    @(negedge clk); sfr_addr = a; sfr_rd = 1; #1 d = sfr_rdata;
    if (!sfr_hit) begin checks++; failures++; $display("no SFR hit at %h", a); end
    @(negedge clk); sfr_rd = 0;
  endtask
  task automatic bw(input periph_e p, input logic [4:0] r, input logic [15:0] d);
    sfr_w(SFR_BADDR, {p, r}); sfr_w(SFR_BDL, d[7:0]); sfr_w(SFR_BDH, d[15:8]); sfr_w(SFR_BCTRL, 8'h01);
  endtask
  task automatic br(input periph_e p, input logic [4:0] r, output logic [15:0] d);
    logic [7:0] lo, hi;
    sfr_w(SFR_BADDR, {p, r}); sfr_w(SFR_BCTRL, 8'h02); sfr_r(SFR_BDL, lo); sfr_r(SFR_BDH, hi);
    d = {hi, lo};
  endtask
  task automatic near(input string what, input real got, input real exp, input real tol);
    checks++;
    if (fabs(got - exp) > tol) begin failures++; $display("FAIL %s got %f exp %f", what, got, exp); end
    else $display("%s %f (exp %f)", what, got, exp);
  endtask
  task automatic samples(input int n); repeat (n * FS_DIV_DEF) @(posedge clk); endtask

  task automatic jtag_op(input periph_e p, input int code, input int len, input logic [31:0] din, output logic [31:0] dout);
    logic [15:0] v, lo, hi;
    bw(p, 5'd2, din[15:0]); bw(p, 5'd3, din[31:16]);
    bw(p, 5'd0, {3'd0, 5'(len - 1), 6'd0, 2'(code)});
    do br(p, 5'd4, v); while (v[0]);
    br(p, 5'd2, lo); br(p, 5'd3, hi); dout = {hi, lo};
  endtask

  initial begin
    logic [15:0] v, v2;
    logic [31:0] o;
    logic [7:0] b;
    int t, zc, mx, mn;
    logic signed [15:0] prev, s;
    repeat (4) @(posedge clk); rst_n = 1;

    // ---- JTAG: program and read back both analog front-end chains ----
    for (int ch = 0; ch < 2; ch++) begin
      periph_e p;
      logic [31:0] w;
      p = ch == 0 ? P_JTAG0 : P_JTAG1;
      w = ch == 0 ? 32'h0A5C_3301 : 32'h1234_5678;
      bw(p, 5'd1, 16'd1);
      jtag_op(p, 3, 1, 0, o);
      jtag_op(p, 1, 32, 0, o);
      checks++; if (o != (ch == 0 ? 32'h1005_A001 : 32'h1005_A002)) begin failures++; $display("idcode ch%0d %h", ch, o); end
      jtag_op(p, 2, 4, 32'h2, o);
      jtag_op(p, 1, 32, w, o);
      jtag_op(p, 1, 32, w, o);
      checks++; if (o != w) begin failures++; $display("readback ch%0d %h", ch, o); end
      else n_jtag++;
    end
    checks++; if (afe_cfg0 != 32'h0A5C_3301 || afe_cfg1 != 32'h1234_5678) begin failures++; $display("afe cfg %h %h", afe_cfg0, afe_cfg1); end

    // ---- drive loop: PLL lock and AGC ----
    t = 0;
    while (t < 40000) begin
      br(P_DSP, D_STATUS, v);
      if (v[0]) break;
      samples(50); t += 50;
    end
    $display("PLL locked after about %0d samples (%0d ms)", t, t / 200);
    checks++; if (!pll_locked) begin failures++; $display("no lock"); end else n_lock++;
    samples(4000);
    br(P_DSP, D_FW_LO, v); br(P_DSP, D_FW_HI, v2);
    near("PLL frequency (Hz)", real'({v2[7:0], v}) / 16777216.0 * 200000.0, 0.0751 * 200000.0, 5.0);
    br(P_DSP, D_AMP, v);
    near("primary amplitude", real'($signed(v)), 16000.0, 320.0);
    if (fabs(real'($signed(v)) - 16000.0) < 320.0) n_agc++;

    // ---- open-loop rate ----
    rate_dps = 200.0; samples(5000);
    br(P_DSP, D_RATE, v); near("rate open loop", real'($signed(v)), 3200.0, 160.0);
    // compensation: offset 300 + tc 640*40/256 = 100
    bw(P_DSP, D_R_OFFS, 16'd300); bw(P_DSP, D_R_TC, 16'd640); samples(5000);
    br(P_DSP, D_RATE_RAW, v2); br(P_DSP, D_RATE, v);
    near("rate compensated", real'($signed(v)), real'($signed(v2)) - 400.0, 60.0);
    if (fabs(real'($signed(v)) - real'($signed(v2)) + 400.0) < 60.0) n_comp++;
    bw(P_DSP, D_R_OFFS, 16'd0); bw(P_DSP, D_R_TC, 16'd0);

    // ---- SRAM capture of the NCO sine ----
    bw(P_DSP, D_NODE_SEL, 16'd10);
    bw(P_SRAM, 5'd5, 16'd1000); bw(P_SRAM, 5'd3, 16'd400); bw(P_SRAM, 5'd0, 16'd1);
    samples(410);
    br(P_SRAM, 5'd4, v);
    checks++; if (v[1:0] != 2'b10) begin failures++; $display("capture status %b", v[1:0]); end
    bw(P_SRAM, 5'd1, 16'd1000);
    zc = 0; mx = -40000; mn = 40000; prev = 0;
    for (int i = 0; i < 400; i++) begin
      br(P_SRAM, 5'd2, v); s = $signed(v);
      if (i > 0 && ((prev < 0) != (s < 0))) zc++;
      if (int'(s) > mx) mx = int'(s);
      if (int'(s) < mn) mn = int'(s);
      prev = s;
    end
    // 400 samples at 0.0751 cycles/sample: 60 zero crossings
    checks++; if (zc < 59 || zc > 61 || mx < 32000 || mn > -32000) begin failures++; $display("capture zc=%0d max=%0d min=%0d", zc, mx, mn); end
    else n_capture++;
    checks++; if (serr != 0) begin failures++; $display("SRAM timing errors"); end

    // ---- closed loop (mode switch) ----
    bw(P_DSP, D_CTRL, 16'd1); samples(8000);
    br(P_DSP, D_RATE_RAW, v); near("closed loop residual", real'($signed(v)), 0.0, 80.0);
    br(P_DSP, D_RATE, v); near("rate closed loop", real'($signed(v)), 3200.0, 160.0);
    if (fabs(real'($signed(v)) - 3200.0) < 160.0) n_closed++;
    checks++; if (!pll_locked) begin failures++; $display("lock lost"); end

    // ---- timer: period (99+1)*(1+1) clocks ----
    bw(P_TIMER, 5'd1, 16'd99); bw(P_TIMER, 5'd2, 16'd99); bw(P_TIMER, 5'd0, 16'h0103);
    wait (timer_irq); @(posedge clk); t = int'($time);
    bw(P_TIMER, 5'd3, 16'd1);
    repeat (2) @(posedge clk);
    checks++; if (timer_irq) begin failures++; $display("timer flag not cleared"); end
    wait (timer_irq); @(posedge clk);
    checks++; if ((int'($time) - t) / 50 != 200) begin failures++; $display("timer period %0d", (int'($time) - t) / 50); end
    bw(P_TIMER, 5'd0, 16'h0000);

    // ---- watchdog: timeout 5 ticks of 256 clocks ----
    bw(P_WDOG, 5'd1, 16'd5); bw(P_WDOG, 5'd0, 16'd1);
    repeat (1000) @(posedge clk); bw(P_WDOG, 5'd2, 16'h5A5A);
    checks++; if (n_wdt != 0) begin failures++; $display("watchdog fired early"); end
    repeat (1700) @(posedge clk);
    checks++; if (n_wdt != 1) begin failures++; $display("watchdog fires %0d", n_wdt); end

    // ---- UART loop-back at 115200 baud ----
    sfr_w(SFR_UDATA, 8'h3E);
    repeat (12 * 174) @(posedge clk);
    sfr_r(SFR_USTAT, b);
    if (b[1]) begin sfr_r(SFR_UDATA, b); checks++; if (b != 8'h3E) begin failures++; $display("uart %h", b); end else n_uart++; end
    else begin checks++; failures++; $display("uart nothing received"); end

    // ---- SPI loop-back ----
    bw(P_SPI, 5'd2, 16'h0104); bw(P_SPI, 5'd0, 16'h00C7);
    do br(P_SPI, 5'd1, v); while (v[0]);
    br(P_SPI, 5'd0, v);
    checks++; if (v[7:0] != 8'hC7) begin failures++; $display("spi %h", v); end else n_spi++;
    bw(P_SPI, 5'd2, 16'h0004);

    // ---- program ROM (blank) and data RAM ----
    @(negedge clk); rom_addr = 11'd100; @(negedge clk);
    checks++; if (rom_data != 8'hFF) begin failures++; $display("rom %h", rom_data); end
    @(negedge clk); ram_we = 1; ram_addr = 10'd77; ram_wdata = 8'h9C; @(negedge clk); ram_we = 0; @(negedge clk);
    checks++; if (ram_rdata != 8'h9C) begin failures++; $display("ram %h", ram_rdata); end

    // ---- every mechanism must have happened ----
    $display("events: jtag=%0d lock=%0d agc=%0d comp=%0d capture=%0d closed=%0d irq=%0d wdt=%0d uart=%0d spi=%0d",
             n_jtag, n_lock, n_agc, n_comp, n_capture, n_closed, n_irq, n_wdt, n_uart, n_spi);
    checks++; if (n_pair_bad != 0) begin failures++; $display("DAC pair not complementary %0d times", n_pair_bad); end
    checks++; if (n_jtag != 2)  begin failures++; $display("JTAG read-back never happened"); end
    checks++; if (n_lock == 0)  begin failures++; $display("lock never happened"); end
    checks++; if (n_agc == 0)   begin failures++; $display("AGC never settled"); end
    checks++; if (n_comp == 0)  begin failures++; $display("compensation never seen"); end
    checks++; if (n_capture == 0) begin failures++; $display("capture never happened"); end
    checks++; if (n_closed == 0) begin failures++; $display("closed loop never worked"); end
    checks++; if (n_irq == 0)   begin failures++; $display("timer never fired"); end
    checks++; if (n_wdt == 0)   begin failures++; $display("watchdog never fired"); end
    checks++; if (n_uart == 0)  begin failures++; $display("UART never received"); end
    checks++; if (n_spi == 0)   begin failures++; $display("SPI never transferred"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
