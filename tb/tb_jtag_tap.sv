// tb_jtag_tap: bit-bangs TCK/TMS/TDI from the testbench. Checks IDCODE after
// reset, the IR capture pattern, a CFG write that appears on cfg only at
// Update-DR, its read-back, BYPASS (one-clock delay, captures 0), that a TMS
// reset restores IDCODE but keeps cfg, and that trst_n clears cfg.
module tb_jtag_tap;
  logic tck = 0, tms = 1, tdi = 0, tdo, trst_n = 1;
  logic [31:0] cfg;
  int checks = 0, failures = 0;

  jtag_tap #(.IDCODE(32'h1005_A001), .CFG_RESET(32'h0)) dut (.tck, .tms, .tdi, .tdo, .trst_n, .cfg);

  initial begin
    #200000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // one TCK period; returns TDO sampled before the rising edge
  task automatic clk1(input logic m, input logic d, output logic o);
    tms = m; tdi = d; #10; o = tdo; tck = 1; #10; tck = 0;
  endtask
  task automatic go(input logic m); logic o; clk1(m, 0, o); endtask
  task automatic shift(input int n, input logic [63:0] din, output logic [63:0] dout);
    logic o;
    dout = 0;
    for (int i = 0; i < n; i++) begin clk1(i == n - 1, din[i], o); dout[i] = o; end
  endtask
  task automatic ir_scan(input logic [3:0] ir, output logic [3:0] cap);
    logic [63:0] o;
    go(1); go(1); go(0); go(0);            // RTI -> Shift-IR
    shift(4, 64'(ir), o); cap = o[3:0];
    go(1); go(0);                          // Update-IR -> RTI
  endtask
  task automatic dr_scan(input int n, input logic [63:0] din, output logic [63:0] dout);
    go(1); go(0); go(0);                   // RTI -> Shift-DR
    shift(n, din, dout);
    go(1); go(0);
  endtask

  initial begin
    logic [63:0] o;
    logic [3:0] cap;
    #5 trst_n = 0; #30 trst_n = 1;
    go(0);                                 // TLR -> RTI
    dr_scan(32, 64'h0, o);
    checks++; if (o[31:0] != 32'h1005_A001) begin failures++; $display("idcode %h", o[31:0]); end
    ir_scan(4'h2, cap);
    checks++; if (cap != 4'b0001) begin failures++; $display("ir capture %b", cap); end
    // write CFG: cfg must change only after Update-DR
    go(1); go(0); go(0);
    shift(32, 64'hCAFE_0123, o);
    checks++; if (cfg != 0) begin failures++; $display("cfg changed before update"); end
    go(1); go(0);
    checks++; if (cfg != 32'hCAFE_0123) begin failures++; $display("cfg %h", cfg); end
    // read back (and write a new value at the same time)
    dr_scan(32, 64'h5555_AAAA, o);
    checks++; if (o[31:0] != 32'hCAFE_0123) begin failures++; $display("readback %h", o[31:0]); end
    checks++; if (cfg != 32'h5555_AAAA) begin failures++; $display("cfg2 %h", cfg); end
    // bypass: 1-bit delay, first bit out is the captured 0
    ir_scan(4'hF, cap);
    dr_scan(9, 64'b1_0110_1011, o);
    checks++; if (o[8:0] != 9'b0_1101_0110) begin failures++; $display("bypass %b", o[8:0]); end
    // TMS reset: IDCODE selected again, cfg kept
    go(1); go(1); go(1); go(1); go(1); go(0);
    dr_scan(32, 64'h0, o);
    checks++; if (o[31:0] != 32'h1005_A001) begin failures++; $display("idcode after reset %h", o[31:0]); end
    checks++; if (cfg != 32'h5555_AAAA) begin failures++; $display("cfg lost on TMS reset"); end
    trst_n = 0; #5;
    checks++; if (cfg != 32'h0) begin failures++; $display("trst"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
