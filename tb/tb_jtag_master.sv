// tb_jtag_master: the master drives a jtag_tap. Checks test-logic reset,
// an IDCODE DR scan, an IR scan to CFG, a CFG write (seen on the TAP's cfg
// output), read-back of the written word, a short scan length, the busy
// flag, and the duration of a DR scan: (len+5) TCK periods of 2(d+1) clocks.
module tb_jtag_master;
  import gyro_pkg::*;
  logic clk = 0, rst_n = 0;
  bus16_req_t req;
  logic [15:0] rdata;
  logic tck, tms, tdi, tdo;
  logic [31:0] cfg;
  int checks = 0, failures = 0;

  jtag_master dut (.clk, .rst_n, .req, .rdata, .tck, .tms, .tdi, .tdo);
  jtag_tap #(.IDCODE(32'h1005_A001)) tap (.tck, .tms, .tdi, .tdo, .trst_n(rst_n), .cfg);

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(input logic [4:0] a, input logic [15:0] d);
    @(negedge clk); req = '{sel: 1'b1, wr: 1'b1, addr: a, wdata: d}; @(negedge clk); req = '0;
  endtask
  task automatic rd(input logic [4:0] a, output logic [15:0] d);
    @(negedge clk); req = '{sel: 1'b1, wr: 1'b0, addr: a, wdata: '0}; #1 d = rdata; @(negedge clk); req = '0;
  endtask
  task automatic op(input int code, input int len, input logic [31:0] din, output logic [31:0] dout, output int clocks);
    logic [15:0] v, lo, hi;
    int t0;
    wr(5'd2, din[15:0]); wr(5'd3, din[31:16]);
    @(negedge clk); req = '{sel: 1'b1, wr: 1'b1, addr: 5'd0, wdata: {3'd0, 5'(len - 1), 6'd0, 2'(code)}};
    @(posedge clk); t0 = int'($time); @(negedge clk); req = '0;
    #1 rd(5'd4, v);
    checks++; if (v[0] != 1) begin failures++; $display("busy not set"); end
    do begin @(posedge clk); #1; end while (dut.busy);
    clocks = (int'($time) - 1 - t0) / 10;
    rd(5'd2, lo); rd(5'd3, hi); dout = {hi, lo};
  endtask

  initial begin
    logic [31:0] o;
    int c;
    req = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    wr(5'd1, 16'd2);                           // TCK = clk/6
    op(3, 1, 0, o, c);                         // reset
    op(1, 32, 0, o, c);
    checks++; if (o != 32'h1005_A001) begin failures++; $display("idcode %h", o); end
    checks++; if (c != (32 + 5) * 6) begin failures++; $display("DR scan %0d clocks exp %0d", c, 37 * 6); end
    op(2, 4, 32'h2, o, c);
    checks++; if (o[3:0] != 4'b0001) begin failures++; $display("ir capture %b", o[3:0]); end
    op(1, 32, 32'hDEAD_BEEF, o, c);
    checks++; if (cfg != 32'hDEAD_BEEF) begin failures++; $display("cfg %h", cfg); end
    op(1, 32, 32'h0102_0304, o, c);
    checks++; if (o != 32'hDEAD_BEEF) begin failures++; $display("readback %h", o); end
    checks++; if (cfg != 32'h0102_0304) begin failures++; $display("cfg2 %h", cfg); end
    // bypass with 5 bits: first bit out is 0, then the inputs delayed
    op(2, 4, 32'hF, o, c);
    op(1, 5, 32'b10111, o, c);
    checks++; if (o[4:0] != 5'b01110) begin failures++; $display("bypass %b", o[4:0]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
