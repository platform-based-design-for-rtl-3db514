// tb_watchdog: disabled it never fires; enabled and kicked in time it stays
// quiet; a wrong key does not kick; left alone it fires after
// (TIMEOUT+1)*PRESC clocks and repeats; enable cannot be cleared.
module tb_watchdog;
  import gyro_pkg::*;
  localparam int PR = 4;
  logic clk = 0, rst_n = 0;
  bus16_req_t req;
  logic [15:0] rdata;
  logic wdt_rst;
  int checks = 0, failures = 0, fires = 0;

  watchdog #(.PRESC(PR)) dut (.clk, .rst_n, .req, .rdata, .wdt_rst);

  always #5 clk = ~clk;
  always @(posedge clk) if (wdt_rst) fires++;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(input logic [4:0] a, input logic [15:0] d);
    @(negedge clk); req = '{sel: 1'b1, wr: 1'b1, addr: a, wdata: d}; @(negedge clk); req = '0;
  endtask
  task automatic rd(input logic [4:0] a, output logic [15:0] d);
    @(negedge clk); req = '{sel: 1'b1, wr: 1'b0, addr: a, wdata: '0}; #1 d = rdata; @(negedge clk); req = '0;
  endtask

  initial begin
    logic [15:0] v;
    int t0, t1;
    req = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    wr(5'd1, 16'd49);                       // 50 ticks = 200 clocks
    repeat (1000) @(posedge clk);
    checks++; if (fires != 0) begin failures++; $display("fired while disabled"); end
    wr(5'd0, 16'd1);
    for (int k = 0; k < 10; k++) begin repeat (150) @(posedge clk); wr(5'd2, 16'h5A5A); end
    checks++; if (fires != 0) begin failures++; $display("fired although kicked"); end
    wr(5'd2, 16'h1234);                     // wrong key
    @(negedge clk); req = '{sel: 1'b1, wr: 1'b1, addr: 5'd2, wdata: 16'h5A5A}; @(posedge clk); t0 = int'($time); @(negedge clk); req = '0;
    wait (wdt_rst); t1 = int'($time);
    checks++; if ((t1 - t0) / 10 != 50 * PR) begin failures++; $display("timeout %0d clocks exp %0d", (t1 - t0) / 10, 50 * PR); end
    wr(5'd0, 16'd0); rd(5'd0, v);
    checks++; if (v[0] != 1) begin failures++; $display("enable cleared"); end
    fires = 0; repeat (1000) @(posedge clk);
    checks++; if (fires < 4 || fires > 5) begin failures++; $display("repeat fires %0d", fires); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
