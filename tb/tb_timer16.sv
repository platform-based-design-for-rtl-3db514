// tb_timer16: checks the expiry period (RELOAD+1)(p+1) clocks for two
// settings, the flag clear, the interrupt enable and the COUNT write/read.
module tb_timer16;
  import gyro_pkg::*;
  logic clk = 0, rst_n = 0;
  bus16_req_t req;
  logic [15:0] rdata;
  logic irq;
  int checks = 0, failures = 0;

  timer16 dut (.clk, .rst_n, .req, .rdata, .irq);

  always #5 clk = ~clk;
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

  task automatic period(input int rl, input int p);
    int t1, t2;
    wr(5'd0, 16'd0); wr(5'd1, 16'(rl)); wr(5'd2, 16'(rl)); wr(5'd3, 16'd1);
    wr(5'd0, {8'(p), 8'h03});
    wait (irq); t1 = int'($time);
    @(negedge clk); req = '{sel: 1'b1, wr: 1'b1, addr: 5'd3, wdata: 16'd1}; @(negedge clk); req = '0;
    checks++; if (irq) begin failures++; $display("flag not cleared"); end
    wait (irq); t2 = int'($time);
    checks++;
    if ((t2 - t1) / 10 != (rl + 1) * (p + 1)) begin failures++; $display("period %0d exp %0d", (t2 - t1) / 10, (rl + 1) * (p + 1)); end
  endtask

  initial begin
    logic [15:0] v;
    req = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    period(99, 0);
    period(20, 4);
    // interrupt enable masks irq but not the flag
    wr(5'd0, 16'h0001); repeat (200) @(posedge clk);
    rd(5'd3, v);
    checks++; if (v[0] != 1 || irq) begin failures++; $display("mask: flag %0d irq %0d", v[0], irq); end
    // stopped counter holds its value
    wr(5'd0, 16'h0000); wr(5'd2, 16'd1234); repeat (10) @(posedge clk); rd(5'd2, v);
    checks++; if (v != 16'd1234) begin failures++; $display("count %0d", v); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
