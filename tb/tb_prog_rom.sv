// tb_prog_rom: loads a small hex image and checks the bytes written in it,
// the blank value 8'hFF elsewhere, and the one-clock read latency.
module tb_prog_rom;
  logic clk = 0;
  logic [10:0] addr = 0;
  logic [7:0] data;
  int checks = 0, failures = 0;

  prog_rom #(.DEPTH(2048), .INIT_FILE("tb/rom_test.hex")) dut (.clk, .addr, .data);

  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic expect_at(input int a, input logic [7:0] e);
    @(negedge clk); addr = 11'(a);
    @(posedge clk); #1;
    checks++; if (data !== e) begin failures++; $display("rom[%0d] = %h exp %h", a, data, e); end
  endtask

  initial begin
    expect_at(0, 8'h02); expect_at(1, 8'h75); expect_at(2, 8'h81); expect_at(3, 8'h30);
    expect_at(16, 8'hDE); expect_at(17, 8'hAD); expect_at(18, 8'hBE); expect_at(19, 8'hEF);
    expect_at(4, 8'hFF); expect_at(1000, 8'hFF); expect_at(2047, 8'h5A);
    // latency: the output follows the address only after the clock edge
    @(negedge clk); addr = 11'd16; #1;
    checks++; if (data != 8'h5A) begin failures++; $display("read not registered"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
