// tb_data_ram: writes random bytes to every address, reads them all back,
// and checks read-before-write on a write cycle.
module tb_data_ram;
  logic clk = 0, we = 0;
  logic [9:0] addr = 0;
  logic [7:0] wdata = 0, rdata;
  logic [7:0] model [1024];
  int checks = 0, failures = 0;

  data_ram #(.DEPTH(1024)) dut (.clk, .we, .addr, .wdata, .rdata);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); we = 1; addr = 10'(i); wdata = 8'($urandom); model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 1023; i >= 0; i--) begin
      @(negedge clk); addr = 10'(i);
      @(posedge clk); #1;
      checks++; if (rdata != model[i]) begin failures++; $display("ram[%0d]=%h exp %h", i, rdata, model[i]); end
    end
    @(negedge clk); we = 1; addr = 10'd5; wdata = ~model[5];
    @(posedge clk); #1;
    checks++; if (rdata != model[5]) begin failures++; $display("read-before-write"); end
    @(negedge clk); we = 0;
    @(posedge clk); #1;
    checks++; if (rdata != ~model[5]) begin failures++; $display("write lost"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
