// tb_spi_master: an SPI mode-0 slave in the testbench returns a known byte
// while recording MOSI; checks both bytes, chip select, the busy flag, the
// SCK polarity at rest and the byte time of 16(d+1) clocks.
module tb_spi_master;
  import gyro_pkg::*;
  logic clk = 0, rst_n = 0;
  bus16_req_t req;
  logic [15:0] rdata;
  logic sck, mosi, miso, cs_n;
  logic [7:0] slave_tx, slave_rx;
  int checks = 0, failures = 0, rises = 0;

  spi_master dut (.clk, .rst_n, .req, .rdata, .sck, .mosi, .miso, .cs_n);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // mode-0 slave: sample MOSI on rising SCK, shift MISO on falling SCK
  assign miso = slave_tx[7];
  always @(posedge sck) begin slave_rx <= {slave_rx[6:0], mosi}; rises++; end
  always @(negedge sck) slave_tx <= {slave_tx[6:0], 1'b0};

  task automatic wr(input logic [4:0] a, input logic [15:0] d);
    @(negedge clk); req = '{sel: 1'b1, wr: 1'b1, addr: a, wdata: d}; @(negedge clk); req = '0;
  endtask
  task automatic rd(input logic [4:0] a, output logic [15:0] d);
    @(negedge clk); req = '{sel: 1'b1, wr: 1'b0, addr: a, wdata: '0}; #1 d = rdata; @(negedge clk); req = '0;
  endtask

  initial begin
    logic [15:0] v;
    int t0, dv;
    req = '0; slave_tx = 0; slave_rx = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    checks++; if (cs_n != 1 || sck != 0) begin failures++; $display("idle pins"); end
    foreach (dv_list[i]) begin
      dv = dv_list[i];
      wr(5'd2, 16'(256 + dv));
      checks++; if (cs_n != 0) begin failures++; $display("cs not asserted"); end
      slave_tx = 8'($urandom); rises = 0;
      begin
        logic [7:0] b, s;
        b = 8'($urandom); s = slave_tx;
        @(negedge clk); req = '{sel: 1'b1, wr: 1'b1, addr: 5'd0, wdata: {8'd0, b}};
        t0 = int'($time); @(negedge clk); req = '0;
        rd(5'd1, v); checks++; if (v[0] != 1) begin failures++; $display("busy not set"); end
        do rd(5'd1, v); while (v[0]);
        checks++; if (rises != 8) begin failures++; $display("rises %0d", rises); end
        checks++; if (slave_rx != b) begin failures++; $display("mosi got %h exp %h", slave_rx, b); end
        rd(5'd0, v); checks++; if (v[7:0] != s) begin failures++; $display("miso got %h exp %h", v[7:0], s); end
        checks++; if (sck != 0) begin failures++; $display("sck not idle low"); end
      end
    end
    // byte time with d = 3: busy for 16*4 = 64 clocks
    wr(5'd2, 16'(256 + 3));
    @(negedge clk); req = '{sel: 1'b1, wr: 1'b1, addr: 5'd0, wdata: 16'h0055};
    @(posedge clk); t0 = int'($time); @(negedge clk); req = '0;
    wait (dut.busy == 0); 
    checks++; if ((int'($time) - t0) / 10 != 64) begin failures++; $display("byte time %0d clocks", (int'($time) - t0) / 10); end
    wr(5'd2, 16'd0);
    checks++; if (cs_n != 1) begin failures++; $display("cs not released"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int dv_list [3] = '{0, 2, 7};
endmodule
