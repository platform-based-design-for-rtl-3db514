// tb_uart: transmits bytes, decodes txd with an independent bit-timing
// receiver in the testbench, sends bytes into rxd from the testbench, and
// checks the received data, status flags, overrun and the frame length of
// 10 bit times.
module tb_uart;
  import gyro_pkg::*;
  localparam int DIV = 16;
  logic clk = 0, rst_n = 0;
  logic [7:0] sfr_addr = 0, sfr_wdata = 0, sfr_rdata;
  logic sfr_wr = 0, sfr_rd = 0, sfr_hit, txd, tx_en, rxd = 1;
  int checks = 0, failures = 0;

  uart #(.DIV_DEF(16'd174)) dut (.clk, .rst_n, .sfr_addr, .sfr_wdata, .sfr_wr, .sfr_rd, .sfr_rdata, .sfr_hit, .txd, .tx_en, .rxd);

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic sfr_w(input logic [7:0] a, input logic [7:0] d);
    @(negedge clk); sfr_addr = a; sfr_wdata = d; sfr_wr = 1; @(negedge clk); sfr_wr = 0;
  endtask
  task automatic sfr_r(input logic [7:0] a, output logic [7:0] d);
    @(negedge clk); sfr_addr = a; sfr_rd = 1; #1 d = sfr_rdata; @(negedge clk); sfr_rd = 0;
  endtask
  task automatic send_rx(input logic [7:0] b, input logic stop);
    logic [9:0] f;
    f = {stop, b, 1'b0};
    for (int i = 0; i < 10; i++) begin rxd = f[i]; repeat (DIV) @(posedge clk); end
    rxd = 1;
  endtask

  initial begin
    logic [7:0] st, d, got;
    int t_start, t_end;
    repeat (3) @(posedge clk); rst_n = 1;
    sfr_r(SFR_UDIVL, d); checks++; if (d != 8'd174) begin failures++; $display("div reset"); end
    sfr_w(SFR_UDIVL, 8'(DIV)); sfr_w(SFR_UDIVH, 8'd0);
    // transmit
    for (int k = 0; k < 4; k++) begin
      logic [7:0] b;
      b = 8'($urandom);
      sfr_w(SFR_UDATA, b);
      wait (txd == 0);
      t_start = $time;
      repeat (DIV / 2) @(posedge clk);
      checks++; if (txd != 0) begin failures++; $display("start bit"); end
      for (int i = 0; i < 8; i++) begin repeat (DIV) @(posedge clk); got[i] = txd; end
      repeat (DIV) @(posedge clk);
      checks++; if (txd != 1) begin failures++; $display("stop bit"); end
      checks++; if (got != b) begin failures++; $display("tx got %h exp %h", got, b); end
      wait (!tx_en); t_end = $time;
      checks++; if ((t_end - t_start) / 10 < 10 * DIV - 1 || (t_end - t_start) / 10 > 10 * DIV + 1) begin failures++; $display("frame %0d clocks", (t_end - t_start) / 10); end
    end
    // receive
    send_rx(8'hA5, 1'b1); repeat (4) @(posedge clk);
    sfr_r(SFR_USTAT, st); checks++; if (st[1] != 1 || st[3] != 0) begin failures++; $display("rx status %b", st); end
    sfr_r(SFR_UDATA, d); checks++; if (d != 8'hA5) begin failures++; $display("rx %h", d); end
    sfr_r(SFR_USTAT, st); checks++; if (st[1] != 0) begin failures++; $display("rx_full not cleared"); end
    // overrun and framing error
    send_rx(8'h3C, 1'b1); send_rx(8'hC3, 1'b0); repeat (4) @(posedge clk);
    sfr_r(SFR_USTAT, st); checks++; if (st[2] != 1 || st[3] != 1) begin failures++; $display("ovr/ferr %b", st); end
    sfr_r(SFR_UDATA, d); checks++; if (d != 8'hC3) begin failures++; $display("rx2 %h", d); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
