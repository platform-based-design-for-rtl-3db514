// tb_sram_ctrl: CPU writes and read-back through the registers, then a
// capture of COUNT node samples at WPTR: the SRAM must hold exactly the
// samples presented, in order, and nothing beyond COUNT; done/capturing
// flags; the SRAM write-pulse rules are checked by the SRAM model.
module tb_sram_ctrl;
  import gyro_pkg::*;
  logic clk = 0, rst_n = 0;
  bus16_req_t req;
  logic [15:0] rdata, node_data = 0, dq_o, dq_i;
  logic node_valid = 0, dq_oe, we_n, oe_n, ce_n;
  logic [14:0] sa;
  int checks = 0, failures = 0, serr;

  sram_ctrl #(.AW(15)) dut (.clk, .rst_n, .req, .rdata, .node_data, .node_valid, .sram_addr(sa),
    .sram_dq_o(dq_o), .sram_dq_oe(dq_oe), .sram_dq_i(dq_i), .sram_we_n(we_n), .sram_oe_n(oe_n), .sram_ce_n(ce_n));
  sram_model #(.AW(15)) mem (.addr(sa), .dq_o, .dq_oe, .dq_i, .we_n, .oe_n, .ce_n, .errors(serr));

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
    repeat (3) @(negedge clk);
  endtask

  logic [15:0] sent [64];

  initial begin
    logic [15:0] v, st;
    req = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    // CPU write 8 words at 100, read back
    wr(5'd1, 16'd100);
    for (int i = 0; i < 8; i++) begin wr(5'd2, 16'(16'hA000 + i)); repeat (4) @(negedge clk); end
    wr(5'd1, 16'd100); repeat (3) @(negedge clk);
    for (int i = 0; i < 8; i++) begin
      rd(5'd2, v);
      checks++; if (v != 16'(16'hA000 + i)) begin failures++; $display("cpu rd %0d: %h", i, v); end
    end
    // capture 40 samples at 2000, one strobe every 6 clocks
    wr(5'd5, 16'd2000); wr(5'd3, 16'd40); wr(5'd0, 16'd1);
    rd(5'd4, st); checks++; if (st[1:0] != 2'b01) begin failures++; $display("status during %b", st[1:0]); end
    for (int i = 0; i < 50; i++) begin
      @(negedge clk); node_data = 16'($urandom); node_valid = 1;
      if (i < 64) sent[i] = node_data;
      @(negedge clk); node_valid = 0; repeat (4) @(negedge clk);
    end
    rd(5'd4, st); checks++; if (st[1:0] != 2'b10) begin failures++; $display("status after %b", st[1:0]); end
    rd(5'd5, v); checks++; if (v != 16'd2040) begin failures++; $display("wptr %0d", v); end
    wr(5'd1, 16'd2000); repeat (3) @(negedge clk);
    for (int i = 0; i < 41; i++) begin
      rd(5'd2, v);
      checks++;
      if (i < 40 && v != sent[i]) begin failures++; $display("capture %0d got %h exp %h", i, v, sent[i]); end
      if (i == 40 && v != 16'h0000) begin failures++; $display("wrote past COUNT"); end
    end
    checks++; if (serr != 0) begin failures++; $display("SRAM timing errors %0d", serr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
