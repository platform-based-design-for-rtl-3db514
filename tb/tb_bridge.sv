// tb_bridge: SFR-side writes must produce exactly one 16-bit request, on the
// selected peripheral only, the clock after the BCTRL write, with the latched
// address and data; a read must return the selected peripheral's data through
// BDL/BDH. Unrelated SFR addresses must not hit.
module tb_bridge;
  import gyro_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [7:0] sfr_addr = 0, sfr_wdata = 0, sfr_rdata;
  logic sfr_wr = 0, sfr_hit;
  bus16_req_t req [N_PERIPH];
  logic [15:0] rd [N_PERIPH];
  int checks = 0, failures = 0;
  int nreq [N_PERIPH];
  bus16_req_t last [N_PERIPH];

  bridge #(.NP(N_PERIPH)) dut (.clk, .rst_n, .sfr_addr, .sfr_wdata, .sfr_wr, .sfr_rdata, .sfr_hit, .req_o(req), .rdata_i(rd));

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // read data depends on peripheral and register, only while selected
  always_comb for (int i = 0; i < N_PERIPH; i++) rd[i] = req[i].sel ? 16'(i * 4096 + 16'(req[i].addr) * 16 + 5) : 16'hDEAD;

  always @(posedge clk) for (int i = 0; i < N_PERIPH; i++) if (req[i].sel) begin nreq[i]++; last[i] = req[i]; end

  task automatic sfr_w(input logic [7:0] a, input logic [7:0] d);
    @(negedge clk); sfr_addr = a; sfr_wdata = d; sfr_wr = 1; @(negedge clk); sfr_wr = 0; sfr_addr = 8'h00;
  endtask
  task automatic sfr_r(input logic [7:0] a, output logic [7:0] d);
    @(negedge clk); sfr_addr = a; #1 d = sfr_rdata; @(negedge clk); sfr_addr = 8'h00;
  endtask

  initial begin
    logic [7:0] lo, hi;
    logic [15:0] wd;
    logic [4:0] ra;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int p = 0; p < N_PERIPH; p++) begin
      // write
      ra = 5'($urandom_range(0, 31)); wd = 16'($urandom);
      for (int i = 0; i < N_PERIPH; i++) nreq[i] = 0;
      sfr_w(SFR_BADDR, {3'(p), ra}); sfr_w(SFR_BDL, wd[7:0]); sfr_w(SFR_BDH, wd[15:8]);
      sfr_w(SFR_BCTRL, 8'h01);
      repeat (3) @(posedge clk);
      for (int i = 0; i < N_PERIPH; i++) begin
        checks++;
        if (nreq[i] != (i == p ? 1 : 0)) begin failures++; $display("p=%0d periph %0d saw %0d requests", p, i, nreq[i]); end
      end
      checks++;
      if (!(last[p].wr && last[p].addr == ra && last[p].wdata == wd)) begin failures++; $display("write request wrong p=%0d", p); end
      // read
      sfr_w(SFR_BCTRL, 8'h02);
      repeat (2) @(posedge clk);
      sfr_r(SFR_BDL, lo); sfr_r(SFR_BDH, hi);
      checks++;
      if ({hi, lo} != 16'(p * 4096 + int'(ra) * 16 + 5)) begin failures++; $display("read p=%0d got %h", p, {hi, lo}); end
      checks++;
      if (last[p].wr) begin failures++; $display("read flagged as write"); end
    end
    // timing: the request is on the bus in the clock right after the BCTRL write
    @(negedge clk); sfr_addr = SFR_BCTRL; sfr_wdata = 8'h01; sfr_wr = 1;
    @(negedge clk); sfr_wr = 0;
    checks++; if (!req[N_PERIPH-1].sel) begin failures++; $display("request not in next clock"); end
    @(negedge clk);
    checks++; if (req[N_PERIPH-1].sel) begin failures++; $display("request longer than one clock"); end
    // hit decode
    @(negedge clk); sfr_addr = 8'h90; #1;
    checks++; if (sfr_hit) begin failures++; $display("false hit"); end
    sfr_addr = SFR_BADDR; #1;
    checks++; if (!sfr_hit || sfr_rdata != {3'(N_PERIPH-1), ra}) begin failures++; $display("BADDR read"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
