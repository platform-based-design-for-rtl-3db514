// sram_model: behavioural asynchronous SRAM (testbench only). A word is
// written on the rising edge of we_n while ce_n is low; with oe_n low and
// we_n high the word at addr is driven on dq_i. Checks that address and data
// are stable during the write pulse.
module sram_model #(
  parameter int AW = 15
) (
  input  logic [AW-1:0] addr,
  input  logic [15:0]   dq_o,
  input  logic          dq_oe,
  output logic [15:0]   dq_i,
  input  logic          we_n,
  input  logic          oe_n,
  input  logic          ce_n,
  output int            errors
);
  logic [15:0]   mem [2**AW];
  logic [AW-1:0] a_fall;
  logic [15:0]   d_fall;

  initial begin
    errors = 0;
    for (int i = 0; i < 2**AW; i++) mem[i] = 16'h0000;
  end
  always @(negedge we_n) begin a_fall = addr; d_fall = dq_o; end
  always @(posedge we_n) if (!ce_n) begin
    if (!dq_oe || addr != a_fall || dq_o != d_fall) errors++;
    mem[addr] = dq_o;
  end
  assign dq_i = (!ce_n && !oe_n && we_n) ? mem[addr] : 16'h0000;
endmodule
