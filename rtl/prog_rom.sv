// prog_rom: program ROM of the 8051 in the ASIC configuration.
//
// 16 Kbit organised as DEPTH = 2048 bytes, read synchronously: data is the
// byte at the address presented one clock earlier. The contents (the
// firmware) are loaded from INIT_FILE, a $readmemh file of up to DEPTH bytes;
// with no file every byte reads 8'hFF, like an unprogrammed part. The size
// is the paper's ("16 Kb", read as kilobits); organisation, read timing and
// blank value are this design's choices.
module prog_rom #(
  parameter int    DEPTH     = 2048,
  parameter string INIT_FILE = ""
) (
  input  logic                     clk,
  input  logic [$clog2(DEPTH)-1:0] addr,
  output logic [7:0]               data
);

  logic [7:0] mem [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = 8'hFF;
    if (INIT_FILE != "") $readmemh(INIT_FILE, mem);
  end

  always_ff @(posedge clk) data <= mem[addr];

endmodule
