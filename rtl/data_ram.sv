// data_ram: data RAM of the 8051 (external data space).
//
// Single-port synchronous RAM of DEPTH bytes (default 1 KiB): a write stores
// wdata at addr on the clock edge when we is high; rdata is the byte at the
// address of the previous clock (read-before-write on a write cycle). The
// paper lists a RAM next to the CPU without a size; size and timing are this
// design's choices.
module data_ram #(
  parameter int DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [7:0]               wdata,
  output logic [7:0]               rdata
);

  logic [7:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= wdata;
    rdata <= mem[addr];
  end

endmodule
