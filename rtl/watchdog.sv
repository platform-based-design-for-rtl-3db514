// watchdog: software watchdog on the 16-bit bus.
//
// Registers: 0 CTRL ([0] enable; once set it stays set until reset),
// 1 TIMEOUT (reload value, in ticks of PRESC clocks), 2 KICK (writing KEY
// reloads the counter; other values are ignored), 3 COUNT (read only).
// When enabled, the counter loads TIMEOUT and decrements every PRESC clocks;
// if it reaches 0 before a kick, wdt_rst pulses high for one clock and the
// counter reloads. With PRESC = 256 at 20 MHz the longest timeout is 0.84 s.
// The paper only names the watchdog; its behaviour is this design's choice.
module watchdog
  import gyro_pkg::*;
#(
  parameter int          PRESC = 256,
  parameter logic [15:0] KEY   = 16'h5A5A
) (
  input  logic        clk,
  input  logic        rst_n,
  input  bus16_req_t  req,
  output logic [15:0] rdata,
  output logic        wdt_rst
);

  logic                       en;
  logic [15:0]                timeout, count;
  logic [$clog2(PRESC+1)-1:0] pcnt;
  logic                       tick;

  assign tick = (pcnt == ($clog2(PRESC+1))'(PRESC - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en <= 1'b0; timeout <= 16'hFFFF; count <= 16'hFFFF; pcnt <= '0; wdt_rst <= 1'b0;
    end else begin
      wdt_rst <= 1'b0;
      if (en) begin
        pcnt <= tick ? '0 : pcnt + 1'b1;
        if (tick) begin
          if (count == 0) begin
            wdt_rst <= 1'b1;
            count   <= timeout;
          end else begin
            count <= count - 1'b1;
          end
        end
      end
      if (req.sel && req.wr) begin
        unique case (req.addr)
          5'd0: if (req.wdata[0] && !en) begin en <= 1'b1; count <= timeout; pcnt <= '0; end
          5'd1: timeout <= req.wdata;
          5'd2: if (req.wdata == KEY) begin count <= timeout; pcnt <= '0; end
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    rdata = '0;
    if (req.sel && !req.wr) begin
      unique case (req.addr)
        5'd0:    rdata = {15'd0, en};
        5'd1:    rdata = timeout;
        5'd3:    rdata = count;
        default: rdata = '0;
      endcase
    end
  end

endmodule
