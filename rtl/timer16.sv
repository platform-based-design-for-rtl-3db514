// timer16: general-purpose 16-bit timer on the 16-bit bus.
//
// Registers: 0 CTRL ([0] run, [1] interrupt enable, [15:8] prescaler p),
// 1 RELOAD, 2 COUNT (read/write), 3 STATUS ([0] expiry flag, write 1 to
// clear). While running the counter decrements once every p+1 clocks; on the
// tick where it is 0 it reloads and sets the flag, so the flag period is
// (RELOAD+1)(p+1) clocks. irq = flag AND interrupt enable, for the 8051
// interrupt input. The paper only names the timer; its behaviour is this
// design's choice.
module timer16
  import gyro_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  bus16_req_t  req,
  output logic [15:0] rdata,
  output logic        irq
);

  logic        run, ien, flag;
  logic [7:0]  presc, pcnt;
  logic [15:0] reload, count;
  logic        tick;

  assign tick = run && (pcnt == presc);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; ien <= 1'b0; flag <= 1'b0;
      presc <= '0; pcnt <= '0; reload <= '0; count <= '0;
    end else begin
      if (run) pcnt <= tick ? 8'd0 : pcnt + 1'b1;
      if (tick) begin
        if (count == 0) begin
          count <= reload;
          flag  <= 1'b1;
        end else begin
          count <= count - 1'b1;
        end
      end
      if (req.sel && req.wr) begin
        unique case (req.addr)
          5'd0: begin run <= req.wdata[0]; ien <= req.wdata[1]; presc <= req.wdata[15:8]; pcnt <= '0; end
          5'd1: reload <= req.wdata;
          5'd2: count  <= req.wdata;
          5'd3: if (req.wdata[0]) flag <= 1'b0;
          default: ;
        endcase
      end
    end
  end

  assign irq = flag && ien;

  always_comb begin
    rdata = '0;
    if (req.sel && !req.wr) begin
      unique case (req.addr)
        5'd0:    rdata = {presc, 6'd0, ien, run};
        5'd1:    rdata = reload;
        5'd2:    rdata = count;
        5'd3:    rdata = {15'd0, flag};
        default: rdata = '0;
      endcase
    end
  end

endmodule
