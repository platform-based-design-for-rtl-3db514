// sram_ctrl: real-time capture of a DSP node into external SRAM, with
// read-back by the CPU, for analysing the processing chain.
//
// The external part is an asynchronous 512 Kbit SRAM organised 32 K x 16.
// Registers: 0 CTRL (write [0]=1 start a capture at WPTR, [1]=1 stop),
// 1 ADDR (CPU access address), 2 DATA (write: store wdata at ADDR; read:
// the word at ADDR; both then increment ADDR), 3 COUNT (samples to capture),
// 4 STATUS ([0] capturing, [1] done), 5 WPTR (capture write pointer).
// During a capture each node_valid pulse writes node_data at WPTR and
// increments it, until COUNT samples are stored (the pointer wraps at the end
// of the SRAM). Every write is three clocks: address and data set up, we_n
// low, we_n high with data held, so strobes must be at least three clocks
// apart (the DSP default is 100). When idle the SRAM is read at ADDR
// (oe_n low) and the word is latched every clock; a DATA read returns that
// latch, so ADDR must be stable for two clocks before it, which the bridge
// guarantees. A CPU write arriving during a capture write is dropped.
// The paper gives the function (capture any DSP node at run time into a
// 512 Kb SRAM, read back later); the interface timing and registers are
// this design's choices.
module sram_ctrl
  import gyro_pkg::*;
#(
  parameter int AW = 15
) (
  input  logic          clk,
  input  logic          rst_n,
  input  bus16_req_t    req,
  output logic [15:0]   rdata,
  input  logic [15:0]   node_data,
  input  logic          node_valid,
  output logic [AW-1:0] sram_addr,
  output logic [15:0]   sram_dq_o,
  output logic          sram_dq_oe,
  input  logic [15:0]   sram_dq_i,
  output logic          sram_we_n,
  output logic          sram_oe_n,
  output logic          sram_ce_n
);

  typedef enum logic [1:0] {S_IDLE, S_SETUP, S_PULSE, S_HOLD} state_e;
  state_e state;

  logic [AW-1:0] addr, wptr, w_addr;
  logic [15:0]   count, remaining, w_data, rd_lat;
  logic          capturing, done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; addr <= '0; wptr <= '0; w_addr <= '0; count <= '0;
      remaining <= '0; w_data <= '0; rd_lat <= '0; capturing <= 1'b0; done <= 1'b0;
    end else begin
      if (state == S_IDLE) rd_lat <= sram_dq_i;
      unique case (state)
        S_IDLE: begin
          if (capturing && node_valid) begin
            w_addr <= wptr; w_data <= node_data; state <= S_SETUP;
            wptr <= wptr + 1'b1;
            remaining <= remaining - 1'b1;
            if (remaining == 16'd1) begin capturing <= 1'b0; done <= 1'b1; end
          end else if (req.sel && req.wr && req.addr == 5'd2) begin
            w_addr <= addr; w_data <= req.wdata; state <= S_SETUP;
            addr <= addr + 1'b1;
          end
        end
        S_SETUP: state <= S_PULSE;
        S_PULSE: state <= S_HOLD;
        S_HOLD:  state <= S_IDLE;
      endcase
      if (req.sel && req.wr) begin
        unique case (req.addr)
          5'd0: begin
            if (req.wdata[0] && count != 0) begin capturing <= 1'b1; done <= 1'b0; remaining <= count; end
            if (req.wdata[1]) capturing <= 1'b0;
          end
          5'd1: addr  <= req.wdata[AW-1:0];
          5'd3: count <= req.wdata;
          5'd5: wptr  <= req.wdata[AW-1:0];
          default: ;
        endcase
      end
      if (req.sel && !req.wr && req.addr == 5'd2) addr <= addr + 1'b1;
    end
  end

  assign sram_ce_n  = 1'b0;
  assign sram_addr  = (state == S_IDLE) ? addr : w_addr;
  assign sram_oe_n  = (state != S_IDLE);
  assign sram_we_n  = (state != S_PULSE);
  assign sram_dq_oe = (state != S_IDLE);
  assign sram_dq_o  = w_data;

  always_comb begin
    rdata = '0;
    if (req.sel && !req.wr) begin
      unique case (req.addr)
        5'd0:    rdata = {15'd0, capturing};
        5'd1:    rdata = 16'(addr);
        5'd2:    rdata = rd_lat;
        5'd3:    rdata = count;
        5'd4:    rdata = {14'd0, done, capturing};
        5'd5:    rdata = 16'(wptr);
        default: rdata = '0;
      endcase
    end
  end

  // bus rules of the asynchronous SRAM: write only while driving the data
  // bus with outputs disabled, address and data stable around the pulse
  a_we_drives: assert property (@(posedge clk) disable iff (!rst_n)
    !sram_we_n |-> sram_dq_oe && sram_oe_n);
  a_we_stable: assert property (@(posedge clk) disable iff (!rst_n)
    !sram_we_n |-> $stable(sram_addr) && $stable(sram_dq_o));

endmodule
