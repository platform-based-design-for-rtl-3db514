// jtag_master: drives one four-wire JTAG chain (TCK, TMS, TDI, TDO) from the
// digital section to the analog front end, to program the analog cells and
// read their settings back.
//
// Registers: 0 CTRL (write starts an operation: [1:0] op, 1 = DR scan,
// 2 = IR scan, 3 = test-logic reset; [12:8] scan length - 1, 1..32 bits),
// 1 DIV ([7:0] d, TCK = clk / (2(d+1))), 2 DLO / 3 DHI (write: bits to send,
// LSB first; read: bits received from TDO, bit 0 first), 4 STATUS ([0] busy).
// Operations start and end in Run-Test/Idle. A DR scan sends TMS 1,0,0 to
// reach Shift-DR, shifts the bits (TMS 1 with the last one), then 1,0 through
// Update-DR back to Idle: len+5 TCK periods. An IR scan adds one TMS 1 to
// pass Select-DR. Reset sends five 1s and a 0. TMS and TDI change with the
// falling TCK edge and TDO is sampled on the rising edge, as IEEE 1149.1
// expects. The paper chose JTAG for the analog/digital link (4 wires per
// chain, full read-back); the register set and operation list are this
// design's.
module jtag_master
  import gyro_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  bus16_req_t  req,
  output logic [15:0] rdata,
  output logic        tck,
  output logic        tms,
  output logic        tdi,
  input  logic        tdo
);

  typedef enum logic [1:0] {OP_NONE, OP_DR, OP_IR, OP_RST} op_e;

  op_e         op;
  logic        busy;
  logic [7:0]  d, cnt;
  logic [5:0]  len, step;
  logic [31:0] tx, rx;

  function automatic logic [2:0] pre_len(input op_e o);
    return (o == OP_IR) ? 3'd4 : 3'd3;
  endfunction

  function automatic logic [6:0] n_steps(input op_e o, input logic [5:0] l);
    return (o == OP_RST) ? 7'd6 : 7'(pre_len(o)) + 7'(l) + 7'd2;
  endfunction

  function automatic logic tms_of(input op_e o, input logic [5:0] l, input logic [5:0] s);
    logic [6:0] p;
    p = 7'(pre_len(o));
    if (o == OP_RST)                return (s < 6'd5);
    if (7'(s) < p)                  return (o == OP_IR) ? (s < 6'd2) : (s == 6'd0);
    if (7'(s) < p + 7'(l))          return (7'(s) == p + 7'(l) - 7'd1);
    return (7'(s) == p + 7'(l));
  endfunction

  function automatic logic shifting(input op_e o, input logic [5:0] l, input logic [5:0] s);
    logic [6:0] p;
    p = 7'(pre_len(o));
    return (o != OP_RST) && (7'(s) >= p) && (7'(s) < p + 7'(l));
  endfunction

  logic [5:0] bit_idx;
  logic [5:0] nstep;
  assign bit_idx = step - 6'(pre_len(op));
  assign nstep   = step + 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op <= OP_NONE; busy <= 1'b0; d <= 8'd1; cnt <= '0; len <= '0; step <= '0;
      tx <= '0; rx <= '0; tck <= 1'b0; tms <= 1'b1; tdi <= 1'b0;
    end else begin
      if (req.sel && req.wr) begin
        unique case (req.addr)
          5'd1: d <= req.wdata[7:0];
          5'd2: if (!busy) tx[15:0]  <= req.wdata;
          5'd3: if (!busy) tx[31:16] <= req.wdata;
          default: ;
        endcase
      end
      if (!busy) begin
        if (req.sel && req.wr && req.addr == 5'd0 && req.wdata[1:0] != 2'd0) begin
          op   <= op_e'(req.wdata[1:0]);
          len  <= 6'(req.wdata[12:8]) + 6'd1;
          step <= '0;
          busy <= 1'b1;
          cnt  <= d;
          tck  <= 1'b0;
          tms  <= tms_of(op_e'(req.wdata[1:0]), 6'(req.wdata[12:8]) + 6'd1, 6'd0);
          tdi  <= 1'b0;
          rx   <= '0;
        end
      end else if (cnt != 0) begin
        cnt <= cnt - 1'b1;
      end else begin
        cnt <= d;
        tck <= !tck;
        if (!tck) begin                                   // rising edge
          if (shifting(op, len, step)) rx[bit_idx[4:0]] <= tdo;
        end else begin                                    // falling edge
          if (7'(step) == n_steps(op, len) - 7'd1) begin
            busy <= 1'b0;
            tms  <= 1'b0;
            tdi  <= 1'b0;
          end else begin
            step <= nstep;
            tms  <= tms_of(op, len, nstep);
            tdi  <= shifting(op, len, nstep) ? tx[5'(nstep - 6'(pre_len(op)))] : 1'b0;
          end
        end
      end
    end
  end

  always_comb begin
    rdata = '0;
    if (req.sel && !req.wr) begin
      unique case (req.addr)
        5'd1:    rdata = {8'd0, d};
        5'd2:    rdata = rx[15:0];
        5'd3:    rdata = rx[31:16];
        5'd4:    rdata = {15'd0, busy};
        default: rdata = '0;
      endcase
    end
  end

  // TMS and TDI never change at a rising TCK edge
  a_tms_setup: assert property (@(posedge clk) disable iff (!rst_n)
    $rose(tck) |-> $stable(tms) && $stable(tdi));

endmodule
