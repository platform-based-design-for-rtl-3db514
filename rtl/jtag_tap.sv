// jtag_tap: IEEE 1149.1 test access port on the analog front end. Through it
// the digital section writes the settings of the analog cells (amplifier
// gains and bandwidths, ADC resolution and the like) and reads them back.
//
// The standard 16-state controller advances on the rising TCK edge; trst_n
// resets it asynchronously. The instruction register is 4 bits (Capture-IR
// loads 4'b0001). Instructions: BYPASS (4'hF and any unknown code, 1-bit
// register that captures 0), IDCODE (4'h1, 32-bit, selected after reset) and
// CFG (4'h2, 32 bits). Capture-DR of CFG loads the present settings, so the
// shifted-out word is a full read-back; Update-DR copies the shifted word to
// cfg. Registers shift on the rising edge; TDO and the Update stages change on
// the falling edge as the standard requires. cfg is cleared only by trst_n,
// not by the Test-Logic-Reset state, so a TMS reset keeps the analog setup.
// JTAG as the analog-digital link is the paper's choice; the instruction
// codes, ID code and the single 32-bit settings word are this design's.
module jtag_tap #(
  parameter logic [31:0] IDCODE    = 32'h1005_A001,
  parameter logic [31:0] CFG_RESET = 32'h0000_0000
) (
  input  logic        tck,
  input  logic        tms,
  input  logic        tdi,
  output logic        tdo,
  input  logic        trst_n,
  output logic [31:0] cfg
);

  typedef enum logic [3:0] {
    TLR, RTI, SEL_DR, CAP_DR, SH_DR, EX1_DR, PAU_DR, EX2_DR, UPD_DR,
    SEL_IR, CAP_IR, SH_IR, EX1_IR, PAU_IR, EX2_IR, UPD_IR
  } tap_e;

  localparam logic [3:0] I_IDCODE = 4'h1;
  localparam logic [3:0] I_CFG    = 4'h2;

  tap_e        st, st_nx;
  logic [3:0]  ir, ir_sr;
  logic [31:0] dr_sr;
  logic        byp;

  always_comb begin
    unique case (st)
      TLR:    st_nx = tms ? TLR    : RTI;
      RTI:    st_nx = tms ? SEL_DR : RTI;
      SEL_DR: st_nx = tms ? SEL_IR : CAP_DR;
      CAP_DR: st_nx = tms ? EX1_DR : SH_DR;
      SH_DR:  st_nx = tms ? EX1_DR : SH_DR;
      EX1_DR: st_nx = tms ? UPD_DR : PAU_DR;
      PAU_DR: st_nx = tms ? EX2_DR : PAU_DR;
      EX2_DR: st_nx = tms ? UPD_DR : SH_DR;
      UPD_DR: st_nx = tms ? SEL_DR : RTI;
      SEL_IR: st_nx = tms ? TLR    : CAP_IR;
      CAP_IR: st_nx = tms ? EX1_IR : SH_IR;
      SH_IR:  st_nx = tms ? EX1_IR : SH_IR;
      EX1_IR: st_nx = tms ? UPD_IR : PAU_IR;
      PAU_IR: st_nx = tms ? EX2_IR : PAU_IR;
      EX2_IR: st_nx = tms ? UPD_IR : SH_IR;
      UPD_IR: st_nx = tms ? SEL_DR : RTI;
      default: st_nx = TLR;
    endcase
  end

  // state and shift registers: rising edge
  always_ff @(posedge tck or negedge trst_n) begin
    if (!trst_n) begin
      st    <= TLR;
      ir_sr <= '0;
      dr_sr <= '0;
      byp   <= 1'b0;
    end else begin
      st <= st_nx;
      unique case (st)
        CAP_IR: ir_sr <= 4'b0001;
        SH_IR:  ir_sr <= {tdi, ir_sr[3:1]};
        CAP_DR: begin
          byp <= 1'b0;
          if (ir == I_IDCODE)   dr_sr <= IDCODE;
          else if (ir == I_CFG) dr_sr <= cfg;
        end
        SH_DR: begin
          byp <= tdi;
          if (ir == I_IDCODE || ir == I_CFG) dr_sr <= {tdi, dr_sr[31:1]};
        end
        default: ;
      endcase
    end
  end

  // TDO and update stages: falling edge
  always_ff @(negedge tck or negedge trst_n) begin
    if (!trst_n) begin
      ir  <= I_IDCODE;
      cfg <= CFG_RESET;
      tdo <= 1'b0;
    end else begin
      if (st == TLR) ir <= I_IDCODE;
      if (st == UPD_IR) ir <= ir_sr;
      if (st == UPD_DR && ir == I_CFG) cfg <= dr_sr;
      if (st == SH_IR)      tdo <= ir_sr[0];
      else if (st == SH_DR) tdo <= (ir == I_IDCODE || ir == I_CFG) ? dr_sr[0] : byp;
      else                  tdo <= 1'b0;
    end
  end

endmodule
