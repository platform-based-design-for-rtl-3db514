// dsp: the hard-wired signal-processing block of the gyro conditioning chip.
//
// A divider makes one sample strobe every FS_DIV clocks (200 kHz at 20 MHz by
// default); all processing advances on it.
//  * Primary loop: the primary pick-off (adc_p) is demodulated against the NCO
//    sine/cosine. The quadrature part is the phase error of the drive PLL,
//    whose loop filter steers the NCO; twice the in-phase part is the
//    measured amplitude, which the AGC compares with its set-point to scale
//    the drive sine sent to the primary DAC (dac_p).
//  * Secondary loop: rate_chain demodulates the sense pick-off (adc_s) with
//    the same references, compensates offset and temperature, filters the
//    rate and, in closed-loop mode, drives the secondary DAC (dac_s).
//  * Registers: all trims are writable and all intermediate values readable
//    on the 16-bit bus (indices in gyro_pkg), so software can check the chain,
//    e.g. the PLL lock bit. node_sel routes one internal node to node_data,
//    with node_valid one clock after each strobe, for capture in SRAM.
// Bus timing: writes take effect at the clock edge of the request, reads are
// combinational in the same cycle. The blocks (PLL, AGC, demodulators,
// filters, compensation, modulator) are the ones the paper lists for a gyro;
// register map, formats and sample rate are this design's own.
module dsp
  import gyro_pkg::*;
#(
  parameter int          FS_DIV   = FS_DIV_DEF,
  parameter logic [23:0] F_CENTER = F_CENTER_DEF,
  parameter int          LOCK_CNT = 1024
) (
  input  logic               clk,
  input  logic               rst_n,
  input  bus16_req_t         req,
  output logic [15:0]        rdata,
  input  logic signed [11:0] adc_p,
  input  logic signed [11:0] adc_s,
  input  logic signed [11:0] temp,
  output logic [11:0]        dac_p,
  output logic [11:0]        dac_s,
  output logic [15:0]        node_data,
  output logic               node_valid,
  output logic               locked
);

  // ---------------- sample strobe ----------------
  logic [$clog2(FS_DIV+1)-1:0] div_cnt;
  logic                        sample_en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) div_cnt <= '0;
    else if (div_cnt == ($clog2(FS_DIV+1))'(FS_DIV - 1)) div_cnt <= '0;
    else div_cnt <= div_cnt + 1'b1;
  end
  assign sample_en = (div_cnt == '0);

  // ---------------- registers ----------------
  logic        r_closed;
  logic [23:0] r_fc;
  logic [15:0] r_pll_gain, r_agc_gain, r_r_gain2;
  logic [15:0] r_agc_set, r_lock_th, r_offs, r_tc, r_gain;
  logic [4:0]  r_lpf;
  logic [3:0]  r_node;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_closed   <= 1'b0;
      r_fc       <= F_CENTER;
      r_pll_gain <= {3'd0, 5'd12, 3'd0, 5'd1};
      r_agc_set  <= 16'd16000;
      r_agc_gain <= {3'd0, 5'd10, 3'd0, 5'd2};
      r_lock_th  <= 16'd512;
      r_offs     <= 16'd0;
      r_tc       <= 16'd0;
      r_gain     <= 16'd256;
      r_r_gain2  <= {3'd0, 5'd8, 3'd0, 5'd2};
      r_lpf      <= 5'd9;
      r_node     <= 4'd0;
    end else if (req.sel && req.wr) begin
      unique case (req.addr)
        D_CTRL:     r_closed   <= req.wdata[0];
        D_FC_LO:    r_fc[15:0] <= req.wdata;
        D_FC_HI:    r_fc[23:16] <= req.wdata[7:0];
        D_PLL_GAIN: r_pll_gain <= req.wdata;
        D_AGC_SET:  r_agc_set  <= req.wdata;
        D_AGC_GAIN: r_agc_gain <= req.wdata;
        D_LOCK_TH:  r_lock_th  <= req.wdata;
        D_R_OFFS:   r_offs     <= req.wdata;
        D_R_TC:     r_tc       <= req.wdata;
        D_R_GAIN:   r_gain     <= req.wdata;
        D_R_GAIN2:  r_r_gain2  <= req.wdata;
        D_R_LPF:    r_lpf      <= req.wdata[4:0];
        D_NODE_SEL: r_node     <= req.wdata[3:0];
        default: ;
      endcase
    end
  end

  // ---------------- primary loop ----------------
  logic signed [15:0] ref_sin, ref_cos, i_p, q_p, amp_meas, amp_err, amp_ctrl;
  logic [23:0]        freq_word, phase;
  logic signed [23:0] vco_ctrl;

  nco #(.PHASE_W(24), .OUT_W(16)) u_nco (
    .clk, .rst_n, .sample_en, .freq_word, .sin_o(ref_sin), .cos_o(ref_cos), .phase_o(phase)
  );

  iq_demod #(.IN_W(12), .DW(16), .K(6)) u_demod_p (
    .clk, .rst_n, .sample_en, .x(adc_p), .ref_sin, .ref_cos, .i_o(i_p), .q_o(q_p)
  );

  drive_pll #(.PHASE_W(24), .LOCK_CNT(LOCK_CNT)) u_pll (
    .clk, .rst_n, .sample_en, .phase_err(q_p), .f_center(r_fc),
    .kp_sh(r_pll_gain[4:0]), .ki_sh(r_pll_gain[12:8]), .lock_th(r_lock_th),
    .freq_word, .vco_ctrl, .locked
  );

  assign amp_meas = sat16(40'(i_p) <<< 1);

  agc #(.DAC_W(12)) u_agc (
    .clk, .rst_n, .sample_en, .amp_meas, .setpoint(r_agc_set), .ref_sin,
    .kp_sh(r_agc_gain[4:0]), .ki_sh(r_agc_gain[12:8]),
    .amp_err, .amp_ctrl, .drive_dac(dac_p)
  );

  // ---------------- secondary loop ----------------
  logic signed [15:0] raw_i, raw_q, fb, rate;

  rate_chain #(.IN_W(12), .DAC_W(12)) u_rate (
    .clk, .rst_n, .sample_en, .x(adc_s), .ref_sin, .ref_cos, .temp,
    .closed(r_closed), .offset(r_offs), .tc(r_tc), .gain(r_gain),
    .kp_sh(r_r_gain2[4:0]), .ki_sh(r_r_gain2[12:8]), .lpf_sh(r_lpf),
    .raw_i, .raw_q, .fb, .rate_o(rate), .sec_dac(dac_s)
  );

  // ---------------- node capture ----------------
  logic [15:0] node_mux;
  always_comb begin
    unique case (r_node)
      4'd0:    node_mux = 16'(adc_p) <<< 4;
      4'd1:    node_mux = 16'(adc_s) <<< 4;
      4'd2:    node_mux = q_p;
      4'd3:    node_mux = vco_ctrl[23:8];
      4'd4:    node_mux = amp_err;
      4'd5:    node_mux = amp_ctrl;
      4'd6:    node_mux = raw_i;
      4'd7:    node_mux = raw_q;
      4'd8:    node_mux = rate;
      4'd9:    node_mux = fb;
      4'd10:   node_mux = ref_sin;
      4'd11:   node_mux = {dac_p, 4'd0};
      4'd12:   node_mux = {dac_s, 4'd0};
      4'd13:   node_mux = phase[23:8];
      default: node_mux = amp_meas;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      node_valid <= 1'b0;
      node_data  <= '0;
    end else begin
      node_valid <= sample_en;
      if (sample_en) node_data <= node_mux;
    end
  end

  // ---------------- read mux ----------------
  always_comb begin
    rdata = '0;
    if (req.sel && !req.wr) begin
      unique case (req.addr)
        D_CTRL:     rdata = {15'd0, r_closed};
        D_FC_LO:    rdata = r_fc[15:0];
        D_FC_HI:    rdata = {8'd0, r_fc[23:16]};
        D_PLL_GAIN: rdata = r_pll_gain;
        D_AGC_SET:  rdata = r_agc_set;
        D_AGC_GAIN: rdata = r_agc_gain;
        D_LOCK_TH:  rdata = r_lock_th;
        D_R_OFFS:   rdata = r_offs;
        D_R_TC:     rdata = r_tc;
        D_R_GAIN:   rdata = r_gain;
        D_R_GAIN2:  rdata = r_r_gain2;
        D_R_LPF:    rdata = {11'd0, r_lpf};
        D_NODE_SEL: rdata = {12'd0, r_node};
        D_STATUS:   rdata = {15'd0, locked};
        D_PH_ERR:   rdata = q_p;
        D_VCO:      rdata = vco_ctrl[23:8];
        D_AMP_ERR:  rdata = amp_err;
        D_AMP_CTRL: rdata = amp_ctrl;
        D_AMP:      rdata = amp_meas;
        D_RATE:     rdata = rate;
        D_RATE_RAW: rdata = raw_i;
        D_QUAD:     rdata = raw_q;
        D_FW_LO:    rdata = freq_word[15:0];
        D_FW_HI:    rdata = {8'd0, freq_word[23:16]};
        default:    rdata = '0;
      endcase
    end
  end

endmodule
