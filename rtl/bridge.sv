// bridge: custom bridge from the 8051's 8-bit SFR bus to the 16-bit
// peripheral bus.
//
// Four SFRs hold one transfer: BADDR (peripheral select in [7:5], register
// index in [4:0]), BDL and BDH (write data; reading them returns the last read
// data), and BCTRL (writing bit 0 starts a write, bit 1 a read). The request is
// registered, so it is on the 16-bit bus for exactly the clock after the BCTRL
// write; the addressed peripheral answers in that clock and the bridge
// latches the answer at its end. One 16-bit access therefore costs three SFR
// writes plus the BCTRL write (and two SFR reads for a read); the CPU's own
// instruction time hides the two-clock latency. The address decoder sends
// the request only to the selected peripheral (req_o) and muxes its read data
// back (rdata_i). The paper places SPI, timer, watchdog and SRAM controller
// behind such a bridge on a 16-bit bus; the register protocol and SFR
// addresses are this design's choices.
module bridge
  import gyro_pkg::*;
#(
  parameter int NP = N_PERIPH
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [7:0]        sfr_addr,
  input  logic [7:0]        sfr_wdata,
  input  logic              sfr_wr,
  output logic [7:0]        sfr_rdata,
  output logic              sfr_hit,
  output bus16_req_t        req_o   [NP],
  input  logic [15:0]       rdata_i [NP]
);

  logic [7:0]  baddr;
  logic [15:0] wlat, rlat;
  logic        go, go_wr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      baddr <= '0;
      wlat  <= '0;
      rlat  <= '0;
      go    <= 1'b0;
      go_wr <= 1'b0;
    end else begin
      go <= 1'b0;
      if (sfr_wr) begin
        unique case (sfr_addr)
          SFR_BADDR: baddr      <= sfr_wdata;
          SFR_BDL:   wlat[7:0]  <= sfr_wdata;
          SFR_BDH:   wlat[15:8] <= sfr_wdata;
          SFR_BCTRL: begin
            go    <= sfr_wdata[0] | sfr_wdata[1];
            go_wr <= sfr_wdata[0];
          end
          default: ;
        endcase
      end
      if (go && !go_wr && int'(baddr[7:5]) < NP)
        rlat <= rdata_i[baddr[7:5]];
    end
  end

  always_comb begin
    for (int i = 0; i < NP; i++) begin
      req_o[i].sel   = go && (int'(baddr[7:5]) == i);
      req_o[i].wr    = go_wr;
      req_o[i].addr  = baddr[4:0];
      req_o[i].wdata = wlat;
    end
  end

  always_comb begin
    sfr_hit   = 1'b1;
    unique case (sfr_addr)
      SFR_BADDR: sfr_rdata = baddr;
      SFR_BDL:   sfr_rdata = rlat[7:0];
      SFR_BDH:   sfr_rdata = rlat[15:8];
      SFR_BCTRL: sfr_rdata = 8'h00;
      default: begin
        sfr_rdata = 8'h00;
        sfr_hit   = 1'b0;
      end
    endcase
  end

  // at most one peripheral is addressed in any clock
  logic [NP-1:0] sel_vec;
  always_comb for (int i = 0; i < NP; i++) sel_vec[i] = req_o[i].sel;
  a_one_sel: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(sel_vec));

endmodule
