// gyro_pkg: types and constants shared by the gyro conditioning digital section.
//
// The peripherals behind the SFR-to-16-bit bridge (SPI, timer, watchdog, SRAM
// controller, DSP register file and the two JTAG masters) all see the same
// single-cycle bus: a request struct (select, write, 5-bit register index,
// 16-bit write data) and a 16-bit read-data return that is valid in the same
// cycle. The 16-bit width follows the paper; the address map below, the
// register indices and the sample-rate divider are this design's own choices.
package gyro_pkg;

  localparam int BUS_DW = 16;   // 16-bit peripheral bus
  localparam int SFR_DW = 8;    // 8051 SFR bus
  localparam int REG_AW = 5;    // register index within one peripheral

  typedef struct packed {
    logic              sel;     // request to this peripheral in this cycle
    logic              wr;      // 1: write, 0: read
    logic [REG_AW-1:0] addr;    // register index
    logic [BUS_DW-1:0] wdata;   // write data
  } bus16_req_t;

  // Peripheral selects: bus address [7:5]
  typedef enum logic [2:0] {
    P_SPI   = 3'd0,
    P_TIMER = 3'd1,
    P_WDOG  = 3'd2,
    P_SRAM  = 3'd3,
    P_DSP   = 3'd4,
    P_JTAG0 = 3'd5,
    P_JTAG1 = 3'd6
  } periph_e;
  localparam int N_PERIPH = 7;

  // SFR addresses (chosen from addresses the standard 8051 leaves free)
  localparam logic [7:0] SFR_UDATA = 8'h9A;
  localparam logic [7:0] SFR_USTAT = 8'h9B;
  localparam logic [7:0] SFR_UDIVL = 8'h9C;
  localparam logic [7:0] SFR_UDIVH = 8'h9D;
  localparam logic [7:0] SFR_BADDR = 8'hC1;
  localparam logic [7:0] SFR_BDL   = 8'hC2;
  localparam logic [7:0] SFR_BDH   = 8'hC3;
  localparam logic [7:0] SFR_BCTRL = 8'hC4;

  // DSP register indices
  localparam logic [4:0] D_CTRL     = 5'd0;   // [0] closed-loop rate mode
  localparam logic [4:0] D_FC_LO    = 5'd1;   // PLL centre frequency word [15:0]
  localparam logic [4:0] D_FC_HI    = 5'd2;   // PLL centre frequency word [23:16]
  localparam logic [4:0] D_PLL_GAIN = 5'd3;   // [4:0] kp shift, [12:8] ki shift
  localparam logic [4:0] D_AGC_SET  = 5'd4;   // amplitude set-point
  localparam logic [4:0] D_AGC_GAIN = 5'd5;   // [4:0] kp shift, [12:8] ki shift
  localparam logic [4:0] D_LOCK_TH  = 5'd6;   // lock threshold on |phase error|
  localparam logic [4:0] D_R_OFFS   = 5'd7;   // rate offset
  localparam logic [4:0] D_R_TC     = 5'd8;   // rate temperature coefficient
  localparam logic [4:0] D_R_GAIN   = 5'd9;   // rate gain (x/256)
  localparam logic [4:0] D_R_GAIN2  = 5'd10;  // [4:0] sec kp, [12:8] sec ki, [15:13] unused
  localparam logic [4:0] D_R_LPF    = 5'd11;  // rate output filter shift
  localparam logic [4:0] D_NODE_SEL = 5'd12;  // node routed to the SRAM capture
  localparam logic [4:0] D_STATUS   = 5'd16;  // [0] PLL locked (read only)
  localparam logic [4:0] D_PH_ERR   = 5'd17;  // phase error
  localparam logic [4:0] D_VCO      = 5'd18;  // VCO control [23:8]
  localparam logic [4:0] D_AMP_ERR  = 5'd19;  // amplitude error
  localparam logic [4:0] D_AMP_CTRL = 5'd20;  // amplitude control
  localparam logic [4:0] D_AMP      = 5'd21;  // measured amplitude
  localparam logic [4:0] D_RATE     = 5'd22;  // compensated rate output
  localparam logic [4:0] D_RATE_RAW = 5'd23;  // raw demodulated rate (in-phase)
  localparam logic [4:0] D_QUAD     = 5'd24;  // quadrature of the sense signal
  localparam logic [4:0] D_FW_LO    = 5'd25;  // current NCO frequency word [15:0]
  localparam logic [4:0] D_FW_HI    = 5'd26;  // current NCO frequency word [23:16]

  // Default sample rate: 20 MHz / 100 = 200 kHz; 15 kHz as 24-bit phase step
  localparam int          FS_DIV_DEF   = 100;
  localparam logic [23:0] F_CENTER_DEF = 24'd1258291;

  // Saturate a signed value to 16 bits
  function automatic logic signed [15:0] sat16(input logic signed [39:0] v);
    if (v > 40'sd32767)       return 16'sd32767;
    else if (v < -40'sd32768) return -16'sd32768;
    else                      return v[15:0];
  endfunction

endpackage
