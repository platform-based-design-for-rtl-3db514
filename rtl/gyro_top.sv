// gyro_top: digital section of a conditioning chip for a vibrating MEMS gyro.
//
// The chip keeps the sensor's primary mode vibrating at resonance (~15 kHz)
// with constant amplitude, and turns the Coriolis-induced secondary vibration
// into a yaw-rate value. Signal processing is hard-wired (dsp); an 8051
// microcontroller, which is not part of this RTL, supervises it and talks to
// the outside world. The blocks are wired as follows:
//  * The 8051's SFR bus (ports sfr_*) reaches the UART and the bridge. The
//    bridge opens a 16-bit bus to the SPI master, timer, watchdog, SRAM
//    capture controller, the DSP register file and two JTAG masters.
//  * The 8051's program ROM and data RAM are here; their buses are ports.
//  * Each JTAG master drives one chain to a TAP on the analog front end
//    (chain 0: primary/drive loop, chain 1: secondary/sense loop). The TAPs'
//    32-bit settings words (afe_cfg0/1) go to the analog cells.
//  * The AFE's ADC codes enter the DSP (adc_p, adc_s, temp) and the DSP's DAC
//    codes leave as a pair per loop (dac_p/dac_p_n, dac_s/dac_s_n, the second
//    mirrored about mid-scale for antiphase electrodes); the selected DSP node
//    feeds the SRAM capture.
// sfr_hit tells the core that an SFR address belongs to one of these
// peripherals; sfr_rdata is then valid in the same cycle. The partitioning,
// bus widths and peripheral placement follow the paper; addresses, register
// maps and data formats are this design's own (see gyro_pkg).
module gyro_top
  import gyro_pkg::*;
#(
  parameter int    FS_DIV    = FS_DIV_DEF,
  parameter int    LOCK_CNT  = 1024,
  parameter int    WDT_PRESC = 256,
  parameter int    ROM_DEPTH = 2048,
  parameter int    RAM_DEPTH = 1024,
  parameter string ROM_INIT  = ""
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // 8051 SFR bus
  input  logic [7:0]                   sfr_addr,
  input  logic [7:0]                   sfr_wdata,
  input  logic                         sfr_wr,
  input  logic                         sfr_rd,
  output logic [7:0]                   sfr_rdata,
  output logic                         sfr_hit,
  // 8051 program and data memory
  input  logic [$clog2(ROM_DEPTH)-1:0] rom_addr,
  output logic [7:0]                   rom_data,
  input  logic                         ram_we,
  input  logic [$clog2(RAM_DEPTH)-1:0] ram_addr,
  input  logic [7:0]                   ram_wdata,
  output logic [7:0]                   ram_rdata,
  // to the 8051
  output logic                         timer_irq,
  output logic                         wdt_rst,
  // UART (RS232 / RS485)
  output logic                         txd,
  output logic                         tx_en,
  input  logic                         rxd,
  // SPI EEPROM
  output logic                         spi_sck,
  output logic                         spi_mosi,
  input  logic                         spi_miso,
  output logic                         spi_cs_n,
  // external SRAM
  output logic [14:0]                  sram_addr,
  output logic [15:0]                  sram_dq_o,
  output logic                         sram_dq_oe,
  input  logic [15:0]                  sram_dq_i,
  output logic                         sram_we_n,
  output logic                         sram_oe_n,
  output logic                         sram_ce_n,
  // analog front end
  input  logic signed [11:0]           adc_p,
  input  logic signed [11:0]           adc_s,
  input  logic signed [11:0]           temp,
  output logic [11:0]                  dac_p,
  output logic [11:0]                  dac_p_n,
  output logic [11:0]                  dac_s,
  output logic [11:0]                  dac_s_n,
  output logic [31:0]                  afe_cfg0,
  output logic [31:0]                  afe_cfg1,
  output logic                         pll_locked
);

  bus16_req_t  req   [N_PERIPH];
  logic [15:0] rdata [N_PERIPH];

  logic [7:0] br_rdata, u_rdata;
  logic       br_hit, u_hit;

  bridge #(.NP(N_PERIPH)) u_bridge (
    .clk, .rst_n, .sfr_addr, .sfr_wdata, .sfr_wr,
    .sfr_rdata(br_rdata), .sfr_hit(br_hit), .req_o(req), .rdata_i(rdata)
  );

  uart u_uart (
    .clk, .rst_n, .sfr_addr, .sfr_wdata, .sfr_wr, .sfr_rd,
    .sfr_rdata(u_rdata), .sfr_hit(u_hit), .txd, .tx_en, .rxd
  );

  assign sfr_hit   = br_hit | u_hit;
  assign sfr_rdata = br_hit ? br_rdata : u_rdata;

  spi_master u_spi (
    .clk, .rst_n, .req(req[P_SPI]), .rdata(rdata[P_SPI]),
    .sck(spi_sck), .mosi(spi_mosi), .miso(spi_miso), .cs_n(spi_cs_n)
  );

  timer16 u_timer (
    .clk, .rst_n, .req(req[P_TIMER]), .rdata(rdata[P_TIMER]), .irq(timer_irq)
  );

  watchdog #(.PRESC(WDT_PRESC)) u_wdog (
    .clk, .rst_n, .req(req[P_WDOG]), .rdata(rdata[P_WDOG]), .wdt_rst
  );

  logic [15:0] node_data;
  logic        node_valid;

  dsp #(.FS_DIV(FS_DIV), .LOCK_CNT(LOCK_CNT)) u_dsp (
    .clk, .rst_n, .req(req[P_DSP]), .rdata(rdata[P_DSP]),
    .adc_p, .adc_s, .temp, .dac_p, .dac_s, .node_data, .node_valid, .locked(pll_locked)
  );

  // each loop drives its electrodes through a pair of DACs in antiphase:
  // the second code is the first mirrored about mid-scale (4095 - code)
  assign dac_p_n = ~dac_p;
  assign dac_s_n = ~dac_s;

  sram_ctrl #(.AW(15)) u_sram (
    .clk, .rst_n, .req(req[P_SRAM]), .rdata(rdata[P_SRAM]), .node_data, .node_valid,
    .sram_addr, .sram_dq_o, .sram_dq_oe, .sram_dq_i, .sram_we_n, .sram_oe_n, .sram_ce_n
  );

  logic [1:0] tck, tms, tdi, tdo;

  jtag_master u_jtag0 (
    .clk, .rst_n, .req(req[P_JTAG0]), .rdata(rdata[P_JTAG0]),
    .tck(tck[0]), .tms(tms[0]), .tdi(tdi[0]), .tdo(tdo[0])
  );
  jtag_master u_jtag1 (
    .clk, .rst_n, .req(req[P_JTAG1]), .rdata(rdata[P_JTAG1]),
    .tck(tck[1]), .tms(tms[1]), .tdi(tdi[1]), .tdo(tdo[1])
  );

  jtag_tap #(.IDCODE(32'h1005_A001)) u_tap0 (
    .tck(tck[0]), .tms(tms[0]), .tdi(tdi[0]), .tdo(tdo[0]), .trst_n(rst_n), .cfg(afe_cfg0)
  );
  jtag_tap #(.IDCODE(32'h1005_A002)) u_tap1 (
    .tck(tck[1]), .tms(tms[1]), .tdi(tdi[1]), .tdo(tdo[1]), .trst_n(rst_n), .cfg(afe_cfg1)
  );

  prog_rom #(.DEPTH(ROM_DEPTH), .INIT_FILE(ROM_INIT)) u_rom (
    .clk, .addr(rom_addr), .data(rom_data)
  );

  data_ram #(.DEPTH(RAM_DEPTH)) u_ram (
    .clk, .we(ram_we), .addr(ram_addr), .wdata(ram_wdata), .rdata(ram_rdata)
  );

endmodule
