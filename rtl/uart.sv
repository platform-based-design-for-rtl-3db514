// uart: RS232 serial port on the 8051 SFR bus, used to download software
// from a PC and to report data and status.
//
// Frame: 1 start bit, 8 data bits LSB first, no parity, 1 stop bit. Each bit
// lasts UDIV clocks (UDIVH:UDIVL, default 174 = 115200 baud at 20 MHz).
// SFRs: UDATA write loads and starts the transmitter (ignored while busy);
// UDATA read returns the received byte and clears rx_full. USTAT: [0] tx busy,
// [1] rx_full, [2] overrun (a byte arrived while rx_full; cleared by a USTAT
// read), [3] framing error of the last byte. The receiver synchronises rxd
// with two flops, checks the start bit at half a bit time and samples each
// bit in its middle. tx_en is high while a frame is sent, for an RS485 line
// driver. The paper gives the UART, its place on the SFR bus and RS232/RS485;
// frame format, rate and register layout are this design's choices.
module uart
  import gyro_pkg::*;
#(
  parameter logic [15:0] DIV_DEF = 16'd174
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] sfr_addr,
  input  logic [7:0] sfr_wdata,
  input  logic       sfr_wr,
  input  logic       sfr_rd,
  output logic [7:0] sfr_rdata,
  output logic       sfr_hit,
  output logic       txd,
  output logic       tx_en,
  input  logic       rxd
);

  logic [15:0] div;
  // transmitter
  logic [9:0]  tx_sr;
  logic [3:0]  tx_bits;
  logic [15:0] tx_cnt;
  logic        tx_busy;
  // receiver
  logic [1:0]  rx_sync;
  logic        rx_busy;
  logic [3:0]  rx_bits;
  logic [15:0] rx_cnt;
  logic [7:0]  rx_sr, rx_data;
  logic        rx_full, overrun, ferr;
  logic        rx_in;

  assign rx_in = rx_sync[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div     <= DIV_DEF;
      tx_sr   <= '1;
      tx_bits <= '0;
      tx_cnt  <= '0;
      tx_busy <= 1'b0;
      rx_sync <= 2'b11;
      rx_busy <= 1'b0;
      rx_bits <= '0;
      rx_cnt  <= '0;
      rx_sr   <= '0;
      rx_data <= '0;
      rx_full <= 1'b0;
      overrun <= 1'b0;
      ferr    <= 1'b0;
    end else begin
      // ---- SFR writes / read side effects ----
      if (sfr_wr && sfr_addr == SFR_UDIVL) div[7:0]  <= sfr_wdata;
      if (sfr_wr && sfr_addr == SFR_UDIVH) div[15:8] <= sfr_wdata;
      if (sfr_rd && sfr_addr == SFR_UDATA) rx_full <= 1'b0;
      if (sfr_rd && sfr_addr == SFR_USTAT) overrun <= 1'b0;

      // ---- transmitter ----
      if (!tx_busy) begin
        if (sfr_wr && sfr_addr == SFR_UDATA) begin
          tx_sr   <= {1'b1, sfr_wdata, 1'b0};
          tx_bits <= 4'd10;
          tx_cnt  <= div - 1'b1;
          tx_busy <= 1'b1;
        end
      end else if (tx_cnt == 0) begin
        tx_sr   <= {1'b1, tx_sr[9:1]};
        tx_cnt  <= div - 1'b1;
        tx_bits <= tx_bits - 1'b1;
        if (tx_bits == 4'd1) tx_busy <= 1'b0;
      end else begin
        tx_cnt <= tx_cnt - 1'b1;
      end

      // ---- receiver ----
      rx_sync <= {rx_sync[0], rxd};
      if (!rx_busy) begin
        if (!rx_in) begin
          rx_busy <= 1'b1;
          rx_bits <= 4'd0;
          rx_cnt  <= (div >> 1) - 1'b1;
        end
      end else if (rx_cnt == 0) begin
        rx_cnt <= div - 1'b1;
        if (rx_bits == 4'd0) begin
          if (rx_in) rx_busy <= 1'b0;          // false start
          else       rx_bits <= 4'd1;
        end else if (rx_bits <= 4'd8) begin
          rx_sr   <= {rx_in, rx_sr[7:1]};
          rx_bits <= rx_bits + 1'b1;
        end else begin                          // stop bit
          rx_busy <= 1'b0;
          rx_data <= rx_sr;
          ferr    <= !rx_in;
          if (rx_full) overrun <= 1'b1;
          rx_full <= 1'b1;
        end
      end else begin
        rx_cnt <= rx_cnt - 1'b1;
      end
    end
  end

  assign txd   = tx_busy ? tx_sr[0] : 1'b1;
  assign tx_en = tx_busy;

  always_comb begin
    sfr_hit = 1'b1;
    unique case (sfr_addr)
      SFR_UDATA: sfr_rdata = rx_data;
      SFR_USTAT: sfr_rdata = {4'd0, ferr, overrun, rx_full, tx_busy};
      SFR_UDIVL: sfr_rdata = div[7:0];
      SFR_UDIVH: sfr_rdata = div[15:8];
      default: begin
        sfr_rdata = 8'h00;
        sfr_hit   = 1'b0;
      end
    endcase
  end

  // the line idles high between frames
  a_idle_high: assert property (@(posedge clk) disable iff (!rst_n) !tx_busy |-> txd);

endmodule
