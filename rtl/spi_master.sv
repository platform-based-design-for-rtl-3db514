// spi_master: SPI master on the 16-bit bus, for the external SPI EEPROM that
// can hold the downloaded software so the chip reboots from it.
//
// Registers: 0 DATA (write: send wdata[7:0] and start a byte; read: last
// byte received), 1 STATUS ([0] busy), 2 CTRL ([7:0] half-period divider d,
// SCK = clk / (2(d+1)); [8] chip select, 1 drives cs_n low).
// SPI mode 0, MSB first: SCK idles low, MOSI is set before each rising edge,
// MISO is sampled on the rising edge and MOSI moves on the falling edge.
// A byte takes 16(d+1) clocks; busy falls after the eighth falling edge.
// Chip select is left to software so multi-byte EEPROM commands can be
// framed. The paper names the SPI port and the EEPROM; mode, byte size and
// registers are this design's choices.
module spi_master
  import gyro_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  bus16_req_t  req,
  output logic [15:0] rdata,
  output logic        sck,
  output logic        mosi,
  input  logic        miso,
  output logic        cs_n
);

  logic [7:0] d, cnt, tx_sr, rx_sr, rx_data;
  logic       cs, busy;
  logic [3:0] edges;   // remaining SCK edges

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d       <= 8'd4;
      cs      <= 1'b0;
      busy    <= 1'b0;
      cnt     <= '0;
      edges   <= '0;
      tx_sr   <= '0;
      rx_sr   <= '0;
      rx_data <= '0;
      sck     <= 1'b0;
    end else begin
      if (req.sel && req.wr && req.addr == 5'd2) begin
        d  <= req.wdata[7:0];
        cs <= req.wdata[8];
      end
      if (!busy) begin
        if (req.sel && req.wr && req.addr == 5'd0) begin
          tx_sr <= req.wdata[7:0];
          busy  <= 1'b1;
          edges <= 4'd15;
          cnt   <= d;
        end
      end else if (cnt != 0) begin
        cnt <= cnt - 1'b1;
      end else begin
        cnt <= d;
        sck <= !sck;
        if (!sck) begin                       // rising edge: sample
          rx_sr <= {rx_sr[6:0], miso};
        end else begin                        // falling edge: shift out
          tx_sr <= {tx_sr[6:0], 1'b0};
        end
        if (edges == 0) begin
          busy    <= 1'b0;
          rx_data <= rx_sr;
        end else begin
          edges <= edges - 1'b1;
        end
      end
    end
  end

  assign mosi = tx_sr[7];
  assign cs_n = !cs;

  always_comb begin
    rdata = '0;
    if (req.sel && !req.wr) begin
      unique case (req.addr)
        5'd0:    rdata = {8'd0, rx_data};
        5'd1:    rdata = {15'd0, busy};
        5'd2:    rdata = {7'd0, cs, d};
        default: rdata = '0;
      endcase
    end
  end

endmodule
