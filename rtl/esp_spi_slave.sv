// esp_spi_slave: byte link between the FPGA and the ESP32-S3 radio module.
//
// The radio module and the FPGA are joined by SPI.  This design makes the
// radio module the SPI master (mode 0, MSB first) and the FPGA the slave, so
// that one link carries both directions: bytes the radio shifts in on MOSI
// are the downlink (configuration from the server), and the bytes the FPGA
// shifts out on MISO are the uplink (spike packets).  When the uplink FIFO is
// empty the FPGA sends 00.  The SPI pins are synchronised into clk with two
// flip-flops and their edges detected, so SCLK must stay below clk/8.
//
// A byte is taken from the uplink FIFO only once its first bit has actually
// been clocked out (first rising SCLK edge), so bytes are never lost when the
// master ends a transfer.
//
// Interface and timing:
//   rx_valid/rx_byte  one-cycle pulse after the 8th rising SCLK edge of a byte
//   frame_end         one-cycle pulse when chip select returns high
//   tx_data/tx_avail  head of the uplink FIFO; tx_pop removes it
module esp_spi_slave (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       spi_sclk,
  input  logic       spi_cs_n,
  input  logic       spi_mosi,
  output logic       spi_miso,
  output logic       rx_valid,
  output logic [7:0] rx_byte,
  output logic       frame_end,
  input  logic [7:0] tx_data,
  input  logic       tx_avail,
  output logic       tx_pop
);

  logic [2:0] sclk_s, cs_s;
  logic [1:0] mosi_s;
  logic       rise, fall, cs_fall, cs_rise, active;
  logic [2:0] bit_cnt;
  logic [7:0] rx_sr, tx_sr;
  logic       tx_from_fifo;

  assign rise    = sclk_s[1] && !sclk_s[2];
  assign fall    = !sclk_s[1] && sclk_s[2];
  assign cs_fall = !cs_s[1] && cs_s[2];
  assign cs_rise = cs_s[1] && !cs_s[2];
  assign active  = !cs_s[1];
  assign spi_miso = tx_sr[7];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sclk_s <= '0;
      cs_s   <= '1;
      mosi_s <= '0;
    end else begin
      sclk_s <= {sclk_s[1:0], spi_sclk};
      cs_s   <= {cs_s[1:0], spi_cs_n};
      mosi_s <= {mosi_s[0], spi_mosi};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bit_cnt      <= '0;
      rx_sr        <= '0;
      tx_sr        <= '0;
      tx_from_fifo <= 1'b0;
      rx_valid     <= 1'b0;
      rx_byte      <= '0;
      frame_end    <= 1'b0;
      tx_pop       <= 1'b0;
    end else begin
      rx_valid  <= 1'b0;
      frame_end <= cs_rise;
      tx_pop    <= 1'b0;
      if (cs_fall) begin
        bit_cnt      <= '0;
        tx_sr        <= tx_avail ? tx_data : 8'h00;
        tx_from_fifo <= tx_avail;
      end else if (active) begin
        if (rise) begin
          rx_sr   <= {rx_sr[6:0], mosi_s[1]};
          bit_cnt <= bit_cnt + 1'b1;
          if (bit_cnt == 3'd0 && tx_from_fifo) begin
            tx_pop       <= 1'b1;            // first bit is out: commit the byte
            tx_from_fifo <= 1'b0;
          end
          if (bit_cnt == 3'd7) begin
            rx_valid <= 1'b1;
            rx_byte  <= {rx_sr[6:0], mosi_s[1]};
          end
        end else if (fall) begin
          if (bit_cnt == 3'd0) begin
            // a byte has just finished: present the next one
            tx_sr        <= (tx_avail && !tx_pop) ? tx_data : 8'h00;
            tx_from_fifo <= tx_avail && !tx_pop;
          end else begin
            tx_sr <= {tx_sr[6:0], 1'b0};
          end
        end
      end else begin
        bit_cnt <= '0;
      end
    end
  end

endmodule
