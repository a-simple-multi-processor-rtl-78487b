// subleq_spi_slave -- byte-level SPI slave towards the USB bridge controller.
//
// SPI mode 0 (clock idles low, both sides sample on the rising edge and change
// data on the falling edge), most significant bit first, one active-low chip
// select framing each transaction. The slave runs entirely in the system
// clock domain: sclk, cs_n and mosi pass through two-flop synchronisers and
// their edges are found by comparing successive samples. sclk must therefore
// be slow against clk: at most clk/16, which leaves the access controller
// enough clocks between the last rising edge of a byte and the next falling
// edge to fetch the byte to be sent next.
//
// Interface: cs_start / cs_end pulse when the chip select falls / rises;
// rx_valid pulses with rx_byte after the eighth rising edge of each byte.
// tx_byte is sampled when the chip select falls and at the falling edge that
// follows each completed byte; it is then shifted out on miso. miso is driven
// low while the chip select is released (no tri-state on chip).
//
// The paper says only that an SPI bus links the USB bridge controller to the
// FPGA; mode, bit order, oversampling and framing are this design's choices.
module subleq_spi_slave (
  input  logic       clk,
  input  logic       rst_n,
  // SPI pins
  input  logic       sclk,
  input  logic       cs_n,
  input  logic       mosi,
  output logic       miso,
  // byte side
  output logic       cs_start,
  output logic       cs_end,
  output logic       rx_valid,
  output logic [7:0] rx_byte,
  input  logic [7:0] tx_byte
);

  logic [2:0] sclk_s, cs_s;   // [0],[1] synchroniser, [2] previous sample
  logic [1:0] mosi_s;
  logic [2:0] bit_cnt;
  logic [6:0] rx_sh;
  logic [7:0] tx_sh;
  logic       sclk_rise, sclk_fall, active;

  assign sclk_rise = sclk_s[1] & ~sclk_s[2];
  assign sclk_fall = ~sclk_s[1] & sclk_s[2];
  assign cs_start  = ~cs_s[1] & cs_s[2];
  assign cs_end    = cs_s[1] & ~cs_s[2];
  assign active    = ~cs_s[1];
  assign miso      = active & tx_sh[7];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sclk_s   <= '0;
      cs_s     <= '1;
      mosi_s   <= '0;
      bit_cnt  <= '0;
      rx_sh    <= '0;
      tx_sh    <= '0;
      rx_valid <= 1'b0;
      rx_byte  <= '0;
    end else begin
      sclk_s   <= {sclk_s[1:0], sclk};
      cs_s     <= {cs_s[1:0], cs_n};
      mosi_s   <= {mosi_s[0], mosi};
      rx_valid <= 1'b0;
      if (cs_start) begin
        bit_cnt <= '0;
        tx_sh   <= tx_byte;
      end else if (active) begin
        if (sclk_rise) begin
          rx_sh   <= {rx_sh[5:0], mosi_s[1]};
          bit_cnt <= bit_cnt + 1'b1;
          if (bit_cnt == 3'd7) begin
            rx_valid <= 1'b1;
            rx_byte  <= {rx_sh[6:0], mosi_s[1]};
          end
        end
        if (sclk_fall) begin
          if (bit_cnt == '0) tx_sh <= tx_byte;
          else               tx_sh <= {tx_sh[6:0], 1'b0};
        end
      end
    end
  end

endmodule
