// spi_slave -- SPI slave port of the UDAQ towards the satellite Bus-Interface (BI).
//
// The BI is the SPI master. SCLK, MOSI and CS_N are sampled by the system clock through
// two-flop synchronisers, so SCLK must be at most CLK/6 (8 MHz at the 48 MHz default,
// which carries the 1 Mbyte/s the BI link needs). SPI mode 0, most significant bit first.
//
// Receive (serial-in/parallel-out): every rising SCLK edge while CS_N is low shifts MOSI
// into rx_data; frame_end pulses one cycle after CS_N rises with rx_data (right aligned)
// and rx_bits (number of bits received, saturating at 255).
// Transmit (parallel-in/serial-out): a 16-bit shifter drives MISO. It is loaded from tx_first
// when CS_N falls; after every 16th rising edge the word is complete, tx_word_done pulses and
// the shifter is loaded from tx_next, which the parent must already hold (so a word is
// counted as sent only when all its bits went out, and a frame that ends on a word boundary
// loses nothing). MISO moves right after the rising edge that sampled the previous bit,
// which leaves the master most of a bit time of setup.
// The SPI mode, bit order and 16-bit transmit words are this design's choices; the mission
// documents only name the signals (SCLK, MOSI, MISO, CS and customized lines).
module spi_slave #(
  parameter int unsigned MAXBITS = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               sclk,
  input  logic               mosi,
  input  logic               cs_n,
  output logic               miso,
  output logic               frame_start,
  output logic               frame_end,
  output logic [MAXBITS-1:0] rx_data,
  output logic [7:0]         rx_bits,
  input  logic [15:0]        tx_first,
  input  logic [15:0]        tx_next,
  output logic               tx_word_done
);
  logic [2:0] sclk_s, cs_s;
  logic [1:0] mosi_s;
  logic [15:0] tx_sh;
  logic [3:0]  tx_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sclk_s <= '0; cs_s <= '1; mosi_s <= '0;
    end else begin
      sclk_s <= {sclk_s[1:0], sclk};
      cs_s   <= {cs_s[1:0], cs_n};
      mosi_s <= {mosi_s[0], mosi};
    end
  end

  wire sclk_rise = sclk_s[1] & ~sclk_s[2];
  wire cs_fall   = ~cs_s[1] & cs_s[2];
  wire cs_rise   = cs_s[1] & ~cs_s[2];
  wire active    = ~cs_s[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_data <= '0; rx_bits <= '0; tx_sh <= '0; tx_cnt <= '0;
      frame_start <= 1'b0; frame_end <= 1'b0; tx_word_done <= 1'b0;
    end else begin
      frame_start <= cs_fall;
      frame_end   <= cs_rise;
      tx_word_done <= 1'b0;
      if (cs_fall) begin
        rx_data <= '0;
        rx_bits <= '0;
        tx_sh   <= tx_first;
        tx_cnt  <= '0;
      end else if (active && sclk_rise) begin
        rx_data <= {rx_data[MAXBITS-2:0], mosi_s[1]};
        if (rx_bits != 8'hFF) rx_bits <= rx_bits + 8'd1;
        tx_cnt <= tx_cnt + 4'd1;
        if (tx_cnt == 4'd15) begin
          tx_sh        <= tx_next;
          tx_word_done <= 1'b1;
        end else begin
          tx_sh <= {tx_sh[14:0], 1'b0};
        end
      end
    end
  end

  assign miso = tx_sh[15];
endmodule
