// spi_master -- SPI master of the UDAQ towards one telescope (SMT or UBAT).
//
// One transaction of nbits (1..64) bits: CS_N falls, then each bit takes 2*HALF system
// clocks, SCLK rising in the middle. SPI mode 0, most significant bit first: MOSI carries
// tx_data from bit 63 downwards (parallel-in/serial-out). MISO, after a two-flop synchroniser,
// is sampled at the end of each SCLK-high phase, when the bit the slave put out at the
// previous falling edge has been stable for a whole half period, and shifted into rx_data,
// right aligned (serial-in/parallel-out). HALF must be at least 2. done pulses for one cycle when
// CS_N has returned high; rx_data is then valid until the next start.
// Timing: a transaction lasts (2*nbits+2)*HALF + 2 cycles. The default HALF = 14 gives
// 28 cycles (0.58 us at 48 MHz) per bit, so a 64-bit command takes about 37 us, close to the
// 36 us a recorded 64-bit UDAQ-to-SMT command spans. The mode and bit order are own choices.
module spi_master #(
  parameter int unsigned HALF = 14
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [6:0]  nbits,
  input  logic [63:0] tx_data,
  output logic [63:0] rx_data,
  output logic        busy,
  output logic        done,
  output logic        sclk,
  output logic        mosi,
  output logic        cs_n,
  input  logic        miso
);
  typedef enum logic [1:0] {M_IDLE, M_SETUP, M_HIGH, M_LOW} mstate_e;
  mstate_e st;
  logic [15:0] tmr;
  logic [6:0]  left;
  logic [63:0] sh;
  logic [1:0]  miso_s;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) miso_s <= '0;
    else        miso_s <= {miso_s[0], miso};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_IDLE; tmr <= '0; left <= '0; sh <= '0; rx_data <= '0;
      sclk <= 1'b0; cs_n <= 1'b1; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        M_IDLE: if (start) begin
          sh <= tx_data; left <= (nbits == 0) ? 7'd1 : nbits; rx_data <= '0;
          cs_n <= 1'b0; tmr <= 16'(HALF - 1); st <= M_SETUP;
        end
        M_SETUP: if (tmr == 0) begin
          sclk <= 1'b1;
          tmr <= 16'(HALF - 1); st <= M_HIGH;
        end else tmr <= tmr - 1'b1;
        M_HIGH: if (tmr == 0) begin
          sclk <= 1'b0; rx_data <= {rx_data[62:0], miso_s[1]}; sh <= {sh[62:0], 1'b0}; left <= left - 1'b1;
          tmr <= 16'(HALF - 1); st <= M_LOW;
        end else tmr <= tmr - 1'b1;
        M_LOW: if (tmr == 0) begin
          if (left == 0) begin
            cs_n <= 1'b1; done <= 1'b1; st <= M_IDLE;
          end else begin
            sclk <= 1'b1;
            tmr <= 16'(HALF - 1); st <= M_HIGH;
          end
        end else tmr <= tmr - 1'b1;
        default: st <= M_IDLE;
      endcase
    end
  end

  assign mosi = sh[63];
  assign busy = (st != M_IDLE);
endmodule
