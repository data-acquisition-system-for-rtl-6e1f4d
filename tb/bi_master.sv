// bi_master -- behavioural model of the satellite Bus-Interface as SPI master, for testbenches.
// SPI mode 0, MSB first, BIT_CYC clock cycles per bit (6 = 8 MHz at 48 MHz, which moves
// 1 Mbyte/s). The frame type is put on the three customized lines before CS_N falls.
// frame(type, n, data, back) sends the low n bits of data and returns the last (up to 128)
// bits received; rx_words[k] also keeps every received 16-bit word k of the last frame.
module bi_master #(
  parameter int BIT_CYC = 6
) (
  input  logic       clk,
  output logic       sclk,
  output logic       mosi,
  output logic       cs_n,
  output logic [2:0] ftype,
  input  logic       miso
);
  logic [15:0] rx_words [64];
  initial begin sclk = 0; mosi = 0; cs_n = 1; ftype = 0; end

  task automatic frame(input logic [2:0] t, input int n, input logic [127:0] d, output logic [127:0] back);
    back = 0;
    for (int k = 0; k < 64; k++) rx_words[k] = '0;
    @(posedge clk); ftype <= t; repeat (4) @(posedge clk);
    cs_n <= 0; repeat (BIT_CYC) @(posedge clk);
    for (int i = n - 1; i >= 0; i--) begin
      mosi <= d[i]; repeat (BIT_CYC / 2) @(posedge clk);
      sclk <= 1; back = {back[126:0], miso};
      if ((n - 1 - i) / 16 < 64) rx_words[(n - 1 - i) / 16] = {rx_words[(n - 1 - i) / 16][14:0], miso}; repeat (BIT_CYC - BIT_CYC / 2) @(posedge clk);
      sclk <= 0;
    end
    repeat (BIT_CYC / 2) @(posedge clk); cs_n <= 1; repeat (8) @(posedge clk);
  endtask
endmodule
