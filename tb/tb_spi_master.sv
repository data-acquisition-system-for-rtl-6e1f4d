// tb_spi_master -- checks spi_master at its default bit time: the bits sent on MOSI, the bits
// received from MISO (a mode-0 slave model here) and the transaction length, which for a 64-bit
// command must be (2*64+1)*HALF cycles, about 37 us at 48 MHz.
module tb_spi_master;
  localparam int HALF = 14;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0; logic [6:0] nbits = 0; logic [63:0] tx = 0, rx;
  logic busy, done, sclk, mosi, cs_n, miso;
  spi_master dut (.clk, .rst_n, .start, .nbits, .tx_data(tx), .rx_data(rx), .busy, .done,
                  .sclk, .mosi, .cs_n, .miso);

  // slave model: shift MOSI in on rising SCLK, drive MISO from `pat` on falling SCLK
  logic [63:0] got, pat, pat_sh;
  int nb;
  always @(negedge cs_n) begin got = 0; nb = 0; pat_sh = pat; miso = pat_sh[63]; end
  always @(posedge sclk) if (!cs_n) begin got = {got[62:0], mosi}; nb++; pat_sh = pat_sh << 1; end
  always @(negedge sclk) if (!cs_n) miso = pat_sh[63];

  function automatic logic [63:0] mask(input int n);
    return (n >= 64) ? '1 : ((64'd1 << n) - 64'd1);
  endfunction

  task automatic xfer(input int n, input logic [63:0] d, input logic [63:0] p);
    int cyc = 0;
    pat = p;
    @(posedge clk); start <= 1; nbits <= 7'(n); tx <= d;
    @(posedge clk); start <= 0;
    cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
    checks++; if (nb != n) begin failures++; $display("FAIL bits %0d != %0d", nb, n); end
    checks++; if ((got & mask(n)) != (d >> (64 - n))) begin failures++; $display("FAIL mosi %h", got); end
    checks++; if ((rx & mask(n)) != (p >> (64 - n))) begin failures++; $display("FAIL miso %h vs %h", rx, p); end
    checks++; if (cyc < (2*n+1)*HALF || cyc > (2*n+1)*HALF + 2) begin
      failures++; $display("FAIL cycles %0d expected %0d", cyc, (2*n+1)*HALF); end
    checks++; if (!cs_n || busy) begin failures++; $display("FAIL not idle"); end
  endtask

  initial begin
    miso = 0; pat = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    xfer(64, 64'hC1_01_0005_2A3C_4D5E, 64'h0123_4567_89AB_CDEF);
    xfer(32, {8'hC4, 56'h0}, {16'h0, 16'hBEEF, 32'h0});
    xfer(48, {48'hA5A5_1234_5678, 16'h0}, 64'hFFFF_0000_FFFF_0000);
    for (int i = 0; i < 4; i++) xfer(1 + ($urandom % 64), {$urandom, $urandom}, {$urandom, $urandom});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
