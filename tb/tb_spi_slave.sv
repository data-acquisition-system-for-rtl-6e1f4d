// tb_spi_slave -- checks spi_slave against a mode-0 SPI master model running at CLK/6 (8 MHz
// at 48 MHz): received bits and bit counts of 32- and 48-bit frames, and the 16-bit words sent
// back (first word, then the next word after each 16 bits), with one word-done per full word.
module tb_spi_slave;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic sclk = 0, mosi = 0, cs_n = 1, miso;
  logic fs, fe, wdone;
  logic [63:0] rx; logic [7:0] nb;
  logic [15:0] words [8];
  int widx = 0, n_done = 0;
  spi_slave dut (.clk, .rst_n, .sclk, .mosi, .cs_n, .miso, .frame_start(fs), .frame_end(fe),
                 .rx_data(rx), .rx_bits(nb), .tx_first(words[0]), .tx_next(words[widx + 1]),
                 .tx_word_done(wdone));
  always @(posedge clk) if (rst_n && wdone) begin widx <= widx + 1; n_done++; end

  logic [63:0] got_rx; logic [7:0] got_nb; int n_fe = 0;
  always @(posedge clk) if (rst_n && fe) begin got_rx = rx; got_nb = nb; n_fe++; end

  // 6 clock cycles per bit: 3 low, 3 high
  task automatic frame(input int n, input logic [63:0] d, output logic [63:0] back);
    back = 0;
    @(posedge clk); cs_n <= 0; repeat (6) @(posedge clk);
    for (int i = n - 1; i >= 0; i--) begin
      mosi <= d[i]; repeat (3) @(posedge clk);
      sclk <= 1; back = {back[62:0], miso}; repeat (3) @(posedge clk);
      sclk <= 0;
    end
    repeat (3) @(posedge clk); cs_n <= 1; repeat (8) @(posedge clk);
  endtask

  initial begin
    logic [63:0] b, d;
    for (int i = 0; i < 8; i++) words[i] = 16'(16'h1111 * (i + 1) ^ 16'h8421);
    repeat (3) @(posedge clk); rst_n = 1; repeat (3) @(posedge clk);
    d = 64'h0000_0000_4A1B_2C3D;
    frame(32, d, b);
    checks++; if (got_nb != 32 || got_rx[31:0] != d[31:0]) begin failures++; $display("FAIL rx32 %h %0d", got_rx, got_nb); end
    checks++; if (b[31:0] != {words[0], words[1]}) begin failures++; $display("FAIL tx32 %h", b[31:0]); end
    checks++; if (n_done != 2) begin failures++; $display("FAIL done %0d", n_done); end
    widx = 0; n_done = 0;
    d = 64'h0000_9876_5432_10FE;
    frame(48, d, b);
    checks++; if (got_nb != 48 || got_rx[47:0] != d[47:0]) begin failures++; $display("FAIL rx48 %h %0d", got_rx, got_nb); end
    checks++; if (b[47:0] != {words[0], words[1], words[2]}) begin failures++; $display("FAIL tx48 %h", b[47:0]); end
    checks++; if (n_done != 3) begin failures++; $display("FAIL done %0d", n_done); end
    for (int k = 0; k < 5; k++) begin
      int n;
      n = 8 + $urandom % 56;
      widx = 0;
      d = {$urandom, $urandom};
      frame(n, d, b);
      checks++; if (got_nb != 8'(n) || (got_rx & ((64'd1 << n) - 1)) != (d & ((64'd1 << n) - 1))) begin
        failures++; $display("FAIL rx n=%0d %h", n, got_rx); end
    end
    checks++; if (n_fe != 7) begin failures++; $display("FAIL frame_end count %0d", n_fe); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
