// tb_biu -- checks the bus interface unit with a Bus-Interface master model at 8 MHz: each
// frame type is decoded into the right strobe and value, a frame of the wrong length is
// counted and dropped, the 8-word status block is sent most significant word first and is
// followed by the 16 housekeeping values, and
// event data stream out without losing a word across frames at 16 bits per 6*16 cycles
// (1 Mbyte/s at 48 MHz).
module tb_biu;
  import udaq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic sclk, mosi, cs_n, miso; logic [2:0] ft;
  logic cmd_valid, time_wr, coord_wr, ext_trig, rd_next;
  logic [31:0] cmd; time_t time_in; coord_type_e ctype; coord_t coord; logic [7:0] ferr;
  status_t status; logic [15:0] words [64]; int rp = 0; logic [9:0] hk [16];
  logic [15:0] th [2] = '{16'h1234, 16'hBEEF};
  biu dut (.clk, .rst_n, .sclk, .mosi, .cs_n, .miso, .bi_type(ft), .cmd_valid, .cmd, .time_wr,
    .time_in, .coord_wr, .coord_type(ctype), .coord, .ext_trig, .frame_err(ferr), .status, .hk_vals(hk), .tel_hk(th),
    .rd_word(words[rp]), .rd_word2(words[rp + 1]), .rd_next);
  bi_master #(.BIT_CYC(6)) bi (.clk, .sclk, .mosi, .cs_n, .ftype(ft), .miso);

  int n_cmd = 0, n_time = 0, n_coord = 0, n_ext = 0;
  logic [31:0] l_cmd; time_t l_time; coord_t l_coord; coord_type_e l_ct;
  always @(posedge clk) if (rst_n) begin
    if (cmd_valid) begin n_cmd++; l_cmd = cmd; end
    if (time_wr) begin n_time++; l_time = time_in; end
    if (coord_wr) begin n_coord++; l_coord = coord; l_ct = ctype; end
    if (ext_trig) n_ext++;
    if (rd_next) rp <= rp + 1;
  end
  task automatic chk(input logic c, input string m); checks++; if (!c) begin failures++; $display("FAIL %s", m); end endtask

  initial begin
    logic [127:0] b; int t0, t1;
    for (int i = 0; i < 64; i++) words[i] = 16'(16'h3C00 + i * 7);
    status = {$urandom, $urandom, $urandom, $urandom};
    for (int i = 0; i < 16; i++) hk[i] = 10'($urandom);
    repeat (3) @(posedge clk); rst_n = 1; repeat (3) @(posedge clk);
    bi.frame(BF_CMD, 32, 128'h2301_0402, b);
    chk(n_cmd == 1 && l_cmd == 32'h2301_0402, "command");
    bi.frame(BF_TIME, 48, 128'h18_07_0E_03_19_2E, b);
    chk(n_time == 1 && l_time == 48'h18_07_0E_03_19_2E, "time");
    bi.frame(BF_SAT, 48, 128'h01_1234_5678_9A, b);
    chk(n_coord == 1 && l_ct == CT_SAT && l_coord == 48'h01_1234_5678_9A, "sat coord");
    bi.frame(BF_UBAT_ABS, 48, 128'h03_0000_0000_07, b);
    chk(n_coord == 2 && l_ct == CT_UBAT_ABS && l_coord == 48'h03_0000_0000_07, "abs coord");
    bi.frame(BF_BDRG, 48, 128'h04_FFFF_0000_01, b);
    chk(n_coord == 3 && l_ct == CT_BDRG && n_ext == 0, "bdrg coord");
    bi.frame(BF_EXT_TRIG, 48, 128'h05_ABCD_EF01_23, b);
    chk(n_coord == 4 && l_ct == CT_BDRG && l_coord == 48'h05_ABCD_EF01_23 && n_ext == 1, "ext trig");
    bi.frame(BF_CMD, 30, 128'h1, b);
    chk(n_cmd == 1 && ferr == 1, "bad length");
    bi.frame(BF_STATUS, 128, 128'h0, b);
    chk(b == status, $sformatf("status %h vs %h", b, status));
    // status block followed by the 16 housekeeping words and the two telescopes' words
    bi.frame(BF_STATUS, 27 * 16, 128'h0, b);
    for (int i = 0; i < 8; i++) chk(bi.rx_words[i] == status[127 - 16 * i -: 16], $sformatf("status word %0d", i));
    for (int i = 0; i < 16; i++) chk(bi.rx_words[8 + i] == {6'b0, hk[i]}, $sformatf("housekeeping word %0d", i));
    chk(bi.rx_words[24] == 16'h1234 && bi.rx_words[25] == 16'hBEEF && bi.rx_words[26] == 16'h0,
        "telescope words");
    // data: 5 words, then 3 words
    t0 = $time;
    bi.frame(BF_DATA, 80, 128'h0, b);
    chk(b[79:0] == {words[0], words[1], words[2], words[3], words[4]}, "data frame 1");
    chk(rp == 5, $sformatf("pointer %0d", rp));
    bi.frame(BF_DATA, 48, 128'h0, b);
    chk(b[47:0] == {words[5], words[6], words[7]}, "data frame 2");
    chk(rp == 8, $sformatf("pointer %0d", rp));
    // rate: 64 words in one frame take 64*16*6 bit cycles
    t0 = $time;
    bi.frame(BF_DATA, 128, 128'h0, b);
    t1 = $time;
    chk(b == {words[8], words[9], words[10], words[11], words[12], words[13], words[14], words[15]}, "data frame 3");
    chk((t1 - t0) / 10 <= 128 * 6 + 30, $sformatf("16 bytes took %0d cycles", (t1 - t0) / 10));
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
