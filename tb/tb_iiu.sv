// tb_iiu -- checks the internal interface unit with two telescope models: queued commands
// reach the right telescope in order; while hold is high they are held, and resumed in order
// afterwards; a full queue rejects; event transfers (coordinate and data reads) still run
// during hold and return the telescope's answer; housekeeping polls run only while enabled and
// nothing else waits, alternate between the two telescopes and keep each one's answer.
module tb_iiu;
  import udaq_pkg::*;
  localparam int HALF = 2, QD = 4, POLL = 500;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic hold = 0, q_push = 0, q_tel = 0, q_reject, q_empty, q_full, x_req = 0, x_tel = 0, x_done;
  logic [63:0] q_frame = 0, x_tx = 0, x_rx; logic [6:0] x_nbits = 0; logic [7:0] n_sent, n_poll;
  logic poll_en = 0; logic [15:0] tel_hk [2];
  logic [1:0] sclk, mosi, cs_n, miso, drdy;
  coord_t c_smt = 48'h01_1111_2222_33, c_ubat = 48'h04_AAAA_BBBB_CC;
  iiu #(.HALF(HALF), .QDEPTH(QD), .POLL(POLL)) dut (.clk, .rst_n, .hold, .q_push, .q_tel, .q_frame, .q_reject,
    .q_empty, .q_full, .x_req, .x_tel, .x_nbits, .x_tx, .x_done, .x_rx, .n_sent, .poll_en, .tel_hk, .n_poll,
    .sclk, .mosi, .cs_n, .miso);
  tel_model #(.ID(4'h5), .HK(16'h1234)) u_smt  (.sclk(sclk[0]), .mosi(mosi[0]), .cs_n(cs_n[0]), .miso(miso[0]), .drdy(drdy[0]), .coord(c_smt));
  tel_model #(.ID(4'hB), .HK(16'hBEEF)) u_ubat (.sclk(sclk[1]), .mosi(mosi[1]), .cs_n(cs_n[1]), .miso(miso[1]), .drdy(drdy[1]), .coord(c_ubat));

  int n_rej = 0;
  always @(negedge clk) if (rst_n && q_reject) n_rej++;

  function automatic logic [63:0] fr(input int k, input int t);
    return {TF_CMD, 8'(t), 16'(k), 32'h2200_0400 + 32'(k)};
  endfunction
  task automatic push(input int t, input logic [63:0] f);
    @(posedge clk); q_push <= 1; q_tel <= 1'(t); q_frame <= f; @(posedge clk); q_push <= 0;
  endtask
  task automatic xfer(input int t, input int n, input logic [63:0] d);
    @(posedge clk); x_req <= 1; x_tel <= 1'(t); x_nbits <= 7'(n); x_tx <= d;
    do @(posedge clk); while (!x_done);
    x_req <= 0;
  endtask
  task automatic idle(input int n); repeat (n) @(posedge clk); endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1; idle(2);
    push(0, fr(1, 0)); push(1, fr(2, 1)); push(0, fr(3, 0));
    idle(1000);
    checks++; if (u_smt.n_cmd != 2 || u_ubat.n_cmd != 1) begin failures++; $display("FAIL counts %0d %0d", u_smt.n_cmd, u_ubat.n_cmd); end
    checks++; if (u_smt.last_cmd != fr(3, 0) || u_ubat.last_cmd != fr(2, 1)) begin failures++; $display("FAIL frames"); end
    checks++; if (n_sent != 3) begin failures++; $display("FAIL n_sent %0d", n_sent); end
    // hold: commands wait, transfers go
    hold = 1;
    push(1, fr(4, 1)); push(0, fr(5, 0));
    idle(1000);
    checks++; if (u_smt.n_cmd != 2 || u_ubat.n_cmd != 1) begin failures++; $display("FAIL not held"); end
    xfer(1, 64, {TF_RD_COORD, 56'h0});
    checks++; if (x_rx[47:0] != c_ubat) begin failures++; $display("FAIL coord %h", x_rx); end
    u_smt.give_data(2);
    xfer(0, 32, {TF_RD_DATA, 56'h0});
    checks++; if (x_rx[15:0] != 16'h5000) begin failures++; $display("FAIL data0 %h", x_rx[15:0]); end
    xfer(0, 32, {TF_RD_DATA, 56'h0});
    checks++; if (x_rx[15:0] != 16'h5001 || drdy[0]) begin failures++; $display("FAIL data1 %h %b", x_rx[15:0], drdy[0]); end
    xfer(0, 64, {TF_COORD, 8'h0, c_ubat});
    checks++; if (u_smt.n_coord != 1 || u_smt.last_coord[47:0] != c_ubat) begin failures++; $display("FAIL coord send"); end
    checks++; if (u_smt.n_cmd != 2 || u_ubat.n_cmd != 1) begin failures++; $display("FAIL held during xfer"); end
    hold = 0; idle(1000);
    checks++; if (u_smt.n_cmd != 3 || u_ubat.n_cmd != 2 || u_smt.last_cmd != fr(5, 0) || u_ubat.last_cmd != fr(4, 1)) begin
      failures++; $display("FAIL resumed %0d %0d", u_smt.n_cmd, u_ubat.n_cmd); end
    // overflow
    hold = 1;
    for (int k = 0; k < QD + 2; k++) push(0, fr(10 + k, 0));
    checks++; if (n_rej != 2) begin failures++; $display("FAIL rejects %0d", n_rej); end
    hold = 0; idle(3000);
    checks++; if (u_smt.n_cmd != 3 + QD || u_smt.last_cmd != fr(10 + QD - 1, 0)) begin failures++; $display("FAIL after overflow %0d", u_smt.n_cmd); end
    checks++; if (!q_empty || n_sent != 8'(5 + QD)) begin failures++; $display("FAIL end %0d", n_sent); end
    // housekeeping polls
    checks++; if (n_poll != 0 || u_smt.n_hk != 0) begin failures++; $display("FAIL poll while disabled"); end
    poll_en = 1; idle(4 * POLL + 200);
    checks++; if (n_poll != 4 || u_smt.n_hk != 2 || u_ubat.n_hk != 2) begin
      failures++; $display("FAIL polls %0d %0d %0d", n_poll, u_smt.n_hk, u_ubat.n_hk); end
    checks++; if (tel_hk[0] != 16'h1234 || tel_hk[1] != 16'hBEEF) begin
      failures++; $display("FAIL poll words %h %h", tel_hk[0], tel_hk[1]); end
    hold = 1; idle(3 * POLL);
    checks++; if (n_poll != 4) begin failures++; $display("FAIL poll during hold %0d", n_poll); end
    hold = 0; idle(300);
    checks++; if (n_poll != 5) begin failures++; $display("FAIL due poll after hold %0d", n_poll); end
    poll_en = 0; idle(3 * POLL);
    checks++; if (n_poll != 5) begin failures++; $display("FAIL poll after disable %0d", n_poll); end
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
