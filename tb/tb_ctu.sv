// tb_ctu -- checks the coordinate store (four kinds, entry per indicator, last written) and the
// real-time clock at CLK_HZ = 20: one second per 20 cycles, carries through minute, hour,
// day (29 February in a leap year, 28 in others), month and year, and the minute pulse
// rounding to the nearest whole minute.
module tb_ctu;
  import udaq_pkg::*;
  localparam int HZ = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic coord_wr = 0, time_wr = 0, mp = 0, tick;
  coord_type_e ct = CT_SAT, rt = CT_SAT;
  coord_t c = '0, rc; coord_t last [4];
  logic [7:0] ri = 0;
  time_t tin = '0, now;
  ctu #(.CLK_HZ(HZ)) dut (.clk, .rst_n, .coord_wr, .coord_type(ct), .coord(c), .rd_type(rt),
    .rd_ind(ri), .rd_coord(rc), .last, .time_wr, .time_in(tin), .minute_pulse(mp), .now,
    .sec_tick(tick));

  coord_t ref_tab [4][8];

  task automatic set_time(input time_t t);
    @(posedge clk); time_wr <= 1; tin <= t; @(posedge clk); time_wr <= 0;
  endtask
  task automatic expect_time(input time_t t, input string what);
    checks++;
    if (now != t) begin failures++; $display("FAIL %s: %h expected %h", what, now, t); end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 4; t++) for (int i = 0; i < 8; i++) ref_tab[t][i] = '0;
    // coordinates
    for (int k = 0; k < 40; k++) begin
      coord_t v;
      v.ind = 8'($urandom % 10); v.value = {8'($urandom), $urandom};
      @(posedge clk); coord_wr <= 1; ct <= coord_type_e'(k % 4); c <= v;
      @(posedge clk); coord_wr <= 0;
      if (v.ind < 8) ref_tab[k % 4][v.ind] = v;
      @(posedge clk);
      checks++; if (last[k % 4] != v) begin failures++; $display("FAIL last %0d", k); end
    end
    for (int t = 0; t < 4; t++) for (int i = 0; i < 10; i++) begin
      rt = coord_type_e'(t); ri = 8'(i); #1;
      checks++;
      if (rc != ((i < 8) ? ref_tab[t][i] : '0)) begin failures++; $display("FAIL tab %0d %0d", t, i); end
    end
    // clock: 2024-02-28 23:59:58 -> two seconds later 2024-02-29 00:00:00
    set_time('{8'd24, 8'd2, 8'd28, 8'd23, 8'd59, 8'd58});
    repeat (2 * HZ) @(posedge clk); #1;
    expect_time('{8'd24, 8'd2, 8'd29, 8'd0, 8'd0, 8'd0}, "leap day");
    // 2023-02-28 23:59:59 -> 2023-03-01 00:00:00
    set_time('{8'd23, 8'd2, 8'd28, 8'd23, 8'd59, 8'd59});
    repeat (HZ) @(posedge clk); #1;
    expect_time('{8'd23, 8'd3, 8'd1, 8'd0, 8'd0, 8'd0}, "march");
    // 2023-12-31 23:59:59 -> 2024-01-01
    set_time('{8'd23, 8'd12, 8'd31, 8'd23, 8'd59, 8'd59});
    repeat (HZ) @(posedge clk); #1;
    expect_time('{8'd24, 8'd1, 8'd1, 8'd0, 8'd0, 8'd0}, "new year");
    // 30 April 23:59:59 -> 1 May
    set_time('{8'd24, 8'd4, 8'd30, 8'd23, 8'd59, 8'd59});
    repeat (HZ) @(posedge clk); #1;
    expect_time('{8'd24, 8'd5, 8'd1, 8'd0, 8'd0, 8'd0}, "may");
    // seconds count: 10:20:05 + 7 s
    set_time('{8'd24, 8'd6, 8'd1, 8'd10, 8'd20, 8'd5});
    repeat (7 * HZ) @(posedge clk); #1;
    expect_time('{8'd24, 8'd6, 8'd1, 8'd10, 8'd20, 8'd12}, "seconds");
    // minute pulse at second 12 rounds down
    @(posedge clk); mp <= 1; repeat (4) @(posedge clk); mp <= 0; #1;
    expect_time('{8'd24, 8'd6, 8'd1, 8'd10, 8'd20, 8'd0}, "round down");
    // at second 45 rounds up
    set_time('{8'd24, 8'd6, 8'd1, 8'd10, 8'd20, 8'd45});
    @(posedge clk); mp <= 1; repeat (4) @(posedge clk); mp <= 0; #1;
    expect_time('{8'd24, 8'd6, 8'd1, 8'd10, 8'd21, 8'd0}, "round up");
    // and the prescaler restarted: a full second later, second 1
    repeat (HZ - 2) @(posedge clk); #1;
    expect_time('{8'd24, 8'd6, 8'd1, 8'd10, 8'd21, 8'd0}, "prescaler restart");
    repeat (3) @(posedge clk); #1;
    expect_time('{8'd24, 8'd6, 8'd1, 8'd10, 8'd21, 8'd1}, "one second after pulse");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
