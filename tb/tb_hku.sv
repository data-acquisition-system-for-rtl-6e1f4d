// tb_hku -- checks the housekeeping unit with a 10-cycle scan: the register copy of all 16
// values, one alarm bit per value above its threshold (photo only with the SMT powered),
// stickiness, clearing, the light flag and the first-scan flag.
module tb_hku;
  localparam int SCAN = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [9:0] photo [4], temp [10], i5, i12, tp, tt, t5, t12, hk [16];
  logic smt_on = 0, clr = 0, alarm, light, first;
  logic [15:0] av;
  hku #(.SCAN(SCAN)) dut (.clk, .rst_n, .photo, .temp, .i5, .i12, .thr_photo(tp), .thr_temp(tt),
    .thr_i5(t5), .thr_i12(t12), .smt_on, .clr, .hk_reg(hk), .alarm_vec(av), .alarm, .light,
    .first_scan(first));

  function automatic logic [15:0] over;
    logic [15:0] o;
    for (int i = 0; i < 4; i++)  o[i] = smt_on && photo[i] > tp;
    for (int i = 0; i < 10; i++) o[4+i] = temp[i] > tt;
    o[14] = i5 > t5; o[15] = i12 > t12;
    return o;
  endfunction

  initial begin
    logic [15:0] expv = 0;
    tp = 100; tt = 500; t5 = 600; t12 = 700;
    for (int i = 0; i < 4; i++) photo[i] = 10'(20 + i);
    for (int i = 0; i < 10; i++) temp[i] = 10'(300 + i);
    i5 = 200; i12 = 300;
    repeat (3) @(posedge clk); rst_n = 1;
    checks++; if (first) begin failures++; $display("FAIL first early"); end
    repeat (SCAN + 1) @(posedge clk); #1;
    checks++; if (!first || alarm || light) begin failures++; $display("FAIL quiet %b %b %b", first, alarm, light); end
    checks++; if (hk[4] != 300 || hk[15] != 300 || hk[0] != 20) begin failures++; $display("FAIL hk"); end
    // light without SMT power: no alarm, light set
    photo[2] = 400; repeat (SCAN + 1) @(posedge clk); #1;
    checks++; if (alarm || !light) begin failures++; $display("FAIL light off %b %b", alarm, light); end
    smt_on = 1; repeat (SCAN + 1) @(posedge clk); #1;
    checks++; if (av != 16'h0004) begin failures++; $display("FAIL photo alarm %h", av); end
    photo[2] = 20; repeat (SCAN + 1) @(posedge clk); #1;
    checks++; if (av != 16'h0004) begin failures++; $display("FAIL sticky %h", av); end
    @(posedge clk); clr <= 1; @(posedge clk); clr <= 0; #1;
    checks++; if (av != 0 || alarm) begin failures++; $display("FAIL clear %h", av); end
    for (int k = 0; k < 12; k++) begin
      for (int i = 0; i < 4; i++)  photo[i] = 10'($urandom % 130);
      for (int i = 0; i < 10; i++) temp[i] = 10'(450 + $urandom % 60);
      i5 = 10'(580 + $urandom % 30); i12 = 10'(690 + $urandom % 15);
      smt_on = 1'($urandom);
      expv = over();
      @(posedge clk); clr <= 1; @(posedge clk); clr <= 0;
      repeat (SCAN + 1) @(posedge clk); #1;
      checks++; if (av != expv || alarm != (expv != 0)) begin failures++; $display("FAIL rnd %h %h", av, expv); end
      checks++; if (hk[14] != i5 || hk[9] != temp[5] || hk[1] != photo[1]) begin failures++; $display("FAIL hk rnd"); end
    end
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
