// tb_tau -- checks the trigger arbiter: UBAT edges and external pulses start events only while
// enabled and not busy, the UBAT wins a tie, every refused trigger is counted as lost, and
// ev_start follows a UBAT edge by the synchroniser latency (at most 5 cycles from the line going high).
module tb_tau;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic ut = 0, et = 0, en = 0, busy = 0, evs, src;
  logic [7:0] nu, ne, nl;
  tau dut (.clk, .rst_n, .ubat_trig(ut), .ext_trig(et), .enable(en), .busy, .ev_start(evs),
           .ev_src(src), .n_ubat(nu), .n_ext(ne), .n_lost(nl));
  int starts = 0, s_ubat = 0, s_ext = 0, last_src;
  always @(posedge clk) if (rst_n && evs) begin starts++; if (src) s_ext++; else s_ubat++; end

  task automatic ubat_pulse(output int lat);
    int t = 0; int s0 = starts;
    @(posedge clk); ut <= 1;
    while (starts == s0 && t < 8) begin @(posedge clk); t++; end
    lat = t;
    repeat (3) @(posedge clk); ut <= 0; repeat (4) @(posedge clk);
  endtask
  task automatic ext_pulse;
    @(posedge clk); et <= 1; @(posedge clk); et <= 0; repeat (3) @(posedge clk);
  endtask

  initial begin
    int lat, e_u = 0, e_e = 0, e_l = 0;
    repeat (3) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    ubat_pulse(lat); e_l++;                     // disabled
    ext_pulse; e_l++;
    en = 1;
    ubat_pulse(lat); e_u++;
    checks++; if (lat > 5 || lat < 2) begin failures++; $display("FAIL latency %0d", lat); end
    ext_pulse; e_e++;
    busy = 1; ubat_pulse(lat); e_l++; ext_pulse; e_l++; busy = 0;
    // tie: external pulse in the cycle the UBAT edge is seen
    @(posedge clk); ut <= 1; @(posedge clk); @(posedge clk); et <= 1; @(posedge clk); et <= 0;
    repeat (3) @(posedge clk); ut <= 0; repeat (4) @(posedge clk);
    e_u++; e_l++;
    for (int i = 0; i < 20; i++) begin
      logic b;
      b = 1'($urandom);
      busy = b;
      if ($urandom % 2) begin ubat_pulse(lat); if (b) e_l++; else e_u++; end
      else begin ext_pulse; if (b) e_l++; else e_e++; end
    end
    busy = 0;
    checks++; if (nu != 8'(e_u) || s_ubat != e_u) begin failures++; $display("FAIL ubat %0d %0d %0d", nu, s_ubat, e_u); end
    checks++; if (ne != 8'(e_e) || s_ext != e_e) begin failures++; $display("FAIL ext %0d %0d %0d", ne, s_ext, e_e); end
    checks++; if (nl != 8'(e_l)) begin failures++; $display("FAIL lost %0d %0d", nl, e_l); end
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
