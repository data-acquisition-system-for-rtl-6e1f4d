// tb_udaq_top -- end-to-end test of the UDAQ at its default parameters (48 MHz, 7 us flash
// writes, 5 Mbyte event slots), with models of the Bus-Interface (SPI master, 8 MHz), of the
// SMT and UBAT SPI slaves and of the NOR flash. It runs the auto-mode sequence to observation,
// forwards commands, handles a UBAT trigger (relative coordinate read, direction to the SMT,
// request for the absolute coordinate, event written and read back word by word), external
// triggers, a trigger lost with both slots full, commands held during data collection and
// rejected when the queue overflows, the minute pulse, an emergency line, an over-temperature
// alarm with safe mode (with the monitored values read back) and its clearing, the returned
// absolute coordinate sent to the SMT at the next configuration, the configuration commands
// kept in flash chip 0 sent again at that configuration, switching off at day, and the UDAQ's
// own stored parameters restored after a reset, the satellite's time passed on to both
// telescopes, and each telescope's polled status word read back by the satellite.
// Every one of these is
// counted and a mechanism that never happened counts as a failure.
module tb_udaq_top;
  import udaq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #10.417 clk = ~clk;   // 48 MHz
  int checks = 0, failures = 0;

  logic bi_sclk, bi_mosi, bi_cs_n, bi_miso, bi_attn, bi_drdy, minute_pulse = 0;
  logic [2:0] bi_type;
  logic [1:0] tel_sclk, tel_mosi, tel_cs_n, tel_miso, tel_drdy, tel_emerg = 0;
  logic ubat_trig = 0, smt_pwr_en, ubat_pwr_en;
  logic [9:0] photo [4], temp [10], i5 = 300, i12 = 300;
  logic [3:0] f_ce_n; logic f_oe_n, f_we_n, f_dq_oe; logic [21:0] f_addr; logic [15:0] f_dq_o, f_dq_i;
  coord_t c_smt = 48'h01_0000_0000_11, c_ubat = 48'h04_1357_9BDF_02;

  udaq_top dut (.clk, .rst_n, .bi_sclk, .bi_mosi, .bi_cs_n, .bi_miso, .bi_type, .bi_attn,
    .bi_drdy, .minute_pulse, .tel_sclk, .tel_mosi, .tel_cs_n, .tel_miso, .ubat_trig, .tel_drdy,
    .tel_emerg, .smt_pwr_en, .ubat_pwr_en, .photo, .temp, .i5, .i12, .f_ce_n, .f_oe_n, .f_we_n,
    .f_addr, .f_dq_o, .f_dq_oe, .f_dq_i);
  bi_master #(.BIT_CYC(6)) bi (.clk, .sclk(bi_sclk), .mosi(bi_mosi), .cs_n(bi_cs_n), .ftype(bi_type), .miso(bi_miso));
  tel_model #(.ID(4'h5), .HK(16'h5A5A)) u_smt  (.sclk(tel_sclk[0]), .mosi(tel_mosi[0]), .cs_n(tel_cs_n[0]), .miso(tel_miso[0]), .drdy(tel_drdy[0]), .coord(c_smt));
  tel_model #(.ID(4'hB), .HK(16'hB0B0)) u_ubat (.sclk(tel_sclk[1]), .mosi(tel_mosi[1]), .cs_n(tel_cs_n[1]), .miso(tel_miso[1]), .drdy(tel_drdy[1]), .coord(c_ubat));
  nor_flash_model u_flash (.ce_n(f_ce_n), .oe_n(f_oe_n), .we_n(f_we_n), .addr(f_addr), .dq_in(f_dq_o), .dq_out(f_dq_i));

  // mechanism counters
  int m_config, m_forward, m_ubat_ev, m_ext_ev, m_lost, m_held, m_reject, m_abs, m_transfer,
      m_minute, m_emerg, m_safe, m_day_off, m_hk_read, m_reobserve,
      m_replay, m_restore, m_time, m_tel_hk;

  task automatic chk(input logic c, input string m); checks++; if (!c) begin failures++; $display("FAIL %s", m); end endtask
  function automatic logic [31:0] mk(input logic [4:0] sys, input logic [5:0] cc, input logic [5:0] sub, input logic [9:0] v);
    return {HDR_SINGLE, sys, RUN_SCIENCE, cc, sub, v};
  endfunction
  task automatic bi_cmd(input logic [31:0] c); logic [127:0] b; bi.frame(BF_CMD, 32, 128'(c), b); endtask
  task automatic bi_status(output status_t s); logic [127:0] b; bi.frame(BF_STATUS, 128, 128'h0, b); s = b; endtask
  task automatic wait_state(input ccu_state_e s, input int max_cycles);
    int n = 0;
    while (dut.state != s && n < max_cycles) begin @(posedge clk); n++; end
    chk(dut.state == s, $sformatf("state %0d reached (now %0d)", s, dut.state));
  endtask
  task automatic wait_idle; int n = 0; do begin @(posedge clk); n++; end while (dut.dpu_busy && n < 400000); endtask

  // read one whole event through the BI and compare with what the telescopes sent
  task automatic read_event(input int n_words, input logic [15:0] hdr0, input coord_t c,
                            input int n_smt, input int n_ubat);
    logic [127:0] b; logic [15:0] w [$]; status_t s;
    bi_status(s);
    chk(s.ev_ready && s.ev_len == 32'(n_words), $sformatf("event length %0d expected %0d", s.ev_len, n_words));
    for (int i = 0; i < n_words; i++) begin bi.frame(BF_DATA, 16, 128'h0, b); w.push_back(b[15:0]); end
    chk(w[0] == hdr0, $sformatf("header %h expected %h", w[0], hdr0));
    chk({w[4], w[5], w[6]} == c, "header coordinate");
    for (int i = 0; i < n_smt; i++)  chk(w[7 + i] == {4'h5, 12'(i)}, $sformatf("SMT word %0d: %h", i, w[7 + i]));
    for (int i = 0; i < n_ubat; i++) chk(w[7 + n_smt + i] == {4'hB, 12'(i)}, $sformatf("UBAT word %0d: %h", i, w[7 + n_smt + i]));
    m_transfer++;
  endtask

  initial begin
    logic [127:0] b; status_t s; int ncmd, n_smt0, n_ubat0; time_t t0;
    {m_config, m_forward, m_ubat_ev, m_ext_ev, m_lost, m_held, m_reject, m_abs, m_transfer,
     m_minute, m_emerg, m_safe, m_day_off} = '0;
    for (int i = 0; i < 4; i++) photo[i] = 10'd500;      // daylight
    for (int i = 0; i < 10; i++) temp[i] = 10'(400 + i);
    repeat (5) @(posedge clk); rst_n = 1; repeat (5) @(posedge clk);

    // ---- time, coordinates, minute pulse
    bi.frame(BF_TIME, 48, 128'h18_07_0E_03_19_2C, b);     // 2024-07-14 03:25:44
    bi.frame(BF_SAT, 48, 128'h00_0102_0304_05, b);
    chk(dut.now == 48'h18_07_0E_03_19_2C, "time loaded");
    minute_pulse = 1; repeat (5) @(posedge clk); minute_pulse = 0; repeat (2) @(posedge clk);
    chk(dut.now == 48'h18_07_0E_03_1A_00, $sformatf("minute pulse rounds up: %h", dut.now));
    if (dut.now == 48'h18_07_0E_03_1A_00) m_minute++;
    chk(dut.last[CT_SAT] == 48'h00_0102_0304_05, "satellite coordinate stored");

    // ---- auto-mode sequence
    wait_state(ST_WAIT_DRK, 10000);
    bi_cmd(mk(5'b00001, CC_SET, SUB_DAYNIGHT, 10'd1));    // night
    repeat (20000) @(posedge clk);
    chk(dut.state == ST_WAIT_DRK && !smt_pwr_en, "stays off while the photo sensors see light");
    for (int i = 0; i < 4; i++) photo[i] = 10'd20;
    wait_state(ST_POWER, 10000);
    chk(smt_pwr_en && ubat_pwr_en, "telescopes powered");
    wait_state(ST_READY, 60000);
    repeat (5000) @(posedge clk);
    chk(u_smt.n_cmd == 1 && u_ubat.n_cmd == 1 && u_smt.last_cmd[15:10] == SUB_RUN_START, "configuration sent");
    if (u_smt.n_cmd == 1 && u_ubat.n_cmd == 1) m_config++;

    // ---- command forwarding
    bi_cmd(mk(5'b00010, CC_SETPAR, 6'd5, 10'd321));
    repeat (3000) @(posedge clk);
    chk(u_smt.n_cmd == 2 && u_smt.last_cmd[31:0] == mk(5'b00010, CC_SETPAR, 6'd5, 10'd321) &&
        u_smt.last_cmd[63:56] == TF_CMD, "command forwarded to SMT");
    if (u_smt.n_cmd == 2) m_forward++;
    // time from the satellite is passed on to both telescopes
    bi.frame(BF_TIME, 48, 128'h18_07_0E_03_1A_05, b);
    repeat (4500) @(posedge clk);
    chk(u_smt.n_time == 1 && u_ubat.n_time == 1 && u_smt.last_time == {TF_TIME, 8'd0, 48'h18_07_0E_03_1A_05} &&
        u_ubat.last_time == {TF_TIME, 8'd1, 48'h18_07_0E_03_1A_05}, "time passed on to SMT and UBAT");
    if (u_smt.n_time == 1 && u_ubat.n_time == 1) m_time++;
    bi_cmd(mk(5'b00001, CC_SETPAR, SUB_THR_I12, 10'd950));   // kept in chip 0, see the reset below
    repeat (2000) @(posedge clk);
    chk(dut.u_ccu.thr_i12 == 10'd950 && dut.cfg_stored == 8'd2, "threshold set and two commands stored");
    // the telescopes' status words, polled every 0.1 s, in status words 24 and 25
    begin int n = 0; while (dut.n_poll < 2 && n < 10_000_000) begin @(posedge clk); n++; end end
    bi.frame(BF_STATUS, 26 * 16, 128'h0, b);
    chk(u_smt.n_hk >= 1 && u_ubat.n_hk >= 1 && bi.rx_words[24] == 16'h5A5A && bi.rx_words[25] == 16'hB0B0,
        $sformatf("telescope status words %h %h", bi.rx_words[24], bi.rx_words[25]));
    if (bi.rx_words[24] == 16'h5A5A && bi.rx_words[25] == 16'hB0B0) m_tel_hk++;

    // ---- UBAT trigger; commands sent meanwhile are held
    u_smt.give_data(4); u_ubat.give_data(3);
    ubat_trig = 1; repeat (10) @(posedge clk); ubat_trig = 0;
    repeat (200) @(posedge clk);
    chk(dut.collecting, "collecting after UBAT trigger");
    ncmd = u_smt.n_cmd;
    bi_cmd(mk(5'b00010, CC_SET, 6'd7, 10'd1));
    bi_cmd(mk(5'b00010, CC_SET, 6'd7, 10'd2));
    repeat (2000) @(posedge clk);
    chk(dut.collecting && u_smt.n_cmd == ncmd, "commands held during collection");
    wait_idle;
    repeat (6000) @(posedge clk);
    chk(u_smt.n_cmd == ncmd + 2 && u_smt.last_cmd[9:0] == 10'd2, "held commands resumed in order");
    if (u_smt.n_cmd == ncmd + 2) m_held++;
    chk(u_smt.n_coord == 1 && u_smt.last_coord[47:0] == c_ubat, "UBAT direction sent to SMT");
    m_ubat_ev++;
    // absolute coordinate round trip
    chk(bi_attn, "attention for absolute coordinate");
    bi_status(s);
    chk(s.abs_req && s.ubat_rel == c_ubat && s.state == ST_READY, "status shows relative coordinate");
    bi.frame(BF_UBAT_ABS, 48, 128'(48'h07_2468_ACE0_13), b);
    repeat (5) @(posedge clk);
    chk(!bi_attn && dut.last[CT_UBAT_ABS] == 48'h07_2468_ACE0_13, "absolute coordinate stored");
    if (!bi_attn) m_abs++;
    // read the event back
    chk(bi_drdy, "data ready");
    read_event(7 + 4 + 3, 16'hE000, c_ubat, 4, 3);
    repeat (20) @(posedge clk);
    chk(!bi_drdy, "no data left");

    // ---- external trigger, then a second one; a third finds both slots full
    u_smt.give_data(2); u_ubat.give_data(2);
    bi.frame(BF_EXT_TRIG, 48, 128'(48'h02_0000_BEEF_01), b);
    repeat (200) @(posedge clk);
    chk(dut.collecting, "collecting after external trigger");
    // overflow the command queue while collecting (8 places)
    for (int i = 0; i < 9; i++) bi_cmd(mk(5'b00100, CC_SET, 6'd8, 10'(i)));
    wait_idle;
    chk(u_ubat.n_coord == 1 && u_smt.n_coord == 2, "external direction sent to both");
    m_ext_ev++;
    bi_status(s);
    chk(s.rejected == 1, $sformatf("one command rejected (%0d)", s.rejected));
    if (s.rejected == 1) m_reject++;
    u_smt.give_data(1); u_ubat.give_data(1);
    bi.frame(BF_EXT_TRIG, 48, 128'(48'h02_0000_BEEF_02), b);
    repeat (200) @(posedge clk); wait_idle;
    m_ext_ev++;
    bi.frame(BF_EXT_TRIG, 48, 128'(48'h02_0000_BEEF_03), b);
    repeat (200) @(posedge clk);
    bi_status(s);
    chk(s.ev_lost == 1 && s.ev_count == 3, $sformatf("third event lost (%0d, %0d)", s.ev_lost, s.ev_count));
    if (s.ev_lost == 1) m_lost++;
    read_event(7 + 2 + 2, 16'hE101, 48'h02_0000_BEEF_01, 2, 2);
    read_event(7 + 1 + 1, 16'hE102, 48'h02_0000_BEEF_02, 1, 1);

    // ---- emergency line
    tel_emerg = 2'b10; repeat (5) @(posedge clk); tel_emerg = 0; repeat (5) @(posedge clk);
    bi_status(s);
    chk(s.emerg == 2'b10 && bi_attn, "UBAT emergency announced");
    if (s.emerg == 2'b10) m_emerg++;

    // ---- over-temperature alarm
    temp[3] = 10'd900;
    wait_state(ST_SAFE, 20000);
    chk(!smt_pwr_en && !ubat_pwr_en && bi_attn, "telescopes off on alarm");
    bi_status(s);
    chk(s.alarm && s.alarm_vec == 16'h0080, $sformatf("alarm bit of temperature 3 (%h)", s.alarm_vec));
    if (dut.state == ST_SAFE) m_safe++;
    bi.frame(BF_STATUS, 24 * 16, 128'h0, b);
    for (int i = 0; i < 16; i++) begin
      logic [9:0] v;
      v = (i < 4) ? photo[i] : (i < 14) ? temp[i - 4] : (i == 14) ? i5 : i12;
      chk(bi.rx_words[8 + i] == {6'b0, v}, $sformatf("monitored value %0d: %h", i, bi.rx_words[8 + i]));
    end
    if (bi.rx_words[8 + 4 + 3] == 16'd900) m_hk_read++;
    temp[3] = 10'd403;
    while (!dut.q_empty) @(posedge clk);   // commands still queued from the overflow test
    repeat (2000) @(posedge clk);
    ncmd = u_smt.n_coord; n_smt0 = u_smt.n_cmd; n_ubat0 = u_ubat.n_cmd;
    bi_cmd(mk(5'b00001, CC_STATE, SUB_CLR_ALARM, 10'd0));
    wait_state(ST_READY, 100000);
    chk(smt_pwr_en, "back in observation after clear");
    repeat (12000) @(posedge clk);   // six 64-bit frames take 6 x 1806 cycles
    // SMT: run start, then its stored commands in entry order (set 7, set parameter 5)
    chk(u_smt.n_cmd == n_smt0 + 3 && u_smt.last_cmd[31:0] == mk(5'b00010, CC_SETPAR, 6'd5, 10'd321),
        $sformatf("stored commands sent again to the SMT (%0d)", u_smt.n_cmd - n_smt0));
    chk(u_ubat.n_cmd == n_ubat0 + 2 && u_ubat.last_cmd[15:10] == 6'd8,
        $sformatf("stored command sent again to the UBAT (%0d)", u_ubat.n_cmd - n_ubat0));
    if (u_smt.n_cmd == n_smt0 + 3) m_replay++;
    chk(u_smt.n_coord == ncmd + 1 && u_smt.last_coord == {TF_COORD, 8'h00, 48'h07_2468_ACE0_13},
        "absolute coordinate sent to the SMT at reconfiguration");
    if (u_smt.n_coord == ncmd + 1) m_reobserve++;

    // ---- day
    bi_cmd(mk(5'b00001, CC_SET, SUB_DAYNIGHT, 10'd0));
    wait_state(ST_WAIT_DRK, 1000);
    chk(!smt_pwr_en && !ubat_pwr_en, "off at day");
    if (!smt_pwr_en) m_day_off++;

    // ---- reset: the UDAQ's own parameters come back from flash chip 0
    rst_n = 0; repeat (5) @(posedge clk); rst_n = 1;
    repeat (5) @(posedge clk);
    chk(dut.u_ccu.thr_i12 == 10'd900, "threshold back at its reset value");
    wait_state(ST_WAIT_DRK, 20000);
    chk(dut.u_ccu.thr_i12 == 10'd950, $sformatf("stored threshold restored (%0d)", dut.u_ccu.thr_i12));
    if (dut.u_ccu.thr_i12 == 10'd950) m_restore++;

    // ---- every mechanism happened
    chk(m_config > 0, "mechanism: configuration");
    chk(m_forward > 0, "mechanism: command forwarding");
    chk(m_ubat_ev > 0, "mechanism: UBAT trigger");
    chk(m_ext_ev > 0, "mechanism: external trigger");
    chk(m_lost > 0, "mechanism: trigger lost, slots full");
    chk(m_held > 0, "mechanism: command hold and resume");
    chk(m_reject > 0, "mechanism: command rejected");
    chk(m_abs > 0, "mechanism: absolute coordinate");
    chk(m_transfer > 0, "mechanism: event transfer");
    chk(m_minute > 0, "mechanism: minute pulse");
    chk(m_emerg > 0, "mechanism: emergency");
    chk(m_safe > 0, "mechanism: alarm and safe mode");
    chk(m_day_off > 0, "mechanism: day switch-off");
    chk(m_hk_read > 0, "mechanism: monitored values read");
    chk(m_reobserve > 0, "mechanism: absolute coordinate to SMT for the next orbit");
    chk(m_replay > 0, "mechanism: stored configuration sent again");
    chk(m_restore > 0, "mechanism: stored UDAQ parameters restored after reset");
    chk(m_time > 0, "mechanism: time passed on to the telescopes");
    chk(m_tel_hk > 0, "mechanism: telescope status words polled");
    $display("mechanisms: config=%0d forward=%0d ubat=%0d ext=%0d lost=%0d held=%0d reject=%0d abs=%0d transfer=%0d minute=%0d emerg=%0d safe=%0d day=%0d hk=%0d reobserve=%0d replay=%0d restore=%0d time=%0d tel_hk=%0d",
      m_config, m_forward, m_ubat_ev, m_ext_ev, m_lost, m_held, m_reject, m_abs, m_transfer, m_minute, m_emerg, m_safe, m_day_off, m_hk_read, m_reobserve, m_replay, m_restore, m_time, m_tel_hk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
