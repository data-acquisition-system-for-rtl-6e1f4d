// tb_ccu -- checks the central control unit: the auto-mode sequence (housekeeping, waiting for
// night and darkness, power, configuration of both telescopes, ready), switching off at day
// only after the event in progress, safe mode on an alarm and its clearing by command, and the
// execution or routing of commands by their applicable-system field, and the absolute
// coordinate sent to the SMT at the next configuration once the satellite has returned one.
// A small model of the configuration store answers load_udaq with a stored photo threshold and
// load_tel with a stored SMT command, each played back with a random delay; the threshold
// must be in force before the dark check, and the command must be queued at every
// configuration after the run-start commands. Time from the satellite is passed to both
// telescopes while they are powered.
module tb_ccu;
  import udaq_pkg::*;
  localparam int SETTLE = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid = 0, hk_done = 0, light = 1, alarm = 0, ev_busy = 0, abs_valid = 0;
  coord_t abs_coord = '0;
  logic load_udaq, load_tel, cfg_busy = 0, rp_valid = 0, rp_ready, q_full = 0;
  logic [1:0] rp_tgt = 0; logic [31:0] rp_cmd = 0;
  int n_load_udaq = 0, n_load_tel = 0;
  logic time_wr = 0; time_t time_in = '0;
  logic [31:0] cmd_in = 0;
  ccu_state_e state; logic tel_pwr, night, trig_en, hk_clr, q_push, q_tel; logic [1:0] run_type;
  logic [9:0] tp, tt, t5, t12; logic [63:0] q_frame; logic [7:0] bad;
  ccu #(.PWR_SETTLE(SETTLE)) dut (.clk, .rst_n, .cmd_valid, .cmd_in, .hk_done, .light, .alarm,
    .ev_busy, .abs_valid, .abs_coord, .load_udaq, .load_tel, .cfg_busy, .rp_valid, .rp_tgt, .rp_cmd,
    .rp_ready, .q_full, .time_wr, .time_in, .state, .tel_pwr, .night, .trig_en, .hk_clr, .run_type, .thr_photo(tp),
    .thr_temp(tt), .thr_i5(t5), .thr_i12(t12), .q_push, .q_tel, .q_frame, .bad_cmds(bad));

  logic [64:0] pushes [$];
  always @(negedge clk) if (rst_n && q_push) pushes.push_back({q_tel, q_frame});

  // configuration store model: one entry per kind of load
  task automatic offer(input logic [1:0] t, input logic [31:0] c);
    cfg_busy <= 1; repeat (1 + $urandom % 20) @(posedge clk);
    rp_valid <= 1; rp_tgt <= t; rp_cmd <= c;
    do @(posedge clk); while (!rp_ready);
    rp_valid <= 0; @(posedge clk); cfg_busy <= 0;
  endtask
  localparam logic [31:0] STORED_UDAQ = {3'd1, 5'b00001, 2'd2, 6'd3, 6'd1, 10'd123};
  localparam logic [31:0] STORED_SMT  = {3'd1, 5'b00010, 2'd2, 6'd3, 6'd9, 10'd55};
  always @(posedge clk) if (rst_n) begin
    if (load_udaq) begin n_load_udaq++; offer(2'd0, STORED_UDAQ); end
    if (load_tel)  begin n_load_tel++;  offer(2'd1, STORED_SMT);  end
  end

  function automatic logic [31:0] mk(input logic [4:0] sys, input logic [5:0] cc, input logic [5:0] sub, input logic [9:0] v);
    return {HDR_SINGLE, sys, RUN_SCIENCE, cc, sub, v};
  endfunction
  task automatic send(input logic [31:0] c);
    @(posedge clk); cmd_valid <= 1; cmd_in <= c; @(posedge clk); cmd_valid <= 0; repeat (4) @(posedge clk);
  endtask
  task automatic chk(input logic c, input string m); checks++; if (!c) begin failures++; $display("FAIL %s", m); end endtask

  initial begin
    logic [31:0] c;
    repeat (3) @(posedge clk); rst_n = 1; repeat (5) @(posedge clk);
    chk(state == ST_HK && !tel_pwr, "starts in housekeeping");
    chk(n_load_udaq == 1, "UDAQ parameters restored at start");
    @(posedge clk); time_wr <= 1; @(posedge clk); time_wr <= 0;   // not passed on: telescopes off
    repeat (3) @(posedge clk);
    chk(pushes.size() == 0, "no time frame while the telescopes are off");
    hk_done = 1; repeat (3) @(posedge clk);
    chk(state == ST_WAIT_DRK, "waits for dark");
    chk(tp == 10'd123, $sformatf("stored photo threshold in force (%0d)", tp));
    send(mk(5'b00001, CC_SET, SUB_RUNTYPE, 10'd1));
    send(mk(5'b00001, CC_SET, SUB_DAYNIGHT, 10'd1));
    chk(night && run_type == 2'd1 && state == ST_WAIT_DRK && !tel_pwr, "night but light");
    light = 0; repeat (3) @(posedge clk);
    chk(state == ST_POWER && tel_pwr, "power on");
    repeat (SETTLE + 40) @(posedge clk);
    chk(state == ST_READY && trig_en, "ready");
    chk(pushes.size() == 3, $sformatf("config pushes %0d", pushes.size()));
    if (pushes.size() == 3) begin
      chk(pushes[2] == {1'b0, TF_CMD, 8'd0, 16'd2, STORED_SMT}, "stored command to SMT");
      chk(pushes[0][64] == 0 && pushes[0][63:56] == TF_CMD && pushes[0][21:16] == CC_STATE &&
          pushes[0][15:10] == SUB_RUN_START && pushes[0][23:22] == 2'd1, "config to SMT");
      chk(pushes[1][64] == 1 && pushes[1][55:48] == 8'd1, "config to UBAT");
    end
    pushes.delete();
    // routing
    c = mk(5'b00110, CC_SETPAR, 6'd9, 10'd77);
    send(c);
    chk(pushes.size() == 2 && pushes[0] == {1'b0, TF_CMD, 8'd0, 16'd3, c} && pushes[1] == {1'b1, TF_CMD, 8'd1, 16'd3, c},
        "command to SMT and UBAT");
    c = mk(5'b00100, CC_STATE, 6'd3, 10'd5);
    send(c);
    // time from the satellite goes to both powered telescopes
    @(posedge clk); time_wr <= 1; time_in <= 48'h18_0A_02_11_05_00; @(posedge clk); time_wr <= 0;
    repeat (4) @(posedge clk);
    chk(pushes.size() == 5 && pushes[3] == {1'b0, TF_TIME, 8'd0, 48'h18_0A_02_11_05_00} &&
        pushes[4] == {1'b1, TF_TIME, 8'd1, 48'h18_0A_02_11_05_00}, "time to SMT and UBAT");
    void'(pushes.pop_back()); void'(pushes.pop_back());
    chk(pushes.size() == 3 && pushes[2][64] == 1 && pushes[2][31:0] == c, "command to UBAT");
    send(mk(5'b00001, CC_SETPAR, SUB_THR_TEMP, 10'd612));
    send(mk(5'b00001, CC_SETPAR, SUB_THR_I12, 10'd400));
    chk(tt == 612 && t12 == 400 && pushes.size() == 3, "thresholds");
    send({3'd7, 5'b00010, 24'h0});
    send({3'd1, 5'b11000, 24'h0});
    chk(bad == 2 && pushes.size() == 3, "bad commands");
    // day during an event
    ev_busy = 1;
    send(mk(5'b00001, CC_SET, SUB_DAYNIGHT, 10'd0));
    repeat (10) @(posedge clk);
    chk(state == ST_READY && tel_pwr, "event finishes first");
    ev_busy = 0; repeat (3) @(posedge clk);
    chk(state == ST_WAIT_DRK && !tel_pwr, "off at day");
    abs_valid = 1; abs_coord = 48'h04_1357_9BDF_02; pushes.delete();
    send(mk(5'b00001, CC_SET, SUB_DAYNIGHT, 10'd1));
    repeat (SETTLE + 40) @(posedge clk);
    chk(state == ST_READY, "ready again");
    chk(pushes.size() == 4, $sformatf("configuration pushes with coordinate %0d", pushes.size()));
    if (pushes.size() == 4) begin
      chk(pushes[2] == {1'b0, TF_COORD, 8'h00, abs_coord}, "absolute coordinate to SMT");
      chk(pushes[3][64] == 1'b0 && pushes[3][31:0] == STORED_SMT, "stored command again");
    end
    // alarm
    alarm = 1; repeat (2) @(posedge clk);
    chk(state == ST_SAFE && !tel_pwr && !trig_en, "safe");
    send(mk(5'b00001, CC_STATE, SUB_CLR_ALARM, 10'd0));
    chk(hk_clr == 0 && state == ST_SAFE, "alarm still there");
    alarm = 0;
    send(mk(5'b00001, CC_STATE, SUB_CLR_ALARM, 10'd0));
    repeat (SETTLE + 40) @(posedge clk);
    chk(state == ST_READY && tel_pwr, "back to ready after clear");
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
