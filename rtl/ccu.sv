// ccu -- Central Control Unit of the UDAQ.
//
// Auto-mode sequence after power-on (state in ccu_state_e):
//   ST_HK       restore the UDAQ's own parameters from the configuration store (load_udaq)
//               and wait for the first complete housekeeping scan;
//   ST_WAIT_DRK wait until the satellite says it is night and the photo sensors see no light,
//               so the SMT's intensified CCD cannot be blinded;
//   ST_POWER    switch the 5.2 V / 12 V supplies of SMT and UBAT on, wait PWR_SETTLE cycles;
//   ST_CONFIG   send a run-start command (with the stored run type) to SMT and UBAT, then
//               every telescope command kept in the configuration store (load_tel; each is
//               queued when the queue has room, q_full); if the
//               satellite has returned an absolute coordinate for an earlier UBAT trigger
//               (abs_valid), that coordinate is sent to the SMT as well (TF_COORD frame), so
//               the same object can be looked for again in the next orbit;
//   ST_READY    observe: triggers are enabled. When day comes the telescopes are switched off
//               (after any event in progress) and the unit waits for night again.
// A housekeeping alarm in any state switches both telescopes off and leads to ST_SAFE; the
// status block announces it to the Bus-Interface. ST_SAFE is left by a clear-alarm command.
// Commands from the Bus-Interface are decoded (cmd_decode). Those for the UDAQ set day/night,
// the run type, the monitoring thresholds or clear the alarms; those for SMT and/or UBAT are
// extended to 64 bits and queued for the internal interface unit, one push per cycle, the
// configuration commands first. The time the satellite sends (time_wr) is passed on to each
// powered telescope in a TF_TIME frame, so all clocks share the satellite's time. Commands
// with an unknown header or system are counted in
// bad_cmds.
// Published: the sequence (housekeeping, day/night, power, configuration, ready), command
// routing by applicable system, power-off on alarms, reuse of the absolute coordinate for the
// next orbit, distributing the stored parameters at configuration. Own choices: the command codes in
// udaq_pkg, the settle time, the configuration content, the threshold reset values and
// leaving safe mode only by command.
module ccu
  import udaq_pkg::*;
#(
  parameter int unsigned PWR_SETTLE = 48_000,   // 1 ms at 48 MHz
  parameter int unsigned VW         = 10
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cmd_valid,
  input  logic [31:0]   cmd_in,
  input  logic          hk_done,
  input  logic          light,
  input  logic          alarm,
  input  logic          ev_busy,
  input  logic          abs_valid,
  input  coord_t        abs_coord,
  output logic          load_udaq,
  output logic          load_tel,
  input  logic          cfg_busy,
  input  logic          rp_valid,
  input  logic [1:0]    rp_tgt,
  input  logic [31:0]   rp_cmd,
  output logic          rp_ready,
  input  logic          q_full,
  input  logic          time_wr,
  input  time_t         time_in,
  output ccu_state_e    state,
  output logic          tel_pwr,
  output logic          night,
  output logic          trig_en,
  output logic          hk_clr,
  output logic [1:0]    run_type,
  output logic [VW-1:0] thr_photo,
  output logic [VW-1:0] thr_temp,
  output logic [VW-1:0] thr_i5,
  output logic [VW-1:0] thr_i12,
  output logic          q_push,
  output logic          q_tel,
  output logic [63:0]   q_frame,
  output logic [7:0]    bad_cmds
);
  cmd_t        dc;
  logic        dvalid, d_udaq, d_smt, d_ubat;
  logic [63:0] f_smt, f_ubat;
  logic [15:0] seq;
  logic [31:0] tmr;
  logic        clr_seen, ld_sent;
  logic        exec, rp_tel_go;
  cmd_t        ex;                 // UDAQ command to carry out: from the BI or played back
  // pending pushes: configuration to SMT / UBAT, forwarded command to SMT / UBAT
  logic        p_cfg_smt, p_cfg_ubat, p_abs_smt, p_cmd_smt, p_cmd_ubat, p_time_smt, p_time_ubat;
  time_t       time_q;
  logic [63:0] cmd_smt, cmd_ubat;

  cmd_decode u_dec (
    .cmd_in, .seq, .cmd(dc), .valid(dvalid), .to_udaq(d_udaq), .to_smt(d_smt),
    .to_ubat(d_ubat), .smt_frame(f_smt), .ubat_frame(f_ubat));

  wire cmd_t cfg = '{header: HDR_SINGLE, system: 5'(1 << SYS_SMT) | 5'(1 << SYS_UBAT),
                     run_type: run_type, content: CC_STATE, sub: SUB_RUN_START, value: '0};

  assign trig_en = (state == ST_READY);

  always_comb begin
    exec = 1'b0; ex = dc;
    if (cmd_valid && dvalid && d_udaq) exec = 1'b1;
    else if (rp_valid && rp_tgt == 2'd0) begin exec = 1'b1; ex = cmd_t'(rp_cmd); end
  end
  // a played-back telescope command is queued only while configuring and when nothing else
  // is pushed; outside configuration it is dropped
  assign rp_tel_go = rp_valid && rp_tgt != 2'd0 && state == ST_CONFIG && !q_full &&
                     !p_cfg_smt && !p_cfg_ubat && !p_abs_smt && !p_cmd_smt && !p_cmd_ubat &&
                     !p_time_smt && !p_time_ubat;
  assign rp_ready  = (rp_tgt == 2'd0) ? !(cmd_valid && dvalid && d_udaq)
                                      : (state != ST_CONFIG || rp_tel_go);

  always_comb begin
    q_push = 1'b1; q_tel = 1'(TEL_SMT); q_frame = '0;
    if (p_cfg_smt)       begin q_tel = 1'(TEL_SMT);  q_frame = {TF_CMD, 8'(TEL_SMT),  seq, cfg}; end
    else if (p_cfg_ubat) begin q_tel = 1'(TEL_UBAT); q_frame = {TF_CMD, 8'(TEL_UBAT), seq, cfg}; end
    else if (p_abs_smt)  begin q_tel = 1'(TEL_SMT);  q_frame = {TF_COORD, 8'h00, abs_coord}; end
    else if (p_cmd_smt)  begin q_tel = 1'(TEL_SMT);  q_frame = cmd_smt;  end
    else if (p_cmd_ubat) begin q_tel = 1'(TEL_UBAT); q_frame = cmd_ubat; end
    else if (p_time_smt) begin q_tel = 1'(TEL_SMT);  q_frame = {TF_TIME, 8'(TEL_SMT),  time_q}; end
    else if (p_time_ubat) begin q_tel = 1'(TEL_UBAT); q_frame = {TF_TIME, 8'(TEL_UBAT), time_q}; end
    else if (rp_tel_go)  begin
      q_tel = (rp_tgt == 2'd2); q_frame = {TF_CMD, 7'd0, rp_tgt == 2'd2, seq, rp_cmd};
    end
    else q_push = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_HK; tel_pwr <= 1'b0; night <= 1'b0; hk_clr <= 1'b0; run_type <= RUN_SCIENCE;
      thr_photo <= VW'(100); thr_temp <= VW'(800); thr_i5 <= VW'(900); thr_i12 <= VW'(900);
      seq <= '0; tmr <= '0; bad_cmds <= '0; clr_seen <= 1'b0;
      ld_sent <= 1'b0; load_udaq <= 1'b0; load_tel <= 1'b0;
      p_cfg_smt <= 1'b0; p_cfg_ubat <= 1'b0; p_abs_smt <= 1'b0; p_cmd_smt <= 1'b0; p_cmd_ubat <= 1'b0;
      cmd_smt <= '0; cmd_ubat <= '0; p_time_smt <= 1'b0; p_time_ubat <= 1'b0; time_q <= '0;
    end else begin
      hk_clr <= 1'b0; load_udaq <= 1'b0; load_tel <= 1'b0;
      // ---- retire the push made this cycle
      if (p_cfg_smt)       p_cfg_smt  <= 1'b0;
      else if (p_cfg_ubat) p_cfg_ubat <= 1'b0;
      else if (p_abs_smt)  p_abs_smt  <= 1'b0;
      else if (p_cmd_smt)  p_cmd_smt  <= 1'b0;
      else if (p_cmd_ubat) p_cmd_ubat <= 1'b0;
      else if (p_time_smt) p_time_smt <= 1'b0;
      else if (p_time_ubat) p_time_ubat <= 1'b0;
      if (q_push) seq <= seq + 1'b1;

      // ---- commands from the Bus-Interface
      if (cmd_valid) begin
        if (!dvalid) bad_cmds <= bad_cmds + 1'b1;
        else begin
          if (d_smt)  begin p_cmd_smt  <= 1'b1; cmd_smt  <= f_smt;  end
          if (d_ubat) begin p_cmd_ubat <= 1'b1; cmd_ubat <= f_ubat; end
        end
      end
      if (time_wr && tel_pwr) begin
        p_time_smt <= 1'b1; p_time_ubat <= 1'b1; time_q <= time_in;
      end
      // ---- UDAQ commands, from the BI or played back from the configuration store
      if (exec) begin
        case (ex.content)
          CC_SET: case (ex.sub)
            SUB_DAYNIGHT: night    <= ex.value[0];
            SUB_RUNTYPE:  run_type <= ex.value[1:0];
            default: ;
          endcase
          CC_SETPAR: case (ex.sub)
            SUB_THR_PHOTO: thr_photo <= ex.value;
            SUB_THR_TEMP:  thr_temp  <= ex.value;
            SUB_THR_I5:    thr_i5    <= ex.value;
            SUB_THR_I12:   thr_i12   <= ex.value;
            default: ;
          endcase
          CC_STATE: if (ex.sub == SUB_CLR_ALARM) hk_clr <= 1'b1;
          default: ;
        endcase
      end

      // ---- auto-mode sequence
      if (alarm && state != ST_SAFE) begin
        tel_pwr <= 1'b0; ld_sent <= 1'b0; state <= ST_SAFE;
      end else begin
        case (state)
          ST_HK:
            if (!ld_sent) begin load_udaq <= 1'b1; ld_sent <= 1'b1; end
            else if (hk_done && !cfg_busy && !load_udaq) begin
              ld_sent <= 1'b0; state <= ST_WAIT_DRK;
            end
          ST_WAIT_DRK: if (night && !light) begin
            tel_pwr <= 1'b1; tmr <= '0; state <= ST_POWER;
          end
          ST_POWER: begin
            tmr <= tmr + 1;
            if (tmr >= PWR_SETTLE - 1) begin
              p_cfg_smt <= 1'b1; p_cfg_ubat <= 1'b1; p_abs_smt <= abs_valid; load_tel <= 1'b1;
              state <= ST_CONFIG;
            end
          end
          ST_CONFIG:
            if (!p_cfg_smt && !p_cfg_ubat && !p_abs_smt && !load_tel && !cfg_busy) state <= ST_READY;
          ST_READY: if (!night && !ev_busy) begin
            tel_pwr <= 1'b0; state <= ST_WAIT_DRK;
          end
          ST_SAFE: begin
            if (hk_clr) clr_seen <= 1'b1;
            if (clr_seen && !alarm) begin clr_seen <= 1'b0; state <= ST_HK; end
          end
          default: state <= ST_HK;
        endcase
      end
    end
  end
endmodule
