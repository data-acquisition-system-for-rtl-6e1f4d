// udaq_top -- UDAQ, the data-acquisition FPGA of the UFFO pathfinder.
//
// The UDAQ sits between the satellite and the two telescopes and needs no processor:
//  * biu  -- SPI slave to the satellite Bus-Interface (BI): commands, time, coordinates and
//            external triggers come in; a status block with the monitored values and stored
//            event data go out.
//  * ccu  -- auto-mode sequence, telescope power, command execution and routing; at each
//            configuration the last absolute coordinate returned by the BI goes to the SMT.
//  * ctu  -- coordinate store and real-time clock (synchronised by the satellite's minute pulse).
//  * tau  -- trigger arbiter: UBAT trigger line or external trigger from the BI.
//  * dpu  -- event processing: trigger direction to the telescopes, event header and data
//            into NOR flash, read-back for the BI.
//  * iiu  -- SPI masters to SMT and UBAT; control commands are held during data collection;
//            each telescope's status word is polled every TEL_POLL cycles (0.1 s) while powered.
//  * nor_ctrl -- NOR flash memory control (4 chips x 4M x 16 bits, 7 us per word written).
//  * cfg_store -- the latest configuration commands kept in flash chip 0, played back at
//            start-up (UDAQ parameters) and at each configuration (telescope commands).
//  * mem_arb -- shares the flash controller between dpu (first) and cfg_store.
//  * hku  -- housekeeping: 4 photo, 10 temperature and 2 current values against thresholds.
// Off-chip parts are reached through ports: the BI link and its customized lines
// (bi_type in; bi_attn and bi_drdy out), the SPI links and customized lines of both
// telescopes (trigger, data ready, emergency), the power-board enables, the digitised
// monitor values and the flash bus. Index 0 of the 2-bit telescope vectors is the SMT,
// index 1 the UBAT. bi_attn is high while an alarm, an emergency or a request for the
// absolute coordinate of a UBAT trigger is pending (read the status block); bi_drdy while an
// event waits for transfer. One clock (CLK_HZ) and one active-low asynchronous reset.
// The block structure follows the published architecture; the line assignments, codes and
// handshakes between the blocks are this design's own.
module udaq_top
  import udaq_pkg::*;
#(
  parameter int unsigned CLK_HZ     = 48_000_000,
  parameter int unsigned SPI_HALF   = 14,
  parameter int unsigned QDEPTH     = 8,
  parameter int unsigned WRITE_CYC  = 336,
  parameter int unsigned READ_CYC   = 5,
  parameter int unsigned SLOT_WORDS = 2_621_440,
  parameter int unsigned NSLOTS     = 2,
  parameter int unsigned DRDY_WAIT  = 48_000,
  parameter int unsigned PWR_SETTLE = 48_000,
  parameter int unsigned HK_SCAN    = 4_800,
  parameter int unsigned TEL_POLL   = 4_800_000
) (
  input  logic        clk,
  input  logic        rst_n,
  // Bus-Interface (UDAQ is SPI slave)
  input  logic        bi_sclk,
  input  logic        bi_mosi,
  input  logic        bi_cs_n,
  output logic        bi_miso,
  input  logic [2:0]  bi_type,
  output logic        bi_attn,
  output logic        bi_drdy,
  input  logic        minute_pulse,
  // telescopes (UDAQ is SPI master): [0] SMT, [1] UBAT
  output logic [1:0]  tel_sclk,
  output logic [1:0]  tel_mosi,
  output logic [1:0]  tel_cs_n,
  input  logic [1:0]  tel_miso,
  input  logic        ubat_trig,
  input  logic [1:0]  tel_drdy,
  input  logic [1:0]  tel_emerg,
  // power board
  output logic        smt_pwr_en,
  output logic        ubat_pwr_en,
  // digitised monitor values
  input  logic [9:0]  photo [4],
  input  logic [9:0]  temp  [10],
  input  logic [9:0]  i5,
  input  logic [9:0]  i12,
  // NOR flash
  output logic [3:0]  f_ce_n,
  output logic        f_oe_n,
  output logic        f_we_n,
  output logic [21:0] f_addr,
  output logic [15:0] f_dq_o,
  output logic        f_dq_oe,
  input  logic [15:0] f_dq_i
);
  // BIU
  logic        cmd_valid, time_wr, coord_wr, ext_trig, rd_next;
  logic [31:0] cmd;
  time_t       time_in, now;
  coord_type_e coord_type;
  coord_t      coord, ctu_rd;
  coord_t      last [4];
  logic [7:0]  frame_err;
  status_t     status;
  // CCU
  ccu_state_e  state;
  logic        tel_pwr, night, trig_en, hk_clr;
  logic [1:0]  run_type;
  logic [9:0]  thr_photo, thr_temp, thr_i5, thr_i12;
  logic        q_push, q_tel, q_reject, q_empty, q_full;
  logic [63:0] q_frame;
  logic [7:0]  bad_cmds;
  // HKU
  logic [9:0]  hk_reg [16];
  logic [15:0] alarm_vec;
  logic        alarm, light, hk_done;
  // TAU
  logic        ev_start, ev_src;
  logic [7:0]  n_ubat, n_ext, n_lost;
  // DPU
  logic        collecting, dpu_busy, rel_wr, ev_ready;
  coord_t      rel_coord;
  logic        x_req, x_tel, x_done;
  logic [6:0]  x_nbits;
  logic [63:0] x_tx, x_rx;
  logic        m_req, m_we, m_done, m_busy;
  logic [23:0] m_addr;
  logic [15:0] m_wdata, m_rdata, rd_word, rd_word2;
  // configuration store in flash chip 0, and the flash controller's shared port
  logic        load_udaq, load_tel, cfg_busy, rp_valid, rp_ready;
  logic [1:0]  rp_tgt;
  logic [31:0] rp_cmd;
  logic        c_req, c_we, c_done;
  logic [23:0] c_addr;
  logic [15:0] c_wdata;
  logic        n_req, n_we, n_done;
  logic [23:0] n_addr;
  logic [15:0] n_wdata;
  logic [7:0]  cfg_stored, cfg_dropped;
  logic [31:0] ev_len;
  logic [7:0]  ev_count, ev_lost, n_sent, n_poll;
  logic [15:0] tel_hk [2];
  // status
  logic        abs_req, abs_valid;
  logic [3:0]  rejected;
  logic [1:0]  emerg_s1, emerg;

  biu u_biu (
    .clk, .rst_n, .sclk(bi_sclk), .mosi(bi_mosi), .cs_n(bi_cs_n), .miso(bi_miso),
    .bi_type, .cmd_valid, .cmd, .time_wr, .time_in, .coord_wr, .coord_type, .coord, .ext_trig,
    .frame_err, .status, .hk_vals(hk_reg), .tel_hk, .rd_word, .rd_word2, .rd_next);

  ccu #(.PWR_SETTLE(PWR_SETTLE)) u_ccu (
    .clk, .rst_n, .cmd_valid, .cmd_in(cmd), .hk_done, .light, .alarm, .ev_busy(dpu_busy),
    .abs_valid, .abs_coord(last[CT_UBAT_ABS]), .load_udaq, .load_tel, .cfg_busy, .rp_valid,
    .rp_tgt, .rp_cmd, .rp_ready, .q_full, .time_wr, .time_in, .state, .tel_pwr, .night, .trig_en, .hk_clr,
    .run_type, .thr_photo, .thr_temp, .thr_i5,
    .thr_i12, .q_push, .q_tel, .q_frame, .bad_cmds);

  // the UBAT's relative coordinate is stored like the others
  ctu #(.CLK_HZ(CLK_HZ)) u_ctu (
    .clk, .rst_n,
    .coord_wr(coord_wr | rel_wr), .coord_type(rel_wr ? CT_UBAT_REL : coord_type),
    .coord(rel_wr ? rel_coord : coord), .rd_type(CT_SAT), .rd_ind(8'd0), .rd_coord(ctu_rd),
    .last, .time_wr, .time_in, .minute_pulse, .now, .sec_tick());

  hku #(.SCAN(HK_SCAN)) u_hku (
    .clk, .rst_n, .photo, .temp, .i5, .i12, .thr_photo, .thr_temp, .thr_i5, .thr_i12,
    .smt_on(tel_pwr), .clr(hk_clr), .hk_reg, .alarm_vec, .alarm, .light, .first_scan(hk_done));

  tau u_tau (
    .clk, .rst_n, .ubat_trig, .ext_trig, .enable(trig_en), .busy(dpu_busy), .ev_start, .ev_src,
    .n_ubat, .n_ext, .n_lost);

  dpu #(.SLOT_WORDS(SLOT_WORDS), .NSLOTS(NSLOTS), .DRDY_WAIT(DRDY_WAIT)) u_dpu (
    .clk, .rst_n, .ev_start, .ev_src, .trig_coord(last[CT_BDRG]), .now, .drdy(tel_drdy),
    .collecting, .busy(dpu_busy), .rel_wr, .rel_coord, .x_req, .x_tel, .x_nbits, .x_tx, .x_done,
    .x_rx, .m_req, .m_we, .m_addr, .m_wdata, .m_rdata, .m_done, .ev_ready, .ev_len, .rd_word,
    .rd_word2, .rd_next, .ev_count, .ev_lost);

  iiu #(.HALF(SPI_HALF), .QDEPTH(QDEPTH), .POLL(TEL_POLL)) u_iiu (
    .clk, .rst_n, .hold(collecting), .q_push, .q_tel, .q_frame, .q_reject, .q_empty, .q_full, .x_req,
    .x_tel, .x_nbits, .x_tx, .x_done, .x_rx, .n_sent, .poll_en(tel_pwr),
    .tel_hk, .n_poll, .sclk(tel_sclk), .mosi(tel_mosi),
    .cs_n(tel_cs_n), .miso(tel_miso));

  cfg_store u_cfg (
    .clk, .rst_n, .cmd_valid, .cmd, .load_udaq, .load_tel, .busy(cfg_busy), .rp_valid, .rp_tgt,
    .rp_cmd, .rp_ready, .m_req(c_req), .m_we(c_we), .m_addr(c_addr), .m_wdata(c_wdata),
    .m_rdata, .m_done(c_done), .n_stored(cfg_stored), .n_dropped(cfg_dropped));

  mem_arb u_arb (
    .clk, .rst_n, .a_req(m_req), .a_we(m_we), .a_addr(m_addr), .a_wdata(m_wdata), .a_done(m_done),
    .b_req(c_req), .b_we(c_we), .b_addr(c_addr), .b_wdata(c_wdata), .b_done(c_done),
    .req(n_req), .we(n_we), .addr(n_addr), .wdata(n_wdata), .done(n_done));

  nor_ctrl #(.WRITE_CYC(WRITE_CYC), .READ_CYC(READ_CYC)) u_mc (
    .clk, .rst_n, .req(n_req), .we(n_we), .addr(n_addr), .wdata(n_wdata), .rdata(m_rdata),
    .busy(m_busy), .done(n_done), .f_ce_n, .f_oe_n, .f_we_n, .f_addr, .f_dq_o, .f_dq_oe, .f_dq_i);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      abs_req <= 1'b0; abs_valid <= 1'b0; rejected <= '0; emerg_s1 <= '0; emerg <= '0;
    end else begin
      emerg_s1 <= tel_emerg;
      emerg    <= emerg | emerg_s1;          // latched until reset or clear command
      if (hk_clr) emerg <= emerg_s1;
      if (rel_wr) abs_req <= 1'b1;
      else if (coord_wr && coord_type == CT_UBAT_ABS) abs_req <= 1'b0;
      if (coord_wr && coord_type == CT_UBAT_ABS) abs_valid <= 1'b1;
      if (q_reject && rejected != 4'hF) rejected <= rejected + 1'b1;
    end
  end

  always_comb begin
    status.state     = state;
    status.smt_pwr   = tel_pwr;
    status.ubat_pwr  = tel_pwr;
    status.night     = night;
    status.abs_req   = abs_req;
    status.ev_ready  = ev_ready;
    status.emerg     = emerg;
    status.alarm     = alarm;
    status.rejected  = rejected;
    status.alarm_vec = alarm_vec;
    status.ubat_rel  = last[CT_UBAT_REL];
    status.ev_count  = ev_count;
    status.ev_lost   = ev_lost + n_lost;
    status.ev_len    = ev_len;
  end

  assign smt_pwr_en  = tel_pwr;
  assign ubat_pwr_en = tel_pwr;
  assign bi_attn     = alarm | abs_req | (|emerg);
  assign bi_drdy     = ev_ready;
endmodule
