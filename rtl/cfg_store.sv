// cfg_store -- keeps the latest configuration commands from the ground in flash chip 0 and
// plays them back.
//
// Every valid command with content "set" or "set parameter" is written into chip 0, once for
// each system it names (UDAQ, SMT, UBAT). Exception: the day/night setting of the UDAQ is
// state, not configuration, so it is not kept. Each (system, content, sub content)
// combination has its own two-word entry, so a newer command replaces the older one with the
// same meaning. The entry's word address is
//   BASE + 2 * {system[1:0], content is set-parameter, sub[5:0]}   (high half first)
// which uses the first 768 words of the chip (systems 0..2). Incoming commands wait in a
// 4-deep FIFO while earlier entries are written; n_dropped counts commands lost when it is full.
// Play-back: load_udaq scans the UDAQ entries, load_tel those of SMT and UBAT. Each entry
// that holds a command is offered on rp_valid / rp_tgt / rp_cmd until rp_ready is high in
// the same cycle. An entry is taken as holding a command when its header is single or packet
// and its content and sub content agree with its position. Erased flash (all ones) and empty
// flash (all zeros) both fail this test. busy is high from a load request until its scan ends.
// Flash port: m_req is held until m_done. A write costs two programming times (about 14 us
// with the published 7 us per word), a scan two reads per entry.
// Published: chip 0 "will also store the latest configuration parameters from the ground";
// parameters "are designed to be changed by commands". Own choices: which commands count as
// configuration, the entry layout, replay at start-up (UDAQ) and at configuration
// (telescopes). The look-up table that shares chip 0 is not described and not built, and
// entries are overwritten without an erase.
module cfg_store
  import udaq_pkg::*;
#(
  parameter logic [23:0] BASE = 24'h000000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  input  logic [31:0] cmd,
  input  logic        load_udaq,
  input  logic        load_tel,
  output logic        busy,
  output logic        rp_valid,
  output logic [1:0]  rp_tgt,
  output logic [31:0] rp_cmd,
  input  logic        rp_ready,
  output logic        m_req,
  output logic        m_we,
  output logic [23:0] m_addr,
  output logic [15:0] m_wdata,
  input  logic [15:0] m_rdata,
  input  logic        m_done,
  output logic [7:0]  n_stored,
  output logic [7:0]  n_dropped
);
  typedef enum logic [2:0] {C_IDLE, C_WR_HI, C_WR_LO, C_RD_HI, C_RD_LO, C_OFFER} cstate_e;
  cstate_e     st;
  logic        pend_udaq, pend_tel;
  logic [8:0]  idx, idx_end;       // entry index {system, set-parameter, sub}
  logic [2:0]  todo;               // systems still to write for the current command
  logic [31:0] cur;
  logic [15:0] hi, lo;
  logic        f_pop, f_empty, f_full, keep;
  logic [31:0] f_head;
  cmd_t        c;

  assign c    = cmd_t'(cmd);
  // configuration commands: valid header, set or set-parameter content, one of the three systems
  assign keep = cmd_valid && (c.header == HDR_SINGLE || c.header == HDR_PACKET) &&
                (c.content == CC_SET || c.content == CC_SETPAR) && (|c.system[2:0]) &&
                !(c.system[2:0] == 3'b001 && c.content == CC_SET && c.sub == SUB_DAYNIGHT);

  sync_fifo #(.W(32), .DEPTH(4)) u_q (
    .clk, .rst_n, .push(keep), .wdata(cmd), .pop(f_pop), .rdata(f_head), .empty(f_empty),
    .full(f_full));

  function automatic logic [8:0] entry(input logic [1:0] sys, input logic [31:0] w);
    cmd_t k;
    k = cmd_t'(w);
    return {sys, k.content == CC_SETPAR, k.sub};
  endfunction

  // the entry at idx holds a command that belongs there
  function automatic logic holds(input logic [8:0] i, input logic [31:0] w);
    cmd_t k;
    k = cmd_t'(w);
    return (k.header == HDR_SINGLE || k.header == HDR_PACKET) &&
           (k.content == (i[6] ? CC_SETPAR : CC_SET)) && (k.sub == i[5:0]) &&
           !(i[8:7] == 2'd0 && !i[6] && i[5:0] == SUB_DAYNIGHT);
  endfunction

  // lowest system still to write
  function automatic logic [1:0] first_sys(input logic [2:0] t);
    return t[0] ? 2'd0 : t[1] ? 2'd1 : 2'd2;
  endfunction

  assign busy     = pend_udaq || pend_tel || st == C_RD_HI || st == C_RD_LO || st == C_OFFER;
  assign rp_valid = (st == C_OFFER);
  assign rp_tgt   = idx[8:7];
  assign rp_cmd   = {hi, lo};
  assign f_pop    = (st == C_IDLE) && !pend_udaq && !pend_tel && !f_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; pend_udaq <= 1'b0; pend_tel <= 1'b0; idx <= '0; idx_end <= '0;
      todo <= '0; cur <= '0; hi <= '0; lo <= '0; m_req <= 1'b0; m_we <= 1'b0; m_addr <= '0;
      m_wdata <= '0; n_stored <= '0; n_dropped <= '0;
    end else begin
      if (load_udaq) pend_udaq <= 1'b1;
      if (load_tel)  pend_tel  <= 1'b1;
      if (keep && f_full && n_dropped != 8'hFF) n_dropped <= n_dropped + 1'b1;
      case (st)
        C_IDLE:
          if (pend_udaq) begin
            pend_udaq <= 1'b0; idx <= 9'd0; idx_end <= 9'd127;
            m_req <= 1'b1; m_we <= 1'b0; m_addr <= BASE; st <= C_RD_HI;
          end else if (pend_tel) begin
            pend_tel <= 1'b0; idx <= 9'd128; idx_end <= 9'd383;
            m_req <= 1'b1; m_we <= 1'b0; m_addr <= BASE + 24'(9'd128) * 24'd2; st <= C_RD_HI;
          end else if (!f_empty) begin
            cur  <= f_head;
            todo <= f_head[26:24];
            idx  <= entry(first_sys(f_head[26:24]), f_head);
            m_req <= 1'b1; m_we <= 1'b1; m_wdata <= f_head[31:16];
            m_addr <= BASE + 24'(entry(first_sys(f_head[26:24]), f_head)) * 24'd2;
            st <= C_WR_HI;
          end
        C_WR_HI: if (m_done) begin
          m_wdata <= cur[15:0]; m_addr <= m_addr + 24'd1; st <= C_WR_LO;
        end
        C_WR_LO: if (m_done) begin
          logic [2:0] left;
          left = todo & ~(3'b001 << idx[8:7]);
          todo <= left;
          if (n_stored != 8'hFF) n_stored <= n_stored + 1'b1;
          if (left != 3'b000) begin
            idx <= entry(first_sys(left), cur);
            m_wdata <= cur[31:16]; m_addr <= BASE + 24'(entry(first_sys(left), cur)) * 24'd2;
            st <= C_WR_HI;
          end else begin
            m_req <= 1'b0; st <= C_IDLE;
          end
        end
        C_RD_HI: if (m_done) begin
          hi <= m_rdata; m_addr <= m_addr + 24'd1; st <= C_RD_LO;
        end
        C_RD_LO: if (m_done) begin
          m_req <= 1'b0; lo <= m_rdata;
          if (holds(idx, {hi, m_rdata})) st <= C_OFFER;
          else if (idx == idx_end) st <= C_IDLE;
          else begin
            idx <= idx + 9'd1; m_req <= 1'b1; m_addr <= m_addr + 24'd1; st <= C_RD_HI;
          end
        end
        C_OFFER: if (rp_ready) begin
          if (idx == idx_end) st <= C_IDLE;
          else begin
            idx <= idx + 9'd1; m_req <= 1'b1; m_addr <= m_addr + 24'd1; st <= C_RD_HI;
          end
        end
        default: st <= C_IDLE;
      endcase
    end
  end
endmodule
