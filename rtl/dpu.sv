// dpu -- Data Processing Unit: event processing and event storage in NOR flash.
//
// An event starts with ev_start from the trigger arbiter (ev_src 0: UBAT, 1: external).
//  1. An event slot is taken. Flash chip 0 is kept for look-up tables and configuration;
//     chips 1-3 hold NSLOTS slots of SLOT_WORDS 16-bit words from DATA_BASE on (2 slots of
//     5 Mbyte by default, the published event size and count). With no free slot the trigger
//     is counted in ev_lost.
//  2. Trigger direction: for a UBAT trigger the UBAT's relative coordinate is read (64-bit
//     TF_RD_COORD transaction, answer in the low 48 bits) and given out on rel_wr/rel_coord so
//     that the Bus-Interface can compute its absolute coordinate. For an external trigger the
//     BDRG coordinate that came with it is used. The direction is sent to the SMT (TF_COORD
//     frame); an external one also to the UBAT.
//  3. A 7-word event header is written: {4'hE, 3'b0, source, event number}, the time (3 words)
//     and the trigger coordinate (3 words).
//  4. Data words are collected from the SMT, then from the UBAT: each telescope raises its
//     data-ready line (waited for at most DRDY_WAIT cycles) and keeps it high while it has
//     words; each word is fetched with a 32-bit TF_RD_DATA transaction (the low 16 received
//     bits, serial-in/parallel-out) and written to flash (7 us per word). A full slot ends the
//     event early.
//  5. The slot becomes ready with its length; events are handed out oldest first.
// collecting is high during steps 2-4; the control path holds its commands meanwhile.
// Read side (transfer to the Bus-Interface, only while not collecting): two words of the
// oldest ready event are prefetched into rd_word/rd_word2; rd_next says the head word has been
// sent. After its last word the slot is free again.
// Published: trigger sources, serial-to-16-bit conversion, 7 us flash writes, chip 0 use,
// event size and two stored events. Own choices: header content, the order SMT then UBAT,
// the data-ready handshake, the telescope frame codes and the timeout.
module dpu
  import udaq_pkg::*;
#(
  parameter int unsigned SLOT_WORDS = 2_621_440,   // 5 Mbyte
  parameter int unsigned NSLOTS     = 2,
  parameter logic [23:0] DATA_BASE  = 24'h40_0000, // first word of flash chip 1
  parameter int unsigned DRDY_WAIT  = 48_000       // 1 ms at 48 MHz
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ev_start,
  input  logic        ev_src,
  input  coord_t      trig_coord,
  input  time_t       now,
  input  logic [1:0]  drdy,          // data ready: [0] SMT, [1] UBAT
  output logic        collecting,
  output logic        busy,
  output logic        rel_wr,
  output coord_t      rel_coord,
  // event transfers through the internal interface unit
  output logic        x_req,
  output logic        x_tel,
  output logic [6:0]  x_nbits,
  output logic [63:0] x_tx,
  input  logic        x_done,
  input  logic [63:0] x_rx,
  // memory control
  output logic        m_req,
  output logic        m_we,
  output logic [23:0] m_addr,
  output logic [15:0] m_wdata,
  input  logic [15:0] m_rdata,
  input  logic        m_done,
  // transfer of stored events
  output logic        ev_ready,
  output logic [31:0] ev_len,
  output logic [15:0] rd_word,
  output logic [15:0] rd_word2,
  input  logic        rd_next,
  output logic [7:0]  ev_count,
  output logic [7:0]  ev_lost
);
  localparam int unsigned SW = $clog2(NSLOTS) > 0 ? $clog2(NSLOTS) : 1;

  typedef enum logic [3:0] {
    D_IDLE, D_PREF, D_RDCOORD, D_SEND_SMT, D_SEND_UBAT, D_HDR, D_WAIT, D_READ, D_WRITE, D_END
  } dstate_e;
  typedef enum logic [1:0] {SL_FREE, SL_FILL, SL_READY} slot_e;

  dstate_e     st;
  slot_e       slot_st  [NSLOTS];
  logic [31:0] slot_len [NSLOTS];
  logic [SW-1:0] wr_slot, rd_slot;
  logic        pend, pend_src, src;
  coord_t      coord;
  time_t       t_ev;
  logic [2:0]  hidx;
  logic [31:0] wcnt;
  logic        tel;
  logic [31:0] tmr;
  // read side
  logic [31:0] f_idx, s_idx;
  logic [1:0]  pf_cnt;
  logic [15:0] pf [2];

  function automatic logic [23:0] slot_base(input logic [SW-1:0] s);
    return DATA_BASE + 24'(s) * 24'(SLOT_WORDS);
  endfunction

  function automatic logic [SW-1:0] nxt(input logic [SW-1:0] s);
    return (32'(s) == NSLOTS - 1) ? '0 : s + 1'b1;
  endfunction

  logic [15:0] hdr_word;
  always_comb begin
    case (hidx)
      3'd0:    hdr_word = {4'hE, 3'b000, src, ev_count};
      3'd1:    hdr_word = {t_ev.year, t_ev.month};
      3'd2:    hdr_word = {t_ev.day, t_ev.hour};
      3'd3:    hdr_word = {t_ev.minute, t_ev.second};
      3'd4:    hdr_word = coord[47:32];
      3'd5:    hdr_word = coord[31:16];
      default: hdr_word = coord[15:0];
    endcase
  end

  wire in_event = (st == D_RDCOORD) || (st == D_SEND_SMT) || (st == D_SEND_UBAT) ||
                  (st == D_HDR) || (st == D_WAIT) || (st == D_READ) || (st == D_WRITE) ||
                  (st == D_END);
  assign collecting = in_event;
  assign busy       = in_event || pend;
  assign ev_ready   = (slot_st[rd_slot] == SL_READY) && !in_event;
  assign ev_len     = slot_len[rd_slot];
  assign rd_word    = pf[0];
  assign rd_word2   = pf[1];

  // the data-ready lines come from the telescopes' clock domain
  logic [1:0] drdy_s1, drdy_s;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin drdy_s1 <= '0; drdy_s <= '0; end
    else begin drdy_s1 <= drdy; drdy_s <= drdy_s1; end
  end

  wire pref_ok = (slot_st[rd_slot] == SL_READY) && (pf_cnt != 2'd2) &&
                 (f_idx < slot_len[rd_slot]);
  wire take_rd = rd_next && ev_ready && (pf_cnt != 2'd0);
  wire last_rd = take_rd && (s_idx + 1 == slot_len[rd_slot]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= D_IDLE; wr_slot <= '0; rd_slot <= '0; pend <= 1'b0; pend_src <= 1'b0; src <= 1'b0;
      coord <= '0; t_ev <= '0; hidx <= '0; wcnt <= '0; tel <= 1'b0; tmr <= '0;
      rel_wr <= 1'b0; rel_coord <= '0; x_req <= 1'b0; x_tel <= 1'b0; x_nbits <= '0; x_tx <= '0;
      m_req <= 1'b0; m_we <= 1'b0; m_addr <= '0; m_wdata <= '0;
      f_idx <= '0; s_idx <= '0; pf_cnt <= '0; pf[0] <= '0; pf[1] <= '0;
      ev_count <= '0; ev_lost <= '0;
      for (int i = 0; i < NSLOTS; i++) begin slot_st[i] <= SL_FREE; slot_len[i] <= '0; end
    end else begin
      rel_wr <= 1'b0;
      m_req  <= 1'b0;
      if (ev_start) begin pend <= 1'b1; pend_src <= ev_src; end

      // ---- read side: consume the head word
      if (take_rd) begin
        pf[0]  <= pf[1];
        pf_cnt <= pf_cnt - 1'b1;
        s_idx  <= s_idx + 1;
        if (last_rd) begin
          slot_st[rd_slot] <= SL_FREE;
          rd_slot <= nxt(rd_slot);
          s_idx <= '0; f_idx <= '0; pf_cnt <= '0;
        end
      end

      case (st)
        D_IDLE: begin
          if (pend) begin
            pend <= 1'b0;
            if (slot_st[wr_slot] == SL_FREE) begin
              slot_st[wr_slot] <= SL_FILL;
              src <= pend_src; t_ev <= now; wcnt <= '0; hidx <= '0;
              if (!pend_src) begin
                x_req <= 1'b1; x_tel <= 1'(TEL_UBAT); x_nbits <= 7'd64;
                x_tx <= {TF_RD_COORD, 56'h0};
                st <= D_RDCOORD;
              end else begin
                coord <= trig_coord;
                x_req <= 1'b1; x_tel <= 1'(TEL_SMT); x_nbits <= 7'd64;
                x_tx <= {TF_COORD, 8'h00, trig_coord};
                st <= D_SEND_SMT;
              end
            end else begin
              ev_lost <= ev_lost + 1'b1;
            end
          end else if (pref_ok && !take_rd) begin
            m_req <= 1'b1; m_we <= 1'b0; m_addr <= slot_base(rd_slot) + f_idx[23:0];
            st <= D_PREF;
          end
        end
        D_PREF: if (m_done) begin
          // a read of the head slot; it cannot be freed while a word of it is fetched
          if (take_rd) pf[1'(pf_cnt - 2'd1)] <= m_rdata;
          else         pf[pf_cnt[0]]     <= m_rdata;
          pf_cnt <= take_rd ? pf_cnt : pf_cnt + 1'b1;
          f_idx  <= f_idx + 1;
          st <= D_IDLE;
        end
        D_RDCOORD: if (x_done) begin
          x_req <= 1'b0;
          coord <= coord_t'(x_rx[47:0]);
          rel_coord <= coord_t'(x_rx[47:0]);
          rel_wr <= 1'b1;
          st <= D_SEND_SMT;
        end
        D_SEND_SMT: begin
          if (!x_req && !x_done) begin
            x_req <= 1'b1; x_tel <= 1'(TEL_SMT); x_nbits <= 7'd64; x_tx <= {TF_COORD, 8'h00, coord};
          end
          if (x_req && x_done) begin
            x_req <= 1'b0;
            st <= src ? D_SEND_UBAT : D_HDR;
          end
        end
        D_SEND_UBAT: begin
          if (!x_req && !x_done) begin
            x_req <= 1'b1; x_tel <= 1'(TEL_UBAT); x_nbits <= 7'd64; x_tx <= {TF_COORD, 8'h00, coord};
          end
          if (x_req && x_done) begin
            x_req <= 1'b0;
            st <= D_HDR;
          end
        end
        D_HDR: begin
          if (!m_req && !m_done) begin
            m_req <= 1'b1; m_we <= 1'b1; m_wdata <= hdr_word;
            m_addr <= slot_base(wr_slot) + wcnt[23:0];
            st <= D_WRITE;
          end
        end
        D_WAIT: begin
          tmr <= tmr + 1;
          if (drdy_s[tel]) begin
            x_req <= 1'b1; x_tel <= tel; x_nbits <= 7'd32; x_tx <= {TF_RD_DATA, 56'h0};
            st <= D_READ;
          end else if (tmr >= DRDY_WAIT - 1) begin
            tmr <= '0;
            if (tel == 1'(TEL_SMT)) tel <= 1'(TEL_UBAT);
            else                    st  <= D_END;
          end
        end
        D_READ: if (x_done) begin
          x_req <= 1'b0;
          m_req <= 1'b1; m_we <= 1'b1; m_wdata <= x_rx[15:0];
          m_addr <= slot_base(wr_slot) + wcnt[23:0];
          st <= D_WRITE;
        end
        D_WRITE: if (m_done) begin
          wcnt <= wcnt + 1;
          if (wcnt + 1 >= SLOT_WORDS) st <= D_END;
          else if (hidx != 3'd7) begin
            hidx <= hidx + 1'b1;
            if (hidx == 3'd6) begin
              hidx <= 3'd7; tel <= 1'(TEL_SMT); tmr <= '0; st <= D_WAIT;
            end else st <= D_HDR;
          end else if (drdy_s[tel]) begin
            x_req <= 1'b1; x_tel <= tel; x_nbits <= 7'd32; x_tx <= {TF_RD_DATA, 56'h0};
            st <= D_READ;
          end else if (tel == 1'(TEL_SMT)) begin
            tel <= 1'(TEL_UBAT); tmr <= '0; st <= D_WAIT;
          end else st <= D_END;
        end
        D_END: begin
          slot_st[wr_slot]  <= SL_READY;
          slot_len[wr_slot] <= wcnt;
          wr_slot  <= nxt(wr_slot);
          ev_count <= ev_count + 1'b1;
          st <= D_IDLE;
        end
        default: st <= D_IDLE;
      endcase
    end
  end
endmodule
