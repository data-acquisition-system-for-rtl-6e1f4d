// iiu -- Internal Interface Unit: the UDAQ's SPI links to the two telescopes.
//
// The UDAQ is the SPI master of the SMT and of the UBAT; one spi_master drives each link and
// one transaction runs at a time. Two kinds of work arrive:
//  * control commands (64-bit frames for one telescope, q_push) go into a FIFO of QDEPTH
//    frames. While hold is high -- the UDAQ is collecting event data -- the FIFO is not served:
//    commands are held and go out, in order, once the collection is over. A command pushed
//    into a full FIFO is rejected (q_reject pulses).
//  * event-processing transfers (x_req with x_tel, x_nbits, x_tx) are served first, also
//    during hold. x_req is a level held until x_done pulses; x_rx then holds the received
//    bits, right aligned.
//  * housekeeping polls: while poll_en is high (telescopes powered), every POLL cycles one
//    32-bit TF_RD_HK frame is sent, to SMT and UBAT in turn, and the 16-bit status word the
//    telescope answers is kept in tel_hk[tel]. A due poll waits until no transfer is asked for,
//    no collection is running and the FIFO is empty, so it never delays event data or commands
//    already waiting.
// n_sent counts the control commands sent, n_poll the polls. The FIFO depth, the poll frame and
// the poll period are this design's choices; holding and resuming control signals around data
// collection, and keeping each telescope's monitored information in the UDAQ, follow the
// mission description.
module iiu
  import udaq_pkg::*;
#(
  parameter int unsigned HALF   = 14,
  parameter int unsigned QDEPTH = 8,
  parameter int unsigned POLL   = 48_000_000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        hold,
  input  logic        q_push,
  input  logic        q_tel,
  input  logic [63:0] q_frame,
  output logic        q_reject,
  output logic        q_empty,
  output logic        q_full,
  input  logic        x_req,
  input  logic        x_tel,
  input  logic [6:0]  x_nbits,
  input  logic [63:0] x_tx,
  output logic        x_done,
  output logic [63:0] x_rx,
  output logic [7:0]  n_sent,
  input  logic        poll_en,
  output logic [15:0] tel_hk [2],
  output logic [7:0]  n_poll,
  // SPI to SMT (index 0) and UBAT (index 1)
  output logic [1:0]  sclk,
  output logic [1:0]  mosi,
  output logic [1:0]  cs_n,
  input  logic [1:0]  miso
);
  typedef enum logic [1:0] {I_IDLE, I_RUN, I_GAP} istate_e;
  istate_e st;
  localparam int POLL_W = $clog2(POLL + 1);
  logic        cur_direct, cur_poll, cur_tel;
  logic        poll_due, poll_tel;
  logic [POLL_W-1:0] poll_cnt;
  logic [64:0] head;
  logic        q_pop;
  logic [1:0]  m_start, m_busy, m_done;
  logic [63:0] m_rx [2];
  logic [6:0]  m_nbits;
  logic [63:0] m_tx;

  sync_fifo #(.W(65), .DEPTH(QDEPTH)) u_q (
    .clk, .rst_n, .push(q_push), .wdata({q_tel, q_frame}), .pop(q_pop),
    .rdata(head), .empty(q_empty), .full(q_full));

  assign q_reject = q_push & q_full;

  for (genvar t = 0; t < 2; t++) begin : g_m
    spi_master #(.HALF(HALF)) u_m (
      .clk, .rst_n, .start(m_start[t]), .nbits(m_nbits), .tx_data(m_tx), .rx_data(m_rx[t]),
      .busy(m_busy[t]), .done(m_done[t]), .sclk(sclk[t]), .mosi(mosi[t]), .cs_n(cs_n[t]),
      .miso(miso[t]));
  end

  wire take_x = (st == I_IDLE) && x_req;
  wire take_q = (st == I_IDLE) && !x_req && !hold && !q_empty;
  wire take_p = (st == I_IDLE) && !x_req && !hold && q_empty && poll_due && poll_en;
  assign q_pop = take_q;

  always_comb begin
    m_start = '0;
    m_nbits = take_x ? x_nbits : take_p ? 7'd32 : 7'd64;
    m_tx    = take_x ? x_tx : take_p ? {TF_RD_HK, 56'h0} : head[63:0];
    if (take_x)      m_start[x_tel]    = 1'b1;
    else if (take_q) m_start[head[64]] = 1'b1;
    else if (take_p) m_start[poll_tel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= I_IDLE; cur_direct <= 1'b0; cur_poll <= 1'b0; cur_tel <= 1'b0; x_done <= 1'b0;
      x_rx <= '0; n_sent <= '0; n_poll <= '0; tel_hk <= '{default: '0}; poll_tel <= 1'b0;
      poll_due <= 1'b0; poll_cnt <= '0;
    end else begin
      x_done <= 1'b0;
      if (!poll_en) begin
        poll_cnt <= '0; poll_due <= 1'b0;
      end else if (poll_cnt == POLL_W'(POLL - 1)) begin
        poll_cnt <= '0; poll_due <= 1'b1;
      end else poll_cnt <= poll_cnt + 1'b1;
      case (st)
        I_IDLE: if (take_x) begin
          cur_direct <= 1'b1; cur_poll <= 1'b0; cur_tel <= x_tel; st <= I_RUN;
        end else if (take_q) begin
          cur_direct <= 1'b0; cur_poll <= 1'b0; cur_tel <= head[64]; st <= I_RUN;
        end else if (take_p) begin
          cur_direct <= 1'b0; cur_poll <= 1'b1; cur_tel <= poll_tel; st <= I_RUN;
          poll_due <= 1'b0; poll_tel <= !poll_tel;
        end
        I_RUN: if (m_done[cur_tel]) begin
          if (cur_direct) begin
            x_done <= 1'b1; x_rx <= m_rx[cur_tel];
          end else if (cur_poll) begin
            tel_hk[cur_tel] <= m_rx[cur_tel][15:0];
            if (n_poll != 8'hFF) n_poll <= n_poll + 1'b1;
          end else begin
            n_sent <= n_sent + 1'b1;
          end
          st <= I_GAP;
        end
        default: st <= I_IDLE;   // I_GAP: one idle cycle so a requester can drop x_req
      endcase
    end
  end

  // the two links never run at the same time
  a_one_link: assert property (@(posedge clk) disable iff (!rst_n) !(m_busy[0] && m_busy[1]));
endmodule
