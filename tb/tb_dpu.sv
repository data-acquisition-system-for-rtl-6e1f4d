// tb_dpu -- checks event processing with behavioural stand-ins for the telescope links and the
// flash (16-word slots): UBAT trigger (coordinate read, direction to SMT, header, SMT then UBAT
// data), external trigger (direction to both, no SMT data within the wait time), a trigger
// with both slots full (lost), read-out of both events in order with slot release, and an
// event longer than a slot (cut at the slot size).
module tb_dpu;
  import udaq_pkg::*;
  localparam int SW = 16;
  localparam logic [23:0] BASE = 24'h40_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ev_start = 0, ev_src = 0, collecting, busy, rel_wr, x_req, x_tel, x_done = 0;
  coord_t trig_coord = 48'h03_0102_0304_05, rel_coord;
  time_t now = '{8'd24, 8'd7, 8'd14, 8'd3, 8'd25, 8'd46};
  logic [1:0] drdy = 0;
  logic [6:0] x_nbits; logic [63:0] x_tx, x_rx = 0;
  logic m_req, m_we, m_done = 0; logic [23:0] m_addr; logic [15:0] m_wdata, m_rdata = 0;
  logic ev_ready, rd_next = 0; logic [31:0] ev_len; logic [15:0] rd_word, rd_word2;
  logic [7:0] ev_count, ev_lost;
  dpu #(.SLOT_WORDS(SW), .NSLOTS(2), .DATA_BASE(BASE), .DRDY_WAIT(50)) dut (.clk, .rst_n,
    .ev_start, .ev_src, .trig_coord, .now, .drdy, .collecting, .busy, .rel_wr, .rel_coord,
    .x_req, .x_tel, .x_nbits, .x_tx, .x_done, .x_rx, .m_req, .m_we, .m_addr, .m_wdata, .m_rdata,
    .m_done, .ev_ready, .ev_len, .rd_word, .rd_word2, .rd_next, .ev_count, .ev_lost);

  coord_t ubat_coord = 48'h02_AAAA_5555_01;
  int n_left [2], n_rd [2], n_coord [2];
  logic [47:0] got_coord [2];
  logic [15:0] mem [int];

  // telescope-link stand-in
  initial begin
    n_left = '{0, 0}; n_rd = '{0, 0}; n_coord = '{0, 0};
    forever begin
      @(posedge clk);
      if (x_req && !x_done) begin
        repeat (5) @(posedge clk);
        case (x_tx[63:56])
          TF_RD_COORD: x_rx <= {16'h0, ubat_coord};
          TF_RD_DATA: begin
            x_rx <= {48'h0, x_tel ? 4'hB : 4'h5, 12'(n_rd[x_tel])};
            n_rd[x_tel]++; n_left[x_tel]--;
            if (n_left[x_tel] == 0) drdy[x_tel] <= 0;
          end
          TF_COORD: begin n_coord[x_tel]++; got_coord[x_tel] = x_tx[47:0]; end
          default: ;
        endcase
        x_done <= 1; @(posedge clk); x_done <= 0; @(posedge clk);
      end
    end
  end
  // flash stand-in
  initial forever begin
    @(posedge clk);
    if (m_req) begin
      if (m_we) begin mem[int'(m_addr)] = m_wdata; repeat (8) @(posedge clk); end
      else begin m_rdata <= mem.exists(int'(m_addr)) ? mem[int'(m_addr)] : 16'hDEAD; repeat (2) @(posedge clk); end
      m_done <= 1; @(posedge clk); m_done <= 0;
    end
  end

  task automatic give(input int t, input int n); n_left[t] = n; n_rd[t] = 0; drdy[t] = (n > 0); endtask
  task automatic trigger(input logic s);
    @(posedge clk); ev_start <= 1; ev_src <= s; @(posedge clk); ev_start <= 0;
  endtask
  task automatic wait_idle; do @(posedge clk); while (busy); endtask
  task automatic chk(input logic c, input string m); checks++; if (!c) begin failures++; $display("FAIL %s", m); end endtask

  function automatic logic [15:0] expw(input int slot, input int i);
    return mem.exists(int'(BASE) + slot * SW + i) ? mem[int'(BASE) + slot * SW + i] : 16'hBAD0;
  endfunction

  task automatic read_event(input int slot, input int len);
    for (int i = 0; i < len; i++) begin
      chk(ev_ready && rd_word == expw(slot, i), $sformatf("read slot %0d word %0d: %h vs %h", slot, i, rd_word, expw(slot, i)));
      @(posedge clk); rd_next <= 1; @(posedge clk); rd_next <= 0;
      repeat (12) @(posedge clk);
    end
  endtask

  int coll_cycles = 0;
  always @(posedge clk) if (collecting) coll_cycles++;

  initial begin
    repeat (3) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    // 1: UBAT trigger, 3 SMT words, 2 UBAT words
    give(0, 3); give(1, 2);
    trigger(0);
    repeat (3) @(posedge clk);
    chk(collecting && busy, "collecting");
    wait_idle;
    chk(rel_coord == ubat_coord, "relative coordinate");
    chk(n_coord[0] == 1 && got_coord[0] == ubat_coord && n_coord[1] == 0, "direction to SMT only");
    chk(ev_ready && ev_len == 12, $sformatf("event 1 length %0d", ev_len));
    chk(expw(0, 0) == 16'hE000, $sformatf("header0 %h", expw(0, 0)));
    chk(expw(0, 1) == 16'h1807 && expw(0, 2) == 16'h0E03 && expw(0, 3) == 16'h192E, "header time");
    chk(expw(0, 4) == 16'h02AA && expw(0, 5) == 16'hAA55 && expw(0, 6) == 16'h5501, "header coord");
    chk(expw(0, 7) == 16'h5000 && expw(0, 9) == 16'h5002 && expw(0, 10) == 16'hB000 && expw(0, 11) == 16'hB001, "data words");
    // 2: external trigger, no SMT data, 1 UBAT word
    give(1, 1);
    trigger(1); wait_idle;
    chk(n_coord[0] == 2 && n_coord[1] == 1 && got_coord[1] == trig_coord, "direction to both");
    chk(expw(1, 0) == 16'hE101 && expw(1, 4) == 16'h0301, $sformatf("ext header %h", expw(1, 0)));
    chk(expw(1, 7) == 16'hB000, "ext data");
    chk(ev_count == 2, "count");
    // 3: no free slot
    trigger(0); repeat (10) @(posedge clk);
    chk(ev_lost == 1 && !busy, "lost when full");
    // read out both events
    read_event(0, 12);
    chk(ev_ready && ev_len == 8, $sformatf("second event ready %0d", ev_len));
    read_event(1, 8);
    chk(!ev_ready, "all read");
    // 4: event longer than a slot
    give(0, 20); give(1, 0);
    trigger(0); wait_idle;
    chk(ev_ready && ev_len == SW, $sformatf("cut length %0d", ev_len));
    chk(expw(0, 15) == 16'h5008, $sformatf("last word %h", expw(0, 15)));
    chk(coll_cycles > 0, "collect cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (30000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
