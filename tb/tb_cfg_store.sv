// tb_cfg_store -- checks the configuration store, through the flash arbiter and controller, with
// a flash model:
// which commands are kept (set and set-parameter commands, once per named system, not the
// UDAQ's day/night), the entry address of each, the latest command replacing an older one,
// the time of one entry (two programming times), a command dropped when the input FIFO is
// full, and the play-back of the UDAQ entries and of the telescope entries in entry order,
// with a consumer that is ready only some of the time. Erased entries (all ones) are skipped.
// The expected contents come from a reference table indexed by entry number.
module tb_cfg_store;
  import udaq_pkg::*;
  localparam int WC = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid = 0, load_udaq = 0, load_tel = 0, rp_ready = 0;
  logic [31:0] cmd = 0;
  logic busy, rp_valid; logic [1:0] rp_tgt; logic [31:0] rp_cmd;
  logic m_req, m_we, m_done, m_busy; logic [23:0] m_addr; logic [15:0] m_wdata, m_rdata;
  logic [7:0] n_stored, n_dropped;
  logic [3:0] ce_n; logic oe_n, we_n, dq_oe; logic [21:0] fa; logic [15:0] dq_o, dq_i;

  cfg_store dut (.clk, .rst_n, .cmd_valid, .cmd, .load_udaq, .load_tel, .busy, .rp_valid,
    .rp_tgt, .rp_cmd, .rp_ready, .m_req, .m_we, .m_addr, .m_wdata, .m_rdata, .m_done,
    .n_stored, .n_dropped);
  // through the flash arbiter, with its event-processing port idle
  logic n_req, n_we, n_done; logic [23:0] n_addr; logic [15:0] n_wdata; logic a_done;
  mem_arb u_arb (.clk, .rst_n, .a_req(1'b0), .a_we(1'b0), .a_addr(24'd0), .a_wdata(16'd0), .a_done,
    .b_req(m_req), .b_we(m_we), .b_addr(m_addr), .b_wdata(m_wdata), .b_done(m_done),
    .req(n_req), .we(n_we), .addr(n_addr), .wdata(n_wdata), .done(n_done));
  nor_ctrl #(.WRITE_CYC(WC), .READ_CYC(5)) u_mc (.clk, .rst_n, .req(n_req),
    .we(n_we), .addr(n_addr), .wdata(n_wdata), .rdata(m_rdata), .busy(m_busy), .done(n_done),
    .f_ce_n(ce_n), .f_oe_n(oe_n), .f_we_n(we_n), .f_addr(fa), .f_dq_o(dq_o), .f_dq_oe(dq_oe),
    .f_dq_i(dq_i));
  nor_flash_model u_flash (.ce_n, .oe_n, .we_n, .addr(fa), .dq_in(dq_o), .dq_out(dq_i));

  logic [31:0] ref_tab [int];     // entry number -> command expected there
  logic [33:0] got [$];           // {target, command} offered and taken

  always @(posedge clk) if (rst_n && rp_valid && rp_ready) got.push_back({rp_tgt, rp_cmd});
  always @(posedge clk) rp_ready <= ($urandom % 3) == 0;

  task automatic chk(input logic c, input string m); checks++; if (!c) begin failures++; $display("FAIL %s", m); end endtask
  function automatic logic [31:0] mk(input logic [2:0] h, input logic [4:0] sys, input logic [5:0] cc,
                                     input logic [5:0] sub, input logic [9:0] v);
    return {h, sys, 2'd2, cc, sub, v};
  endfunction
  // reference: the entry of each named system
  function automatic void note(input logic [31:0] c);
    for (int t = 0; t < 3; t++) if (c[24 + t]) ref_tab[t * 128 + (c[21:16] == 6'(CC_SETPAR) ? 64 : 0) + int'(c[15:10])] = c;
  endfunction
  task automatic send(input logic [31:0] c);
    @(posedge clk); cmd_valid <= 1; cmd <= c; @(posedge clk); cmd_valid <= 0;
  endtask
  // idle: no request and not loading for 4 cycles in a row (a waiting command starts sooner)
  task automatic wait_idle; int n = 0, q = 0;
    do begin @(posedge clk); n++; q = (m_req || busy) ? 0 : q + 1; end while (q < 4 && n < 100000);
  endtask
  // expected play-back of entries lo..hi, in entry order
  task automatic expect_replay(input int lo, input int hi, input string m);
    int k = 0;
    for (int i = lo; i <= hi; i++) if (ref_tab.exists(i)) begin
      chk(k < got.size() && got[k] == {2'(i / 128), ref_tab[i]}, $sformatf("%s: entry %0d", m, i));
      k++;
    end
    chk(got.size() == k, $sformatf("%s: %0d offered, %0d expected", m, got.size(), k));
  endtask

  initial begin
    logic [31:0] c; int t0, t1;
    repeat (3) @(posedge clk); rst_n = 1; repeat (3) @(posedge clk);
    // timing of one entry
    c = mk(3'd1, 5'b00001, CC_SETPAR, SUB_THR_TEMP, 10'd612);
    t0 = int'($time / 10); send(c); note(c);
    while (n_stored == 0) @(posedge clk);
    t1 = int'($time / 10);
    chk(t1 - t0 >= 2 * WC && t1 - t0 <= 2 * WC + 10, $sformatf("one entry in %0d cycles", t1 - t0));
    chk(u_flash.peek(2 * 66) == c[31:16] && u_flash.peek(2 * 66 + 1) == c[15:0], "entry address");
    // kept and not kept
    send(mk(3'd1, 5'b00001, CC_SET, SUB_DAYNIGHT, 10'd1));          // day/night: not kept
    c = mk(3'd2, 5'b00110, CC_SET, 6'd3, 10'd7); send(c); note(c);   // SMT and UBAT
    send(mk(3'd7, 5'b00010, CC_SETPAR, 6'd4, 10'd1));                // bad header
    send(mk(3'd1, 5'b00010, CC_STATE, 6'd1, 10'd1));                 // state: not kept
    wait_idle;
    c = mk(3'd1, 5'b00010, CC_SETPAR, 6'd5, 10'd1); send(c); note(c);
    c = mk(3'd1, 5'b00010, CC_SETPAR, 6'd5, 10'd2); send(c); note(c); // replaces the one before
    c = mk(3'd1, 5'b00001, CC_SET, SUB_RUNTYPE, 10'd1); send(c); note(c);
    wait_idle;
    chk(n_stored == 6, $sformatf("entries written %0d", n_stored));
    chk(u_flash.peek(2 * (128 + 64 + 5) + 1) == 16'(mk(3'd1, 5'b00010, CC_SETPAR, 6'd5, 10'd2)),
        "latest command kept");
    chk(u_flash.peek(2 * (256 + 3)) == 16'(mk(3'd2, 5'b00110, CC_SET, 6'd3, 10'd7) >> 16),
        "UBAT entry of a command for two systems");
    // six commands in six cycles: one is popped, four wait, the sixth is dropped
    @(posedge clk);
    for (int i = 0; i < 6; i++) begin
      c = mk(3'd1, 5'b00100, CC_SETPAR, 6'(10 + i), 10'(i));
      cmd_valid <= 1; cmd <= c; if (i < 5) note(c); @(posedge clk);
    end
    cmd_valid <= 0;
    wait_idle;
    chk(n_dropped == 1 && n_stored == 11, $sformatf("dropped %0d stored %0d", n_dropped, n_stored));
    // an erased entry is skipped
    u_flash.mem[2 * 7] = 16'hFFFF; u_flash.mem[2 * 7 + 1] = 16'hFFFF;
    // play-back
    got.delete();
    @(posedge clk); load_udaq <= 1; @(posedge clk); load_udaq <= 0;
    @(posedge clk); chk(busy, "busy while loading");
    wait_idle;
    expect_replay(0, 127, "UDAQ entries");
    got.delete();
    @(posedge clk); load_tel <= 1; @(posedge clk); load_tel <= 0;
    wait_idle;
    expect_replay(128, 383, "telescope entries");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
