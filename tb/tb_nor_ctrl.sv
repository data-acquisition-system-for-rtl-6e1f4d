// tb_nor_ctrl -- checks the flash memory control at its default timing against the flash
// model: each 16-bit write occupies the flash for 336 cycles (7 us at 48 MHz), each read for
// 5 cycles (> 90 ns); seen from the requester, plus one cycle to take the request and one for
// done;
// the chip select follows address bits 23:22, and words read back as written.
module tb_nor_ctrl;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic req = 0, we = 0, busy, done;
  logic [23:0] addr = 0; logic [15:0] wdata = 0, rdata;
  logic [3:0] ce_n; logic oe_n, we_n, dq_oe; logic [21:0] fa; logic [15:0] dq_o, dq_i;
  nor_ctrl dut (.clk, .rst_n, .req, .we, .addr, .wdata, .rdata, .busy, .done, .f_ce_n(ce_n),
    .f_oe_n(oe_n), .f_we_n(we_n), .f_addr(fa), .f_dq_o(dq_o), .f_dq_oe(dq_oe), .f_dq_i(dq_i));
  nor_flash_model u_f (.ce_n, .oe_n, .we_n, .addr(fa), .dq_in(dq_o), .dq_out(dq_i));

  logic [3:0] ce_seen;
  always @(posedge clk) if (rst_n && ce_n != 4'hF) ce_seen = ce_n;

  task automatic op(input logic w, input logic [23:0] a, input logic [15:0] d, output int cyc);
    @(posedge clk); req <= 1; we <= w; addr <= a; wdata <= d;
    @(posedge clk); req <= 0; cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
  endtask

  initial begin
    int cyc; logic [23:0] a [16]; logic [15:0] d [16];
    repeat (3) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    for (int i = 0; i < 16; i++) begin
      a[i] = {2'(i % 4), 22'($urandom)}; d[i] = 16'($urandom);
      op(1, a[i], d[i], cyc);
      checks++; if (cyc != 336 + 2) begin failures++; $display("FAIL write cycles %0d", cyc); end
      checks++; if (ce_seen != ~(4'b1 << (i % 4))) begin failures++; $display("FAIL chip %b", ce_seen); end
    end
    for (int i = 0; i < 16; i++) begin
      op(0, a[i], 0, cyc);
      checks++; if (cyc != 5 + 2) begin failures++; $display("FAIL read cycles %0d", cyc); end
      checks++; if (rdata != d[i]) begin failures++; $display("FAIL data %h %h", rdata, d[i]); end
    end
    checks++; if (u_f.n_writes != 16) begin failures++; $display("FAIL writes %0d", u_f.n_writes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
