// tb_cmd_decode -- checks the field split of the 32-bit command against the published bit
// positions (31:29, 28:24, 23:22, 21:16, 15:10, 9:0), the routing by applicable system and
// the 64-bit telescope frames (32-bit indicator in front of the unchanged command).
module tb_cmd_decode;
  import udaq_pkg::*;
  int checks = 0, failures = 0;
  logic [31:0] c; logic [15:0] seq;
  cmd_t cmd; logic valid, tu, ts, tb; logic [63:0] fs, fb;
  cmd_decode dut (.cmd_in(c), .seq, .cmd, .valid, .to_udaq(tu), .to_smt(ts), .to_ubat(tb),
                  .smt_frame(fs), .ubat_frame(fb));
  initial begin
    for (int i = 0; i < 200; i++) begin
      c = $urandom; seq = 16'($urandom);
      if (i < 4) c = {3'd1, 5'b00110, 2'd2, 6'd1, 6'd1, 10'd0} ^ 32'(i);
      #1;
      checks++;
      if (cmd.header != c[31:29] || cmd.system != c[28:24] || cmd.run_type != c[23:22] ||
          cmd.content != c[21:16] || cmd.sub != c[15:10] || cmd.value != c[9:0]) begin
        failures++; $display("FAIL fields %h", c); end
      checks++;
      if (tu != c[24] || ts != c[25] || tb != c[26]) begin failures++; $display("FAIL route %h", c); end
      checks++;
      if (valid != ((c[31:29] == 3'd1 || c[31:29] == 3'd2) && (c[26:24] != 0))) begin
        failures++; $display("FAIL valid %h", c); end
      checks++;
      if (fs != {8'hC1, 8'h00, seq, c} || fb != {8'hC1, 8'h01, seq, c}) begin
        failures++; $display("FAIL frame %h %h", fs, fb); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
