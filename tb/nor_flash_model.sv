// nor_flash_model -- behavioural model of the four 64 Mbit x16 NOR flash chips, for testbenches.
// A word is stored on the rising edge of WE_N while its chip's CE_N is low; with CE_N and OE_N
// low the addressed word is driven (0 where nothing was written). Unwritten words read 0.
module nor_flash_model (
  input  logic [3:0]  ce_n,
  input  logic        oe_n,
  input  logic        we_n,
  input  logic [21:0] addr,
  input  logic [15:0] dq_in,
  output logic [15:0] dq_out
);
  logic [15:0] mem [int];
  int n_writes = 0;

  function automatic int chip_of(input logic [3:0] c);
    for (int i = 0; i < 4; i++) if (!c[i]) return i;
    return -1;
  endfunction

  always @(posedge we_n) begin
    int ch;
    ch = chip_of(ce_n);
    if (ch >= 0) begin mem[ch * 4194304 + int'(addr)] = dq_in; n_writes++; end
  end

  always_comb begin
    int ch;
    ch = chip_of(ce_n);
    dq_out = 16'h0;
    if (!oe_n && ch >= 0 && mem.exists(ch * 4194304 + int'(addr))) dq_out = mem[ch * 4194304 + int'(addr)];
  end

  function automatic logic [15:0] peek(input int a);
    return mem.exists(a) ? mem[a] : 16'h0;
  endfunction
endmodule
