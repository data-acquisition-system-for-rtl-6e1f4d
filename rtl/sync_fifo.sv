// sync_fifo -- single-clock first-in first-out buffer of DEPTH words of W bits.
// push writes wdata when not full; pop drops the head word (rdata) when not empty.
// Pushing a full FIFO or popping an empty one is ignored. DEPTH must be a power of two.
module sync_fifo #(
  parameter int unsigned W     = 65,
  parameter int unsigned DEPTH = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] wdata,
  input  logic         pop,
  output logic [W-1:0] rdata,
  output logic         empty,
  output logic         full
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [W-1:0]  mem [DEPTH];
  logic [AW:0]   wp, rp;

  assign empty = (wp == rp);
  assign full  = (wp[AW-1:0] == rp[AW-1:0]) && (wp[AW] != rp[AW]);
  assign rdata = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (push && !full) mem[wp[AW-1:0]] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0;
    end else begin
      if (push && !full) wp <= wp + 1'b1;
      if (pop && !empty) rp <= rp + 1'b1;
    end
  end
endmodule
