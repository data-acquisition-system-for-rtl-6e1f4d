// mem_arb -- shares the one flash controller between event processing (port a) and the
// configuration store (port b).
//
// Port a gives one-cycle request pulses, as the controller itself takes them. A pulse that
// arrives while the controller is working for port b is kept and issued as soon as that
// operation ends. Port b holds its request until its done pulse. Port a goes first when both
// wait, so event data are never lost to a configuration write; a configuration write can delay
// one event word by at most one programming time. Only one operation is in flight at a time.
// done and the read data go to the port that issued the operation. A request is issued in the
// cycle after the previous done, so back-to-back operations of one port lose one cycle.
// This arbiter is this design's own; the published design names only the memory control.
module mem_arb (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        a_req,
  input  logic        a_we,
  input  logic [23:0] a_addr,
  input  logic [15:0] a_wdata,
  output logic        a_done,
  input  logic        b_req,
  input  logic        b_we,
  input  logic [23:0] b_addr,
  input  logic [15:0] b_wdata,
  output logic        b_done,
  output logic        req,
  output logic        we,
  output logic [23:0] addr,
  output logic [15:0] wdata,
  input  logic        done
);
  logic        inflight, owner_b;       // an operation is running, and whose it is
  logic        a_pend;                  // a port-a pulse waiting for the controller
  logic        a_we_q;
  logic [23:0] a_addr_q;
  logic [15:0] a_wdata_q;
  logic        go_a, go_b;

  assign go_a = !inflight && (a_pend || a_req);
  assign go_b = !inflight && !go_a && b_req;
  assign req  = go_a || go_b;
  always_comb begin
    if (go_b)        begin we = b_we;   addr = b_addr;   wdata = b_wdata;   end
    else if (a_pend) begin we = a_we_q; addr = a_addr_q; wdata = a_wdata_q; end
    else             begin we = a_we;   addr = a_addr;   wdata = a_wdata;   end
  end
  assign a_done = done && inflight && !owner_b;
  assign b_done = done && inflight && owner_b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      inflight <= 1'b0; owner_b <= 1'b0; a_pend <= 1'b0; a_we_q <= 1'b0; a_addr_q <= '0;
      a_wdata_q <= '0;
    end else begin
      if (done) inflight <= 1'b0;
      if (req) begin inflight <= 1'b1; owner_b <= go_b; end
      if (go_a) a_pend <= 1'b0;
      else if (a_req) begin
        a_pend <= 1'b1; a_we_q <= a_we; a_addr_q <= a_addr; a_wdata_q <= a_wdata;
      end
    end
  end

  a_single: assert property (@(posedge clk) disable iff (!rst_n) !(a_pend && a_req));
endmodule
