// tau -- Trigger Arbiter Unit.
//
// Event processing starts from one of two sources: the trigger line of the UBAT (its trigger
// processing unit found a burst candidate) or an external trigger that the satellite passes
// on through the Bus-Interface (ext_trig, one-cycle pulse). The UBAT line is synchronised and
// its rising edge taken. A trigger is accepted only while triggers are enabled (the UDAQ is
// observing) and no event is being processed; it then gives a one-cycle ev_start with ev_src
// (0 UBAT, 1 external) one cycle after the edge. When both come in the same cycle the UBAT
// wins and the external one is counted as lost, like any trigger that arrives while busy or
// disabled. The arbitration order and the dropping of triggers while busy are own choices.
module tau (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       ubat_trig,
  input  logic       ext_trig,
  input  logic       enable,
  input  logic       busy,
  output logic       ev_start,
  output logic       ev_src,
  output logic [7:0] n_ubat,
  output logic [7:0] n_ext,
  output logic [7:0] n_lost
);
  logic [2:0] trig_s;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) trig_s <= '0;
    else        trig_s <= {trig_s[1:0], ubat_trig};
  end
  wire ubat_edge = trig_s[1] & ~trig_s[2];
  wire can_take  = enable & ~busy & ~ev_start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ev_start <= 1'b0; ev_src <= 1'b0; n_ubat <= '0; n_ext <= '0; n_lost <= '0;
    end else begin
      ev_start <= 1'b0;
      if (ubat_edge && can_take) begin
        ev_start <= 1'b1; ev_src <= 1'b0; n_ubat <= n_ubat + 1'b1;
        if (ext_trig) n_lost <= n_lost + 1'b1;
      end else if (ext_trig && can_take) begin
        ev_start <= 1'b1; ev_src <= 1'b1; n_ext <= n_ext + 1'b1;
      end else if (ubat_edge || ext_trig) begin
        n_lost <= n_lost + 1'b1;
      end
    end
  end
endmodule
