// ctu -- Coordinate & Time processing Unit.
//
// Coordinates: four kinds are kept (satellite, BDRG, UBAT absolute, UBAT relative). Each
// 48-bit coordinate starts with an 8-bit indicator that says which component it is (X, Y, Z,
// theta, phi, ...); the unit keeps one entry per indicator value 0..NIND-1 for every kind, plus
// the last coordinate written of each kind (used to pass a trigger direction on). A write is
// coord_wr with coord_type and coord; reading is combinational (rd_type, rd_ind).
// Time: the satellite sends year, month, day, hour, minute and second (8 bits each, binary,
// year counted from 2000) with one-second accuracy. time_wr loads it; from then on a
// real-time clock advances it every CLK_HZ cycles, with month lengths and leap years. The
// satellite also gives a pulse every minute: on its rising edge the clock snaps to the
// nearest whole minute (seconds below 30 round down, others up) and the second prescaler
// restarts, so all systems share the same minute boundary.
// Own choices: binary (not BCD) time fields, indicator range, rounding at the minute pulse.
module ctu
  import udaq_pkg::*;
#(
  parameter int unsigned CLK_HZ = 48_000_000,
  parameter int unsigned NIND   = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        coord_wr,
  input  coord_type_e coord_type,
  input  coord_t      coord,
  input  coord_type_e rd_type,
  input  logic [7:0]  rd_ind,
  output coord_t      rd_coord,
  output coord_t      last [4],
  input  logic        time_wr,
  input  time_t       time_in,
  input  logic        minute_pulse,
  output time_t       now,
  output logic        sec_tick
);
  coord_t tab [4][NIND];
  logic [$clog2(CLK_HZ)-1:0] pre;
  logic [2:0] mp_s;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < 4; t++) begin
        last[t] <= '0;
        for (int i = 0; i < NIND; i++) tab[t][i] <= '0;
      end
    end else if (coord_wr) begin
      last[coord_type] <= coord;
      if (coord.ind < 8'(NIND)) tab[coord_type][coord.ind[$clog2(NIND)-1:0]] <= coord;
    end
  end

  assign rd_coord = (rd_ind < 8'(NIND)) ? tab[rd_type][rd_ind[$clog2(NIND)-1:0]] : '0;

  // days in a month, year counted from 2000
  function automatic logic [7:0] mdays(input logic [7:0] m, input logic [7:0] y);
    case (m)
      8'd2:                      mdays = (y[1:0] == 2'b00) ? 8'd29 : 8'd28;
      8'd4, 8'd6, 8'd9, 8'd11:   mdays = 8'd30;
      default:                   mdays = 8'd31;
    endcase
  endfunction

  // next minute, with carries into hour, day, month and year
  function automatic time_t next_minute(input time_t t);
    time_t n = t;
    n.second = 8'd0;
    if (t.minute >= 8'd59) begin
      n.minute = 8'd0;
      if (t.hour >= 8'd23) begin
        n.hour = 8'd0;
        if (t.day >= mdays(t.month, t.year)) begin
          n.day = 8'd1;
          if (t.month >= 8'd12) begin
            n.month = 8'd1;
            n.year  = t.year + 8'd1;
          end else n.month = t.month + 8'd1;
        end else n.day = t.day + 8'd1;
      end else n.hour = t.hour + 8'd1;
    end else n.minute = t.minute + 8'd1;
    return n;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mp_s <= '0;
    else        mp_s <= {mp_s[1:0], minute_pulse};
  end
  wire mp_edge = mp_s[1] & ~mp_s[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now <= '{year: 8'd0, month: 8'd1, day: 8'd1, hour: 8'd0, minute: 8'd0, second: 8'd0};
      pre <= '0; sec_tick <= 1'b0;
    end else begin
      sec_tick <= 1'b0;
      if (time_wr) begin
        now <= time_in; pre <= '0;
      end else if (mp_edge) begin
        pre <= '0;
        if (now.second >= 8'd30) now <= next_minute(now);
        else                     now.second <= 8'd0;
      end else if (pre == $bits(pre)'(CLK_HZ - 1)) begin
        pre <= '0; sec_tick <= 1'b1;
        if (now.second >= 8'd59) now <= next_minute(now);
        else                     now.second <= now.second + 8'd1;
      end else begin
        pre <= pre + 1'b1;
      end
    end
  end
endmodule
