// hku -- Housekeeping Unit: monitoring of light, temperature and supply currents.
//
// Sixteen digitised values are monitored: 4 photo sensors in the SMT (channels 0-3),
// 10 temperature sensors in the pathfinder case (4-13), and the currents of the 5.2 V (14)
// and 12 V (15) telescope supplies. Every SCAN cycles all of them are copied into the
// housekeeping register and compared with their thresholds (one threshold per kind). A value
// above its threshold sets its bit in the sticky alarm register; any alarm asks for the
// telescopes to be powered off and is announced to the Bus-Interface by the parent. Photo
// sensors only raise an alarm while the SMT is powered (before that, light only keeps the
// telescopes off through `light`). clr clears the alarm register. first_scan goes high after
// the first complete scan, which is what the power-up sequence waits for.
// Published: the sensor counts, the supplies, compare-with-threshold and power-off. Own
// choices: 10-bit values (the width of a command value), the scan period, one threshold per
// kind and the sticky register.
module hku #(
  parameter int unsigned SCAN = 4800,   // 100 us at 48 MHz
  parameter int unsigned VW   = 10
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [VW-1:0] photo [4],
  input  logic [VW-1:0] temp  [10],
  input  logic [VW-1:0] i5,
  input  logic [VW-1:0] i12,
  input  logic [VW-1:0] thr_photo,
  input  logic [VW-1:0] thr_temp,
  input  logic [VW-1:0] thr_i5,
  input  logic [VW-1:0] thr_i12,
  input  logic          smt_on,
  input  logic          clr,
  output logic [VW-1:0] hk_reg [16],
  output logic [15:0]   alarm_vec,
  output logic          alarm,
  output logic          light,
  output logic          first_scan
);
  logic [$clog2(SCAN+1)-1:0] tmr;
  logic [15:0] over;

  always_comb begin
    for (int i = 0; i < 4; i++)  over[i]     = photo[i] > thr_photo;
    for (int i = 0; i < 10; i++) over[4 + i] = temp[i] > thr_temp;
    over[14] = i5 > thr_i5;
    over[15] = i12 > thr_i12;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tmr <= '0; alarm_vec <= '0; light <= 1'b0; first_scan <= 1'b0;
      for (int i = 0; i < 16; i++) hk_reg[i] <= '0;
    end else begin
      if (clr) alarm_vec <= '0;
      if (tmr == $bits(tmr)'(SCAN - 1)) begin
        tmr <= '0;
        first_scan <= 1'b1;
        for (int i = 0; i < 4; i++)  hk_reg[i]     <= photo[i];
        for (int i = 0; i < 10; i++) hk_reg[4 + i] <= temp[i];
        hk_reg[14] <= i5;
        hk_reg[15] <= i12;
        light <= |over[3:0];
        if (!clr) alarm_vec <= alarm_vec | {over[15:4], over[3:0] & {4{smt_on}}};
      end else begin
        tmr <= tmr + 1'b1;
      end
    end
  end

  assign alarm = |alarm_vec;
endmodule
