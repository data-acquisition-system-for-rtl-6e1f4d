// biu -- Bus Interface Unit: the UDAQ side of the link to the satellite Bus-Interface (BI).
//
// The BI is the SPI master; three customized lines (bi_type, a bi_frame_e code held stable
// for the whole frame) say what a frame carries. Received frames (serial-in/parallel-out
// through spi_slave) are checked for their length when CS_N rises and then passed on as
// one-cycle strobes:
//   BF_CMD       32 bits  -> cmd_valid, cmd (to the central control unit)
//   BF_TIME      48 bits  -> time_wr, time_in
//   BF_SAT/BDRG/UBAT_ABS 48 bits -> coord_wr with coord_type and coord
//   BF_EXT_TRIG  48 bits  -> coord_wr (BDRG) and ext_trig: an external trigger with its direction
// A frame of the wrong length is dropped and counted in frame_err.
// Transmitted frames (parallel-in/serial-out), 16-bit words, most significant first:
//   BF_STATUS -> the 8 words of the status block (status_t), word 0 = bits 127:112, then the
//                16 housekeeping values as {6'b0, value}: photo 0-3, temperature 0-9, 5.2 V
//                and 12 V current, then the last status words polled from the SMT and the UBAT
//                (words 24 and 25), then zeros (a frame may stop after the status block)
//   BF_DATA   -> the words of the oldest stored event; rd_next pulses for each word fully sent
// Any other frame sends zeros. The frame-type lines and their codes are this design's choice:
// the link is published as SPI plus "customized lines".
module biu
  import udaq_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sclk,
  input  logic        mosi,
  input  logic        cs_n,
  output logic        miso,
  input  logic [2:0]  bi_type,
  output logic        cmd_valid,
  output logic [31:0] cmd,
  output logic        time_wr,
  output time_t       time_in,
  output logic        coord_wr,
  output coord_type_e coord_type,
  output coord_t      coord,
  output logic        ext_trig,
  output logic [7:0]  frame_err,
  input  status_t     status,
  input  logic [9:0]  hk_vals [16],
  input  logic [15:0] tel_hk [2],
  input  logic [15:0] rd_word,
  input  logic [15:0] rd_word2,
  output logic        rd_next
);
  logic        fs, fe, wdone;
  logic [63:0] rx;
  logic [7:0]  nb;
  logic [2:0]  ty_s1;
  bi_frame_e   ty;
  logic [4:0]  sidx;
  logic [15:0] tx_first, tx_next;

  spi_slave #(.MAXBITS(64)) u_spi (
    .clk, .rst_n, .sclk, .mosi, .cs_n, .miso, .frame_start(fs), .frame_end(fe),
    .rx_data(rx), .rx_bits(nb), .tx_first, .tx_next, .tx_word_done(wdone));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin ty_s1 <= '0; ty <= BF_CMD; end
    else begin ty_s1 <= bi_type; ty <= bi_frame_e'(ty_s1); end
  end

  // word i of a status frame: status block, housekeeping, the two telescopes' words, then zeros
  function automatic logic [15:0] st_word(input status_t s, input logic [9:0] hk [16],
                                          input logic [15:0] th [2], input logic [4:0] i);
    logic [127:0] b;
    b = s;
    if (i < 5'd8)       return b[127 - 16*i[2:0] -: 16];
    else if (i < 5'd24) return {6'b0, hk[4'(i - 5'd8)]};
    else if (i < 5'd26) return th[i[0]];
    else                return '0;
  endfunction

  always_comb begin
    case (ty)
      BF_STATUS: begin tx_first = st_word(status, hk_vals, tel_hk, 5'd0); tx_next = st_word(status, hk_vals, tel_hk, sidx + 5'd1); end
      BF_DATA:   begin tx_first = rd_word;              tx_next = rd_word2;                    end
      default:   begin tx_first = '0;                   tx_next = '0;                          end
    endcase
  end
  assign rd_next = wdone && (ty == BF_DATA);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sidx <= '0; cmd_valid <= 1'b0; cmd <= '0; time_wr <= 1'b0; time_in <= '0;
      coord_wr <= 1'b0; coord_type <= CT_SAT; coord <= '0; ext_trig <= 1'b0; frame_err <= '0;
    end else begin
      cmd_valid <= 1'b0; time_wr <= 1'b0; coord_wr <= 1'b0; ext_trig <= 1'b0;
      if (fs) sidx <= '0;
      else if (wdone && sidx != 5'd31) sidx <= sidx + 5'd1;
      if (fe) begin
        case (ty)
          BF_CMD:
            if (nb == 8'(CMD_BITS)) begin cmd_valid <= 1'b1; cmd <= rx[31:0]; end
            else frame_err <= frame_err + 1'b1;
          BF_TIME:
            if (nb == 8'(COORD_BITS)) begin time_wr <= 1'b1; time_in <= time_t'(rx[47:0]); end
            else frame_err <= frame_err + 1'b1;
          BF_SAT, BF_BDRG, BF_UBAT_ABS, BF_EXT_TRIG:
            if (nb == 8'(COORD_BITS)) begin
              coord_wr <= 1'b1;
              coord    <= coord_t'(rx[47:0]);
              case (ty)
                BF_SAT:      coord_type <= CT_SAT;
                BF_UBAT_ABS: coord_type <= CT_UBAT_ABS;
                default:     coord_type <= CT_BDRG;
              endcase
              ext_trig <= (ty == BF_EXT_TRIG);
            end else frame_err <= frame_err + 1'b1;
          default: ;
        endcase
      end
    end
  end
endmodule
