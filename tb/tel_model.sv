// tel_model -- behavioural model of a telescope's SPI slave side (SMT or UBAT), for testbenches.
// SPI mode 0, MSB first. Frames by their first byte: TF_CMD, TF_COORD and TF_TIME (64 bits) are
// logged;
// TF_RD_COORD (64 bits) is answered with `coord` in its last 48 bits; TF_RD_DATA (32 bits) with
// the next data word in its last 16 bits; TF_RD_HK (32 bits) with the status word `hk` in its
// last 16 bits (n_hk counts them). give_data(n) makes n words available: drdy stays
// high until the last of them has been read. Word k of the current burst is {ID, k[11:0]}.
module tel_model
  import udaq_pkg::*;
#(
  parameter logic [3:0]  ID = 4'h5,
  parameter logic [15:0] HK = 16'h5A00
) (
  input  logic   sclk,
  input  logic   mosi,
  input  logic   cs_n,
  output logic   miso,
  output logic   drdy,
  input  coord_t coord
);
  logic [63:0] rx;
  int          nb;
  logic [55:0] resp;
  int          n_left, n_read, n_cmd, n_coord, n_time, n_hk;
  logic [63:0] last_cmd, last_coord, last_time;

  initial begin
    miso = 0; drdy = 0; n_left = 0; n_read = 0; n_cmd = 0; n_coord = 0; n_time = 0; n_hk = 0; nb = 0; rx = 0; resp = 0;
    last_cmd = 0; last_coord = 0; last_time = 0;
  end

  task automatic give_data(input int n);
    n_left = n; n_read = 0; drdy = (n > 0);
  endtask

  always @(negedge cs_n) begin nb = 0; rx = 0; end
  always @(posedge sclk) if (!cs_n) begin rx = {rx[62:0], mosi}; nb++; end
  always @(negedge sclk) if (!cs_n) begin
    if (nb == 8) begin
      if (rx[7:0] == TF_RD_COORD)     resp = {8'h00, coord};
      else if (rx[7:0] == TF_RD_DATA) resp = {8'h00, ID, n_read[11:0], 32'h0};
      else if (rx[7:0] == TF_RD_HK)   resp = {8'h00, HK, 32'h0};
      else                            resp = '0;
    end else resp = resp << 1;
    miso <= resp[55];
  end
  always @(posedge cs_n) begin
    if (nb == 64 && rx[63:56] == TF_CMD)   begin n_cmd++;   last_cmd = rx;   end
    if (nb == 64 && rx[63:56] == TF_COORD) begin n_coord++; last_coord = rx; end
    if (nb == 64 && rx[63:56] == TF_TIME)  begin n_time++;  last_time = rx;  end
    if (nb == 32 && rx[31:24] == TF_RD_HK) n_hk++;
    if (nb == 32 && rx[31:24] == TF_RD_DATA && n_left > 0) begin
      n_read++; n_left--;
      if (n_left == 0) drdy = 0;
    end
  end
endmodule
