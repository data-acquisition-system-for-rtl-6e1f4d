// nor_ctrl -- memory control for the NOR flash of the UDAQ board.
//
// The flash is four 64 Mbit chips of 16-bit words (4M words, 22 address bits each), 256 Mbit
// in all. A request carries a 24-bit word address whose two top bits select the chip. A
// write drives the address and data, pulls the chip's CE_N and WE_N low for WE_CYC cycles
// (CE_N, address and data are held one cycle longer, so the chip latches on WE_N) and then
// waits until WRITE_CYC cycles have passed: the published programming time is 7 us per
// 16-bit word (336 cycles at 48 MHz). A read pulls CE_N and OE_N low and captures the data
// after READ_CYC cycles (published access time above 90 ns: 5 cycles = 104 ns). done pulses
// when the operation has finished; busy is high from the request until then.
// Own choices: a fixed programming time instead of polling the chip, single-cycle write
// commands (no unlock sequence) and no erase, for which no figures were published.
module nor_ctrl #(
  parameter int unsigned WRITE_CYC = 336,
  parameter int unsigned READ_CYC  = 5,
  parameter int unsigned WE_CYC    = 3
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req,
  input  logic        we,
  input  logic [23:0] addr,
  input  logic [15:0] wdata,
  output logic [15:0] rdata,
  output logic        busy,
  output logic        done,
  output logic [3:0]  f_ce_n,
  output logic        f_oe_n,
  output logic        f_we_n,
  output logic [21:0] f_addr,
  output logic [15:0] f_dq_o,
  output logic        f_dq_oe,
  input  logic [15:0] f_dq_i
);
  typedef enum logic [1:0] {F_IDLE, F_WRITE, F_READ} fstate_e;
  fstate_e st;
  logic [15:0] tmr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= F_IDLE; tmr <= '0; rdata <= '0; done <= 1'b0;
      f_ce_n <= '1; f_oe_n <= 1'b1; f_we_n <= 1'b1; f_addr <= '0; f_dq_o <= '0; f_dq_oe <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        F_IDLE: if (req) begin
          f_addr <= addr[21:0];
          f_ce_n <= ~(4'b0001 << addr[23:22]);
          tmr    <= '0;
          if (we) begin
            f_dq_o <= wdata; f_dq_oe <= 1'b1; f_we_n <= 1'b0; st <= F_WRITE;
          end else begin
            f_oe_n <= 1'b0; st <= F_READ;
          end
        end
        F_WRITE: begin
          tmr <= tmr + 1'b1;
          if (tmr == 16'(WE_CYC - 1)) f_we_n <= 1'b1;
          if (tmr == 16'(WE_CYC)) begin  // address, data and CE_N held one cycle past WE_N
            f_ce_n <= '1; f_dq_oe <= 1'b0;
          end
          if (tmr == 16'(WRITE_CYC - 1)) begin
            done <= 1'b1; st <= F_IDLE;
          end
        end
        F_READ: begin
          tmr <= tmr + 1'b1;
          if (tmr == 16'(READ_CYC - 1)) begin
            rdata <= f_dq_i; f_oe_n <= 1'b1; f_ce_n <= '1; done <= 1'b1; st <= F_IDLE;
          end
        end
        default: st <= F_IDLE;
      endcase
    end
  end

  assign busy = (st != F_IDLE);
endmodule
