// cmd_decode -- decodes a 32-bit command from the Bus-Interface.
//
// The command is split into the fields of the command structure (header 31:29, applicable
// system 28:24, run type 23:22, content 21:16, sub content 15:10, value 9:0). The applicable
// system field selects who executes it: the UDAQ itself, the SMT and/or the UBAT. For a
// telescope the 32-bit command is extended to 64 bits by a 32-bit indicator placed in front.
// The indicator holds the frame type TF_CMD, the target number and a 16-bit sequence number
// (the content of the indicator is this design's choice; only its width is published).
// A command whose header is neither single nor packet, or that names no known system, is
// flagged invalid. Purely combinational.
module cmd_decode
  import udaq_pkg::*;
(
  input  logic [31:0] cmd_in,
  input  logic [15:0] seq,
  output cmd_t        cmd,
  output logic        valid,
  output logic        to_udaq,
  output logic        to_smt,
  output logic        to_ubat,
  output logic [63:0] smt_frame,
  output logic [63:0] ubat_frame
);
  always_comb begin
    cmd     = cmd_t'(cmd_in);
    to_udaq = cmd.system[SYS_UDAQ];
    to_smt  = cmd.system[SYS_SMT];
    to_ubat = cmd.system[SYS_UBAT];
    valid   = ((cmd.header == HDR_SINGLE) || (cmd.header == HDR_PACKET)) &&
              (to_udaq || to_smt || to_ubat);
    smt_frame  = {TF_CMD, 8'(TEL_SMT),  seq, cmd_in};
    ubat_frame = {TF_CMD, 8'(TEL_UBAT), seq, cmd_in};
  end
endmodule
