// fencet_decoder: recognises the temporal fence instruction fence.t.
//
// fence.t is a U-type instruction in the custom-0 opcode space: bits [6:0]
// hold the opcode 0001011, bits [11:7] rd and bits [31:12] a 20-bit immediate.
// The immediate is a bitmap by which software may select the components to
// reset. In the Microreset implementation every non-architectural flip-flop is
// cleared whatever the bitmap says, so the bitmap is only decoded and handed
// on (the meaning of its individual bits is not fixed here). rd is ignored:
// fence.t has no architectural effect besides the cycle and instret counters.
// Purely combinational.
module fencet_decoder
  import tp_pkg::*;
(
  input  logic        valid_i,
  input  logic [31:0] instr_i,
  output logic        is_fencet_o,
  output logic [19:0] imm_o,
  output logic [4:0]  rd_o
);

  assign is_fencet_o = valid_i && (instr_i[6:0] == OPCODE_CUSTOM0);
  assign imm_o       = instr_i[31:12];
  assign rd_o        = instr_i[11:7];

endmodule
