// brl_decoder: recognises the two Branch Landing instructions.
//
// Both bld and brl are I-type instructions in a reserved custom opcode
// space (as the paper specifies). The opcode (custom-0, 0001011) and the
// funct3 values (000 = bld, 001 = brl) are this design's choice; the
// paper gives neither. rd and rs1 are ignored. The 12-bit immediate
// carries the section identifier: the source SID for bld, the target
// SID_T for brl. It is passed on zero-extended by the users.
//
// Purely combinational; no clock.
module brl_decoder
  import brl_pkg::*;
(
  input  logic             instr_valid,
  input  logic [31:0]      instr,
  output logic             is_bld,
  output logic             is_brl,
  output logic [IMM_W-1:0] imm
);

  logic [6:0] opcode;
  logic [2:0] funct3;

  always_comb begin
    opcode = instr[6:0];
    funct3 = instr[14:12];
    imm    = instr[31:20];
    is_bld = instr_valid && (opcode == OPC_CUSTOM0) && (funct3 == F3_BLD);
    is_brl = instr_valid && (opcode == OPC_CUSTOM0) && (funct3 == F3_BRL);
  end

endmodule
