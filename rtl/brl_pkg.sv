// brl_pkg: types and constants shared by the Branch Landing (BRL) unit.
//
// Branch Landing is a forward-edge control-flow-integrity mechanism for
// RISC-V. Before an indirect jump, `bld SID` writes the source section
// identifier into the BRState register and marks it valid. At the
// landing site, `brl SID_T` checks that BRState is valid and that the
// source SID is a member of the Bloom filter that belongs to the target.
// The check clears BRState.valid whatever its outcome.
//
// Taken from the paper: the two instructions, the I-type encoding in a
// custom opcode space, the 1-bit valid / 31-bit sid BRState layout, and
// double hashing. This design's own choices: the concrete opcode and
// funct3 values, bit positions inside BRState, the filter size m, k and
// the fault-cause encoding.
package brl_pkg;

  // BRState.sid width (paper: 31 bits).
  localparam int unsigned SID_W = 31;
  // Immediate width of an I-type instruction (RISC-V base ISA).
  localparam int unsigned IMM_W = 12;

  // Opcode space and funct3 values used for bld / brl (own choice:
  // custom-0 opcode, funct3 0 = bld, 1 = brl).
  localparam logic [6:0] OPC_CUSTOM0 = 7'b000_1011;
  localparam logic [2:0] F3_BLD      = 3'b000;
  localparam logic [2:0] F3_BRL      = 3'b001;

  // BRState. Field order follows the "SID | valid" label of the paper's
  // Figure 1(c); bit positions are this design's choice:
  // sid in bits [31:1], valid in bit 0.
  typedef struct packed {
    logic [SID_W-1:0] sid;
    logic             valid;
  } brstate_t;

  // Why a brl raised a control-flow protection fault.
  typedef enum logic [1:0] {
    FC_NONE       = 2'd0,  // authorised
    FC_NO_BLD     = 2'd1,  // BRState.valid was 0 (no preceding bld)
    FC_NOT_MEMBER = 2'd2,  // some probed filter bit was 0
    FC_BAD_DESC   = 2'd3   // descriptor has m = 0 or m above the hardware limit
  } fault_cause_e;

endpackage
