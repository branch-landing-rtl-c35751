// brl_unit: the Branch Landing unit, top level.
//
// Branch Landing protects indirect jumps (jalr/jr) of a RISC-V core.
// The compiler puts `bld SID_src` in front of each indirect jump and
// `brl SID_T` at each legitimate landing site. bld records the source
// section in BRState and marks it valid. brl succeeds only if BRState is
// valid and SID_src is a member of the target's Bloom filter; it clears
// BRState.valid either way, and a failure raises a control-flow
// protection fault. Because the test is a Bloom-filter membership query
// with a fixed number K of probes, any number of sources can be
// authorised for one target at the same cost.
//
// This module joins the decoder, the BRState register and the brl
// sequencer (descriptor cache, hash, probe). The core hands it bld/brl
// at commit (so speculative instructions never touch BRState, as the
// paper suggests for out-of-order cores) through instr_valid/instr,
// held until instr_ready. Other instructions are accepted and ignored.
//
// Timing: bld completes in the cycle it is accepted (done = 1), BRState
// changes at that clock edge. brl with BRState.valid = 0 completes with
// a fault in the cycle it is accepted. Otherwise brl completes in its
// third cycle on a descriptor-cache hit (the paper's 3-cycle model) and
// later on a miss; instr_ready is low meanwhile (the core stalls).
// done/fault/fault_cause are valid in the completion cycle only.
// csr_we/csr_wdata let privileged software restore or clear BRState;
// csr_rdata is its current value for saving. table_base is the
// descriptor table address; dc_flush invalidates the descriptor cache.
// The memory port reads the read-only metadata (in a system: through
// the L1 D-cache).
module brl_unit
  import brl_pkg::*;
#(
  parameter int unsigned DC_ENTRIES = 16,
  parameter int unsigned M_MAX      = 256,
  parameter int unsigned K          = 4,
  parameter int unsigned HASH_W     = 16,
  parameter int unsigned ADDR_W     = 32,
  parameter logic [31:0] SEED1      = 32'h9E37_79B9,
  parameter logic [31:0] SEED2      = 32'h85EB_CA6B
) (
  input  logic              clk,
  input  logic              rst_n,
  // commit-stage instruction port
  input  logic              instr_valid,
  input  logic [31:0]       instr,
  output logic              instr_ready,
  output logic              done,
  output logic              fault,
  output fault_cause_e      fault_cause,
  // privileged access to BRState
  input  logic              csr_we,
  input  brstate_t          csr_wdata,
  output brstate_t          csr_rdata,
  // metadata configuration
  input  logic [ADDR_W-1:0] table_base,
  input  logic              dc_flush,
  // event outputs for performance counters
  output logic              ev_dc_hit,
  output logic              ev_dc_miss,
  // metadata memory read port
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [ADDR_W-1:0] mem_req_addr,
  input  logic              mem_rsp_valid,
  input  logic [31:0]       mem_rsp_data
);

  logic             is_bld, is_brl;
  logic [IMM_W-1:0] imm;
  logic             exec_ready, exec_done, exec_fault, consume, dc_hit;
  logic             accept;
  fault_cause_e     exec_cause;
  brstate_t         brstate;

  brl_decoder u_dec (.instr_valid, .instr, .is_bld, .is_brl, .imm);

  assign accept = instr_valid && exec_ready;

  brstate_csr u_brstate (
    .clk, .rst_n,
    .bld_we     (accept && is_bld),
    .bld_sid    (SID_W'(imm)),
    .consume,
    .priv_we    (csr_we),
    .priv_wdata (csr_wdata),
    .state      (brstate)
  );

  brl_exec #(
    .DC_ENTRIES(DC_ENTRIES), .M_MAX(M_MAX), .K(K), .HASH_W(HASH_W),
    .ADDR_W(ADDR_W), .SEED1(SEED1), .SEED2(SEED2)
  ) u_exec (
    .clk, .rst_n,
    .start  (accept && is_brl),
    .sidt   (imm),
    .brstate,
    .table_base,
    .flush  (dc_flush),
    .ready  (exec_ready),
    .done   (exec_done),
    .fault  (exec_fault),
    .cause  (exec_cause),
    .consume,
    .dc_hit,
    .mem_req_valid, .mem_req_ready, .mem_req_addr,
    .mem_rsp_valid, .mem_rsp_data
  );

  assign instr_ready = exec_ready;
  assign done        = exec_done || (accept && is_bld);
  assign fault       = exec_fault;
  assign fault_cause = exec_cause;
  assign csr_rdata   = brstate;
  assign ev_dc_hit   = accept && is_brl && brstate.valid && dc_hit;
  assign ev_dc_miss  = accept && is_brl && brstate.valid && !dc_hit;

  // The core holds an instruction until it is accepted.
  a_instr_hold: assert property (@(posedge clk) disable iff (!rst_n)
    instr_valid && !instr_ready |=> instr_valid && $stable(instr));

endmodule
