// brl_exec: the brl verification sequencer of Branch Landing.
//
// A brl instruction carries the target section identifier SID_T. The
// paper's check, and the 3-cycle schedule of its fast latency model,
// map onto this module as follows:
//   cycle 1 (start high): BRState.valid check and descriptor-cache
//           lookup. valid = 0 faults at once (cause FC_NO_BLD) with
//           done in this same cycle.
//   cycle 2 (S_HASH):     h1/h2 of BRState.sid and read of the cached
//           filter entry, both registered.
//   cycle 3 (S_CHECK):    K probe positions, AND-reduce of the sampled
//           bits, and commit: done = 1, fault = 0 when all bits are 1,
//           else fault = 1 (FC_NOT_MEMBER).
// consume is high together with done; it clears BRState.valid for both
// outcomes (single-use authorisation).
// On a descriptor-cache miss the sequencer waits in S_REFILL while the
// cache reads the descriptor and filter from memory, then continues
// with cycle 2; the latency then grows by the refill time, as in the
// paper's slower models where the descriptor comes from the L1 D-cache.
// A descriptor with m = 0 or m > M_MAX ends the brl with FC_BAD_DESC
// (own choice: the paper does not say what an oversized filter does).
//
// Interface: start/sidt issue a brl while ready is high. brstate is the
// current BRState, read in cycles 1 and 2 (the caller keeps it stable).
// table_base is the address of the descriptor table; flush invalidates
// the descriptor cache. The memory port is that of desc_cache.
module brl_exec
  import brl_pkg::*;
#(
  parameter int unsigned DC_ENTRIES = 16,
  parameter int unsigned M_MAX      = 256,
  parameter int unsigned K          = 4,
  parameter int unsigned HASH_W     = 16,
  parameter int unsigned ADDR_W     = 32,
  parameter logic [31:0] SEED1      = 32'h9E37_79B9,
  parameter logic [31:0] SEED2      = 32'h85EB_CA6B,
  localparam int unsigned MW        = $clog2(M_MAX + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [IMM_W-1:0]  sidt,
  input  brstate_t          brstate,
  input  logic [ADDR_W-1:0] table_base,
  input  logic              flush,
  output logic              ready,
  output logic              done,
  output logic              fault,
  output fault_cause_e      cause,
  output logic              consume,
  output logic              dc_hit,      // cycle-1 lookup hit (for counters)
  // memory read port
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [ADDR_W-1:0] mem_req_addr,
  input  logic              mem_rsp_valid,
  input  logic [31:0]       mem_rsp_data
);

  typedef enum logic [1:0] {S_IDLE, S_REFILL, S_HASH, S_CHECK} state_e;

  state_e              state;
  logic [IMM_W-1:0]    sidt_q;
  logic [HASH_W-1:0]   h1, h2, h1_q, h2_q;
  logic [MW-1:0]       m_q, rd_m;
  logic [M_MAX-1:0]    filter_q, rd_filter;
  logic                refill_start, refill_busy, refill_done, refill_bad;
  logic                member;
  logic [K-1:0][MW-1:0] pos;
  logic [K-1:0]        bits;

  desc_cache #(
    .ENTRIES(DC_ENTRIES), .IMM_W(IMM_W), .M_MAX(M_MAX), .ADDR_W(ADDR_W)
  ) u_dc (
    .clk, .rst_n, .flush,
    .lookup_sidt (sidt),
    .lookup_hit  (dc_hit),
    .rd_sidt     (sidt_q),
    .rd_m,
    .rd_filter,
    .refill_start,
    .refill_sidt (sidt),
    .table_base,
    .refill_busy,
    .refill_done,
    .refill_bad,
    .mem_req_valid, .mem_req_ready, .mem_req_addr,
    .mem_rsp_valid, .mem_rsp_data
  );

  sid_hash #(.SID_W(SID_W), .HASH_W(HASH_W), .SEED1(SEED1), .SEED2(SEED2))
  u_hash (.sid(brstate.sid), .h1, .h2);

  bloom_probe #(.M_MAX(M_MAX), .K(K), .HASH_W(HASH_W))
  u_probe (.h1(h1_q), .h2(h2_q), .m(m_q), .filter(filter_q),
           .pos, .bits, .member);

  assign ready        = (state == S_IDLE);
  assign refill_start = (state == S_IDLE) && start && brstate.valid && !dc_hit;

  always_comb begin
    done  = 1'b0;
    fault = 1'b0;
    cause = FC_NONE;
    unique case (state)
      S_IDLE: if (start && !brstate.valid) begin
        done = 1'b1; fault = 1'b1; cause = FC_NO_BLD;
      end
      S_REFILL: if (refill_done && refill_bad) begin
        done = 1'b1; fault = 1'b1; cause = FC_BAD_DESC;
      end
      S_CHECK: begin
        done  = 1'b1;
        fault = !member;
        cause = member ? FC_NONE : FC_NOT_MEMBER;
      end
      default: ;
    endcase
    consume = done;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      sidt_q   <= '0;
      h1_q     <= '0;
      h2_q     <= '0;
      m_q      <= '0;
      filter_q <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start && brstate.valid) begin
          sidt_q <= sidt;
          state  <= dc_hit ? S_HASH : S_REFILL;
        end
        S_REFILL: if (refill_done) begin
          state <= refill_bad ? S_IDLE : S_HASH;
        end
        S_HASH: begin
          h1_q     <= h1;
          h2_q     <= h2;
          m_q      <= rd_m;
          filter_q <= rd_filter;
          state    <= S_CHECK;
        end
        default: state <= S_IDLE;  // S_CHECK
      endcase
    end
  end

  // A brl is only issued while the sequencer is idle.
  a_start_ready: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> ready);
  // While waiting for a refill the cache sequencer is busy.
  a_refill_busy: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_REFILL |-> refill_busy);
  // A fault is only ever reported together with done.
  a_done_fault: assert property (@(posedge clk) disable iff (!rst_n)
    fault |-> done);

endmodule
