// desc_cache: descriptor cache of the Branch Landing unit.
//
// brl looks up the Bloom filter of its target by the immediate SID_T.
// In memory, a read-only filter descriptor table holds, for each SID_T,
// the pair (base, m): base is the address of the target's filter bit
// array, m its width in bits. The paper's fast (3-cycle) brl model
// assumes a dedicated descriptor cache that answers in one cycle and a
// compact filter kept next to its descriptor. This module is that cache:
// each entry holds m and the whole filter (up to M_MAX bits), so a hit
// supplies everything the membership test needs.
//
// Organisation (own choice; the paper gives only the function):
// direct mapped, ENTRIES entries, indexed by the low bits of SID_T and
// tagged with the rest. Memory layout (own choice): descriptor of SID_T
// at table_base + 8*SID_T, word 0 = base (byte address), word 1 = m;
// filter bit p is bit p%32 of the 32-bit word at base + 4*(p/32).
//
// Refill: on refill_start the cache reads the two descriptor words and
// then ceil(m/32) filter words over a simple memory read port (request
// valid/ready, one outstanding request, response valid with data, in
// order). If m = 0 or m > M_MAX it installs nothing and reports
// refill_bad with refill_done. flush invalidates every entry in one
// cycle (for example when the address space changes).
//
// Timing: lookup and read are combinational on the entry index; the
// entry is written at the clock edge that ends the refill, and
// refill_done is high in the cycle after that write.
module desc_cache #(
  parameter int unsigned ENTRIES = 16,
  parameter int unsigned IMM_W   = 12,
  parameter int unsigned M_MAX   = 256,
  parameter int unsigned ADDR_W  = 32,
  localparam int unsigned MW     = $clog2(M_MAX + 1),
  localparam int unsigned IDX_W  = $clog2(ENTRIES),
  localparam int unsigned TAG_W  = IMM_W - IDX_W,
  localparam int unsigned NWORDS = M_MAX / 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              flush,
  // lookup (cycle 1 of brl) and entry read (cycle 2)
  input  logic [IMM_W-1:0]  lookup_sidt,
  output logic              lookup_hit,
  input  logic [IMM_W-1:0]  rd_sidt,
  output logic [MW-1:0]     rd_m,
  output logic [M_MAX-1:0]  rd_filter,
  // refill control
  input  logic              refill_start,
  input  logic [IMM_W-1:0]  refill_sidt,
  input  logic [ADDR_W-1:0] table_base,
  output logic              refill_busy,
  output logic              refill_done,
  output logic              refill_bad,
  // memory read port
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [ADDR_W-1:0] mem_req_addr,
  input  logic              mem_rsp_valid,
  input  logic [31:0]       mem_rsp_data
);

  typedef enum logic [2:0] {
    R_IDLE, R_REQ, R_WAIT, R_DONE, R_BAD
  } rstate_e;

  typedef enum logic [1:0] {
    PH_BASE, PH_M, PH_FILT
  } phase_e;

  logic [ENTRIES-1:0]    valid_q;
  logic [TAG_W-1:0]      tag_q    [ENTRIES];
  logic [MW-1:0]         m_q      [ENTRIES];
  logic [M_MAX-1:0]      filter_q [ENTRIES];

  rstate_e               rstate;
  phase_e                phase;
  logic [IMM_W-1:0]      r_sidt;
  logic [ADDR_W-1:0]     r_base;
  logic [ADDR_W-1:0]     r_addr;
  logic [MW-1:0]         r_m;
  logic [MW-1:0]         r_nwords;
  logic [MW-1:0]         r_word;
  logic [M_MAX-1:0]      r_filter;
  logic                  install;

  logic [IDX_W-1:0] lk_idx, rd_idx, r_idx;
  logic [TAG_W-1:0] lk_tag, r_tag;
  assign lk_idx = lookup_sidt[IDX_W-1:0];
  assign lk_tag = lookup_sidt[IMM_W-1:IDX_W];
  assign rd_idx = rd_sidt[IDX_W-1:0];
  assign r_idx  = r_sidt[IDX_W-1:0];
  assign r_tag  = r_sidt[IMM_W-1:IDX_W];

  always_comb begin
    lookup_hit = valid_q[lk_idx] && (tag_q[lk_idx] == lk_tag);
    rd_m       = m_q[rd_idx];
    rd_filter  = filter_q[rd_idx];
  end

  assign refill_busy   = (rstate != R_IDLE);
  assign refill_done   = (rstate == R_DONE) || (rstate == R_BAD);
  assign refill_bad    = (rstate == R_BAD);
  assign mem_req_valid = (rstate == R_REQ);
  assign mem_req_addr  = r_addr;
  assign install       = (rstate == R_WAIT) && mem_rsp_valid &&
                         (phase == PH_FILT) && (r_word + 1'b1 == r_nwords);

  // Refill sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rstate   <= R_IDLE;
      phase    <= PH_BASE;
      r_sidt   <= '0;
      r_base   <= '0;
      r_addr   <= '0;
      r_m      <= '0;
      r_nwords <= '0;
      r_word   <= '0;
      r_filter <= '0;
    end else begin
      unique case (rstate)
        R_IDLE: begin
          if (refill_start) begin
            r_sidt   <= refill_sidt;
            r_addr   <= table_base + (ADDR_W'(refill_sidt) << 3);
            r_filter <= '0;
            r_word   <= '0;
            phase    <= PH_BASE;
            rstate   <= R_REQ;
          end
        end
        R_REQ: begin
          if (mem_req_ready) rstate <= R_WAIT;
        end
        R_WAIT: begin
          if (mem_rsp_valid) begin
            unique case (phase)
              PH_BASE: begin
                r_base <= mem_rsp_data;
                r_addr <= r_addr + ADDR_W'(4);
                phase  <= PH_M;
                rstate <= R_REQ;
              end
              PH_M: begin
                if (mem_rsp_data == 32'd0 || mem_rsp_data > 32'(M_MAX)) begin
                  rstate <= R_BAD;
                end else begin
                  r_m      <= MW'(mem_rsp_data);
                  r_nwords <= MW'((mem_rsp_data + 32'd31) >> 5);
                  r_addr   <= r_base;
                  phase    <= PH_FILT;
                  rstate   <= R_REQ;
                end
              end
              default: begin  // PH_FILT
                r_filter[r_word[$clog2(NWORDS+1)-1:0]*32 +: 32] <= mem_rsp_data;
                r_word <= r_word + 1'b1;
                r_addr <= r_addr + ADDR_W'(4);
                rstate <= (r_word + 1'b1 == r_nwords) ? R_DONE : R_REQ;
              end
            endcase
          end
        end
        default: rstate <= R_IDLE;  // R_DONE, R_BAD: one cycle
      endcase
    end
  end

  // Entry storage. The last filter word goes straight into the entry.
  always_ff @(posedge clk) begin
    if (install) begin
      tag_q[r_idx]    <= r_tag;
      m_q[r_idx]      <= r_m;
      filter_q[r_idx] <= r_filter |
          (M_MAX'(mem_rsp_data) << (r_word[$clog2(NWORDS+1)-1:0] * 32));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       valid_q <= '0;
    else if (flush)   valid_q <= '0;
    else if (install) valid_q[r_idx] <= 1'b1;
  end

  // Refill may only be started while the sequencer is idle.
  a_refill_idle: assert property (@(posedge clk) disable iff (!rst_n)
    refill_start |-> rstate == R_IDLE);
  // The memory port holds a request until it is accepted.
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req_addr));

endmodule
