// tb_brl_unit: end-to-end test of the Branch Landing unit at its
// default parameters.
//
// A random program of indirect transfers is generated first, together
// with the expected outcome of every instruction from a shadow model of
// BRState and the reference Bloom filter. Scenarios: legitimate transfer
// (bld with an authorised source, then brl), jump without bld (bld
// bypass), forged source SID, replay of a consumed authorisation, a
// context switch with BRState saved, cleared and restored (and one left
// cleared), descriptor-cache flush, bad descriptors, and back-to-back
// instructions that make the core stall while a brl is in flight.
// A driver feeds the stream through instr_valid/instr_ready, a monitor
// compares each done with the expected result in order, and the latency
// of each brl (3 cycles on a descriptor-cache hit) is checked.
// Each mechanism must occur at least once.
module tb_brl_unit;
  import brl_pkg::*;
  import brl_ref_pkg::*;
  localparam int M_MAX = 256, K = 4, NT = 48, NSTEPS = 1500;
  localparam logic [31:0] TBASE = 32'h0000_0000;
  localparam logic [31:0] FBASE = 32'h0001_0000;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic instr_valid = 0; logic [31:0] instr = 0;
  logic instr_ready, done, fault;
  fault_cause_e fault_cause;
  logic csr_we = 0; brstate_t csr_wdata = '0, csr_rdata;
  logic [31:0] table_base = TBASE;
  logic dc_flush = 0, ev_dc_hit, ev_dc_miss;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [31:0] mem_req_addr, mem_rsp_data;
  logic wr_en = 0; logic [31:0] wr_addr = 0, wr_data = 0;
  int reads;

  brl_unit dut (.*);
  meta_mem #(.WORDS(32768), .LATENCY(2)) u_mem (
    .clk, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_addr(mem_req_addr),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data),
    .wr_en, .wr_addr, .wr_data, .reads);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- program and expectations ----------------
  typedef enum {OP_INSTR, OP_SAVE, OP_CLEAR, OP_RESTORE, OP_FLUSH} op_e;
  typedef struct {
    op_e          op;
    logic [31:0]  instr;
    bit           is_brl;
    fault_cause_e exp;
    bit           b2b;    // issue without waiting for the previous one to finish
  } item_t;
  item_t prog[$];

  int          tsid  [NT];     // SID_T of each target
  logic [1023:0] filt [NT];
  int unsigned tm    [NT];
  logic [30:0] auth  [NT][$];

  // mechanism counters
  int n_pass, n_nobld, n_forged, n_fp, n_replay, n_ctx, n_ctx_lost, n_bad;
  int n_hit, n_miss, n_stall, n_flush, n_b2b;

  function automatic logic [31:0] enc(input bit brl, input int imm);
    return {12'(imm), 5'd0, brl ? 3'b001 : 3'b000, 5'd0, 7'b000_1011};
  endfunction

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk); wr_en = 1; wr_addr = a; wr_data = d;
    @(negedge clk); wr_en = 0;
  endtask

  task automatic build_targets();
    for (int t = 0; t < NT; t++) begin
      int unsigned m; int n; logic [31:0] fa;
      tsid[t] = (t * 97 + 13) % 4096;          // spread: index conflicts in the cache
      m = (t == NT - 1) ? 0 : $urandom_range(64, M_MAX);
      n = $urandom_range(1, 12);
      filt[t] = '0; tm[t] = m; auth[t].delete();
      for (int i = 0; i < n; i++) begin
        logic [30:0] s;
        s = 31'($urandom_range(1, 4095));
        auth[t].push_back(s);
        if (m != 0) filt[t] = ref_insert(filt[t], m, K, s, 16);
      end
      fa = FBASE + 32'(t * 64);
      wr(TBASE + 32'(8 * tsid[t]), fa);
      wr(TBASE + 32'(8 * tsid[t]) + 4, m);
      for (int w = 0; w < (int'(m) + 31) / 32; w++) wr(fa + 4 * w, filt[t][w*32 +: 32]);
    end
  endtask

  // shadow BRState
  bit sh_valid; logic [30:0] sh_sid; bit sv_valid; logic [30:0] sv_sid;

  function automatic void add_bld(input logic [30:0] s, input bit b2b);
    item_t it;
    it = '{op: OP_INSTR, instr: enc(0, int'(s)), is_brl: 0, exp: FC_NONE, b2b: b2b};
    prog.push_back(it);
    sh_valid = 1; sh_sid = s;
  endfunction

  function automatic fault_cause_e add_brl(input int t, input bit b2b);
    item_t it; fault_cause_e e;
    if (!sh_valid) e = FC_NO_BLD;
    else if (tm[t] == 0) e = FC_BAD_DESC;
    else if (ref_member(filt[t], tm[t], K, sh_sid, 16)) e = FC_NONE;
    else e = FC_NOT_MEMBER;
    it = '{op: OP_INSTR, instr: enc(1, tsid[t]), is_brl: 1, exp: e, b2b: b2b};
    prog.push_back(it);
    sh_valid = 0;
    return e;
  endfunction

  function automatic void add_op(input op_e o);
    item_t it;
    it = '{op: o, instr: 0, is_brl: 0, exp: FC_NONE, b2b: 0};
    prog.push_back(it);
    case (o)
      OP_SAVE:    begin sv_valid = sh_valid; sv_sid = sh_sid; end
      OP_CLEAR:   sh_valid = 0;
      OP_RESTORE: begin sh_valid = sv_valid; sh_sid = sv_sid; end
      default: ;
    endcase
  endfunction

  function automatic void gen();
    fault_cause_e e;
    sh_valid = 0; sh_sid = 0;
    for (int n = 0; n < NSTEPS; n++) begin
      int t, sc;
      t  = (n % 10 < 7) ? $urandom_range(0, 7) : $urandom_range(0, NT - 1);  // hot set of 8
      sc = $urandom_range(0, 99);
      if (sc < 55) begin            // legitimate transfer
        add_bld(auth[t][$urandom_range(0, auth[t].size() - 1)], 0);
        e = add_brl(t, 0);
        if (e == FC_NONE) n_pass++;
      end else if (sc < 62) begin   // bld bypass
        e = add_brl(t, 0);
      end else if (sc < 72) begin   // forged source
        add_bld(31'($urandom_range(0, 4095)), 0);
        e = add_brl(t, 0);
        if (e == FC_NONE) n_fp++;
      end else if (sc < 78) begin   // replay
        add_bld(auth[t][0], 0);
        e = add_brl(t, 0);
        e = add_brl($urandom_range(0, NT - 1), 0);
      end else if (sc < 84) begin   // context switch between bld and brl
        add_bld(auth[t][0], 0);
        add_op(OP_SAVE);
        add_op(OP_CLEAR);
        if (sc < 82) add_op(OP_RESTORE);
        e = add_brl(t, 0);
      end else if (sc < 86) begin   // descriptor cache flush
        add_op(OP_FLUSH);
        add_bld(auth[t][0], 0);
        e = add_brl(t, 0);
      end else begin                // back-to-back: next bld waits on the brl
        add_bld(auth[t][0], 0);
        e = add_brl(t, 0);
        add_bld(auth[(t + 1) % NT][0], 1);
        e = add_brl((t + 1) % NT, 0);
      end
    end
  endfunction

  // ---------------- monitor ----------------
  fault_cause_e expq[$];
  bit           brlq[$];
  int           accept_cyc[$];
  int           cyc = 0;
  bit           last_hit;
  bit           brl_hit_q[$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (instr_valid && !instr_ready) n_stall++;
      if (ev_dc_hit) n_hit++;
      if (ev_dc_miss) n_miss++;
      if (done) begin
        fault_cause_e e; int a; bit isb; bit h;
        if (expq.size() == 0) begin
          check(0, "done with nothing outstanding");
        end else begin
          e = expq.pop_front(); isb = brlq.pop_front(); a = accept_cyc.pop_front();
          h = brl_hit_q.pop_front();
          check(fault == (e != FC_NONE) && fault_cause == e,
                $sformatf("cycle %0d: cause %s expected %s", cyc, fault_cause.name(), e.name()));
          case (e)
            FC_NO_BLD:     n_nobld++;
            FC_NOT_MEMBER: n_forged++;
            FC_BAD_DESC:   n_bad++;
            default: ;
          endcase
          if (isb && e == FC_NO_BLD) check(cyc == a, "bypass faults in the issue cycle");
          else if (isb && h && e != FC_NO_BLD) check(cyc - a == 2, $sformatf("hit latency %0d", cyc - a + 1));
          else if (!isb) check(cyc == a, "bld completes in one cycle");
        end
      end
    end
  end

  // ---------------- driver ----------------
  task automatic wait_idle();
    while (expq.size() != 0 || !instr_ready) @(negedge clk);
  endtask

  task automatic send(input item_t it);
    @(negedge clk);
    instr_valid = 1; instr = it.instr;
    forever begin
      #1;
      if (instr_ready) break;
      @(negedge clk);
    end
    // accepted at the coming posedge
    expq.push_back(it.exp); brlq.push_back(it.is_brl);
    brl_hit_q.push_back(ev_dc_hit);
    accept_cyc.push_back(cyc);
    @(posedge clk);
    #1 instr_valid = 0;
  endtask

  initial begin
    build_targets();
    gen();
    #3 rst_n = 1;
    foreach (prog[i]) begin
      item_t it;
      it = prog[i];
      if (!it.b2b) wait_idle();
      else n_b2b++;
      case (it.op)
        OP_INSTR: send(it);
        OP_SAVE: begin
          @(negedge clk);
          sv_valid = csr_rdata.valid; sv_sid = csr_rdata.sid;
          check(csr_rdata.valid == 1'b1, "saved BRState is valid after bld");
        end
        OP_CLEAR: begin
          @(negedge clk); csr_we = 1; csr_wdata = '0;
          @(negedge clk); csr_we = 0;
          check(csr_rdata.valid == 1'b0, "privileged clear");
        end
        OP_RESTORE: begin
          @(negedge clk); csr_we = 1; csr_wdata = '{sid: sv_sid, valid: sv_valid};
          @(negedge clk); csr_we = 0; n_ctx++;
        end
        OP_FLUSH: begin
          @(negedge clk); dc_flush = 1;
          @(negedge clk); dc_flush = 0; n_flush++;
        end
        default: ;
      endcase
    end
    wait_idle();
    repeat (3) @(negedge clk);
    $display("pass=%0d bypass/replay/lost-context(no_bld)=%0d not_member=%0d false_pos=%0d bad_desc=%0d",
             n_pass, n_nobld, n_forged, n_fp, n_bad);
    $display("dc_hit=%0d dc_miss=%0d stall_cycles=%0d flush=%0d ctx_restore=%0d b2b=%0d",
             n_hit, n_miss, n_stall, n_flush, n_ctx, n_b2b);
    check(n_pass > 0, "legitimate transfers");
    check(n_nobld > 0, "no-bld faults");
    check(n_forged > 0, "forged-source faults");
    check(n_bad > 0, "bad descriptor");
    check(n_hit > 0 && n_miss > 0, "cache hit and miss");
    check(n_stall > 0, "stall");
    check(n_flush > 0, "flush");
    check(n_ctx > 0, "context restore");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
