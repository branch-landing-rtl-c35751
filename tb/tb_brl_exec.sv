// tb_brl_exec: the brl sequencer with a behavioural metadata memory.
// Filters are built by the reference model from random authorised-source
// sets. Checks, against the reference membership test: authorised
// sources pass, others fault with FC_NOT_MEMBER unless the reference
// also calls them members; valid = 0 faults with FC_NO_BLD in the issue
// cycle; bad descriptors fault with FC_BAD_DESC. Latency: a descriptor-
// cache hit completes in the third cycle (done two clock edges after
// the issue cycle); a miss takes longer. consume comes with every done.
module tb_brl_exec;
  import brl_pkg::*;
  import brl_ref_pkg::*;
  localparam int M_MAX = 256, K = 4, NT = 24;
  localparam logic [31:0] TBASE = 32'h0000_1000;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic start = 0, flush = 0;
  logic [11:0] sidt = 0;
  brstate_t brstate;
  logic [31:0] table_base = TBASE;
  logic ready, done, fault, consume, dc_hit;
  fault_cause_e cause;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [31:0] mem_req_addr, mem_rsp_data;
  logic wr_en = 0; logic [31:0] wr_addr = 0, wr_data = 0;
  int reads;
  logic [1023:0] filt [NT];
  int unsigned   tm   [NT];
  logic [30:0]   auth [NT][$];
  int n_hit_lat = 0, n_miss = 0;

  brl_exec dut (.*);
  meta_mem #(.WORDS(8192), .LATENCY(2)) u_mem (
    .clk, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_addr(mem_req_addr),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data),
    .wr_en, .wr_addr, .wr_data, .reads);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk); wr_en = 1; wr_addr = a; wr_data = d;
    @(negedge clk); wr_en = 0;
  endtask

  // Build target t (SID_T = t) with m bits and n random authorised SIDs.
  task automatic build(input int t, input int unsigned m, input int n);
    logic [31:0] fa;
    fa = 32'h8000 + 32'(t * 64);
    filt[t] = '0; tm[t] = m; auth[t].delete();
    for (int i = 0; i < n; i++) begin
      logic [30:0] s;
      s = 31'($urandom_range(0, 4095));
      auth[t].push_back(s);
      filt[t] = ref_insert(filt[t], m, K, s, 16);
    end
    wr(TBASE + 8 * t, fa);
    wr(TBASE + 8 * t + 4, m);
    if (m <= M_MAX)
      for (int w = 0; w < (int'(m) + 31) / 32; w++) wr(fa + 4 * w, filt[t][w*32 +: 32]);
  endtask

  // Issue brl t with BRState = {sid, v}; returns cycles until done
  // (1 = done in the issue cycle).
  task automatic brl(input int t, input logic [30:0] sid, input bit v,
                     input fault_cause_e exp, output int lat, output bit was_hit);
    @(negedge clk);
    brstate = '{sid: sid, valid: v};
    sidt = 12'(t); start = 1;
    lat = 1;
    #1; was_hit = dc_hit;
    while (!done) begin
      @(negedge clk); start = 0; lat++;
      if (lat > 100) break;
    end
    check(done && consume, $sformatf("done/consume t=%0d", t));
    check(fault == (exp != FC_NONE) && cause == exp,
          $sformatf("t=%0d sid=%0d v=%b cause=%s exp=%s", t, sid, v, cause.name(), exp.name()));
    @(posedge clk); start = 0;
    @(negedge clk);
    check(!done, "done is one cycle");
  endtask

  initial begin
    int lat; bit h;
    brstate = '0;
    #12 rst_n = 1;
    for (int t = 0; t < NT - 2; t++) build(t, $urandom_range(32, M_MAX), $urandom_range(1, 12));
    build(NT - 2, 0, 0);     // bad: m = 0
    build(NT - 1, 400, 0);   // bad: m > M_MAX
    // valid = 0: immediate fault
    brl(0, 31'd1, 0, FC_NO_BLD, lat, h);
    check(lat == 1, $sformatf("no-bld latency %0d", lat));
    // authorised sources: first miss then hits, 3-cycle hit latency
    for (int t = 0; t < NT - 2; t++) begin
      foreach (auth[t][i]) begin
        brl(t, auth[t][i], 1, FC_NONE, lat, h);
        if (h) begin
          n_hit_lat++;
          check(lat == 3, $sformatf("hit latency %0d", lat));
        end else begin
          n_miss++;
          check(lat > 3, $sformatf("miss latency %0d", lat));
        end
      end
    end
    // random sources: reference decides
    for (int n = 0; n < 400; n++) begin
      int t; logic [30:0] s; bit mem;
      t = $urandom_range(0, NT - 3);
      s = 31'($urandom);
      mem = ref_member(filt[t], tm[t], K, s, 16);
      brl(t, s, 1, mem ? FC_NONE : FC_NOT_MEMBER, lat, h);
    end
    brl(NT - 2, 31'd3, 1, FC_BAD_DESC, lat, h);
    brl(NT - 1, 31'd3, 1, FC_BAD_DESC, lat, h);
    check(n_hit_lat > 0 && n_miss > 0, "both hit and miss paths exercised");
    $display("hits=%0d misses=%0d", n_hit_lat, n_miss);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
