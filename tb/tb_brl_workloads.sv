// tb_brl_workloads: runs synthetic indirect-transfer workloads shaped
// after the benchmark figures reported for Branch Landing, through the
// unit at its default parameters:
//   cover-CFG         181 protected targets (switch tables)
//   picojpeg-CFG       15 protected targets
//   trio-snprintf-CFG  13 protected targets
//   bench-Func          2 protected targets (function-level policy)
// Each target gets 1..9 authorised source SIDs (own choice; the largest
// equivalence class reported is 9). Every transfer is a legitimate
// bld/brl pair to a uniformly chosen target, so every brl must pass
// (no false negatives); a forged source follows every 8th transfer and
// must fault unless the reference filter admits it. The average brl
// latency is reported: 3 cycles on a descriptor-cache hit, more when
// the target set does not fit the descriptor cache.
module tb_brl_workloads;
  import brl_pkg::*;
  import brl_ref_pkg::*;
  localparam int K = 4, M = 256, MAXT = 181, NTX = 1500;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic instr_valid = 0; logic [31:0] instr = 0;
  logic instr_ready, done, fault;
  fault_cause_e fault_cause;
  logic csr_we = 0; brstate_t csr_wdata = '0, csr_rdata;
  logic [31:0] table_base = 32'h0;
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
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int            tsid [MAXT];
  logic [1023:0] filt [MAXT];
  logic [30:0]   auth [MAXT][$];

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk); wr_en = 1; wr_addr = a; wr_data = d;
    @(negedge clk); wr_en = 0;
  endtask

  function automatic logic [31:0] enc(input bit brl, input int imm);
    return {12'(imm), 5'd0, brl ? 3'b001 : 3'b000, 5'd0, 7'b000_1011};
  endfunction

  // Issue one instruction and wait for done; returns cycles (1 = same cycle).
  task automatic exec(input logic [31:0] w, output int lat, output bit f,
                      output fault_cause_e c);
    @(negedge clk);
    instr_valid = 1; instr = w; lat = 1;
    #1;
    while (!done) begin
      @(negedge clk); #1; lat++;
      if (instr_ready == 0) instr_valid = 0;
      if (lat > 200) break;
    end
    f = fault; c = fault_cause;
    @(posedge clk); #1 instr_valid = 0;
  endtask

  task automatic run(input string name, input int nt, input int base_sid);
    int lat, sum_lat, n_brl, n_hit3, n_fp, n_caught;
    bit f; fault_cause_e c;
    // lay out metadata
    for (int t = 0; t < nt; t++) begin
      logic [31:0] fa; int n;
      tsid[t] = base_sid + t;
      n = $urandom_range(1, 9);
      filt[t] = '0; auth[t].delete();
      for (int i = 0; i < n; i++) begin
        logic [30:0] s;
        s = 31'($urandom_range(1, 4095));
        auth[t].push_back(s);
        filt[t] = ref_insert(filt[t], M, K, s, 16);
      end
      fa = 32'h0001_0000 + 32'(t * 32);
      wr(32'(8 * tsid[t]), fa);
      wr(32'(8 * tsid[t]) + 4, M);
      for (int w = 0; w < M / 32; w++) wr(fa + 4 * w, filt[t][w*32 +: 32]);
    end
    @(negedge clk); dc_flush = 1; @(negedge clk); dc_flush = 0;
    sum_lat = 0; n_brl = 0; n_hit3 = 0; n_fp = 0; n_caught = 0;
    for (int x = 0; x < NTX; x++) begin
      int t; logic [30:0] s;
      t = $urandom_range(0, nt - 1);
      s = auth[t][$urandom_range(0, auth[t].size() - 1)];
      exec(enc(0, int'(s)), lat, f, c);
      check(lat == 1 && !f, "bld");
      exec(enc(1, tsid[t]), lat, f, c);
      check(!f, $sformatf("%s: legitimate transfer to target %0d faulted (%s)", name, t, c.name()));
      sum_lat += lat; n_brl++;
      if (lat == 3) n_hit3++;
      check(lat >= 3, "brl takes at least 3 cycles");
      if (x % 8 == 0) begin
        s = 31'($urandom_range(1, 4095));
        exec(enc(0, int'(s)), lat, f, c);
        exec(enc(1, tsid[t]), lat, f, c);
        if (ref_member(filt[t], M, K, s, 16)) begin
          n_fp++;
          check(!f, "reference member passes");
        end else begin
          n_caught++;
          check(f && c == FC_NOT_MEMBER, "forged source faults");
        end
      end
    end
    $display("%-18s targets=%0d brl=%0d avg_brl_cycles=%.2f at_3_cycles=%0d forged_caught=%0d forged_admitted=%0d",
             name, nt, n_brl, real'(sum_lat) / real'(n_brl), n_hit3, n_caught, n_fp);
    check(n_hit3 > 0, "3-cycle hits seen");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run("bench-Func", 2, 100);
    run("trio-snprintf-CFG", 13, 200);
    run("picojpeg-CFG", 15, 300);
    run("cover-CFG", 181, 1000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
