// tb_desc_cache: lays out descriptors and filters in the behavioural
// metadata memory, then checks: a cold lookup misses; a refill reads
// exactly 2 + ceil(m/32) words and installs m and the filter; the entry
// then hits; a conflicting SID_T (same index, other tag) evicts it;
// descriptors with m = 0 or m > M_MAX end in refill_bad and install
// nothing; flush invalidates all entries.
module tb_desc_cache;
  localparam int M_MAX = 256, ENTRIES = 16;
  localparam logic [31:0] TBASE = 32'h0000_1000;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, flush = 0;
  logic [11:0] lookup_sidt, rd_sidt, refill_sidt;
  logic lookup_hit, refill_start = 0, refill_busy, refill_done, refill_bad;
  logic [8:0] rd_m;
  logic [M_MAX-1:0] rd_filter;
  logic [31:0] table_base = TBASE;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [31:0] mem_req_addr, mem_rsp_data;
  logic wr_en = 0; logic [31:0] wr_addr, wr_data;
  int reads;
  logic [M_MAX-1:0] golden [4096];
  int unsigned gm [4096];

  desc_cache dut (.*);
  meta_mem #(.WORDS(8192), .LATENCY(2)) u_mem (
    .clk, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_addr(mem_req_addr),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data),
    .wr_en, .wr_addr, .wr_data, .reads);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk); wr_en = 1; wr_addr = a; wr_data = d;
    @(negedge clk); wr_en = 0;
  endtask

  // Descriptor for sidt with filter at faddr of m bits, random contents.
  task automatic put(input int sidt, input logic [31:0] faddr, input int unsigned m);
    logic [M_MAX-1:0] f;
    int nw;
    f = '0;
    wr(TBASE + 8 * sidt, faddr);
    wr(TBASE + 8 * sidt + 4, m);
    nw = (m + 31) / 32;
    if (m > M_MAX) nw = 0;
    for (int w = 0; w < nw; w++) begin
      logic [31:0] d;
      d = $urandom;
      wr(faddr + 4 * w, d);
      f[w*32 +: 32] = d;
    end
    golden[sidt] = f;
    gm[sidt] = m;
  endtask

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic refill(input int sidt, input bit exp_bad);
    int r0;
    r0 = reads;
    @(negedge clk); refill_start = 1; refill_sidt = 12'(sidt);
    @(negedge clk); refill_start = 0;
    while (!refill_done) @(negedge clk);
    check(refill_bad == exp_bad, $sformatf("refill_bad sidt=%0d", sidt));
    if (!exp_bad)
      check(reads - r0 == 2 + (gm[sidt] + 31) / 32, $sformatf("read count sidt=%0d", sidt));
    @(negedge clk);
  endtask

  task automatic expect_entry(input int sidt, input bit hit);
    lookup_sidt = 12'(sidt); rd_sidt = 12'(sidt); #1;
    check(lookup_hit == hit, $sformatf("hit=%b sidt=%0d", lookup_hit, sidt));
    if (hit) begin
      check(rd_m == 9'(gm[sidt]), $sformatf("m sidt=%0d got %0d", sidt, rd_m));
      check(rd_filter == golden[sidt], $sformatf("filter sidt=%0d", sidt));
    end
  endtask

  initial begin
    lookup_sidt = 0; rd_sidt = 0; refill_sidt = 0; wr_addr = 0; wr_data = 0;
    #12 rst_n = 1;
    put(5, 32'h4000, 256);
    put(21, 32'h4100, 40);    // same index as 5
    put(7, 32'h4200, 1);
    put(300, 32'h4300, 100);
    put(9, 32'h4400, 0);      // bad: m = 0
    put(10, 32'h4500, 300);   // bad: m > M_MAX
    expect_entry(5, 0);
    refill(5, 0);   expect_entry(5, 1);
    refill(7, 0);   expect_entry(7, 1); expect_entry(5, 1);
    refill(300, 0); expect_entry(300, 1);
    refill(21, 0);  expect_entry(21, 1); expect_entry(5, 0);
    refill(9, 1);   expect_entry(9, 0);
    refill(10, 1);  expect_entry(10, 0);
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    expect_entry(21, 0); expect_entry(7, 0); expect_entry(300, 0);
    // many random descriptors
    for (int n = 0; n < 40; n++) begin
      int s, mm;
      s = $urandom_range(0, 4095);
      mm = $urandom_range(1, M_MAX);
      put(s, 32'h8000 + 32'(n * 64), mm);
      refill(s, 0);
      expect_entry(s, 1);
      expect_entry(s ^ 12'h010, 0);   // same index, other tag: evicted
      expect_entry(s ^ 12'h800, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
