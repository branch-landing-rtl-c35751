// tb_sid_hash: compares h1/h2 of sid_hash with the reference H3 model
// for walking-one and random SIDs, and checks the H3 linearity
// h(a ^ b) = h(a) ^ h(b).
module tb_sid_hash;
  import brl_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [30:0] sid;
  logic [15:0] h1, h2;

  sid_hash dut (.sid, .h1, .h2);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input logic [30:0] s);
    logic [15:0] e1, e2;
    sid = s; #1;
    e1 = 16'(ref_h3(REF_SEED1, s, 16));
    e2 = 16'(ref_h3(REF_SEED2, s, 16));
    checks++;
    if (h1 !== e1 || h2 !== e2) begin
      failures++;
      $display("FAIL sid=%h h1=%h/%h h2=%h/%h", s, h1, e1, h2, e2);
    end
  endtask

  initial begin
    logic [30:0] a, b;
    logic [15:0] ha1, ha2, hb1, hb2;
    one('0);
    for (int j = 0; j < 31; j++) one(31'(1) << j);
    for (int n = 0; n < 2000; n++) one(31'($urandom));
    for (int n = 0; n < 200; n++) begin
      a = 31'($urandom); b = 31'($urandom);
      sid = a; #1; ha1 = h1; ha2 = h2;
      sid = b; #1; hb1 = h1; hb2 = h2;
      sid = a ^ b; #1;
      checks++;
      if (h1 !== (ha1 ^ hb1) || h2 !== (ha2 ^ hb2)) begin
        failures++; $display("FAIL linearity");
      end
    end
    // h1 and h2 must differ (independent matrices)
    checks++;
    sid = 31'h1; #1;
    if (h1 == h2) begin failures++; $display("FAIL h1==h2"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
