// tb_brstate_csr: checks the BRState register: bld sets sid and valid,
// brl (consume) clears only valid, the privileged write restores or
// clears the whole register and wins over bld, reset clears it.
// A shadow model is updated with the same rules and compared each cycle.
module tb_brstate_csr;
  import brl_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic bld_we, consume, priv_we;
  logic [30:0] bld_sid;
  brstate_t priv_wdata, state, model;

  brstate_csr dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cmp(input string what);
    checks++;
    if (state !== model) begin
      failures++;
      $display("FAIL %s: state=%h model=%h", what, state, model);
    end
  endtask

  initial begin
    bld_we = 0; consume = 0; priv_we = 0; bld_sid = '0; priv_wdata = '0;
    model = '0;
    #12 rst_n = 1;
    @(negedge clk); cmp("after reset");
    // bld then brl
    bld_we = 1; bld_sid = 31'h1234_5678; @(negedge clk); bld_we = 0;
    model = '{sid: 31'h1234_5678, valid: 1'b1}; cmp("bld");
    consume = 1; @(negedge clk); consume = 0;
    model.valid = 0; cmp("brl consume");
    // save / restore
    priv_we = 1; priv_wdata = '{sid: 31'h7fff_0001, valid: 1'b1}; bld_we = 1; bld_sid = 31'h5;
    @(negedge clk); priv_we = 0; bld_we = 0;
    model = '{sid: 31'h7fff_0001, valid: 1'b1}; cmp("priv over bld");
    // random traffic
    for (int n = 0; n < 3000; n++) begin
      bld_we = 1'($urandom_range(0, 3) == 0);
      consume = 1'($urandom_range(0, 3) == 0);
      priv_we = 1'($urandom_range(0, 9) == 0);
      bld_sid = 31'($urandom);
      priv_wdata = brstate_t'($urandom);
      @(negedge clk);
      if (priv_we) model = priv_wdata;
      else if (bld_we) model = '{sid: bld_sid, valid: 1'b1};
      else if (consume) model.valid = 1'b0;
      cmp("random");
    end
    // asynchronous reset
    rst_n = 0; #1; model = '0; cmp("reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
