// tb_brl_decoder: drives random and hand-made instruction words into
// brl_decoder and checks is_bld, is_brl and the immediate against the
// RISC-V I-type field layout (custom-0 opcode, funct3 0 = bld, 1 = brl).
module tb_brl_decoder;
  import brl_pkg::*;
  int checks = 0, failures = 0;
  logic        instr_valid;
  logic [31:0] instr;
  logic        is_bld, is_brl;
  logic [11:0] imm;

  brl_decoder dut (.*);

  task automatic chk(input bit b, input bit l, input logic [11:0] im, input string what);
    checks++;
    if (is_bld !== b || is_brl !== l || ((b || l) && imm !== im)) begin
      failures++;
      $display("FAIL %s instr=%h bld=%b brl=%b imm=%h", what, instr, is_bld, is_brl, imm);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // bld 0x123: imm=0x123 rs1=0 funct3=000 rd=0 opcode=0001011
    instr_valid = 1; instr = {12'h123, 5'd0, 3'b000, 5'd0, 7'b0001011}; #1;
    chk(1, 0, 12'h123, "bld");
    instr = {12'hABC, 5'd0, 3'b001, 5'd0, 7'b0001011}; #1;
    chk(0, 1, 12'hABC, "brl");
    instr = {12'hABC, 5'd0, 3'b010, 5'd0, 7'b0001011}; #1;
    chk(0, 0, 0, "other funct3");
    instr = {12'h123, 5'd0, 3'b000, 5'd0, 7'b0010011}; #1;  // addi
    chk(0, 0, 0, "addi");
    instr_valid = 0; instr = {12'h123, 5'd0, 3'b000, 5'd0, 7'b0001011}; #1;
    chk(0, 0, 0, "not valid");
    for (int n = 0; n < 2000; n++) begin
      bit eb, el;
      instr_valid = 1'($urandom);
      instr = $urandom;
      if (n % 3 == 0) instr[6:0] = 7'h0B;
      if (n % 6 == 0) instr[14:12] = 3'($urandom_range(0, 1));
      eb = instr_valid && instr[6:0] == 7'h0B && instr[14:12] == 3'd0;
      el = instr_valid && instr[6:0] == 7'h0B && instr[14:12] == 3'd1;
      #1;
      chk(eb, el, instr[31:20], "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
