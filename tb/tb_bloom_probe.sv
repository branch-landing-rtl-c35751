// tb_bloom_probe: random h1, h2, m and filters; the probe positions are
// compared with (h1 + i*h2) mod m computed directly, and member with the
// AND of the filter bits at those positions. Includes m = 1, m = M_MAX,
// m = 0 (never a member) and full / empty filters.
module tb_bloom_probe;
  import brl_ref_pkg::*;
  localparam int M_MAX = 256, K = 4, MW = 9;
  int checks = 0, failures = 0;
  logic [15:0] h1, h2;
  logic [MW-1:0] m;
  logic [M_MAX-1:0] filter;
  logic [K-1:0][MW-1:0] pos;
  logic [K-1:0] bits;
  logic member;

  bloom_probe dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one();
    bit exp;
    int p;
    #1;
    exp = (m != 0);
    for (int i = 0; i < K; i++) begin
      p = (m == 0) ? 0 : int'(ref_pos(32'(h1), 32'(h2), m, i));
      if (m != 0) begin
        checks++;
        if (pos[i] !== MW'(p)) begin
          failures++;
          $display("FAIL pos h1=%0d h2=%0d m=%0d i=%0d got=%0d exp=%0d", h1, h2, m, i, pos[i], p);
        end
        if (!filter[p]) exp = 0;
      end
    end
    checks++;
    if (member !== exp) begin
      failures++;
      $display("FAIL member h1=%0d h2=%0d m=%0d got=%b", h1, h2, m, member);
    end
  endtask

  initial begin
    h1 = 0; h2 = 0; m = 0; filter = '1; one();
    for (int n = 0; n < 3000; n++) begin
      h1 = 16'($urandom); h2 = 16'($urandom);
      case (n % 5)
        0: m = MW'(M_MAX);
        1: m = MW'($urandom_range(1, 8));
        default: m = MW'($urandom_range(1, M_MAX));
      endcase
      for (int w = 0; w < M_MAX / 32; w++) filter[w*32 +: 32] = $urandom | $urandom;
      if (n % 7 == 0) filter = '1;
      if (n % 11 == 0) filter = '0;
      one();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
