// bloom_probe: Bloom filter membership test by double hashing.
//
// Following the paper, the K probe positions are
//     p_i = (h1 + i*h2) mod m,  i = 0 .. K-1,
// and the source is a member when all K filter bits are 1. The K
// positions are formed by reducing h1 and h2 modulo m once and then
// adding h2 mod m K-1 times with a conditional subtract, which gives the
// same values as the formula without K multipliers. The filter is held
// LSB first: bit p of the filter is filter[p]. Bits at or above m are
// never probed.
//
// Own choices: M_MAX (the widest filter the hardware holds) = 256 and
// K = 4; the paper fixes neither. A descriptor with m = 0 is treated
// as an empty filter (member = 0); the caller flags it as a bad
// descriptor.
//
// Purely combinational (the AND-reduce cycle of brl).
module bloom_probe #(
  parameter int unsigned M_MAX  = 256,
  parameter int unsigned K      = 4,
  parameter int unsigned HASH_W = 16,
  localparam int unsigned MW    = $clog2(M_MAX + 1)
) (
  input  logic [HASH_W-1:0]       h1,
  input  logic [HASH_W-1:0]       h2,
  input  logic [MW-1:0]           m,
  input  logic [M_MAX-1:0]        filter,
  output logic [K-1:0][MW-1:0]    pos,
  output logic [K-1:0]            bits,
  output logic                    member
);

  logic [MW-1:0] m_safe;
  logic [MW-1:0] a0, d;
  logic [MW:0]   sum;
  logic [MW-1:0] acc;

  always_comb begin
    m_safe = (m == '0) ? MW'(1) : m;
    a0     = MW'(HASH_W'(h1) % HASH_W'(m_safe));
    d      = MW'(HASH_W'(h2) % HASH_W'(m_safe));
    acc    = a0;
    sum    = '0;
    for (int i = 0; i < int'(K); i++) begin
      pos[i] = acc;
      sum = {1'b0, acc} + {1'b0, d};
      if (sum >= {1'b0, m_safe}) sum = sum - {1'b0, m_safe};
      acc = sum[MW-1:0];
    end
    for (int i = 0; i < int'(K); i++) begin
      bits[i] = filter[pos[i][$clog2(M_MAX)-1:0]];
    end
    member = (m != '0) && (&bits);
  end

endmodule
