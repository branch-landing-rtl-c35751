// sid_hash: the two base hashes h1(SID) and h2(SID) of Branch Landing.
//
// The paper requires two fast, independent, deterministic base hashes
// computed combinationally in one cycle and names the H3 universal hash
// family as one suitable choice; it fixes neither the family nor any
// constant. This design uses H3: each hash output is the XOR of one
// HASH_W-bit row per set input bit,
//     h(x) = XOR over j with x[j] = 1 of Q[j].
// The rows Q[j] are fixed at elaboration from a seed with a 32-bit
// xorshift generator (x ^= x<<13; x ^= x>>17; x ^= x<<5, applied once
// per row, the row being the low HASH_W bits of the state). SEED1 and
// SEED2 give h1 and h2 different matrices. A compiler that builds the
// filters must use the same seeds.
//
// Interface: sid in, h1/h2 out; no clock (one cycle of logic).
module sid_hash #(
  parameter int unsigned SID_W  = 31,
  parameter int unsigned HASH_W = 16,
  parameter logic [31:0] SEED1  = 32'h9E37_79B9,
  parameter logic [31:0] SEED2  = 32'h85EB_CA6B
) (
  input  logic [SID_W-1:0]  sid,
  output logic [HASH_W-1:0] h1,
  output logic [HASH_W-1:0] h2
);

  typedef logic [SID_W*HASH_W-1:0] qmat_t;

  // Row j of the matrix sits in bits [j*HASH_W +: HASH_W].
  function automatic qmat_t gen_q(input logic [31:0] seed);
    logic [31:0] x;
    qmat_t       q;
    x = seed;
    q = '0;
    for (int j = 0; j < int'(SID_W); j++) begin
      x = x ^ (x << 13);
      x = x ^ (x >> 17);
      x = x ^ (x << 5);
      q[j*HASH_W +: HASH_W] = x[HASH_W-1:0];
    end
    return q;
  endfunction

  localparam qmat_t Q1 = gen_q(SEED1);
  localparam qmat_t Q2 = gen_q(SEED2);

  always_comb begin
    h1 = '0;
    h2 = '0;
    for (int j = 0; j < int'(SID_W); j++) begin
      if (sid[j]) begin
        h1 = h1 ^ Q1[j*HASH_W +: HASH_W];
        h2 = h2 ^ Q2[j*HASH_W +: HASH_W];
      end
    end
  end

endmodule
