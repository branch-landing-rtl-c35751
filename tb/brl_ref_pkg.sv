// brl_ref_pkg: reference model used by the Branch Landing testbenches.
//
// Written from the specification, not from the RTL: the H3 base hashes
// (rows from a 32-bit xorshift x^=x<<13, x^=x>>17, x^=x<<5 started at the
// seed), the double-hashing positions computed directly as
// (h1 + i*h2) mod m with wide arithmetic, and helpers that build a
// filter from a list of authorised SIDs and lay out the metadata in
// memory (descriptor of SID_T at base + 8*SID_T: {filter address, m}).
package brl_ref_pkg;

  localparam logic [31:0] REF_SEED1 = 32'h9E37_79B9;
  localparam logic [31:0] REF_SEED2 = 32'h85EB_CA6B;

  function automatic logic [31:0] xorshift(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  // H3 hash with hw output bits (hw <= 32) of a 31-bit SID.
  function automatic logic [31:0] ref_h3(input logic [31:0] seed,
                                         input logic [30:0] sid,
                                         input int hw);
    logic [31:0] st, acc, mask;
    st   = seed;
    acc  = '0;
    mask = (hw >= 32) ? 32'hFFFF_FFFF : ((32'd1 << hw) - 1);
    for (int j = 0; j < 31; j++) begin
      st = xorshift(st);
      if (sid[j]) acc ^= (st & mask);
    end
    return acc;
  endfunction

  function automatic int unsigned ref_pos(input logic [31:0] h1,
                                          input logic [31:0] h2,
                                          input int unsigned m,
                                          input int unsigned i);
    longint unsigned v;
    v = longint'(h1) + longint'(i) * longint'(h2);
    return int'(v % longint'(m));
  endfunction

  // Membership of sid in a filter of m bits (bit p = filt[p]).
  function automatic bit ref_member(input logic [1023:0] filt,
                                    input int unsigned m,
                                    input int unsigned k,
                                    input logic [30:0] sid,
                                    input int hw);
    logic [31:0] h1, h2;
    if (m == 0) return 1'b0;
    h1 = ref_h3(REF_SEED1, sid, hw);
    h2 = ref_h3(REF_SEED2, sid, hw);
    for (int unsigned i = 0; i < k; i++)
      if (!filt[ref_pos(h1, h2, m, i)]) return 1'b0;
    return 1'b1;
  endfunction

  // Set the k bits of sid in a filter of m bits.
  function automatic logic [1023:0] ref_insert(input logic [1023:0] filt,
                                               input int unsigned m,
                                               input int unsigned k,
                                               input logic [30:0] sid,
                                               input int hw);
    logic [31:0] h1, h2;
    logic [1023:0] f;
    f  = filt;
    h1 = ref_h3(REF_SEED1, sid, hw);
    h2 = ref_h3(REF_SEED2, sid, hw);
    for (int unsigned i = 0; i < k; i++) f[ref_pos(h1, h2, m, i)] = 1'b1;
    return f;
  endfunction

endpackage
