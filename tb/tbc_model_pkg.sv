// tbc_model_pkg -- reference functions for the testbenches.
//
// toy_enc / toy_dec form a stand-in 24-bit tweakable block cipher with a
// 40-bit tweak and a 256-bit key: an 8-round balanced Feistel network on two
// 12-bit halves. It is NOT BipBip. It only gives the testbenches a keyed,
// tweak-dependent permutation whose inverse is known, so that encrypt ->
// store -> decrypt round trips and encrypted-tag hits can be checked
// end to end.
//
// word_enc / word_dec apply it to a 64-bit word with the C3 layout
// (block = W[57:34], tweak = W[63:58] , W[33:0]), written out here with
// explicit bit slices, independently of the RTL package.
package tbc_model_pkg;

  // 256-bit test key: the ASCII string "SuperCoolBipBipPasswordForTestin".
  localparam logic [255:0] TEST_KEY = "SuperCoolBipBipPasswordForTestin";

  localparam int ROUNDS = 8;

  function automatic logic [11:0] rf(logic [11:0] x, logic [39:0] t,
                                     logic [255:0] k, int r);
    logic [11:0] v;
    logic [23:0] m;
    v = x ^ k[32*(r%8) +: 12] ^ t[(7*r) % 28 +: 12];
    m = 24'(v) * 24'd2661;                 // odd multiplier: diffusion
    v = m[11:0] ^ m[23:12];
    v = {v[6:0], v[11:7]} ^ (v & {v[0], v[11:1]});
    return v ^ k[32*(r%8) + 16 +: 12];
  endfunction

  function automatic logic [23:0] toy_enc(logic [255:0] k, logic [39:0] t,
                                          logic [23:0] p);
    logic [11:0] l, r, n;
    l = p[23:12];
    r = p[11:0];
    for (int i = 0; i < ROUNDS; i++) begin
      n = l ^ rf(r, t, k, i);
      l = r;
      r = n;
    end
    return {l, r};
  endfunction

  function automatic logic [23:0] toy_dec(logic [255:0] k, logic [39:0] t,
                                          logic [23:0] c);
    logic [11:0] l, r, n;
    l = c[23:12];
    r = c[11:0];
    for (int i = ROUNDS - 1; i >= 0; i--) begin
      n = r ^ rf(l, t, k, i);
      r = l;
      l = n;
    end
    return {l, r};
  endfunction

  function automatic logic [63:0] word_enc(logic [255:0] k, logic [63:0] w);
    logic [39:0] t;
    t = {w[63:58], w[33:0]};
    return {w[63:58], toy_enc(k, t, w[57:34]), w[33:0]};
  endfunction

  function automatic logic [63:0] word_dec(logic [255:0] k, logic [63:0] w);
    logic [39:0] t;
    t = {w[63:58], w[33:0]};
    return {w[63:58], toy_dec(k, t, w[57:34]), w[33:0]};
  endfunction

  // Encrypted form of a 52-bit logical tag as it is stored in the tag array:
  // bits 63:12 of the encrypted padded word {tag, 12'b0}.
  function automatic logic [51:0] tag_enc(logic [255:0] k, logic [51:0] tag);
    logic [63:0] w;
    w = word_enc(k, {tag, 12'h000});
    return w[63:12];
  endfunction

  // Published word pairs: the five reference vectors and the data word of the
  // board round trip. plain -> stored under the paper's test key, given here
  // as the 24-bit block, its 40-bit tweak and the 24-bit ciphertext slice
  // (bits 57:34 of the two 64-bit values).
  typedef struct packed {
    logic [63:0] plain;
    logic [63:0] stored;
  } pub_pair_t;

  localparam int N_PUB = 6;
  localparam pub_pair_t PUB [N_PUB] = '{
    '{64'h0000000000000000, 64'h00CD22C000000000},
    '{64'h123456789ABCDEF0, 64'h10A93BE49ABCDEF0},
    '{64'hFEDCBA9876543210, 64'hFF7C6AEC76543210},
    '{64'h0000000400000000, 64'h015D888400000000},
    '{64'hFFFFFFFFFFFFFFFF, 64'hFFB9B073FFFFFFFF},
    '{64'h0123456789ABCDEF, 64'h0008C70789ABCDEF}
  };

  // 1 and the published result slice if {block, tweak} is a published pair.
  function automatic logic pub_lookup(logic decrypt, logic [23:0] b,
                                      logic [39:0] t, output logic [23:0] r);
    for (int i = 0; i < N_PUB; i++) begin
      logic [63:0] p, c;
      p = PUB[i].plain;
      c = PUB[i].stored;
      if ({p[63:58], p[33:0]} == t) begin
        if (!decrypt && p[57:34] == b) begin r = c[57:34]; return 1'b1; end
        if ( decrypt && c[57:34] == b) begin r = p[57:34]; return 1'b1; end
      end
    end
    r = '0;
    return 1'b0;
  endfunction

endpackage
