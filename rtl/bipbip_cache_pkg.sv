// bipbip_cache_pkg -- shared constants, types and word-mapping functions of the
// encrypted direct-mapped cache.
//
// Address split (from the cache organisation): tag = addr[63:12] (52 bits),
// set index = addr[11:5] (7 bits, 128 sets), word offset = addr[4:3] (2 bits,
// four 64-bit words per line), byte offset = addr[2:0] (3 bits, unused by the
// word-wide cache).
//
// Word mapping onto the 24-bit tweakable block cipher (C3 pointer layout):
//   tweak     T = W[63:58] , W[33:0]   (40 bits)
//   plaintext P = W[57:34]             (24 bits)
//   stored    W' = T[39:34] , E_K^T(P) , T[33:0]
// The 12-bit zero pad of the 52-bit tag (tag , 0^12) uses the same layout.
//
// Latencies follow the paper: 6 cycles for the data encryptor, 3 cycles for
// both decryptors. Everything here is taken from the paper except the struct
// and function names.
package bipbip_cache_pkg;

  localparam int unsigned ADDR_W   = 64;
  localparam int unsigned WORD_W   = 64;
  localparam int unsigned TAG_W    = 52;
  localparam int unsigned SET_W    = 7;
  localparam int unsigned WOFF_W   = 2;
  localparam int unsigned BOFF_W   = 3;
  localparam int unsigned NUM_SETS = 1 << SET_W;   // 128
  localparam int unsigned NUM_WORDS = 1 << WOFF_W; // 4 words = 256-bit line

  localparam int unsigned BLOCK_W  = 24;            // BipBip block size
  localparam int unsigned TWEAK_W  = 40;            // BipBip tweak size
  localparam int unsigned KEY_W    = 256;           // BipBip master key
  localparam int unsigned TAG_PAD_W = WORD_W - TAG_W; // 12 zero bits

  localparam int unsigned ENC_LAT  = 6;             // data encryptor latency
  localparam int unsigned DEC_LAT  = 3;             // data / tag decryptor latency

  // Bit positions of the C3 layout inside a 64-bit word.
  localparam int unsigned P_LSB    = 34;            // P = W[57:34]
  localparam int unsigned P_MSB    = P_LSB + BLOCK_W - 1;
  localparam int unsigned THI_W    = WORD_W - 1 - P_MSB;  // 6 bits W[63:58]
  localparam int unsigned TLO_W    = P_LSB;               // 34 bits W[33:0]

  typedef logic [WORD_W-1:0]  word_t;
  typedef logic [TAG_W-1:0]   tag_t;
  typedef logic [SET_W-1:0]   set_t;
  typedef logic [WOFF_W-1:0]  woff_t;
  typedef logic [BLOCK_W-1:0] block_t;
  typedef logic [TWEAK_W-1:0] tweak_t;

  typedef struct packed {
    tag_t                tag;
    set_t                set;
    woff_t               woff;
    logic [BOFF_W-1:0]   boff;
  } addr_t;

  // 40-bit tweak of a word: W[63:58] , W[33:0].
  function automatic tweak_t c3_tweak(word_t w);
    return {w[WORD_W-1:P_MSB+1], w[TLO_W-1:0]};
  endfunction

  // 24-bit cipher input of a word: W[57:34].
  function automatic block_t c3_block(word_t w);
    return w[P_MSB:P_LSB];
  endfunction

  // Reassemble a word from its tweak and a (de/en)crypted 24-bit slice.
  function automatic word_t c3_merge(tweak_t t, block_t b);
    return {t[TWEAK_W-1:TLO_W], b, t[TLO_W-1:0]};
  endfunction

endpackage
