// hit_detector -- encrypted-tag hit detection of the cache ("hit_detector"
// in the block diagram).
//
// The tag array holds ciphertext tags, so a lookup has to decrypt before it
// can compare. The 52-bit stored tag of the addressed set is padded to a
// 64-bit word as {stored_tag, 12'b0} and sent through a 3-cycle BipBip
// decryptor (c3_word_cipher with LATENCY = 3 plus an external 24-bit core).
// The recovered logical tag is bits 63:12 of the result. Meanwhile the
// request's own address tag and the set's valid bit each pass through three
// registers ("D D D"). In cycle 3 the decrypted tag is compared with the
// delayed address tag (match_o), and hit_o = match & valid.
//
// Interface: stored_tag_i and valid_bit_i are the asynchronous reads of the
// tag and valid arrays for the set of the request presented in cycle 0, and
// req_tag_i is that request's address tag. match_o, hit_o and
// decrypted_tag_o refer to the request of 3 cycles earlier. One lookup may
// start every cycle. core_* connect the tag decryptor's 24-bit cipher core.
// core_block_o and core_tweak_o are wires from stored_tag_i, and the 12 low
// tweak bits are the constant pad, so synthesis lists them as idle outputs.
//
// Everything here follows the paper's text and block diagram. The only own
// choice is that the pad bits (11:0) are forced to zero in the comparison
// input rather than checked.
module hit_detector
  import bipbip_cache_pkg::*;
(
  input  logic   clk_i,
  input  logic   rst_ni,
  input  tag_t   stored_tag_i,
  input  logic   valid_bit_i,
  input  tag_t   req_tag_i,
  output tag_t   decrypted_tag_o,
  output logic   match_o,
  output logic   hit_o,
  // tag decryptor's 24-bit cipher core
  output block_t core_block_o,
  output tweak_t core_tweak_o,
  input  block_t core_block_i
);

  word_t padded_tag;
  word_t dec_word;
  tag_t  req_tag_q;
  logic  valid_bit_q;
  logic  dec_valid_unused;

  assign padded_tag = {stored_tag_i, {TAG_PAD_W{1'b0}}};

  c3_word_cipher #(.LATENCY(DEC_LAT)) u_tag_dec (
    .clk_i, .rst_ni,
    .valid_i      (1'b1),
    .word_i       (padded_tag),
    .valid_o      (dec_valid_unused),
    .word_o       (dec_word),
    .core_block_o,
    .core_tweak_o,
    .core_block_i
  );

  delay_line #(.WIDTH(TAG_W), .DEPTH(DEC_LAT), .RESET_STAGES(1'b0)) u_tag_dly (
    .clk_i, .rst_ni, .d_i(req_tag_i), .q_o(req_tag_q)
  );

  delay_line #(.WIDTH(1), .DEPTH(DEC_LAT), .RESET_STAGES(1'b1)) u_valid_dly (
    .clk_i, .rst_ni, .d_i(valid_bit_i), .q_o(valid_bit_q)
  );

  assign decrypted_tag_o = dec_word[WORD_W-1:TAG_PAD_W];
  assign match_o         = (decrypted_tag_o == req_tag_q);
  assign hit_o           = match_o && valid_bit_q;

endmodule
