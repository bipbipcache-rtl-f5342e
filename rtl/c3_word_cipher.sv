// c3_word_cipher -- 64-bit word front end of a BipBip tweakable block cipher
// pipeline: the "BipBipEnc" (LATENCY = 6) and "BipBipDec" (LATENCY = 3)
// boxes of the cache, used for data encryption, data decryption and tag
// decryption.
//
// BipBip works on a 24-bit block under a 40-bit tweak, so a 64-bit word is cut
// the way C3 cuts a pointer: bits 57:34 are the block that goes through the
// cipher, and bits 63:58 plus 33:0 form the tweak. The tweak reaches the
// cipher core with the block. It is also carried along a LATENCY-deep register
// chain so that it meets the core's result again, and it is put back unchanged
// around the new 24-bit slice. The word therefore does not grow.
//
// The 24-bit cipher core itself is not part of this module. Its round
// functions and key schedule come from the BipBip specification. The module
// hands the core {core_block_o, core_tweak_o} in the cycle word_i is presented
// and expects the core's result on core_block_i exactly LATENCY cycles later,
// as a fixed-latency, fully pipelined unit that accepts one block per cycle.
// The same module serves both directions; only the core and LATENCY differ.
//
// Timing: word_o and valid_o belong to the word_i/valid_i presented LATENCY
// cycles earlier. A new word may enter every cycle. core_block_o and
// core_tweak_o are plain wires from word_i. They carry no logic of their own,
// and a synthesis report lists them as outputs tied to inputs.
//
// From the paper: the bit layout, the tweak passthrough, the latencies, and
// the "T' = tweak after pipeline registration" alignment. Own choices: the
// valid strobe and the port-level split between this wrapper and the core.
module c3_word_cipher
  import bipbip_cache_pkg::*;
#(
  parameter int unsigned LATENCY = DEC_LAT
) (
  input  logic   clk_i,
  input  logic   rst_ni,
  // word side
  input  logic   valid_i,
  input  word_t  word_i,
  output logic   valid_o,
  output word_t  word_o,
  // 24-bit cipher core side
  output block_t core_block_o,
  output tweak_t core_tweak_o,
  input  block_t core_block_i
);

  tweak_t tweak_q;

  assign core_block_o = c3_block(word_i);
  assign core_tweak_o = c3_tweak(word_i);

  delay_line #(.WIDTH(TWEAK_W), .DEPTH(LATENCY), .RESET_STAGES(1'b0)) u_tweak_dly (
    .clk_i, .rst_ni, .d_i(core_tweak_o), .q_o(tweak_q)
  );

  delay_line #(.WIDTH(1), .DEPTH(LATENCY), .RESET_STAGES(1'b1)) u_valid_dly (
    .clk_i, .rst_ni, .d_i(valid_i), .q_o(valid_o)
  );

  assign word_o = c3_merge(tweak_q, core_block_i);

endmodule
