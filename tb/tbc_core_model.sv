// tbc_core_model -- behavioural stand-in for one 24-bit BipBip cipher core.
// It is a fixed-latency pipeline: the result for {block_i, tweak_i} appears
// on block_o exactly LATENCY clock cycles later, one block per cycle. With
// DECRYPT = 0 it encrypts and with DECRYPT = 1 it decrypts, using the toy
// Feistel cipher of tbc_model_pkg (not BipBip; see there). The real BipBip
// cores have the same ports and timing: a 6-cycle encryptor and 3-cycle
// decryptors. With PUBLISHED set, the model answers the published BipBip word
// pairs of tbc_model_pkg with their published results and uses the toy cipher
// for everything else. A cache test can then store exactly the published
// ciphertext words.
module tbc_core_model
  import tbc_model_pkg::*;
#(
  parameter int unsigned  LATENCY = 3,
  parameter bit           DECRYPT = 1'b1,
  parameter logic [255:0] KEY     = TEST_KEY,
  parameter bit           PUBLISHED = 1'b0
) (
  input  logic        clk_i,
  input  logic [23:0] block_i,
  input  logic [39:0] tweak_i,
  output logic [23:0] block_o
);

  logic [23:0] pipe_q [LATENCY];

  logic [23:0] pub_r;
  logic        pub_hit;
  always_comb pub_hit = PUBLISHED && pub_lookup(DECRYPT, block_i, tweak_i, pub_r);

  always_ff @(posedge clk_i) begin
    pipe_q[0] <= pub_hit ? pub_r :
                 DECRYPT ? toy_dec(KEY, tweak_i, block_i)
                         : toy_enc(KEY, tweak_i, block_i);
    for (int i = 1; i < LATENCY; i++) pipe_q[i] <= pipe_q[i-1];
  end

  assign block_o = pipe_q[LATENCY-1];

endmodule
