// bipbip_cache -- direct-mapped cache whose data words and tags are stored
// encrypted under the BipBip tweakable block cipher (24-bit block, 40-bit
// tweak). This is the top level.
//
// Organisation: 128 sets, each with a 256-bit line of four 64-bit words, a
// 52-bit encrypted tag, a valid bit and a dirty bit. A 64-bit address splits
// into tag[63:12], set[11:5], word offset[4:3] and byte offset[2:0]. Every
// 64-bit data word is stored as {T_hi, E_K^T(P), T_lo}: only its bits 57:34
// go through the cipher, and the other 40 bits act as the tweak
// (see c3_word_cipher).
//
// Pipeline (cycle 0 = request presented on req_*):
//   read : cycle 0  tag, valid and the addressed data word are read
//                   asynchronously and enter the tag and data decryptors
//          cycle 3  decrypted tag compared with the delayed address tag;
//                   resp_valid_o, resp_hit_o, resp_rdata_o (plaintext) valid
//   write: cycle 0  req_wdata_i enters the 6-cycle encryptor at once, while
//                   the tag path checks for a hit as for a read
//          cycle 3  hit known (resp_hit_o)
//          cycle 6  ciphertext leaves the encryptor. If the request was a
//                   write and its hit (delayed 3 more cycles) was set,
//                   wr_commit_o rises, the word is written into the bank the
//                   decoder picks, and the set's dirty bit is set.
// The first three encryptor cycles thus overlap the hit check, and a write
// costs 3 cycles beyond the hit decision. A new request may enter every
// cycle.
//
// Misses: the tag and valid arrays are provisioned by software (prov_*
// port) and never rewritten by the controller. A read miss only reports
// resp_hit_o = 0, and a write miss is dropped. There is no refill and no
// write-back; the dirty bits are a hint readable through dirty_query_*.
//
// Cipher cores: the three 24-bit BipBip cores (a 6-cycle encryptor and two
// 3-cycle decryptors, all with the same 256-bit key) sit outside this module
// on the enc_core_*, ddec_core_* and tdec_core_* ports. Each receives
// {block, tweak} in one cycle and must return its result exactly 6 (enc) or
// 3 (dec) cycles later, one block per cycle.
//
// From the paper: sizes, address split, word layout, the three cipher
// instances and their latencies, the tag pad and delayed compare, the
// write-enable = write(delayed 6) AND hit(delayed 3) rule, the decoder, mux
// and dirty array. Own choices: request/response strobes, asynchronous array
// reads, the provisioning and dirty-query ports, and delaying the write's set
// and word offset by 6 cycles so that requests can be pipelined. The block
// diagram wires the raw set/offset to the write ports, which is the same
// thing when the address is held for six cycles. Read-after-write to the same
// word within 6 cycles returns the old contents (no forwarding).
module bipbip_cache
  import bipbip_cache_pkg::*;
(
  input  logic   clk_i,
  input  logic   rst_ni,

  // request (one per cycle)
  input  logic   req_valid_i,
  input  logic   req_write_i,
  input  addr_t  req_addr_i,
  input  word_t  req_wdata_i,

  // response, 3 cycles after the request
  output logic   resp_valid_o,
  output logic   resp_write_o,
  output logic   resp_hit_o,
  output word_t  resp_rdata_o,

  // write commit, 6 cycles after a write request that hit
  output logic   wr_commit_o,

  // software provisioning of the encrypted tag and valid arrays
  input  logic   prov_we_i,
  input  set_t   prov_set_i,
  input  tag_t   prov_tag_i,
  input  logic   prov_valid_i,

  // dirty-bit query (write-back hint), combinational
  input  set_t   dirty_query_set_i,
  output logic   dirty_query_o,

  // data encryptor core (6 cycles)
  output block_t enc_core_block_o,
  output tweak_t enc_core_tweak_o,
  input  block_t enc_core_block_i,
  // data decryptor core (3 cycles)
  output block_t ddec_core_block_o,
  output tweak_t ddec_core_tweak_o,
  input  block_t ddec_core_block_i,
  // tag decryptor core (3 cycles)
  output block_t tdec_core_block_o,
  output tweak_t tdec_core_tweak_o,
  input  block_t tdec_core_block_i
);

  // ---------------------------------------------------------------- lookup
  tag_t  stored_tag;
  logic  stored_valid;
  logic  hit3;
  logic  match_unused;
  tag_t  dec_tag_unused;

  sram_1r1w #(.WIDTH(TAG_W), .DEPTH(NUM_SETS), .CLEAR_ON_RESET(1'b0)) u_tag_rom (
    .clk_i, .rst_ni,
    .raddr_i (req_addr_i.set),
    .rdata_o (stored_tag),
    .we_i    (prov_we_i),
    .waddr_i (prov_set_i),
    .wdata_i (prov_tag_i)
  );

  sram_1r1w #(.WIDTH(1), .DEPTH(NUM_SETS), .CLEAR_ON_RESET(1'b1)) u_valid_rom (
    .clk_i, .rst_ni,
    .raddr_i (req_addr_i.set),
    .rdata_o (stored_valid),
    .we_i    (prov_we_i),
    .waddr_i (prov_set_i),
    .wdata_i (prov_valid_i)
  );

  hit_detector u_hit (
    .clk_i, .rst_ni,
    .stored_tag_i    (stored_tag),
    .valid_bit_i     (stored_valid),
    .req_tag_i       (req_addr_i.tag),
    .decrypted_tag_o (dec_tag_unused),
    .match_o         (match_unused),
    .hit_o           (hit3),
    .core_block_o    (tdec_core_block_o),
    .core_tweak_o    (tdec_core_tweak_o),
    .core_block_i    (tdec_core_block_i)
  );

  // ------------------------------------------------------------ read path
  word_t bank_rdata [NUM_WORDS];
  word_t sel_cipher_word;

  word_mux #(.WIDTH(WORD_W), .N_WORDS(NUM_WORDS)) u_mux (
    .words_i (bank_rdata),
    .sel_i   (req_addr_i.woff),
    .word_o  (sel_cipher_word)
  );

  c3_word_cipher #(.LATENCY(DEC_LAT)) u_data_dec (
    .clk_i, .rst_ni,
    .valid_i      (req_valid_i),
    .word_i       (sel_cipher_word),
    .valid_o      (resp_valid_o),
    .word_o       (resp_rdata_o),
    .core_block_o (ddec_core_block_o),
    .core_tweak_o (ddec_core_tweak_o),
    .core_block_i (ddec_core_block_i)
  );

  delay_line #(.WIDTH(1), .DEPTH(DEC_LAT), .RESET_STAGES(1'b1)) u_rwrite_dly (
    .clk_i, .rst_ni, .d_i(req_valid_i && req_write_i), .q_o(resp_write_o)
  );

  assign resp_hit_o = resp_valid_o && hit3;

  // ----------------------------------------------------------- write path
  word_t enc_word;
  logic  enc_valid_unused;
  logic  write6;
  logic  hit6;
  set_t  wr_set;
  woff_t wr_woff;
  logic [NUM_WORDS-1:0] bank_we;

  c3_word_cipher #(.LATENCY(ENC_LAT)) u_data_enc (
    .clk_i, .rst_ni,
    .valid_i      (req_valid_i && req_write_i),
    .word_i       (req_wdata_i),
    .valid_o      (enc_valid_unused),
    .word_o       (enc_word),
    .core_block_o (enc_core_block_o),
    .core_tweak_o (enc_core_tweak_o),
    .core_block_i (enc_core_block_i)
  );

  // "Write" through six registers, "hit" through three more.
  delay_line #(.WIDTH(1), .DEPTH(ENC_LAT), .RESET_STAGES(1'b1)) u_write_dly (
    .clk_i, .rst_ni, .d_i(req_valid_i && req_write_i), .q_o(write6)
  );

  delay_line #(.WIDTH(1), .DEPTH(ENC_LAT - DEC_LAT), .RESET_STAGES(1'b1)) u_hit_dly (
    .clk_i, .rst_ni, .d_i(resp_hit_o), .q_o(hit6)
  );

  delay_line #(.WIDTH(SET_W + WOFF_W), .DEPTH(ENC_LAT), .RESET_STAGES(1'b0)) u_waddr_dly (
    .clk_i, .rst_ni,
    .d_i ({req_addr_i.set, req_addr_i.woff}),
    .q_o ({wr_set, wr_woff})
  );

  assign wr_commit_o = write6 && hit6;

  write_decoder #(.N_OUT(NUM_WORDS)) u_dec (
    .en_i (wr_commit_o),
    .id_i (wr_woff),
    .o    (bank_we)
  );

  for (genvar w = 0; w < NUM_WORDS; w++) begin : g_bank
    sram_1r1w #(.WIDTH(WORD_W), .DEPTH(NUM_SETS), .CLEAR_ON_RESET(1'b0)) u_data (
      .clk_i, .rst_ni,
      .raddr_i (req_addr_i.set),
      .rdata_o (bank_rdata[w]),
      .we_i    (bank_we[w]),
      .waddr_i (wr_set),
      .wdata_i (enc_word)
    );
  end

  sram_1r1w #(.WIDTH(1), .DEPTH(NUM_SETS), .CLEAR_ON_RESET(1'b1)) u_dirty (
    .clk_i, .rst_ni,
    .raddr_i (dirty_query_set_i),
    .rdata_o (dirty_query_o),
    .we_i    (wr_commit_o),
    .waddr_i (wr_set),
    .wdata_i (1'b1)
  );

  // ------------------------------------------------------------ assertions
  // A commit needs a write request 6 cycles earlier that hit in cycle 3.
  a_commit_needs_write: assert property (@(posedge clk_i) disable iff (!rst_ni)
    wr_commit_o |-> ($past(req_valid_i && req_write_i, ENC_LAT) &&
                     $past(resp_hit_o, ENC_LAT - DEC_LAT)));
  // The decoder drives at most one bank, and only on a commit.
  a_one_bank: assert property (@(posedge clk_i) disable iff (!rst_ni)
    $onehot0(bank_we) && (wr_commit_o == (bank_we != '0)));

endmodule
