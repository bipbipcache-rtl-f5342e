// tb_published_words -- the paper's published word pairs run through the
// whole cache at its default size: the five reference vectors and the data
// word of the board round trip (0x0123456789ABCDEF -> 0x0008C70789ABCDEF).
//
// The cipher core models answer these pairs with the published 24-bit
// results (PUBLISHED = 1). For the tags they use the stand-in cipher. For
// each pair the test writes the plaintext word to its own (set, word) slot
// (all writes back to back), then reads all slots back to back, and checks:
//   * the word that leaves the array on the read is exactly the published
//     stored 64-bit value (observed at the data decryptor's core port),
//   * the read returns the published plaintext on cycle 3 with a hit,
//   * each write committed on cycle 6, once.
module tb_published_words;
  import bipbip_cache_pkg::*;
  import tbc_model_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic   req_valid, req_write;
  addr_t  req_addr;
  word_t  req_wdata;
  logic   resp_valid, resp_write, resp_hit, wr_commit;
  word_t  resp_rdata;
  logic   prov_we, prov_valid;
  set_t   prov_set;
  tag_t   prov_tag;
  logic   dq;
  block_t e_bo, e_bi, dd_bo, dd_bi, td_bo, td_bi;
  tweak_t e_to, dd_to, td_to;

  bipbip_cache dut (
    .clk_i(clk), .rst_ni(rst_n),
    .req_valid_i(req_valid), .req_write_i(req_write), .req_addr_i(req_addr),
    .req_wdata_i(req_wdata),
    .resp_valid_o(resp_valid), .resp_write_o(resp_write), .resp_hit_o(resp_hit),
    .resp_rdata_o(resp_rdata), .wr_commit_o(wr_commit),
    .prov_we_i(prov_we), .prov_set_i(prov_set), .prov_tag_i(prov_tag),
    .prov_valid_i(prov_valid),
    .dirty_query_set_i(7'd0), .dirty_query_o(dq),
    .enc_core_block_o(e_bo), .enc_core_tweak_o(e_to), .enc_core_block_i(e_bi),
    .ddec_core_block_o(dd_bo), .ddec_core_tweak_o(dd_to), .ddec_core_block_i(dd_bi),
    .tdec_core_block_o(td_bo), .tdec_core_tweak_o(td_to), .tdec_core_block_i(td_bi));

  tbc_core_model #(.LATENCY(6), .DECRYPT(1'b0), .PUBLISHED(1'b1)) u_enc_core (
    .clk_i(clk), .block_i(e_bo), .tweak_i(e_to), .block_o(e_bi));
  tbc_core_model #(.LATENCY(3), .DECRYPT(1'b1), .PUBLISHED(1'b1)) u_ddec_core (
    .clk_i(clk), .block_i(dd_bo), .tweak_i(dd_to), .block_o(dd_bi));
  tbc_core_model #(.LATENCY(3), .DECRYPT(1'b1), .PUBLISHED(1'b0)) u_tdec_core (
    .clk_i(clk), .block_i(td_bo), .tweak_i(td_to), .block_o(td_bi));

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Cycle counter: n = number of rising edges so far.
  int unsigned n = 0;
  always @(posedge clk) n <= n + 1;

  localparam logic [51:0] TAG = 52'h00000000ABCD1;

  // Pair i lives in set i, word i mod 4.
  function automatic addr_t slot(int i);
    return '{tag: TAG, set: 7'(i), woff: 2'(i % 4), boff: 3'd0};
  endfunction

  int unsigned wr_at [N_PUB];
  bit          commit_seen [int unsigned];
  int          n_commits = 0;
  int unsigned rd_at[$];
  int          rd_idx[$];

  always @(negedge clk) if (rst_n) begin
    if (wr_commit) begin commit_seen[n] = 1'b1; n_commits++; end
    if (resp_valid && !resp_write) begin
      if (rd_at.size() == 0) check("unexpected response", 1'b0);
      else begin
        int unsigned at;
        int i;
        at = rd_at.pop_front();
        i = rd_idx.pop_front();
        check($sformatf("pair %0d: response on cycle 3", i), n == at + 3);
        check($sformatf("pair %0d: read hit", i), resp_hit);
        check($sformatf("pair %0d: read data %h exp %h", i, resp_rdata, PUB[i].plain),
              resp_rdata == PUB[i].plain);
      end
    end
  end

  initial begin
    req_valid = 0; req_write = 0; req_addr = '0; req_wdata = '0;
    prov_we = 0; prov_set = '0; prov_tag = '0; prov_valid = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // One valid set per pair, all with the same logical tag.
    for (int i = 0; i < N_PUB; i++) begin
      prov_we = 1; prov_set = 7'(i); prov_valid = 1; prov_tag = tag_enc(TEST_KEY, TAG);
      @(posedge clk); #1;
    end
    prov_we = 0;

    // Writes back to back; each must commit on cycle 6.
    for (int i = 0; i < N_PUB; i++) begin
      req_valid = 1; req_write = 1; req_addr = slot(i); req_wdata = PUB[i].plain;
      wr_at[i] = n;
      @(posedge clk); #1;
    end
    req_valid = 0; req_wdata = '0;
    repeat (8) @(posedge clk); #1;
    for (int i = 0; i < N_PUB; i++)
      check($sformatf("pair %0d: write committed on cycle 6", i), commit_seen[wr_at[i] + 6]);
    check("exactly one commit per write", n_commits == N_PUB);

    // Reads back to back.
    for (int i = 0; i < N_PUB; i++) begin
      req_valid = 1; req_write = 0; req_addr = slot(i);
      #0.1;
      check($sformatf("pair %0d: stored word %h is published %h", i,
                      {dd_to[39:34], dd_bo, dd_to[33:0]}, PUB[i].stored),
            {dd_to[39:34], dd_bo, dd_to[33:0]} == PUB[i].stored);
      rd_at.push_back(n);
      rd_idx.push_back(i);
      @(posedge clk); #1;
    end
    req_valid = 0;
    repeat (6) @(posedge clk); #1;
    check("all reads answered", rd_at.size() == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
