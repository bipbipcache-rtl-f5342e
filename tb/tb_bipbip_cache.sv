// tb_bipbip_cache -- end-to-end test of the encrypted cache at its full
// default size (128 sets x 4 words), with behavioural 24-bit cipher cores
// attached: a 6-cycle encryptor and two 3-cycle decryptors running the toy
// cipher of tbc_model_pkg under one key.
//
// Flow:
//   1. Provision all 128 sets with random logical tags, stored encrypted.
//      Every eighth set is left invalid.
//   2. Write every word of every valid set (pipelined, one request per cycle).
//   3. Run the paper's board round trip: data 0x0123456789ABCDEF at the
//      address 0x00000000ABCD1234.
//   4. Run random mixed traffic: read and write hits, tag misses,
//      invalid-line misses, and reads that follow a write to the same word
//      within the 6-cycle commit window.
// A cycle-exact reference model predicts every response (cycle 3), every
// write commit (cycle 6), the array contents (visible from cycle 7 on) and
// the dirty bits. On every read hit the word leaving the array is checked to
// be the ciphertext of the plaintext, with the 40 tweak bits unchanged (seen
// on the data decryptor's core port). Each mechanism is counted, and one
// that never occurs counts as a failure.
module tb_bipbip_cache;
  import bipbip_cache_pkg::*;
  import tbc_model_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  // ------------------------------------------------------------------ DUT
  logic   req_valid, req_write;
  addr_t  req_addr;
  word_t  req_wdata;
  logic   resp_valid, resp_write, resp_hit, wr_commit;
  word_t  resp_rdata;
  logic   prov_we, prov_valid;
  set_t   prov_set, dq_set;
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
    .dirty_query_set_i(dq_set), .dirty_query_o(dq),
    .enc_core_block_o(e_bo), .enc_core_tweak_o(e_to), .enc_core_block_i(e_bi),
    .ddec_core_block_o(dd_bo), .ddec_core_tweak_o(dd_to), .ddec_core_block_i(dd_bi),
    .tdec_core_block_o(td_bo), .tdec_core_tweak_o(td_to), .tdec_core_block_i(td_bi));

  tbc_core_model #(.LATENCY(6), .DECRYPT(1'b0)) u_enc_core (
    .clk_i(clk), .block_i(e_bo), .tweak_i(e_to), .block_o(e_bi));
  tbc_core_model #(.LATENCY(3), .DECRYPT(1'b1)) u_ddec_core (
    .clk_i(clk), .block_i(dd_bo), .tweak_i(dd_to), .block_o(dd_bi));
  tbc_core_model #(.LATENCY(3), .DECRYPT(1'b1)) u_tdec_core (
    .clk_i(clk), .block_i(td_bo), .tweak_i(td_to), .block_o(td_bi));

  // ------------------------------------------------------ reference model
  int unsigned ecount = 0;            // rising edges so far
  always @(posedge clk) ecount <= ecount + 1;

  logic [51:0] ref_tag   [128];
  logic        ref_valid [128];
  logic [63:0] ref_plain [128][4];
  logic        ref_dirty [128];

  typedef struct { int unsigned r; logic [6:0] set; logic [1:0] woff; logic [63:0] data; } wr_t;
  wr_t pend[$];                       // committed writes not yet in the array

  typedef struct { int unsigned r; logic wr; logic hit; logic chk_data; logic [63:0] data; } rsp_t;
  rsp_t rspq[$];
  bit   exp_commit [int unsigned];

  // mechanism counters
  int n_rd_hit, n_rd_miss_tag, n_rd_miss_inv, n_wr_commit, n_wr_drop_tag,
      n_wr_drop_inv, n_b2b, n_raw_window, n_dirty_set, n_roundtrip;
  int n_cipher_at_rest;
  logic [63:0] last_stored;
  logic last_was_write;
  logic [8:0] last_wr_word;
  int unsigned last_wr_r;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 30) $display("FAIL %s (edge %0d)", what, ecount);
    end
  endtask

  // Apply writes whose array update edge (r + 7) is not later than cycle r.
  function automatic void retire(int unsigned r);
    while (pend.size() > 0 && pend[0].r + 7 <= r) begin
      wr_t w;
      w = pend.pop_front();
      ref_plain[w.set][w.woff] = w.data;
      ref_dirty[w.set] = 1'b1;
    end
  endfunction

  // Present one request during the current cycle (inputs change 1 time unit
  // after a rising edge and are sampled on the next one).
  task automatic request(logic wr, logic [63:0] addr, logic [63:0] wdata);
    addr_t a;
    int unsigned r;
    logic hit;
    rsp_t e;
    a = addr_t'(addr);
    r = ecount;
    retire(r);
    hit = ref_valid[a.set] && (ref_tag[a.set] == a.tag);
    if (last_was_write && r == last_wr_r + 1) n_b2b++;
    e = '{r: r, wr: wr, hit: hit, chk_data: hit, data: ref_plain[a.set][a.woff]};
    if (!wr) begin
      if (hit) n_rd_hit++;
      else if (!ref_valid[a.set]) n_rd_miss_inv++;
      else n_rd_miss_tag++;
      if (hit && last_was_write && last_wr_word == {a.set, a.woff} && r - last_wr_r < 7) begin
        n_raw_window++;
      end
    end else begin
      if (hit) begin
        pend.push_back('{r: r, set: a.set, woff: a.woff, data: wdata});
        exp_commit[r + 6] = 1'b1;
        n_wr_commit++;
        last_wr_word = {a.set, a.woff};
        last_wr_r = r;
      end else if (!ref_valid[a.set]) n_wr_drop_inv++;
      else n_wr_drop_tag++;
    end
    last_was_write = wr && hit;
    rspq.push_back(e);
    req_valid = 1'b1; req_write = wr; req_addr = a; req_wdata = wdata;
    #0.1;
    // The cores see the C3 split of the word; on a read the word leaving the
    // array is the ciphertext of the plaintext last committed there.
    if (wr) begin
      check("encryptor block = W[57:34]", e_bo == wdata[57:34]);
      check("encryptor tweak = W[63:58],W[33:0]", e_to == {wdata[63:58], wdata[33:0]});
    end else if (hit) begin
      last_stored = {dd_to[39:34], dd_bo, dd_to[33:0]};
      check($sformatf("stored word %h is ciphertext of %h", last_stored, e.data),
            last_stored == word_enc(TEST_KEY, e.data));
      n_cipher_at_rest++;
    end
    check("tag decryptor sees padded stored tag",
          {td_to[39:34], td_bo, td_to[33:0]} ==
          {tag_enc(TEST_KEY, ref_tag[a.set]), 12'h000});
    @(posedge clk); #1;
    req_valid = 1'b0;
  endtask

  task automatic idle(int n);
    req_valid = 1'b0;
    last_was_write = 1'b0;
    repeat (n) begin @(posedge clk); #1; end
  endtask

  function automatic logic [63:0] mkaddr(logic [51:0] tag, logic [6:0] set, logic [1:0] woff);
    return {tag, set, woff, 3'(0)};
  endfunction

  // ---------------------------------------------------------------- monitor
  always @(negedge clk) if (rst_n) begin
    check("commit when expected", wr_commit == exp_commit.exists(ecount));
    if (exp_commit.exists(ecount)) exp_commit.delete(ecount);
    if (resp_valid) begin
      if (rspq.size() == 0) check("unexpected response", 1'b0);
      else begin
        rsp_t e;
        e = rspq.pop_front();
        check($sformatf("response at cycle 3 (req %0d)", e.r), ecount == e.r + 3);
        check("response write flag", resp_write == e.wr);
        check($sformatf("hit %0b exp %0b (req %0d)", resp_hit, e.hit, e.r), resp_hit == e.hit);
        if (!e.wr && e.chk_data)
          check($sformatf("rdata %h exp %h (req %0d)", resp_rdata, e.data, e.r),
                resp_rdata == e.data);
      end
    end else begin
      check("no response outstanding", rspq.size() == 0 || ecount < rspq[0].r + 3);
    end
  end

  // ----------------------------------------------------------- stimulus
  localparam logic [63:0] RT_ADDR = 64'h00000000ABCD1234;
  localparam logic [63:0] RT_DATA = 64'h0123456789ABCDEF;

  initial begin
    addr_t rt;
    rt = addr_t'(RT_ADDR);
    req_valid = 0; req_write = 0; req_addr = '0; req_wdata = '0;
    prov_we = 0; prov_set = '0; prov_tag = '0; prov_valid = 0; dq_set = '0;
    last_was_write = 0; last_wr_word = '0; last_wr_r = 0;
    {n_rd_hit, n_rd_miss_tag, n_rd_miss_inv, n_wr_commit, n_wr_drop_tag,
     n_wr_drop_inv, n_b2b, n_raw_window, n_dirty_set, n_roundtrip, n_cipher_at_rest} = '0;
    last_stored = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // 1. dirty bits clear after reset; provision tags
    for (int s = 0; s < 128; s++) begin
      dq_set = 7'(s); #0.1;
      check("dirty clear after reset", dq == 1'b0);
      ref_dirty[s] = 1'b0;
    end
    for (int s = 0; s < 128; s++) begin
      ref_tag[s]   = (7'(s) == rt.set) ? rt.tag : {$urandom, $urandom};
      ref_valid[s] = (s % 8) != 7;
      prov_we = 1; prov_set = 7'(s); prov_valid = ref_valid[s];
      prov_tag = tag_enc(TEST_KEY, ref_tag[s]);
      @(posedge clk); #1;
    end
    prov_we = 0;
    for (int s = 0; s < 128; s++) for (int w = 0; w < 4; w++) ref_plain[s][w] = '0;

    // 2. fill every word of every valid set, back to back
    for (int s = 0; s < 128; s++) begin
      if (!ref_valid[s]) continue;
      for (int w = 0; w < 4; w++)
        request(1'b1, mkaddr(ref_tag[s], 7'(s), 2'(w)), {$urandom, $urandom});
    end
    idle(10);
    retire(ecount);

    // 3. board round trip of the paper's example word
    request(1'b1, RT_ADDR, RT_DATA);
    idle(8);
    request(1'b0, RT_ADDR, '0);
    idle(4);
    begin
      logic [63:0] st;
      st = last_stored;
      check("round trip: stored word", st == word_enc(TEST_KEY, RT_DATA));
      check("round trip: tweak bits pass through",
            st[63:58] == RT_DATA[63:58] && st[33:0] == RT_DATA[33:0]);
      check("round trip: slice changed", st[57:34] != RT_DATA[57:34]);
      n_roundtrip++;
    end

    // 4. random traffic
    for (int i = 0; i < 4000; i++) begin
      logic [6:0] s;
      logic [1:0] w;
      logic [51:0] t;
      int kind;
      s = 7'($urandom);
      w = 2'($urandom);
      kind = $urandom % 10;
      t = ref_tag[s];
      if (kind == 0) t = t ^ (52'(1) << ($urandom % 52));   // tag miss
      if ($urandom % 12 == 0) begin
        // Read straight after the last write to the same word.
        request(1'b1, mkaddr(t, s, w), {$urandom, $urandom});
        if ($urandom % 2 == 0) idle($urandom % 8);
        request(1'b0, mkaddr(t, s, w), '0);
      end else begin
        request(kind < 5, mkaddr(t, s, w), {$urandom, $urandom});
      end
      if ($urandom % 16 == 0) idle(1 + $urandom % 3);
    end
    idle(12);
    retire(ecount);

    // dirty bits: exactly the sets that took a committed write
    for (int s = 0; s < 128; s++) begin
      dq_set = 7'(s); #0.1;
      check($sformatf("dirty bit of set %0d", s), dq == ref_dirty[s]);
      if (dq) n_dirty_set++;
    end

    check("read hits occurred", n_rd_hit > 0);
    check("read tag misses occurred", n_rd_miss_tag > 0);
    check("read invalid-line misses occurred", n_rd_miss_inv > 0);
    check("write commits occurred", n_wr_commit > 0);
    check("write drops on tag miss occurred", n_wr_drop_tag > 0);
    check("write drops on invalid line occurred", n_wr_drop_inv > 0);
    check("back-to-back requests after a write occurred", n_b2b > 0);
    check("reads inside the 6-cycle commit window occurred", n_raw_window > 0);
    check("dirty bits set", n_dirty_set > 0);
    check("round trip done", n_roundtrip == 1);
    check("ciphertext-at-rest reads occurred", n_cipher_at_rest > 0);
    check("all responses seen", rspq.size() == 0);
    check("all commits seen", exp_commit.num() == 0);
    $display("mechanisms: rd_hit=%0d rd_miss_tag=%0d rd_miss_inv=%0d wr_commit=%0d wr_drop_tag=%0d wr_drop_inv=%0d b2b=%0d raw_window=%0d dirty_sets=%0d roundtrip=%0d",
             n_rd_hit, n_rd_miss_tag, n_rd_miss_inv, n_wr_commit, n_wr_drop_tag,
             n_wr_drop_inv, n_b2b, n_raw_window, n_dirty_set, n_roundtrip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
