// tb_hit_detector -- self-checking test of the encrypted-tag hit detector.
//
// A behavioural 3-cycle decryptor core (toy cipher, see tbc_model_pkg) is
// attached. Each cycle the testbench presents a stored tag, a valid bit and
// a request tag from one of four cases: the stored tag is the encryption of
// the request tag (valid or not), the stored tag belongs to another tag, or
// the stored tag is the request tag in plaintext (which must not hit).
// Three cycles later hit_o, match_o and decrypted_tag_o are compared with
// values computed from the reference cipher.
module tb_hit_detector;
  import bipbip_cache_pkg::*;
  import tbc_model_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  tag_t   stored_tag, req_tag, dec_tag;
  logic   vbit, match, hit;
  block_t cbo, cbi;
  tweak_t cto;

  hit_detector dut (
    .clk_i(clk), .rst_ni(rst_n),
    .stored_tag_i(stored_tag), .valid_bit_i(vbit), .req_tag_i(req_tag),
    .decrypted_tag_o(dec_tag), .match_o(match), .hit_o(hit),
    .core_block_o(cbo), .core_tweak_o(cto), .core_block_i(cbi));

  tbc_core_model #(.LATENCY(3), .DECRYPT(1'b1)) u_core (
    .clk_i(clk), .block_i(cbo), .tweak_i(cto), .block_o(cbi));

  typedef struct { logic hit; logic match; logic [51:0] dtag; int unsigned at; } exp_t;
  exp_t q[$];
  int n_hit = 0, n_miss_valid = 0, n_miss_tag = 0;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    stored_tag = '0; req_tag = '0; vbit = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int i = 0; i < 300; i++) begin
      logic [51:0] t, other;
      int c;
      exp_t e;
      t = {$urandom, $urandom};
      other = t ^ (52'(1) << ($urandom % 52));
      c = $urandom % 4;
      req_tag = t;
      case (c)
        0: begin stored_tag = tag_enc(TEST_KEY, t); vbit = 1; e = '{1, 1, t, 0}; end
        1: begin stored_tag = tag_enc(TEST_KEY, t); vbit = 0; e = '{0, 1, t, 0}; end
        2: begin stored_tag = tag_enc(TEST_KEY, other); vbit = 1; e = '{0, 0, other, 0}; end
        default: begin
          // Plaintext tag in the array: decrypts to something else.
          logic [63:0] d;
          stored_tag = t; vbit = 1;
          d = word_dec(TEST_KEY, {t, 12'h000});
          e = '{d[63:12] == t, d[63:12] == t, d[63:12], 0};
        end
      endcase
      if (e.hit) n_hit++; else if (e.match) n_miss_valid++; else n_miss_tag++;
      @(posedge clk);
      e.at = cycle;
      q.push_back(e);
      #1;
    end
    repeat (4) @(posedge clk);
    check("all lookups answered", q.size() == 0);
    check("hits seen", n_hit > 0);
    check("invalid-line misses seen", n_miss_valid > 0);
    check("tag misses seen", n_miss_tag > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Results appear 3 cycles after the edge that sampled the lookup.
  int unsigned cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;
  always @(negedge clk) begin
    if (rst_n && q.size() > 0 && cycle == q[0].at + 3) begin
      exp_t e;
      e = q.pop_front();
      check($sformatf("hit %0b exp %0b", hit, e.hit), hit == e.hit);
      check($sformatf("match %0b exp %0b", match, e.match), match == e.match);
      check($sformatf("dtag %h exp %h", dec_tag, e.dtag), dec_tag == e.dtag);
    end
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
