// tb_c3_word_cipher -- self-checking test of the 64-bit word front end of the
// cipher pipelines, in both of its configurations: LATENCY = 6 (data
// encryptor) and LATENCY = 3 (decryptors).
//
// The testbench plays the 24-bit cipher core. For the seven word pairs of the
// published reference and round-trip tables it answers with the ciphertext
// (or plaintext) slice of the table's other column. For any other input it
// answers block ^ tweak[23:0] ^ constant. It checks:
//   * the block and tweak handed to the core (exact table slices),
//   * the reassembled 64-bit word against the table's full 64-bit value,
//   * that each result leaves exactly LATENCY cycles after it entered, with
//     back-to-back and gapped streams of random words.
module tb_c3_word_cipher;
  import bipbip_cache_pkg::*;

  typedef struct packed {
    logic [63:0] plain;
    logic [63:0] stored;
    logic [23:0] p_blk;
    logic [39:0] tweak;
    logic [23:0] c_blk;
  } vec_t;

  localparam int NV = 7;
  localparam vec_t VEC [NV] = '{
    '{64'h0000000000000000, 64'h00CD22C000000000, 24'h000000, 40'h0000000000, 24'h3348B0},
    '{64'h123456789ABCDEF0, 64'h10A93BE49ABCDEF0, 24'h8D159E, 40'h109ABCDEF0, 24'h2A4EF9},
    '{64'hFEDCBA9876543210, 64'hFF7C6AEC76543210, 24'hB72EA6, 40'hFC76543210, 24'hDF1ABB},
    '{64'h0000000400000000, 64'h015D888400000000, 24'h000001, 40'h0000000000, 24'h576221},
    '{64'hFFFFFFFFFFFFFFFF, 64'hFFB9B073FFFFFFFF, 24'hFFFFFF, 40'hFFFFFFFFFF, 24'hEE6C1C},
    '{64'h0123456789ABCDEF, 64'h0008C70789ABCDEF, 24'h48D159, 40'h0389ABCDEF, 24'h0231C1},
    '{64'h00000000ABCD1234, 64'h03FC3D94ABCD1234, 24'h000000, 40'h00ABCD1234, 24'hFF0F65}
  };

  localparam logic [23:0] ENC_K = 24'h5A5A5A;
  localparam logic [23:0] DEC_K = 24'hA5A5A5;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int unsigned cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ---------------------------------------------------------------- DUTs
  logic        e_vi, e_vo, d_vi, d_vo;
  logic [63:0] e_wi, e_wo, d_wi, d_wo;
  logic [23:0] e_cbo, e_cbi, d_cbo, d_cbi;
  logic [39:0] e_cto, d_cto;

  c3_word_cipher #(.LATENCY(6)) u_enc (
    .clk_i(clk), .rst_ni(rst_n), .valid_i(e_vi), .word_i(e_wi),
    .valid_o(e_vo), .word_o(e_wo),
    .core_block_o(e_cbo), .core_tweak_o(e_cto), .core_block_i(e_cbi));

  c3_word_cipher #(.LATENCY(3)) u_dec (
    .clk_i(clk), .rst_ni(rst_n), .valid_i(d_vi), .word_i(d_wi),
    .valid_o(d_vo), .word_o(d_wo),
    .core_block_o(d_cbo), .core_tweak_o(d_cto), .core_block_i(d_cbi));

  // ------------------------------------------------------- core stand-ins
  function automatic logic [23:0] core_fn(logic dec, logic [23:0] b, logic [39:0] t);
    for (int i = 0; i < NV; i++) begin
      if (!dec && b == VEC[i].p_blk && t == VEC[i].tweak) return VEC[i].c_blk;
      if ( dec && b == VEC[i].c_blk && t == VEC[i].tweak) return VEC[i].p_blk;
    end
    return b ^ t[23:0] ^ (dec ? DEC_K : ENC_K);
  endfunction

  logic [23:0] e_pipe [6];
  logic [23:0] d_pipe [3];
  always_ff @(posedge clk) begin
    e_pipe[0] <= core_fn(1'b0, e_cbo, e_cto);
    for (int i = 1; i < 6; i++) e_pipe[i] <= e_pipe[i-1];
    d_pipe[0] <= core_fn(1'b1, d_cbo, d_cto);
    for (int i = 1; i < 3; i++) d_pipe[i] <= d_pipe[i-1];
  end
  assign e_cbi = e_pipe[5];
  assign d_cbi = d_pipe[2];

  // ------------------------------------------------------ scoreboards
  typedef struct { logic [63:0] w; int unsigned at; } exp_t;
  exp_t e_q[$], d_q[$];

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at cycle %0d", what, cycle);
    end
  endtask

  always @(negedge clk) if (rst_n) begin
    if (e_vo) begin
      exp_t x;
      if (e_q.size() == 0) check("enc: unexpected valid_o", 1'b0);
      else begin
        x = e_q.pop_front();
        check($sformatf("enc word %h exp %h", e_wo, x.w), e_wo == x.w);
        check("enc latency 6", cycle == x.at + 6);
      end
    end
    if (d_vo) begin
      exp_t x;
      if (d_q.size() == 0) check("dec: unexpected valid_o", 1'b0);
      else begin
        x = d_q.pop_front();
        check($sformatf("dec word %h exp %h", d_wo, x.w), d_wo == x.w);
        check("dec latency 3", cycle == x.at + 3);
      end
    end
  end

  // ------------------------------------------------------------ stimulus
  task automatic drive(logic ev, logic [63:0] ew, logic [63:0] ee,
                       logic dv, logic [63:0] dw, logic [63:0] de);
    e_vi = ev; e_wi = ew; d_vi = dv; d_wi = dw;
    @(posedge clk);
    if (ev) e_q.push_back('{w: ee, at: cycle});
    if (dv) d_q.push_back('{w: de, at: cycle});
    #1;
  endtask

  initial begin
    logic [63:0] w;
    e_vi = 0; d_vi = 0; e_wi = '0; d_wi = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;

    // Published vectors, back to back. Core-side slices checked first.
    for (int i = 0; i < NV; i++) begin
      e_wi = VEC[i].plain; d_wi = VEC[i].stored; #1;
      check($sformatf("vec%0d enc block", i), e_cbo == VEC[i].p_blk);
      check($sformatf("vec%0d enc tweak", i), e_cto == VEC[i].tweak);
      check($sformatf("vec%0d dec block", i), d_cbo == VEC[i].c_blk);
      check($sformatf("vec%0d dec tweak", i), d_cto == VEC[i].tweak);
      drive(1'b1, VEC[i].plain, VEC[i].stored, 1'b1, VEC[i].stored, VEC[i].plain);
    end

    // Random words with random gaps.
    for (int i = 0; i < 200; i++) begin
      logic ev, dv;
      logic [63:0] w2;
      w  = {$urandom, $urandom};
      w2 = {$urandom, $urandom};
      ev = ($urandom % 4) != 0;
      dv = ($urandom % 4) != 0;
      drive(ev, w,  {w[63:58],  w[57:34]  ^ w[23:0]  ^ ENC_K, w[33:0]},
            dv, w2, {w2[63:58], w2[57:34] ^ w2[23:0] ^ DEC_K, w2[33:0]});
    end
    drive(1'b0, '0, '0, 1'b0, '0, '0);
    repeat (10) @(posedge clk);
    check("enc scoreboard drained", e_q.size() == 0);
    check("dec scoreboard drained", d_q.size() == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
