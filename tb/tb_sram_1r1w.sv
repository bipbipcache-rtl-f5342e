// tb_sram_1r1w -- self-checking test of the storage array in the two forms
// the cache uses: a 64x128 data bank without reset, and a 1x128 bit array
// that clears on reset (dirty / valid bits). Random writes and reads are
// checked against a shadow array. The test covers read-during-write (old
// data is returned in the write cycle, new data afterwards), the reset
// clear, and writes ignored while we_i is low.
module tb_sram_1r1w;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic [6:0]  d_ra, d_wa, b_ra, b_wa;
  logic [63:0] d_rd, d_wd;
  logic        d_we, b_we, b_rd, b_wd;

  sram_1r1w #(.WIDTH(64), .DEPTH(128), .CLEAR_ON_RESET(1'b0)) u_data (
    .clk_i(clk), .rst_ni(rst_n), .raddr_i(d_ra), .rdata_o(d_rd),
    .we_i(d_we), .waddr_i(d_wa), .wdata_i(d_wd));

  sram_1r1w #(.WIDTH(1), .DEPTH(128), .CLEAR_ON_RESET(1'b1)) u_bits (
    .clk_i(clk), .rst_ni(rst_n), .raddr_i(b_ra), .rdata_o(b_rd),
    .we_i(b_we), .waddr_i(b_wa), .wdata_i(b_wd));

  logic [63:0] shadow_d [128];
  logic        shadow_b [128];

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    d_we = 0; b_we = 0; d_ra = 0; d_wa = 0; b_ra = 0; b_wa = 0; d_wd = 0; b_wd = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    // Reset cleared the bit array.
    for (int a = 0; a < 128; a++) begin
      b_ra = 7'(a); #1;
      check($sformatf("bit %0d clear after reset", a), b_rd == 1'b0);
      shadow_b[a] = 1'b0;
    end
    // Fill the data bank.
    for (int a = 0; a < 128; a++) begin
      d_we = 1; d_wa = 7'(a); d_wd = {$urandom, $urandom};
      shadow_d[a] = d_wd;
      @(posedge clk); #1;
    end
    d_we = 0;
    // Random mixed traffic.
    for (int i = 0; i < 2000; i++) begin
      d_we = $urandom % 2; d_wa = 7'($urandom); d_wd = {$urandom, $urandom};
      d_ra = ($urandom % 4 == 0) ? d_wa : 7'($urandom);
      b_we = $urandom % 2; b_wa = 7'($urandom); b_wd = 1'($urandom);
      b_ra = ($urandom % 4 == 0) ? b_wa : 7'($urandom);
      #1;
      check("data read", d_rd == shadow_d[d_ra]);
      check("bit read",  b_rd == shadow_b[b_ra]);
      @(posedge clk);
      if (d_we) shadow_d[d_wa] = d_wd;
      if (b_we) shadow_b[b_wa] = b_wd;
      #1;
      check("data read after write", d_rd == shadow_d[d_ra]);
      check("bit read after write",  b_rd == shadow_b[b_ra]);
    end
    // Reset again: bits clear, data kept.
    b_we = 0; d_we = 0;
    rst_n = 0; #2; rst_n = 1; #1;
    for (int a = 0; a < 128; a++) begin
      b_ra = 7'(a); d_ra = 7'(a); #1;
      check("bit clear after 2nd reset", b_rd == 1'b0);
      check("data kept over reset", d_rd == shadow_d[a]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
