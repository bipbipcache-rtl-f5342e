// tb_word_mux -- random check of the 4:1 read word multiplexer: with four
// random 64-bit words on the inputs, the output must equal the word chosen
// by the select, for every select value.
module tb_word_mux;

  int checks = 0;
  int failures = 0;
  logic [63:0] words [4];
  logic [1:0]  sel;
  logic [63:0] y;

  word_mux #(.WIDTH(64), .N_WORDS(4)) dut (.words_i(words), .sel_i(sel), .word_o(y));

  initial begin
    for (int rep = 0; rep < 100; rep++) begin
      for (int w = 0; w < 4; w++) words[w] = {$urandom, $urandom};
      for (int s = 0; s < 4; s++) begin
        sel = 2'(s);
        #1;
        checks++;
        if (y !== words[s]) begin
          failures++;
          $display("FAIL sel=%0d y=%h exp=%h", s, y, words[s]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
