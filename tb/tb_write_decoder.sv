// tb_write_decoder -- exhaustive check of the 2-to-4 write decoder: for every
// enable and ID, exactly bank ID is strobed when enabled and none otherwise.
module tb_write_decoder;

  int checks = 0;
  int failures = 0;
  logic       en;
  logic [1:0] id;
  logic [3:0] o;

  write_decoder #(.N_OUT(4)) dut (.en_i(en), .id_i(id), .o(o));

  initial begin
    for (int rep = 0; rep < 4; rep++) begin
      for (int e = 0; e < 2; e++) begin
        for (int i = 0; i < 4; i++) begin
          logic [3:0] exp;
          en = 1'(e); id = 2'(i);
          #1;
          exp = 4'b0000;
          if (e == 1) exp = 4'b0001 << i;
          checks++;
          if (o !== exp) begin
            failures++;
            $display("FAIL en=%0d id=%0d o=%b exp=%b", e, i, o, exp);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
