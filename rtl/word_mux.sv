// word_mux -- the read "MUX" of the cache. It selects, by the 2-bit word
// offset, which of the line's N_WORDS encrypted 64-bit words goes on to the
// data decryptor.
//
// Function: word_o = words_i[sel_i], combinational. The paper gives the
// mux, its 64-bit inputs and its 2-bit select; nothing else is assumed.
module word_mux #(
  parameter int unsigned WIDTH   = 64,
  parameter int unsigned N_WORDS = 4,
  localparam int unsigned SW     = (N_WORDS > 1) ? $clog2(N_WORDS) : 1
) (
  input  logic [WIDTH-1:0] words_i [N_WORDS],
  input  logic [SW-1:0]    sel_i,
  output logic [WIDTH-1:0] word_o
);

  always_comb begin
    word_o = words_i[0];
    for (int i = 1; i < N_WORDS; i++) begin
      if (sel_i == SW'(i)) word_o = words_i[i];
    end
  end

endmodule
