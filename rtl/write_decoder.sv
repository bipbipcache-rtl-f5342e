// write_decoder -- the "Decoder" of the cache's write path. It turns the
// committed write enable (E) and the 2-bit word offset (ID) into one write
// strobe per data bank (O, "Write Signal").
//
// Function: o[i] = en_i && (id_i == i). At most one bit is set, and none
// while en_i is low. Purely combinational. The paper gives the ports (E, ID,
// O) and widths (2 in, 4 out); the one-hot coding is the obvious reading.
module write_decoder #(
  parameter int unsigned N_OUT = 4,
  localparam int unsigned IDW  = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic             en_i,
  input  logic [IDW-1:0]   id_i,
  output logic [N_OUT-1:0] o
);

  always_comb begin
    o = '0;
    for (int i = 0; i < N_OUT; i++) begin
      if (en_i && (id_i == IDW'(i))) o[i] = 1'b1;
    end
  end

endmodule
