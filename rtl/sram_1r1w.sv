// sram_1r1w -- DEPTH x WIDTH storage array with one read and one write port.
// The cache builds all of its arrays from it: the four 64x128 data banks, the
// 1x128 dirty bits, and the 52x128 tag and 1x128 valid "ROMs". The controller
// only reads the tag and valid arrays. Their write port is the provisioning
// path through which software loads encrypted tags and valid bits.
//
// Read: rdata_o = mem[raddr_i], combinational (asynchronous read). This keeps
// the cache's read latency at the 3 decryptor cycles.
// Write: on a rising clk_i edge with we_i set, mem[waddr_i] <= wdata_i.
// Reading an address in the cycle it is written returns the old contents.
// With CLEAR_ON_RESET set, an active-low asynchronous reset zeroes the array.
// The dirty and valid bits use this; the data and tag arrays do not and map
// onto RAM.
//
// The sizes are the paper's. Asynchronous read, the provisioning port and the
// reset clearing are this design's choices.
module sram_1r1w #(
  parameter int unsigned WIDTH          = 64,
  parameter int unsigned DEPTH          = 128,
  parameter bit          CLEAR_ON_RESET = 1'b0,
  localparam int unsigned AW            = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic [AW-1:0]    raddr_i,
  output logic [WIDTH-1:0] rdata_o,
  input  logic             we_i,
  input  logic [AW-1:0]    waddr_i,
  input  logic [WIDTH-1:0] wdata_i
);

  logic [WIDTH-1:0] mem [DEPTH];

  if (CLEAR_ON_RESET) begin : g_clr
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
      end else if (we_i) begin
        mem[waddr_i] <= wdata_i;
      end
    end
  end else begin : g_ram
    always_ff @(posedge clk_i) begin
      if (we_i) mem[waddr_i] <= wdata_i;
    end
  end

  assign rdata_o = mem[raddr_i];

endmodule
