// delay_line -- DEPTH-stage register chain, the "D D D" boxes of the cache
// block diagram. The cache uses it to line up the address tag, the valid bit,
// the hit flag, the write strobe and the write address with the fixed
// latencies of the cipher pipelines.
//
// Interface: d_i is sampled on every rising clk_i edge, and q_o is d_i
// delayed by exactly DEPTH cycles. With RESET_STAGES set, an active-low
// asynchronous reset clears every stage. Strobes need this; data-only chains
// leave it clear so that they map onto plain registers. DEPTH = 0 is a wire.
module delay_line #(
  parameter int unsigned WIDTH        = 1,
  parameter int unsigned DEPTH        = 3,
  parameter bit          RESET_STAGES = 1'b1
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic [WIDTH-1:0] d_i,
  output logic [WIDTH-1:0] q_o
);

  if (DEPTH == 0) begin : g_wire
    assign q_o = d_i;
  end else begin : g_regs
    logic [WIDTH-1:0] stage_q [DEPTH];

    if (RESET_STAGES) begin : g_rst
      always_ff @(posedge clk_i or negedge rst_ni) begin
        if (!rst_ni) begin
          for (int i = 0; i < DEPTH; i++) stage_q[i] <= '0;
        end else begin
          stage_q[0] <= d_i;
          for (int i = 1; i < DEPTH; i++) stage_q[i] <= stage_q[i-1];
        end
      end
    end else begin : g_norst
      always_ff @(posedge clk_i) begin
        stage_q[0] <= d_i;
        for (int i = 1; i < DEPTH; i++) stage_q[i] <= stage_q[i-1];
      end
    end

    assign q_o = stage_q[DEPTH-1];
  end

endmodule
