// counter_bank: the occurrence counters of one neuron's weighted accumulation.
//
// There is one counter per precomputed product, W*U in all; counter
// {w, x} records how many incoming edges of the neuron have weight cluster w
// and input cluster x. Each cycle every weight group w may present one input
// code x_i[w] with inc_i[w] set; counter {w, x_i[w]} then increments by one.
// Because the groups own disjoint counters, W increments per cycle never
// collide, which is the paper's argument for picking one index per weight
// buffer per cycle. clear_i zeroes every counter (one cycle, has priority).
// All counts are visible at once on count_o, as the register stage between
// the counters and the sequence detector in the paper's RNA figure.
// Counters are CNT_W bits and saturate is not needed: CNT_W = 12 holds the
// largest fan-in of 1024.
module counter_bank #(
  parameter int unsigned W     = 16,
  parameter int unsigned U     = 64,
  parameter int unsigned CNT_W = 12,
  localparam int unsigned UB   = $clog2(U)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear_i,
  input  logic [W-1:0]         inc_i,
  input  logic [W-1:0][UB-1:0] x_i,
  output logic [CNT_W-1:0]     count_o [W*U]
);
  logic [CNT_W-1:0] cnt_q [W*U];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < W * U; i++) cnt_q[i] <= '0;
    end else if (clear_i) begin
      for (int i = 0; i < W * U; i++) cnt_q[i] <= '0;
    end else begin
      for (int w = 0; w < W; w++)
        if (inc_i[w]) cnt_q[w*U + int'(x_i[w])] <= cnt_q[w*U + int'(x_i[w])] + 1'b1;
    end
  end

  assign count_o = cnt_q;
endmodule
