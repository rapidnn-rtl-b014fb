// ndcam: nearest distance content addressable memory.
//
// Each row stores a KEY_W-bit key. A search returns the row whose key is
// nearest to the query. In the memristive array a cell discharges its match
// line when it *matches*, and the access transistor of bit i is twice as wide
// as that of bit i-1, so the row whose matching bits carry the largest binary
// weight discharges first and the sense amplifier latches it. Equivalently the
// winner is the row with the smallest binary-weighted mismatch, i.e. the
// smallest (key XOR query). Because those currents are only distinguishable
// over 8 bits, the key is split into KEY_W/STAGE_BITS stages searched from the
// most significant one: each stage keeps, among the rows still enabled, those
// with the smallest mismatch weight on its bits and passes them on as the
// next stage's row enables (EnL^i -> EnL^(i+1) in the paper's figure). After
// the last stage the lowest-numbered remaining row wins; the paper does not
// say how ties resolve, so this is this design's choice.
// Note: the smallest weighted mismatch is the paper's circuit; it equals the
// nearest absolute value in most but not all cases (the paper calls the
// search "the smallest absolute distance"; this model follows the circuit).
// Stages are pipelined one per clock: a search issued with search_i is
// answered NSTAGE cycles later on result_valid_o, one search per cycle.
// The paper also states that a search takes a single cycle; the pipelined
// form follows its "4 pipeline stages" sentence.
// Rows take part only if their bit in en_i is set (unwritten or unused rows).
module ndcam #(
  parameter int unsigned ROWS       = 64,
  parameter int unsigned KEY_W      = 32,
  parameter int unsigned STAGE_BITS = 8,
  localparam int unsigned NSTAGE    = KEY_W / STAGE_BITS,
  localparam int unsigned RB        = $clog2(ROWS)
) (
  input  logic             clk,
  input  logic             rst_n,
  // write port
  input  logic             we_i,
  input  logic [RB-1:0]    waddr_i,
  input  logic [KEY_W-1:0] wkey_i,
  // search port
  input  logic             search_i,
  input  logic [KEY_W-1:0] query_i,
  input  logic [ROWS-1:0]  en_i,
  output logic             result_valid_o,
  output logic             hit_o,          // at least one row was enabled
  output logic [RB-1:0]    row_o
);
  logic [KEY_W-1:0] key_q [ROWS];

  // pipeline state between stages: stage s register feeds stage s
  logic             v_q   [NSTAGE+1];
  logic [KEY_W-1:0] q_q   [NSTAGE+1];
  logic [ROWS-1:0]  en_q  [NSTAGE+1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < int'(ROWS); r++) key_q[r] <= '0;
    end else if (we_i) begin
      key_q[waddr_i] <= wkey_i;
    end
  end

  always_comb begin
    v_q[0]  = search_i;
    q_q[0]  = query_i;
    en_q[0] = en_i;
  end

  for (genvar s = 0; s < int'(NSTAGE); s++) begin : g_stage
    localparam int unsigned HI = KEY_W - 1 - s * STAGE_BITS;
    logic [STAGE_BITS-1:0] mis [ROWS];
    logic [STAGE_BITS-1:0] best;
    logic [ROWS-1:0]       en_next;

    always_comb begin
      best = '1;
      for (int r = 0; r < int'(ROWS); r++) begin
        mis[r] = key_q[r][HI -: STAGE_BITS] ^ q_q[s][HI -: STAGE_BITS];
        if (en_q[s][r] && mis[r] < best) best = mis[r];
      end
      for (int r = 0; r < int'(ROWS); r++)
        en_next[r] = en_q[s][r] && (mis[r] == best);
    end

    logic             v_r;
    logic [KEY_W-1:0] q_r;
    logic [ROWS-1:0]  en_r;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        v_r <= 1'b0; q_r <= '0; en_r <= '0;
      end else begin
        v_r <= v_q[s]; q_r <= q_q[s]; en_r <= en_next;
      end
    end
    assign v_q[s+1]  = v_r;
    assign q_q[s+1]  = q_r;
    assign en_q[s+1] = en_r;
  end

  always_comb begin
    row_o = '0;
    for (int r = int'(ROWS) - 1; r >= 0; r--)
      if (en_q[NSTAGE][r]) row_o = RB'(r);
  end
  assign hit_o          = |en_q[NSTAGE];
  assign result_valid_o = v_q[NSTAGE];
endmodule
