// weighted_accum: the weighted-accumulation part of one RNA (one neuron).
//
// A reinterpreted neuron computes Y = sum_i W_i*X_i + b where every W_i is
// one of W weight clusters and every X_i one of U input clusters, so each
// edge contributes one of W*U precomputed products held in a product
// crossbar (row {w, x}; row W*U holds the bias). Instead of adding one
// product per edge the block counts how often each product occurs:
//  * Input buffer: the layer's encoded inputs X_i, streamed in by the tile.
//  * Weight index buffers: W buffers, buffer w lists the indexes i of the
//    inputs whose weight is cluster w (written at configuration time).
//  * COUNT: each cycle every buffer yields one index, the input buffer is
//    read at that index, and counter {w, X_i} increments (counter_bank).
//    This takes as many cycles as the longest weight buffer.
//  * SCALE: the sequence detector recodes every count into signed powers of
//    two and each product row is shifted and added/subtracted accordingly, one
//    digit position per cycle for all rows at once (CNT_W+1 cycles), giving
//    count*product per row.
//  * ADD: the W*U scaled rows and the bias are summed by inmem_adder.
// In pooling mode (pool_i) the DeMUX of the paper's RNA figure sends the
// inputs named by weight buffer 0 to pool_x_o, one per cycle, instead of to
// the counters; nothing is accumulated.
// Follows the paper: buffers per weight cluster, one index per buffer per
// cycle, counters per product, shift-based scaling, carry-save in-memory
// addition. This design's choices: the configuration bus, one shared scaling
// pass for all rows, fixed-point two's-complement values.
// Timing: start_i starts a computation; y_valid_o pulses with y_o after
// 1 + L + (CNT_W+1) + 1 + inmem_adder latency cycles, L = longest buffer.
// Lint reports width truncations where the 16-bit configuration address
// indexes the tables; each use is range-checked first, so they stand.
module weighted_accum
  import rapidnn_pkg::*;
#(
  parameter int unsigned W      = rapidnn_pkg::W_CLUST,
  parameter int unsigned U      = rapidnn_pkg::U_CLUST,
  parameter int unsigned CNT_W  = rapidnn_pkg::CNT_BITS,
  parameter int unsigned VAL_W  = rapidnn_pkg::VAL_BITS,
  parameter int unsigned FANIN  = rapidnn_pkg::MAX_FANIN,
  localparam int unsigned UB    = $clog2(U),
  localparam int unsigned WB    = (W > 1) ? $clog2(W) : 1,
  localparam int unsigned IB    = $clog2(FANIN),
  localparam int unsigned P     = W * U
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_wr_t          cfg_i,
  // input buffer fill (broadcast from the previous layer)
  input  logic             in_we_i,
  input  logic [IB-1:0]    in_addr_i,
  input  logic [UB-1:0]    in_data_i,
  // control
  input  logic             start_i,
  input  logic             pool_i,
  output logic             busy_o,
  output logic             y_valid_o,
  output logic [VAL_W-1:0] y_o,
  output logic             pool_v_o,
  output logic [UB-1:0]    pool_x_o,
  output logic             pool_last_o
);
  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_COUNT, S_SCALE, S_ADD, S_WAIT} state_e;
  state_e state_q;

  logic [UB-1:0]    inbuf_q [FANIN];
  logic [IB-1:0]    wbuf_q  [W][FANIN];
  logic [IB:0]      wlen_q  [W];
  logic [IB:0]      ptr_q   [W];
  logic [VAL_W-1:0] prod_q  [P+1];
  logic [VAL_W-1:0] scaled_q [P+1];
  logic [$clog2(CNT_W+2)-1:0] digit_q;
  logic             pool_q;

  // ---------------- configuration and input buffer writes ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(FANIN); i++) inbuf_q[i] <= '0;
      for (int w = 0; w < int'(W); w++) begin
        wlen_q[w] <= '0;
        for (int i = 0; i < int'(FANIN); i++) wbuf_q[w][i] <= '0;
      end
      for (int p = 0; p <= int'(P); p++) prod_q[p] <= '0;
    end else begin
      if (in_we_i) inbuf_q[in_addr_i] <= in_data_i;
      if (cfg_i.we) begin
        unique case (cfg_i.sel)
          CFG_PROD: if (int'(cfg_i.addr) <= int'(P)) prod_q[cfg_i.addr] <= cfg_i.data[VAL_W-1:0];
          CFG_WIDX: if (int'(cfg_i.addr >> IB) < int'(W))
                      wbuf_q[cfg_i.addr >> IB][cfg_i.addr[IB-1:0]] <= cfg_i.data[IB-1:0];
          CFG_WLEN: if (int'(cfg_i.addr) < int'(W)) wlen_q[cfg_i.addr] <= cfg_i.data[IB:0];
          default: ;
        endcase
      end
    end
  end

  // ---------------- indexing: one index per weight buffer per cycle ------
  logic [W-1:0]         inc;
  logic [W-1:0][UB-1:0] xsel;
  logic                 counting, count_done;
  assign counting = (state_q == S_COUNT);

  always_comb begin
    count_done = 1'b1;
    for (int w = 0; w < int'(W); w++) begin
      logic active;
      active  = (ptr_q[w] < wlen_q[w]) && (!pool_q || w == 0);
      inc[w]  = counting && active && !pool_q;
      xsel[w] = inbuf_q[wbuf_q[w][ptr_q[w][IB-1:0]]];
      if (active) count_done = 1'b0;
    end
  end

  // DeMUX: pooling inputs go to the encoding/pooling AM instead
  assign pool_v_o    = counting && pool_q && (ptr_q[0] < wlen_q[0]);
  assign pool_x_o    = xsel[0];
  assign pool_last_o = pool_v_o && (ptr_q[0] + 1'b1 == wlen_q[0]);

  logic [CNT_W-1:0] count [P];
  counter_bank #(.W(W), .U(U), .CNT_W(CNT_W)) u_cnt (
    .clk, .rst_n, .clear_i(state_q == S_CLEAR), .inc_i(inc), .x_i(xsel), .count_o(count));

  // ---------------- sequence detectors, one per product row --------------
  logic [CNT_W:0] dpos [P];
  logic [CNT_W:0] dneg [P];
  for (genvar p = 0; p < int'(P); p++) begin : g_seq
    sequence_detector #(.CNT_W(CNT_W)) u_seq (.count_i(count[p]), .pos_o(dpos[p]), .neg_o(dneg[p]));
  end

  // ---------------- in-memory addition ----------------------------------
  logic add_busy, add_done;
  logic [VAL_W-1:0] add_sum;
  inmem_adder #(.N_OPS(P + 1), .N_BITS(VAL_W)) u_add (
    .clk, .rst_n, .start_i(state_q == S_ADD), .ops_i(scaled_q),
    .busy_o(add_busy), .done_o(add_done), .sum_o(add_sum));

  // ---------------- sequencing ------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      pool_q  <= 1'b0;
      digit_q <= '0;
      for (int w = 0; w < int'(W); w++) ptr_q[w] <= '0;
      for (int p = 0; p <= int'(P); p++) scaled_q[p] <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (start_i) begin
          pool_q  <= pool_i;
          state_q <= S_CLEAR;
        end
        S_CLEAR: begin
          for (int w = 0; w < int'(W); w++) ptr_q[w] <= '0;
          digit_q <= '0;
          for (int p = 0; p < int'(P); p++) scaled_q[p] <= '0;
          scaled_q[P] <= prod_q[P];            // bias enters once
          state_q <= S_COUNT;
        end
        S_COUNT: begin
          for (int w = 0; w < int'(W); w++)
            if (ptr_q[w] < wlen_q[w] && (!pool_q || w == 0)) ptr_q[w] <= ptr_q[w] + 1'b1;
          if (count_done) state_q <= pool_q ? S_IDLE : S_SCALE;
        end
        S_SCALE: begin
          for (int p = 0; p < int'(P); p++) begin
            logic [VAL_W-1:0] sh;
            sh = prod_q[p] << digit_q;
            if (dpos[p][digit_q])      scaled_q[p] <= scaled_q[p] + sh;
            else if (dneg[p][digit_q]) scaled_q[p] <= scaled_q[p] - sh;
          end
          if (int'(digit_q) == int'(CNT_W)) state_q <= S_ADD;
          else digit_q <= digit_q + 1'b1;
        end
        S_ADD:  state_q <= S_WAIT;
        S_WAIT: if (add_done) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign busy_o    = (state_q != S_IDLE);
  assign y_valid_o = add_done;
  assign y_o       = add_sum;
endmodule
