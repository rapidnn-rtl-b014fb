// rna: one resistive neural acceleration block, which computes one neuron.
//
// Three memory blocks in a chain, as in the paper's RNA figure:
//  (a) weighted_accum: counts, scales and adds precomputed products -> Y.
//  (b) activation AM: nearest-distance lookup of Y among Q sampled points
//      (y_k, z_k) of the activation function -> Z = z_k.
//  (c) encoding/pooling AM: nearest-distance lookup of Z among the U input
//      cluster centres of the next layer -> the code Zbar of that centre.
// Pooling: with mode pool set, the Pool DeMUX in (a) streams the inputs named
// by weight buffer 0 into (c) instead of the counters; (c) is cleared and
// each input code X is written as a row (key X, word X). A search with the
// largest (max pooling) or smallest (min pooling) representable query then
// returns the largest or smallest stored code, which is the max/min pooling
// result because codebooks are sorted, so code order equals value order.
// This overwrites the encoding table, so an RNA configured for pooling serves
// pooling only, as the paper allocates separate RNAs to pooling layers.
// Choices of this design: the mode register, query constants and handshake.
// Interface: start_i begins; done_o pulses with zbar_o (and y_o, z_o of the
// last computation). Latency = weighted_accum latency + 2*(NSTAGE+1) + 1
// for a neuron; L + NSTAGE + 4 for pooling over L inputs.
module rna
  import rapidnn_pkg::*;
#(
  parameter int unsigned W      = rapidnn_pkg::W_CLUST,
  parameter int unsigned U      = rapidnn_pkg::U_CLUST,
  parameter int unsigned Q      = rapidnn_pkg::Q_ROWS,
  parameter int unsigned CNT_W  = rapidnn_pkg::CNT_BITS,
  parameter int unsigned VAL_W  = rapidnn_pkg::VAL_BITS,
  parameter int unsigned FANIN  = rapidnn_pkg::MAX_FANIN,
  localparam int unsigned UB    = $clog2(U),
  localparam int unsigned QB    = $clog2(Q),
  localparam int unsigned IB    = $clog2(FANIN)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_wr_t          cfg_i,
  input  logic             in_we_i,
  input  logic [IB-1:0]    in_addr_i,
  input  logic [UB-1:0]    in_data_i,
  input  logic             start_i,
  output logic             busy_o,
  output logic             done_o,
  output logic [UB-1:0]    zbar_o,
  output logic [VAL_W-1:0] y_o,
  output logic [VAL_W-1:0] z_o,
  output logic             pool_mode_o
);
  localparam logic [VAL_W-1:0] QMAX = {1'b0, {(VAL_W-1){1'b1}}};
  localparam logic [VAL_W-1:0] QMIN = {1'b1, {(VAL_W-1){1'b0}}};

  logic pool_q, max_q, run_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pool_q <= 1'b0; max_q <= 1'b1;
    end else if (cfg_i.we && cfg_i.sel == CFG_MODE) begin
      pool_q <= cfg_i.data[1]; max_q <= cfg_i.data[0];
    end
  end
  assign pool_mode_o = pool_q;

  // (a) weighted accumulation
  logic wa_busy, y_v, pv, plast;
  logic [VAL_W-1:0] y;
  logic [UB-1:0] px;
  weighted_accum #(.W(W), .U(U), .CNT_W(CNT_W), .VAL_W(VAL_W), .FANIN(FANIN)) u_wa (
    .clk, .rst_n, .cfg_i, .in_we_i, .in_addr_i, .in_data_i,
    .start_i, .pool_i(pool_q), .busy_o(wa_busy), .y_valid_o(y_v), .y_o(y),
    .pool_v_o(pv), .pool_x_o(px), .pool_last_o(plast));

  // (b) activation function
  logic act_v, act_hit;
  logic [QB-1:0] act_row;
  logic [VAL_W-1:0] z;
  am_block #(.ROWS(Q), .KEY_W(VAL_W), .DATA_W(VAL_W)) u_act (
    .clk, .rst_n, .clear_i(1'b0),
    .key_we_i(cfg_i.we && cfg_i.sel == CFG_ACT_KEY),
    .data_we_i(cfg_i.we && cfg_i.sel == CFG_ACT_VAL),
    .waddr_i(QB'(cfg_i.addr)), .wkey_i(cfg_i.data[VAL_W-1:0]), .wdata_i(cfg_i.data[VAL_W-1:0]),
    .search_i(y_v && !pool_q), .query_i(y),
    .valid_o(act_v), .hit_o(act_hit), .row_o(act_row), .data_o(z));

  // (c) encoding / pooling, with the max/min MUX on its input
  logic [UB-1:0] pool_wr_q;
  logic          pool_search_q;
  logic          enc_kwe, enc_dwe, enc_search, enc_v, enc_hit;
  logic [UB-1:0] enc_waddr, enc_row, enc_data;
  logic [VAL_W-1:0] enc_wkey, enc_query;
  logic [UB-1:0] enc_wdata;

  always_comb begin
    if (pool_q) begin
      enc_kwe   = pv;
      enc_dwe   = pv;
      enc_waddr = pool_wr_q;
      enc_wkey  = VAL_W'(px);
      enc_wdata = px;
      enc_search = pool_search_q;
      enc_query  = max_q ? QMAX : QMIN;
    end else begin
      enc_kwe   = cfg_i.we && cfg_i.sel == CFG_ENC_KEY;
      enc_dwe   = cfg_i.we && cfg_i.sel == CFG_ENC_VAL;
      enc_waddr = UB'(cfg_i.addr);
      enc_wkey  = cfg_i.data[VAL_W-1:0];
      enc_wdata = cfg_i.data[UB-1:0];
      enc_search = act_v;
      enc_query  = z;
    end
  end

  am_block #(.ROWS(U), .KEY_W(VAL_W), .DATA_W(UB)) u_enc (
    .clk, .rst_n, .clear_i(start_i && pool_q),
    .key_we_i(enc_kwe), .data_we_i(enc_dwe), .waddr_i(enc_waddr),
    .wkey_i(enc_wkey), .wdata_i(enc_wdata),
    .search_i(enc_search), .query_i(enc_query),
    .valid_o(enc_v), .hit_o(enc_hit), .row_o(enc_row), .data_o(enc_data));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pool_wr_q <= '0; pool_search_q <= 1'b0; run_q <= 1'b0;
      y_o <= '0; z_o <= '0; zbar_o <= '0; done_o <= 1'b0;
    end else begin
      pool_search_q <= pool_q && plast;
      if (start_i) pool_wr_q <= '0;
      else if (pv) pool_wr_q <= pool_wr_q + 1'b1;
      if (start_i) run_q <= 1'b1;
      else if (enc_v) run_q <= 1'b0;
      if (y_v)   y_o <= y;
      if (act_v) z_o <= z;
      done_o <= enc_v && run_q;
      if (enc_v) zbar_o <= enc_data;
    end
  end

  assign busy_o = run_q || start_i;
endmodule
