// rapidnn_top: the RAPIDNN accelerator.
//
// A DNN that has been reinterpreted offline (weights and activations replaced
// by small codebooks, every product precomputed) runs here entirely as table
// lookups, counting and in-memory addition. The accelerator holds:
//  * a data block with the raw input samples and the written-back results;
//  * the input encoder, an AM block acting as the virtual first layer: it
//    maps each raw input to the code of its nearest input cluster, into the
//    input buffer;
//  * N_TILES tiles of N_RNA RNAs; tile t computes layer t, one RNA per
//    neuron, and reads its inputs from the buffer of tile t-1 (tile 0 from
//    the input buffer);
//  * the controller, which runs the tiles as a layer pipeline.
// Host interface: cfg_i writes every table (products, weight index buffers,
// activation and encoding tables, input encoder) and the controller
// registers; host_* reads and writes the data block while the accelerator is
// idle; start_i runs n samples, done_o pulses at the end.
// The paper's chip has 32 tiles of 1k RNAs each with w = 16 weight and
// u = 64 input clusters, 64-row activation tables and layers up to 1024
// inputs. The RNA sizes, layer size and tile count (32) here are the
// paper's. N_RNA defaults to 8 RNAs per tile instead of 1024: the full chip
// has 32k neurons, each with its own 1024-row product crossbar and counters,
// and elaborating it needs far more memory than the tools have (8 per tile
// already takes about 10 GB to lint). N_RNA is a parameter.
module rapidnn_top
  import rapidnn_pkg::*;
#(
  parameter int unsigned N_TILES  = 32,
  parameter int unsigned N_RNA    = 8,
  parameter int unsigned W        = rapidnn_pkg::W_CLUST,
  parameter int unsigned U        = rapidnn_pkg::U_CLUST,
  parameter int unsigned Q        = rapidnn_pkg::Q_ROWS,
  parameter int unsigned CNT_W    = rapidnn_pkg::CNT_BITS,
  parameter int unsigned VAL_W    = rapidnn_pkg::VAL_BITS,
  parameter int unsigned FANIN    = rapidnn_pkg::MAX_FANIN,
  parameter int unsigned DB_WORDS = 65536,
  localparam int unsigned UB      = $clog2(U),
  localparam int unsigned IB      = $clog2(FANIN),
  localparam int unsigned RB      = (N_RNA > 1) ? $clog2(N_RNA) : 1,
  localparam int unsigned AW      = (IB > RB) ? IB : RB,
  localparam int unsigned DB      = $clog2(DB_WORDS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  top_cfg_t         cfg_i,
  input  logic             host_we_i,
  input  logic [DB-1:0]    host_addr_i,
  input  logic [VAL_W-1:0] host_wdata_i,
  output logic [VAL_W-1:0] host_rdata_o,
  input  logic             start_i,
  output logic             busy_o,
  output logic             done_o
);
  // ---------------- controller ----------------
  logic             db_we;
  logic [DB-1:0]    db_addr;
  logic [VAL_W-1:0] db_wdata, db_rdata;
  logic             enc_search, enc_valid, enc_hit;
  logic [VAL_W-1:0] enc_query;
  logic [UB-1:0]    enc_code, enc_row;
  logic             ib_we;
  logic [IB-1:0]    ib_addr;
  logic [UB-1:0]    ib_data, ib_rd_data;
  logic [AW-1:0]    rd_addr;
  logic [N_TILES-1:0] tile_in_we, tile_start, tile_done, tile_busy;
  logic [RB:0]      tile_active [N_TILES];
  logic [UB-1:0]    tile_rd_data [N_TILES];
  logic             swap;
  logic [2:0]       phase;

  controller #(.N_TILES(N_TILES), .N_RNA(N_RNA), .U(U), .VAL_W(VAL_W), .FANIN(FANIN),
               .DB_WORDS(DB_WORDS)) u_ctrl (
    .clk, .rst_n, .cfg_i, .start_i, .busy_o, .done_o,
    .db_we_o(db_we), .db_addr_o(db_addr), .db_wdata_o(db_wdata), .db_rdata_i(db_rdata),
    .enc_search_o(enc_search), .enc_query_o(enc_query), .enc_valid_i(enc_valid), .enc_code_i(enc_code),
    .ib_we_o(ib_we), .ib_addr_o(ib_addr), .ib_data_o(ib_data),
    .rd_addr_o(rd_addr), .tile_in_we_o(tile_in_we), .tile_start_o(tile_start),
    .tile_done_i(tile_done), .tile_active_o(tile_active), .tile_rd_data_i(tile_rd_data),
    .swap_o(swap), .phase_o(phase));

  // ---------------- data block (host port while idle) ----------------
  data_block #(.WORDS(DB_WORDS), .VAL_W(VAL_W)) u_data (
    .clk,
    .we_i(busy_o ? db_we : host_we_i),
    .addr_i(busy_o ? db_addr : host_addr_i),
    .wdata_i(busy_o ? db_wdata : host_wdata_i),
    .rdata_o(db_rdata));
  assign host_rdata_o = db_rdata;

  // ---------------- virtual input layer ----------------
  am_block #(.ROWS(U), .KEY_W(VAL_W), .DATA_W(UB)) u_in_enc (
    .clk, .rst_n, .clear_i(1'b0),
    .key_we_i(cfg_i.we && cfg_i.space == SP_ENC && cfg_i.sel == CFG_ENC_KEY),
    .data_we_i(cfg_i.we && cfg_i.space == SP_ENC && cfg_i.sel == CFG_ENC_VAL),
    .waddr_i(UB'(cfg_i.addr)), .wkey_i(cfg_i.data[VAL_W-1:0]), .wdata_i(cfg_i.data[UB-1:0]),
    .search_i(enc_search), .query_i(enc_query),
    .valid_o(enc_valid), .hit_o(enc_hit), .row_o(enc_row), .data_o(enc_code));

  broadcast_buffer #(.DEPTH(FANIN), .UB(UB)) u_in_buf (
    .clk, .rst_n, .swap_i(swap), .ser_we_i(1'b0), .ser_bits_i('0),
    .pw_we_i(ib_we), .pw_addr_i(ib_addr), .pw_data_i(ib_data),
    .rd_addr_i(IB'(rd_addr)), .rd_data_o(ib_rd_data));

  // ---------------- tiles ----------------
  for (genvar t = 0; t < int'(N_TILES); t++) begin : g_tile
    cfg_wr_t c;
    logic [UB-1:0] src;
    always_comb begin
      c.we   = cfg_i.we && cfg_i.space == SP_RNA && cfg_i.tile == 8'(t);
      c.sel  = cfg_i.sel;
      c.addr = cfg_i.addr;
      c.data = cfg_i.data;
    end
    if (t == 0) begin : g_src0
      assign src = ib_rd_data;
    end else begin : g_srcn
      assign src = tile_rd_data[t-1];
    end
    tile #(.N_RNA(N_RNA), .W(W), .U(U), .Q(Q), .CNT_W(CNT_W), .VAL_W(VAL_W), .FANIN(FANIN)) u_tile (
      .clk, .rst_n, .cfg_i(c), .cfg_rna_i(RB'(cfg_i.rna)),
      .in_we_i(tile_in_we[t]), .in_addr_i(IB'(rd_addr)), .in_data_i(src),
      .active_i(tile_active[t]), .start_i(tile_start[t]), .busy_o(tile_busy[t]),
      .done_o(tile_done[t]), .swap_i(swap), .rd_addr_i(RB'(rd_addr)), .rd_data_o(tile_rd_data[t]));
  end
endmodule
