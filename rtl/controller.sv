// controller: sequences the accelerator through a layer pipeline.
//
// Every tile computes one layer, and all tiles work at the same time on
// different samples: in pipeline step b, tile t processes sample b-1-t. A
// step has five phases:
//  ENC   read the raw inputs of sample b from the data block and encode them
//        with the input encoder (the "virtual" first layer) into the input
//        buffer;
//  LOAD  stream entry i = 0,1,... of every tile's source buffer (the input
//        buffer for tile 0, the previous tile's buffer otherwise) into that
//        tile's RNAs, up to the tile's fan-in;
//  RUN   start all layer tiles and wait until every one is done;
//  WB    copy the last tile's previous outputs (sample b-L-1) to the data
//        block;
//  SWAP  swap the banks of every buffer.
// S samples through L layers take S+L+1 steps. Registers (written through
// the configuration port): layer count, raw inputs per sample, sample count,
// input and output base addresses, and per tile its fan-in and active RNAs.
// The paper names the controller and its registers and configuration, and
// states that layers form a pipeline over the buffers; the phase order,
// register map and handshakes are this design's choices.
// Interface: start_i begins a run with the current registers; done_o pulses
// at its end; busy_o is high in between (the host must not use the data
// block then).
module controller
  import rapidnn_pkg::*;
#(
  parameter int unsigned N_TILES  = 32,
  parameter int unsigned N_RNA    = 1024,
  parameter int unsigned U        = rapidnn_pkg::U_CLUST,
  parameter int unsigned VAL_W    = rapidnn_pkg::VAL_BITS,
  parameter int unsigned FANIN    = rapidnn_pkg::MAX_FANIN,
  parameter int unsigned DB_WORDS = 65536,
  localparam int unsigned UB      = $clog2(U),
  localparam int unsigned IB      = $clog2(FANIN),
  localparam int unsigned RB      = (N_RNA > 1) ? $clog2(N_RNA) : 1,
  localparam int unsigned AW      = (IB > RB) ? IB : RB,
  localparam int unsigned DB      = $clog2(DB_WORDS),
  localparam int unsigned TB      = (N_TILES > 1) ? $clog2(N_TILES) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  top_cfg_t         cfg_i,
  input  logic             start_i,
  output logic             busy_o,
  output logic             done_o,
  // data block
  output logic             db_we_o,
  output logic [DB-1:0]    db_addr_o,
  output logic [VAL_W-1:0] db_wdata_o,
  input  logic [VAL_W-1:0] db_rdata_i,
  // input encoder
  output logic             enc_search_o,
  output logic [VAL_W-1:0] enc_query_o,
  input  logic             enc_valid_i,
  input  logic [UB-1:0]    enc_code_i,
  // input buffer
  output logic             ib_we_o,
  output logic [IB-1:0]    ib_addr_o,
  output logic [UB-1:0]    ib_data_o,
  // tiles
  output logic [AW-1:0]    rd_addr_o,
  output logic [N_TILES-1:0] tile_in_we_o,
  output logic [N_TILES-1:0] tile_start_o,
  input  logic [N_TILES-1:0] tile_done_i,
  output logic [RB:0]      tile_active_o [N_TILES],
  input  logic [UB-1:0]    tile_rd_data_i [N_TILES],
  output logic             swap_o,
  // status
  output logic [2:0]       phase_o
);
  typedef enum logic [2:0] {C_IDLE, C_ENC, C_LOAD, C_RUN, C_WB, C_SWAP, C_DONE} cstate_e;
  cstate_e state_q;

  // ---------------- registers ----------------
  logic [TB:0]  layers_q;
  logic [IB:0]  nraw_q;
  logic [15:0]  nsamp_q;
  logic [DB-1:0] inbase_q, outbase_q;
  logic [IB:0]  inlen_q  [N_TILES];
  logic [RB:0]  active_q [N_TILES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      layers_q <= '0; nraw_q <= '0; nsamp_q <= '0; inbase_q <= '0; outbase_q <= '0;
      for (int t = 0; t < int'(N_TILES); t++) begin inlen_q[t] <= '0; active_q[t] <= '0; end
    end else if (cfg_i.we && cfg_i.space == SP_CTRL && state_q == C_IDLE) begin
      unique case (cfg_i.addr)
        REG_LAYERS:  layers_q  <= (TB+1)'(cfg_i.data);
        REG_NRAW:    nraw_q    <= (IB+1)'(cfg_i.data);
        REG_NSAMP:   nsamp_q   <= 16'(cfg_i.data);
        REG_INBASE:  inbase_q  <= DB'(cfg_i.data);
        REG_OUTBASE: outbase_q <= DB'(cfg_i.data);
        default: begin
          for (int t = 0; t < int'(N_TILES); t++) begin
            if (cfg_i.addr == REG_INLEN  + 16'(t)) inlen_q[t]  <= (IB+1)'(cfg_i.data);
            if (cfg_i.addr == REG_ACTIVE + 16'(t)) active_q[t] <= (RB+1)'(cfg_i.data);
          end
        end
      endcase
    end
  end

  logic [IB:0] maxlen;
  logic [RB:0] outlen;
  always_comb begin
    maxlen = '0;
    outlen = '0;
    for (int t = 0; t < int'(N_TILES); t++) begin
      if (t < int'(layers_q) && inlen_q[t] > maxlen) maxlen = inlen_q[t];
      if (t == int'(layers_q) - 1) outlen = active_q[t];
    end
  end

  // ---------------- sequencing ----------------
  logic [15:0]  beat_q;
  logic [AW:0]  i_q;           // issue index of ENC/LOAD/WB
  logic [IB:0]  wr_q;          // encoded words written in ENC
  logic         rd_v_q;        // data block read in flight (ENC)
  logic [DB-1:0] inptr_q, outptr_q;
  logic [N_TILES-1:0] tdone_q, layer_mask;

  always_comb
    for (int t = 0; t < int'(N_TILES); t++) layer_mask[t] = (t < int'(layers_q));

  wire enc_active = (beat_q < nsamp_q);
  wire wb_active  = (beat_q > 16'(layers_q)) && (beat_q - 16'(layers_q) - 16'd1 < nsamp_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= C_IDLE; beat_q <= '0; i_q <= '0; wr_q <= '0; rd_v_q <= 1'b0;
      inptr_q <= '0; outptr_q <= '0; tdone_q <= '0;
    end else begin
      rd_v_q <= 1'b0;
      unique case (state_q)
        C_IDLE: if (start_i) begin
          beat_q <= '0; i_q <= '0; wr_q <= '0;
          inptr_q <= inbase_q; outptr_q <= outbase_q;
          state_q <= C_ENC;
        end
        C_ENC: begin
          if (!enc_active || (wr_q == nraw_q)) begin
            i_q <= '0;
            if (enc_active) inptr_q <= inptr_q + DB'(nraw_q);
            state_q <= C_LOAD;
          end else begin
            if (i_q < (AW+1)'(nraw_q)) begin i_q <= i_q + 1'b1; rd_v_q <= 1'b1; end
            if (enc_valid_i) wr_q <= wr_q + 1'b1;
          end
        end
        C_LOAD: begin
          if (i_q >= (AW+1)'(maxlen)) begin
            tdone_q <= ~layer_mask;
            state_q <= C_RUN;
          end else i_q <= i_q + 1'b1;
        end
        C_RUN: begin
          tdone_q <= tdone_q | tile_done_i;
          if (&(tdone_q | tile_done_i) && !(|tile_start_o)) begin
            i_q <= '0;
            state_q <= C_WB;
          end
        end
        C_WB: begin
          if (!wb_active || i_q >= (AW+1)'(outlen)) begin
            if (wb_active) outptr_q <= outptr_q + DB'(outlen);
            state_q <= C_SWAP;
          end else i_q <= i_q + 1'b1;
        end
        C_SWAP: begin
          beat_q <= beat_q + 1'b1;
          i_q <= '0; wr_q <= '0;
          state_q <= (beat_q + 16'd1 == nsamp_q + 16'(layers_q) + 16'd1) ? C_DONE : C_ENC;
        end
        C_DONE: state_q <= C_IDLE;
        default: state_q <= C_IDLE;
      endcase
    end
  end

  // a tile is started on the first RUN cycle
  logic run_first_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) run_first_q <= 1'b0;
    else run_first_q <= (state_q == C_LOAD) && (i_q >= (AW+1)'(maxlen));
  end

  always_comb begin
    db_we_o    = 1'b0;
    db_addr_o  = inptr_q + DB'(i_q);
    db_wdata_o = '0;
    if (state_q == C_WB && wb_active && i_q < (AW+1)'(outlen)) begin
      db_we_o    = 1'b1;
      db_addr_o  = outptr_q + DB'(i_q);
      db_wdata_o = VAL_W'(tile_rd_data_i[layers_q - 1'b1]);
    end
    enc_search_o = rd_v_q;
    enc_query_o  = db_rdata_i;
    ib_we_o      = (state_q == C_ENC) && enc_valid_i;
    ib_addr_o    = IB'(wr_q);
    ib_data_o    = enc_code_i;
    rd_addr_o    = AW'(i_q);
    for (int t = 0; t < int'(N_TILES); t++) begin
      tile_in_we_o[t]  = (state_q == C_LOAD) && layer_mask[t] && (i_q < (AW+1)'(inlen_q[t]));
      tile_start_o[t]  = run_first_q && layer_mask[t];
      tile_active_o[t] = active_q[t];
    end
    swap_o = (state_q == C_SWAP);
  end

  assign busy_o  = (state_q != C_IDLE);
  assign done_o  = (state_q == C_DONE);
  assign phase_o = state_q;
endmodule
