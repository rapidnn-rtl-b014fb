// rapidnn_pkg: constants and types shared by the RAPIDNN accelerator RTL.
//
// A reinterpreted neuron works on *encoded* operands: a weight is one of
// W_CLUST codebook entries and an input is one of U_CLUST codebook entries,
// so every product W*X is one of W_CLUST*U_CLUST precomputed values. The
// defaults (16 weight clusters, 64 input clusters, 12-bit counters, 32-bit
// values, 64-row activation and encoding tables, up to 1024 inputs per
// neuron) are the configuration the paper reports as its main one. The
// configuration-bus encoding below is this design's own choice; the paper
// only says that the offline composer writes its tables into the blocks.
package rapidnn_pkg;

  parameter int unsigned W_CLUST   = 16;    // weight codebook size w
  parameter int unsigned U_CLUST   = 64;    // input codebook size u
  parameter int unsigned Q_ROWS    = 64;    // activation table rows q
  parameter int unsigned CNT_BITS  = 12;    // occurrence counter width
  parameter int unsigned VAL_BITS  = 32;    // fixed-point value width
  parameter int unsigned MAX_FANIN = 1024;  // largest layer = buffer depth
  parameter int unsigned STAGE_BITS = 8;    // NDCAM bits per pipeline stage
  parameter int unsigned NOR_STEPS = 13;    // cycles per in-memory add stage

  // Targets of a configuration write into one RNA.
  typedef enum logic [2:0] {
    CFG_PROD    = 3'd0,  // product crossbar row (addr = {w, x}) or bias (addr = w*u)
    CFG_WIDX    = 3'd1,  // weight index buffer entry (addr = {w, position}), data = input index
    CFG_WLEN    = 3'd2,  // number of entries of weight buffer addr
    CFG_ACT_KEY = 3'd3,  // activation table row addr: y coordinate
    CFG_ACT_VAL = 3'd4,  // activation table row addr: z coordinate
    CFG_ENC_KEY = 3'd5,  // encoding table row addr: cluster centre
    CFG_ENC_VAL = 3'd6,  // encoding table row addr: encoded value
    CFG_MODE    = 3'd7   // data[1:0]: {pool, max_not_min}
  } cfg_sel_e;

  typedef struct packed {
    logic        we;
    cfg_sel_e    sel;
    logic [15:0] addr;
    logic [31:0] data;
  } cfg_wr_t;

  // Address spaces of the accelerator's configuration port.
  typedef enum logic [1:0] {
    SP_RNA  = 2'd0,  // one RNA: tile, rna, sel, addr, data
    SP_ENC  = 2'd1,  // input encoder table (sel CFG_ENC_KEY / CFG_ENC_VAL)
    SP_CTRL = 2'd2   // controller register addr
  } cfg_space_e;

  typedef struct packed {
    logic        we;
    cfg_space_e  space;
    logic [7:0]  tile;
    logic [15:0] rna;
    cfg_sel_e    sel;
    logic [15:0] addr;
    logic [31:0] data;
  } top_cfg_t;

  // Controller register map (SP_CTRL addresses).
  parameter logic [15:0] REG_LAYERS  = 16'h0000;  // tiles in use, one per layer
  parameter logic [15:0] REG_NRAW    = 16'h0001;  // raw inputs per sample
  parameter logic [15:0] REG_NSAMP   = 16'h0002;  // samples to run
  parameter logic [15:0] REG_INBASE  = 16'h0003;  // data block address of sample 0
  parameter logic [15:0] REG_OUTBASE = 16'h0004;  // data block address of results
  parameter logic [15:0] REG_INLEN   = 16'h0100;  // +t: fan-in loaded into tile t
  parameter logic [15:0] REG_ACTIVE  = 16'h0200;  // +t: active RNAs of tile t

  // Ceil of log2, for index widths.
  function automatic int unsigned clog2(input longint unsigned v);
    int unsigned r = 0;
    longint unsigned t = 1;
    while (t < v) begin t = t << 1; r++; end
    return (r == 0) ? 1 : r;
  endfunction

  // Number of 3:2 carry-save stages needed to reduce n operands to two.
  function automatic int unsigned csa_stages(input int unsigned n);
    int unsigned k = n;
    int unsigned s = 0;
    while (k > 2) begin k = 2 * (k / 3) + (k % 3); s++; end
    return s;
  endfunction

endpackage
