// tb_rapidnn_top: end-to-end run of a small accelerator (3 tiles of 2 RNAs,
// 4 weight and 8 input clusters, 16-point activation tables, fan-in up to 16)
// on a 3-layer network: 8 raw inputs -> 2 neurons -> 1 neuron + a max-pool
// -> 1 neuron + a min-pool, three samples in the layer pipeline. Random products, weight assignments and raw
// samples are generated here; a reference model in this file encodes the
// raw inputs, computes every layer (plain sums, nearest-key lookups with the
// CAM's distance: smallest key XOR query, lowest row on ties) and the pooling,
// and the written-back results in the data block are compared with it.
// It also counts how often each mechanism happened and fails if one never
// did: input encoding, buffer swaps, layers working on different samples at
// once, max and min pooling, counts recoded with a negative digit, bias,
// carry-save addition stages, result write-back.
module tb_rapidnn_top;
  import rapidnn_pkg::*;
  localparam int unsigned NT = 3, NR = 2, W = 4, U = 8, Q = 16, FI = 16, DBW = 1024;
  localparam int unsigned IB = 4, P = W * U;
  localparam int unsigned NRAW = 8, S = 3, OUTBASE = 512;
  localparam int LAYERS = 3;

  logic clk = 0, rst_n = 0;
  top_cfg_t cfg;
  logic host_we = 0; logic [9:0] host_addr; logic [31:0] host_wdata, host_rdata;
  logic start = 0, busy, done;
  int checks = 0, failures = 0;

  rapidnn_top #(.N_TILES(NT), .N_RNA(NR), .W(W), .U(U), .Q(Q), .FANIN(FI), .DB_WORDS(DBW)) dut (
    .clk, .rst_n, .cfg_i(cfg), .host_we_i(host_we), .host_addr_i(host_addr),
    .host_wdata_i(host_wdata), .host_rdata_o(host_rdata), .start_i(start), .busy_o(busy), .done_o(done));

  always #5 clk = ~clk;

  // ---------------- network description ----------------
  typedef enum int {FC, PMAX, PMIN} kind_e;
  int fanin [NT]  = '{NRAW, 2, 2};
  int nact  [NT]  = '{2, 2, 2};
  kind_e kind [NT][NR];
  int prod [NT][NR][P+1];
  int wsel [NT][NR][FI];      // FC: weight cluster of input i
  int pidx [NT][NR][$];       // pooling: input indexes
  int inkey [U], ak [Q], aval [Q], ek [U];
  int raw [S][NRAW];
  int expout [S][NR];
  int n_negdigit = 0, n_bias = 0;

  function automatic int nearest(input int keys [], input int q);
    int br; logic [31:0] best;
    br = 0; best = 32'(keys[0]) ^ 32'(q);
    for (int r = 1; r < keys.size(); r++)
      if ((32'(keys[r]) ^ 32'(q)) < best) begin best = 32'(keys[r]) ^ 32'(q); br = r; end
    return br;
  endfunction

  task automatic wcfg(input cfg_space_e sp, input int t, input int r, input cfg_sel_e sel,
                      input int addr, input int data);
    @(negedge clk);
    cfg.we = 1; cfg.space = sp; cfg.tile = 8'(t); cfg.rna = 16'(r); cfg.sel = sel;
    cfg.addr = 16'(addr); cfg.data = 32'(data);
    @(negedge clk); cfg.we = 0;
  endtask

  task automatic reference();
    int ik [], akd [], ekd [];
    ik = new[U]; akd = new[Q]; ekd = new[U];
    foreach (ik[i]) ik[i] = inkey[i];
    foreach (akd[i]) akd[i] = ak[i];
    foreach (ekd[i]) ekd[i] = ek[i];
    for (int s = 0; s < int'(S); s++) begin
      int x [FI], nx [FI];
      for (int i = 0; i < int'(NRAW); i++) x[i] = nearest(ik, raw[s][i]);
      for (int t = 0; t < int'(NT); t++) begin
        for (int r = 0; r < nact[t]; r++) begin
          if (kind[t][r] == FC) begin
            int y, cnt [P];
            foreach (cnt[p]) cnt[p] = 0;
            for (int i = 0; i < fanin[t]; i++) cnt[wsel[t][r][i] * U + x[i]]++;
            y = prod[t][r][P];
            if (prod[t][r][P] != 0) n_bias++;
            for (int p = 0; p < int'(P); p++) begin
              y += cnt[p] * prod[t][r][p];
              if ((cnt[p] & (cnt[p] >> 1)) != 0) n_negdigit++;   // run of ones: 2^k - 2^j
            end
            nx[r] = nearest(ekd, aval[nearest(akd, y)]);
          end else begin
            nx[r] = x[pidx[t][r][0]];
            foreach (pidx[t][r][k]) begin
              if (kind[t][r] == PMAX && x[pidx[t][r][k]] > nx[r]) nx[r] = x[pidx[t][r][k]];
              if (kind[t][r] == PMIN && x[pidx[t][r][k]] < nx[r]) nx[r] = x[pidx[t][r][k]];
            end
          end
        end
        x = nx;
      end
      for (int r = 0; r < nact[NT-1]; r++) expout[s][r] = x[r];
    end
  endtask

  // ---------------- mechanism counters ----------------
  int n_enc = 0, n_swap = 0, n_overlap = 0, n_pmax = 0, n_pmin = 0, n_wb = 0, n_csa = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.enc_search) n_enc++;
    if (dut.swap) n_swap++;
    if (dut.u_ctrl.state_q == 3'd3 && dut.tile_start[0]) begin
      int busy_layers;
      busy_layers = 0;
      for (int t = 0; t < int'(NT); t++)
        if (int'(dut.u_ctrl.beat_q) - 1 - t >= 0 && int'(dut.u_ctrl.beat_q) - 1 - t < int'(S)) busy_layers++;
      if (busy_layers >= 2) n_overlap++;
    end
    if (dut.g_tile[1].u_tile.g_rna[1].u_rna.pool_search_q && dut.g_tile[1].u_tile.g_rna[1].u_rna.max_q) n_pmax++;
    if (dut.g_tile[2].u_tile.g_rna[1].u_rna.pool_search_q && !dut.g_tile[2].u_tile.g_rna[1].u_rna.max_q) n_pmin++;
    if (busy && dut.db_we) n_wb++;
    if (dut.g_tile[0].u_tile.g_rna[0].u_rna.u_wa.u_add.state_q == 2'd1 &&
        dut.g_tile[0].u_tile.g_rna[0].u_rna.u_wa.u_add.step_q == 4'd12) n_csa++;
  end

  task automatic need(input int n, input string what);
    checks++;
    $display("mechanism %-28s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  initial begin
    cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // tables shared by all neurons: ReLU sampled at 16 points, 8 input clusters
    for (int k = 0; k < int'(Q); k++) begin ak[k] = (k - 6) * 300; aval[k] = (ak[k] > 0) ? ak[k] : 0; end
    for (int j = 0; j < int'(U); j++) begin ek[j] = j * 400; inkey[j] = j * 300 - 1000; end
    for (int j = 0; j < int'(U); j++) begin
      wcfg(SP_ENC, 0, 0, CFG_ENC_KEY, j, inkey[j]); wcfg(SP_ENC, 0, 0, CFG_ENC_VAL, j, j);
    end
    for (int t = 0; t < int'(NT); t++) begin
      for (int r = 0; r < nact[t]; r++) begin
        kind[t][r] = (t == 1 && r == 1) ? PMAX : (t == 2 && r == 1) ? PMIN : FC;
        if (kind[t][r] == FC) begin
          int lens [W];
          foreach (lens[w]) lens[w] = 0;
          for (int k = 0; k < int'(Q); k++) begin
            wcfg(SP_RNA, t, r, CFG_ACT_KEY, k, ak[k]); wcfg(SP_RNA, t, r, CFG_ACT_VAL, k, aval[k]);
          end
          for (int j = 0; j < int'(U); j++) begin
            wcfg(SP_RNA, t, r, CFG_ENC_KEY, j, ek[j]); wcfg(SP_RNA, t, r, CFG_ENC_VAL, j, j);
          end
          for (int p = 0; p <= int'(P); p++) begin
            prod[t][r][p] = $signed($urandom_range(0, 140)) - 40;
            wcfg(SP_RNA, t, r, CFG_PROD, p, prod[t][r][p]);
          end
          for (int i = 0; i < fanin[t]; i++) begin
            wsel[t][r][i] = (i < 3) ? 1 : $urandom_range(0, W - 1);   // inputs 0..2 share a weight
            wcfg(SP_RNA, t, r, CFG_WIDX, (wsel[t][r][i] << IB) | lens[wsel[t][r][i]], i);
            lens[wsel[t][r][i]]++;
          end
          for (int w = 0; w < int'(W); w++) wcfg(SP_RNA, t, r, CFG_WLEN, w, lens[w]);
          wcfg(SP_RNA, t, r, CFG_MODE, 0, 0);
        end else begin
          if (t == 1) pidx[t][r] = '{1, 0}; else pidx[t][r] = '{0, 1};
          foreach (pidx[t][r][k]) wcfg(SP_RNA, t, r, CFG_WIDX, k, pidx[t][r][k]);
          wcfg(SP_RNA, t, r, CFG_WLEN, 0, pidx[t][r].size());
          wcfg(SP_RNA, t, r, CFG_MODE, 0, (kind[t][r] == PMAX) ? 3 : 2);
        end
      end
      wcfg(SP_CTRL, 0, 0, CFG_MODE, int'(REG_INLEN) + t, fanin[t]);
      wcfg(SP_CTRL, 0, 0, CFG_MODE, int'(REG_ACTIVE) + t, nact[t]);
    end
    wcfg(SP_CTRL, 0, 0, CFG_MODE, REG_LAYERS, LAYERS);
    wcfg(SP_CTRL, 0, 0, CFG_MODE, REG_NRAW, NRAW);
    wcfg(SP_CTRL, 0, 0, CFG_MODE, REG_NSAMP, S);
    wcfg(SP_CTRL, 0, 0, CFG_MODE, REG_INBASE, 0);
    wcfg(SP_CTRL, 0, 0, CFG_MODE, REG_OUTBASE, OUTBASE);
    // raw samples into the data block
    for (int s = 0; s < int'(S); s++)
      for (int i = 0; i < int'(NRAW); i++) begin
        // inputs 0..2 equal: their shared weight gives a count of 3 (binary 11)
        raw[s][i] = (i == 1 || i == 2) ? raw[s][0] : $signed($urandom_range(0, 2400)) - 1000;
        @(negedge clk); host_we = 1; host_addr = 10'(s * NRAW + i); host_wdata = 32'(raw[s][i]);
      end
    @(negedge clk); host_we = 0;
    reference();
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    for (int s = 0; s < int'(S); s++)
      for (int r = 0; r < nact[NT-1]; r++) begin
        host_addr = 10'(OUTBASE + s * nact[NT-1] + r);
        @(negedge clk);
        checks++;
        if (int'(host_rdata) != expout[s][r]) begin
          failures++; $display("FAIL sample %0d output %0d = %0d expected %0d", s, r, host_rdata, expout[s][r]);
        end
      end
    need(n_enc, "input encoding searches");
    need(n_swap, "buffer swaps");
    need(n_overlap, "overlapping layer steps");
    need(n_pmax, "max pooling");
    need(n_pmin, "min pooling");
    need(n_negdigit, "counts with runs of ones");
    need(n_bias, "non-zero bias");
    need(n_csa, "carry-save stages");
    need(n_wb, "result write-backs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
