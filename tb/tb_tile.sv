// tb_tile: a tile of 4 small RNAs. RNAs 0..2 are neurons with their own random
// products and weight assignment over 16 shared inputs; RNA 3 does max
// pooling over four inputs. After a run the outputs are read from the tile's
// buffer (after a swap) and compared with a reference computed here: plain
// sum, then nearest-key lookups in the activation and encoding tables. A
// second run with only 2 active RNAs checks that inactive RNAs are skipped.
module tb_tile;
  import rapidnn_pkg::*;
  localparam int unsigned NR = 4, W = 4, U = 8, Q = 16, CW = 12, VW = 32, FI = 16;
  localparam int unsigned UB = 3, IB = 4, RB = 2, P = W * U;
  logic clk = 0, rst_n = 0;
  cfg_wr_t cfg; logic [RB-1:0] cfg_rna;
  logic in_we = 0; logic [IB-1:0] in_addr; logic [UB-1:0] in_data;
  logic [RB:0] active;
  logic start = 0, busy, done, swap = 0;
  logic [RB-1:0] rd_addr; logic [UB-1:0] rd_data;
  int checks = 0, failures = 0;
  int prod [NR][P+1];
  int wsel [NR][FI];
  int xin [FI];
  int ak [], ek [];
  int aval [Q];

  tile #(.N_RNA(NR), .W(W), .U(U), .Q(Q), .CNT_W(CW), .VAL_W(VW), .FANIN(FI)) dut (
    .clk, .rst_n, .cfg_i(cfg), .cfg_rna_i(cfg_rna), .in_we_i(in_we), .in_addr_i(in_addr),
    .in_data_i(in_data), .active_i(active), .start_i(start), .busy_o(busy), .done_o(done),
    .swap_i(swap), .rd_addr_i(rd_addr), .rd_data_o(rd_data));

  always #5 clk = ~clk;

  task automatic wr(input int r, input cfg_sel_e sel, input int addr, input int data);
    @(negedge clk);
    cfg.we = 1; cfg_rna = RB'(r); cfg.sel = sel; cfg.addr = 16'(addr); cfg.data = 32'(data);
    @(negedge clk); cfg.we = 0;
  endtask

  function automatic int nearest(input int keys [], input int q);
    int br; logic [31:0] best;
    br = 0; best = 32'(keys[0]) ^ 32'(q);
    for (int r = 1; r < keys.size(); r++)
      if ((32'(keys[r]) ^ 32'(q)) < best) begin best = 32'(keys[r]) ^ 32'(q); br = r; end
    return br;
  endfunction

  task automatic run_and_check(input int nact);
    @(negedge clk); active = (RB+1)'(nact); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    for (int r = 0; r < nact; r++) begin
      int exp;
      if (r < 3) begin
        int y; y = prod[r][P];
        for (int i = 0; i < int'(FI); i++) y += prod[r][wsel[r][i] * U + xin[i]];
        exp = nearest(ek, aval[nearest(ak, y)]);
      end else begin
        exp = xin[1];
        foreach (xin[i]) if (i == 4 || i == 9 || i == 13) if (xin[i] > exp) exp = xin[i];
      end
      rd_addr = RB'(r); #1;
      checks++;
      if (int'(rd_data) != exp) begin failures++; $display("FAIL rna %0d out %0d exp %0d", r, rd_data, exp); end
    end
  endtask

  initial begin
    cfg = '0; cfg_rna = '0; active = '0; rd_addr = '0;
    ak = new[Q]; ek = new[U];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 3; r++) begin
      int lens [W];
      foreach (lens[w]) lens[w] = 0;
      for (int k = 0; k < int'(Q); k++) begin
        ak[k] = (k - 8) * 400; aval[k] = (ak[k] > 0) ? ak[k] : 0;
        wr(r, CFG_ACT_KEY, k, ak[k]); wr(r, CFG_ACT_VAL, k, aval[k]);
      end
      for (int j = 0; j < int'(U); j++) begin
        ek[j] = j * 500; wr(r, CFG_ENC_KEY, j, ek[j]); wr(r, CFG_ENC_VAL, j, j);
      end
      for (int p = 0; p <= int'(P); p++) begin
        prod[r][p] = $signed($urandom_range(0, 400)) - 120; wr(r, CFG_PROD, p, prod[r][p]);
      end
      for (int i = 0; i < int'(FI); i++) begin
        wsel[r][i] = $urandom_range(0, W - 1);
        wr(r, CFG_WIDX, (wsel[r][i] << IB) | lens[wsel[r][i]], i); lens[wsel[r][i]]++;
      end
      for (int w = 0; w < int'(W); w++) wr(r, CFG_WLEN, w, lens[w]);
    end
    wr(3, CFG_WIDX, 0, 1); wr(3, CFG_WIDX, 1, 4); wr(3, CFG_WIDX, 2, 9); wr(3, CFG_WIDX, 3, 13);
    wr(3, CFG_WLEN, 0, 4); wr(3, CFG_MODE, 0, 3);
    for (int pass = 0; pass < 2; pass++) begin
      for (int i = 0; i < int'(FI); i++) begin
        xin[i] = $urandom_range(0, U - 1);
        @(negedge clk); in_we = 1; in_addr = IB'(i); in_data = UB'(xin[i]);
      end
      @(negedge clk); in_we = 0;
      run_and_check(pass == 0 ? 4 : 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
