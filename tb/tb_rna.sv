// tb_rna: one neuron end to end. A small RNA (4 weight clusters, 8 input
// clusters, 16 activation points, 32 inputs) gets random products, a ReLU
// table and an encoding table; for random inputs the testbench computes Y as
// a plain sum, then Z and Zbar with its own nearest-key search (smallest
// key XOR query, sign bit inverted, lowest row on ties), and compares all
// three and the latency. Then the RNA is switched to pooling and checked for
// max and for min pooling over a window of four inputs.
module tb_rna;
  import rapidnn_pkg::*;
  localparam int unsigned W = 4, U = 8, Q = 16, CW = 12, VW = 32, FI = 32, UB = 3, IB = 5;
  localparam int unsigned P = W * U;
  logic clk = 0, rst_n = 0;
  cfg_wr_t cfg;
  logic in_we = 0; logic [IB-1:0] in_addr; logic [UB-1:0] in_data;
  logic start = 0, busy, done, pm;
  logic [UB-1:0] zbar;
  logic [VW-1:0] y, z;
  int checks = 0, failures = 0;
  int prod [P+1];
  int xin [FI];
  int akey [Q], aval [Q], ekey [U];

  rna #(.W(W), .U(U), .Q(Q), .CNT_W(CW), .VAL_W(VW), .FANIN(FI)) dut (
    .clk, .rst_n, .cfg_i(cfg), .in_we_i(in_we), .in_addr_i(in_addr), .in_data_i(in_data),
    .start_i(start), .busy_o(busy), .done_o(done), .zbar_o(zbar), .y_o(y), .z_o(z),
    .pool_mode_o(pm));

  always #5 clk = ~clk;

  task automatic wr(input cfg_sel_e sel, input int addr, input int data);
    @(negedge clk);
    cfg.we = 1; cfg.sel = sel; cfg.addr = 16'(addr); cfg.data = 32'(data);
    @(negedge clk); cfg.we = 0;
  endtask

  function automatic int nearest(input int keys [], input int n, input int q);
    int br; logic [31:0] best;
    br = 0; best = 32'(keys[0]) ^ 32'(q);
    for (int r = 1; r < n; r++)
      if ((32'(keys[r]) ^ 32'(q)) < best) begin best = 32'(keys[r]) ^ 32'(q); br = r; end
    return br;
  endfunction

  task automatic run(output int cycles);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    int ak [], ek [];
    cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    ak = new[Q]; ek = new[U];
    for (int k = 0; k < int'(Q); k++) begin
      akey[k] = (k - 8) * 400; aval[k] = (akey[k] > 0) ? akey[k] : 0; ak[k] = akey[k];
      wr(CFG_ACT_KEY, k, akey[k]); wr(CFG_ACT_VAL, k, aval[k]);
    end
    for (int j = 0; j < int'(U); j++) begin
      ekey[j] = j * 500; ek[j] = ekey[j];
      wr(CFG_ENC_KEY, j, ekey[j]); wr(CFG_ENC_VAL, j, j);
    end
    for (int t = 0; t < 6; t++) begin
      int lens [W], maxlen, ea, ee, cyc, expc;
      for (int p = 0; p <= int'(P); p++) begin
        prod[p] = $signed($urandom_range(0, 400)) - 150; wr(CFG_PROD, p, prod[p]);
      end
      foreach (lens[w]) lens[w] = 0;
      for (int i = 0; i < int'(FI); i++) begin
        int w; w = $urandom_range(0, W - 1);
        xin[i] = $urandom_range(0, U - 1);
        wr(CFG_WIDX, (w << IB) | lens[w], i); lens[w]++;
      end
      maxlen = 0;
      for (int w = 0; w < int'(W); w++) begin wr(CFG_WLEN, w, lens[w]); if (lens[w] > maxlen) maxlen = lens[w]; end
      for (int i = 0; i < int'(FI); i++) begin @(negedge clk); in_we = 1; in_addr = IB'(i); in_data = UB'(xin[i]); end
      @(negedge clk); in_we = 0;
      run(cyc);
      // Y checked against an independent sum accumulated from the written pairs
      checks++;
      if ($signed(y) != sum_q) begin failures++; $display("FAIL y=%0d exp %0d", $signed(y), sum_q); end
      ea = nearest(ak, Q, sum_q);
      ee = nearest(ek, U, aval[ea]);
      checks++;
      if ($signed(z) != aval[ea]) begin failures++; $display("FAIL z=%0d exp %0d", $signed(z), aval[ea]); end
      checks++;
      if (int'(zbar) != ee) begin failures++; $display("FAIL zbar=%0d exp %0d", zbar, ee); end
      expc = maxlen + CW + 13 * (int'(csa_stages(P + 1)) + VW) + 5 + 2 * (VW / 8 + 1) + 1;
      checks++;
      if (cyc != expc) begin failures++; $display("FAIL cycles %0d exp %0d", cyc, expc); end
    end
    // pooling over inputs 2, 5, 11, 20
    begin
      int idx [4] = '{2, 5, 11, 20};
      int mx, mn, cyc;
      xin[2] = 3; xin[5] = 6; xin[11] = 1; xin[20] = 4;
      foreach (idx[k]) begin @(negedge clk); in_we = 1; in_addr = IB'(idx[k]); in_data = UB'(xin[idx[k]]); end
      @(negedge clk); in_we = 0;
      for (int k = 0; k < 4; k++) wr(CFG_WIDX, k, idx[k]);
      wr(CFG_WLEN, 0, 4);
      wr(CFG_MODE, 0, 3);            // pool, max
      run(cyc);
      checks++; if (zbar != 6) begin failures++; $display("FAIL max pool %0d", zbar); end
      checks++; if (cyc != 4 + 8) begin failures++; $display("FAIL pool cycles %0d", cyc); end
      wr(CFG_MODE, 0, 2);            // pool, min
      run(cyc);
      checks++; if (zbar != 1) begin failures++; $display("FAIL min pool %0d", zbar); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // independent Y reference: every CFG_WIDX write pairs an input with a
  // weight cluster; the sum of prod[w*U + x] is formed when start is seen
  int sum_q;
  int pair_w [FI];
  always @(posedge clk) begin
    if (cfg.we && cfg.sel == CFG_WIDX && (cfg.addr >> IB) < W) pair_w[cfg.data] = int'(cfg.addr >> IB);
    if (start && !pm) begin
      sum_q = prod[P];
      for (int i = 0; i < int'(FI); i++) sum_q += prod[pair_w[i] * U + xin[i]];
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
