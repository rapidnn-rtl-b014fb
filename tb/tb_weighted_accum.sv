// tb_weighted_accum: configures a small neuron (4 weight clusters, 8 input
// clusters, up to 64 inputs) with random products, bias and weight
// assignment, streams random encoded inputs, and compares Y with the sum of
// the selected products computed here. Several neurons of different fan-in
// are run, including counts with runs of ones. The latency is checked against
// L + CNT_W + 13*(carry-save stages + VAL_W) + 5, L = longest weight buffer.
// Pool mode is checked to stream exactly the inputs named by buffer 0.
module tb_weighted_accum;
  import rapidnn_pkg::*;
  localparam int unsigned W = 4, U = 8, CW = 12, VW = 32, FI = 64, UB = 3, IB = 6;
  localparam int unsigned P = W * U;
  logic clk = 0, rst_n = 0;
  cfg_wr_t cfg;
  logic in_we = 0; logic [IB-1:0] in_addr; logic [UB-1:0] in_data;
  logic start = 0, pool = 0, busy, yv, pv, plast;
  logic [VW-1:0] y;
  logic [UB-1:0] px;
  int checks = 0, failures = 0;
  int prod [P+1];
  int xin [FI];
  int wsel [FI];

  weighted_accum #(.W(W), .U(U), .CNT_W(CW), .VAL_W(VW), .FANIN(FI)) dut (
    .clk, .rst_n, .cfg_i(cfg), .in_we_i(in_we), .in_addr_i(in_addr), .in_data_i(in_data),
    .start_i(start), .pool_i(pool), .busy_o(busy), .y_valid_o(yv), .y_o(y),
    .pool_v_o(pv), .pool_x_o(px), .pool_last_o(plast));

  always #5 clk = ~clk;

  task automatic wr(input cfg_sel_e sel, input int addr, input int data);
    @(negedge clk);
    cfg.we = 1; cfg.sel = sel; cfg.addr = 16'(addr); cfg.data = 32'(data);
    @(negedge clk); cfg.we = 0;
  endtask

  initial begin
    cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5; t++) begin
      int n, lens [W], maxlen, expy, cyc, expc;
      n = (t == 0) ? FI : (t == 1) ? 15 : $urandom_range(1, FI);
      for (int p = 0; p <= int'(P); p++) begin
        prod[p] = $signed($urandom_range(0, 2000)) - 1000;
        wr(CFG_PROD, p, prod[p]);
      end
      foreach (lens[w]) lens[w] = 0;
      for (int i = 0; i < n; i++) begin
        wsel[i] = (t == 1) ? 2 : $urandom_range(0, W - 1);   // t==1: one buffer of 15
        xin[i]  = (t == 1) ? 5 : $urandom_range(0, U - 1);   // count 15 = 16-1
        wr(CFG_WIDX, (wsel[i] << IB) | lens[wsel[i]], i);
        lens[wsel[i]]++;
      end
      maxlen = 0;
      for (int w = 0; w < int'(W); w++) begin
        wr(CFG_WLEN, w, lens[w]);
        if (lens[w] > maxlen) maxlen = lens[w];
      end
      for (int i = 0; i < n; i++) begin
        @(negedge clk); in_we = 1; in_addr = IB'(i); in_data = UB'(xin[i]);
      end
      @(negedge clk); in_we = 0;
      expy = prod[P];
      for (int i = 0; i < n; i++) expy += prod[wsel[i] * U + xin[i]];
      start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!yv) begin @(negedge clk); cyc++; end
      expc = maxlen + CW + 13 * (int'(csa_stages(P + 1)) + VW) + 5;
      checks++;
      if ($signed(y) != expy) begin failures++; $display("FAIL y=%0d expected %0d", $signed(y), expy); end
      checks++;
      if (cyc != expc) begin failures++; $display("FAIL cycles %0d expected %0d", cyc, expc); end
      @(negedge clk);
    end
    // pooling: buffer 0 names inputs 3, 9, 1, 7
    begin
      int idx [4] = '{3, 9, 1, 7};
      int got;
      for (int k = 0; k < 4; k++) wr(CFG_WIDX, k, idx[k]);
      wr(CFG_WLEN, 0, 4);
      @(negedge clk); pool = 1; start = 1; @(negedge clk); start = 0; pool = 0;
      got = 0;
      repeat (20) begin
        if (pv) begin
          checks++;
          if (int'(px) != xin[idx[got]]) begin failures++; $display("FAIL pool %0d", got); end
          checks++;
          if (plast != (got == 3)) failures++;
          got++;
        end
        @(negedge clk);
      end
      checks++;
      if (got != 4) begin failures++; $display("FAIL pool count %0d", got); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
