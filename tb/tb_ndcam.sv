// tb_ndcam: fills the CAM with random keys, then issues back-to-back random
// searches with random row enables. Each answer is compared with a
// reference that scans all enabled rows for the smallest key XOR query
// (lowest row on a tie); the latency of 4 stages is checked per search.
module tb_ndcam;
  localparam int unsigned ROWS = 16, KEY_W = 32, SB = 8, NS = 4, RB = 4;
  logic clk = 0, rst_n = 0;
  logic we = 0, search = 0;
  logic [RB-1:0] waddr;
  logic [KEY_W-1:0] wkey, query;
  logic [ROWS-1:0] en;
  logic rv, hit;
  logic [RB-1:0] row;
  logic [KEY_W-1:0] keys [ROWS];
  int checks = 0, failures = 0;
  int exp_row [$];
  bit exp_hit [$];
  int issue_cyc [$];
  int cyc = 0;

  ndcam #(.ROWS(ROWS), .KEY_W(KEY_W), .STAGE_BITS(SB)) dut (
    .clk, .rst_n, .we_i(we), .waddr_i(waddr), .wkey_i(wkey),
    .search_i(search), .query_i(query), .en_i(en),
    .result_valid_o(rv), .hit_o(hit), .row_o(row));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n && rv) begin
    int er; bit eh; int ic;
    er = exp_row.pop_front(); eh = exp_hit.pop_front(); ic = issue_cyc.pop_front();
    checks++;
    if (hit != eh || (eh && int'(row) != er)) begin
      failures++; $display("FAIL row %0d hit %0d expected %0d/%0d", row, hit, er, eh);
    end
    checks++;
    if (cyc - ic != int'(NS)) begin failures++; $display("FAIL latency %0d", cyc - ic); end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < int'(ROWS); r++) begin
      @(negedge clk);
      we = 1; waddr = RB'(r);
      // clustered keys make ties in the upper stages likely
      keys[r] = (r < 8) ? {8'h40, 16'h0, 8'($urandom)} : $urandom;
      wkey = keys[r];
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 400; t++) begin
      logic [KEY_W-1:0] best;
      int br;
      @(negedge clk);
      search = 1;
      query = (t % 3 == 0) ? {8'h40, 16'h0, 8'($urandom)} : $urandom;
      en = (t % 5 == 0) ? '1 : ROWS'($urandom);
      if (t == 7) en = '0;
      best = '1; br = -1;
      for (int r = 0; r < int'(ROWS); r++)
        if (en[r] && (br < 0 || (keys[r] ^ query) < best)) begin best = keys[r] ^ query; br = r; end
      exp_row.push_back(br); exp_hit.push_back(br >= 0); issue_cyc.push_back(cyc + 1);
    end
    @(negedge clk); search = 0;
    repeat (NS + 2) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
