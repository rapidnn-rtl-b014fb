// tb_am_block: loads a 64-row activation-like table (y keys sorted from -32
// to +31.5 in a fixed-point format with 8 fraction bits, z = ReLU(y) words)
// and looks up random signed queries. The expected word is computed by the
// testbench from the nearest key in offset-binary XOR distance. Also checks
// clear_i (no hit afterwards) and the lookup latency.
module tb_am_block;
  localparam int unsigned ROWS = 64, KEY_W = 32, DATA_W = 32, RB = 6;
  localparam int unsigned LAT = KEY_W / 8 + 1;
  logic clk = 0, rst_n = 0;
  logic clear = 0, kwe = 0, dwe = 0, search = 0;
  logic [RB-1:0] waddr;
  logic [KEY_W-1:0] wkey, query;
  logic [DATA_W-1:0] wdata;
  logic valid, hit;
  logic [RB-1:0] row;
  logic [DATA_W-1:0] data;
  logic signed [31:0] keys [ROWS];
  logic [31:0] vals [ROWS];
  int checks = 0, failures = 0;

  am_block #(.ROWS(ROWS), .KEY_W(KEY_W), .DATA_W(DATA_W)) dut (
    .clk, .rst_n, .clear_i(clear), .key_we_i(kwe), .data_we_i(dwe), .waddr_i(waddr),
    .wkey_i(wkey), .wdata_i(wdata), .search_i(search), .query_i(query),
    .valid_o(valid), .hit_o(hit), .row_o(row), .data_o(data));

  always #5 clk = ~clk;

  // The sign flip of offset binary cancels in the XOR, so the reference can
  // compare raw two's-complement patterns.
  function automatic int nearest(input logic [31:0] q);
    logic [31:0] best; int br;
    best = keys[0] ^ q; br = 0;
    for (int r = 1; r < int'(ROWS); r++)
      if ((keys[r] ^ q) < best) begin best = keys[r] ^ q; br = r; end
    return br;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < int'(ROWS); r++) begin
      keys[r] = (r - 32) * 256;
      vals[r] = (keys[r] > 0) ? keys[r] : 0;
      @(negedge clk);
      kwe = 1; dwe = 1; waddr = RB'(r); wkey = keys[r]; wdata = vals[r];
    end
    @(negedge clk); kwe = 0; dwe = 0;
    for (int t = 0; t < 200; t++) begin
      int er, lat;
      @(negedge clk);
      query = (t < 100) ? 32'($signed($urandom_range(0, 20000)) - 10000) : $urandom;
      er = nearest(query);
      search = 1; @(negedge clk); search = 0;
      lat = 1;
      while (!valid) begin @(negedge clk); lat++; end
      checks++;
      if (!hit || data != vals[er] || int'(row) != er) begin
        failures++; $display("FAIL q=%0d row %0d data %h expected row %0d", $signed(query), row, data, er);
      end
      checks++;
      if (lat != int'(LAT)) begin failures++; $display("FAIL latency %0d", lat); end
    end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    search = 1; query = 0; @(negedge clk); search = 0;
    while (!valid) @(negedge clk);
    checks++;
    if (hit) begin failures++; $display("FAIL hit after clear"); end
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
