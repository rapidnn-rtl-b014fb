// tb_broadcast_buffer: writes random codes into all entries bit-serially
// (checking the transfer takes UB cycles), swaps, and reads them back while
// the other bank is being written with different values by the parallel port;
// then swaps again and checks the parallel-written values.
module tb_broadcast_buffer;
  localparam int unsigned DEPTH = 16, UB = 6, AB = 4;
  logic clk = 0, rst_n = 0, swap = 0, ser_we = 0, pw_we = 0;
  logic [DEPTH-1:0] bits;
  logic [AB-1:0] pw_addr, rd_addr;
  logic [UB-1:0] pw_data, rd_data;
  logic [UB-1:0] a [DEPTH], b [DEPTH];
  int checks = 0, failures = 0;

  broadcast_buffer #(.DEPTH(DEPTH), .UB(UB)) dut (
    .clk, .rst_n, .swap_i(swap), .ser_we_i(ser_we), .ser_bits_i(bits),
    .pw_we_i(pw_we), .pw_addr_i(pw_addr), .pw_data_i(pw_data),
    .rd_addr_i(rd_addr), .rd_data_o(rd_data));

  always #5 clk = ~clk;

  initial begin
    bits = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (a[i]) begin a[i] = UB'($urandom); b[i] = UB'($urandom); end
    for (int k = UB - 1; k >= 0; k--) begin
      @(negedge clk);
      ser_we = 1;
      for (int i = 0; i < int'(DEPTH); i++) bits[i] = a[i][k];
    end
    @(negedge clk); ser_we = 0; swap = 1; @(negedge clk); swap = 0;
    for (int i = 0; i < int'(DEPTH); i++) begin
      rd_addr = AB'(i);
      pw_we = 1; pw_addr = AB'(DEPTH - 1 - i); pw_data = b[DEPTH - 1 - i];
      #1;
      checks++;
      if (rd_data != a[i]) begin failures++; $display("FAIL serial entry %0d %h exp %h", i, rd_data, a[i]); end
      @(negedge clk);
    end
    pw_we = 0; swap = 1; @(negedge clk); swap = 0;
    for (int i = 0; i < int'(DEPTH); i++) begin
      rd_addr = AB'(i); #1;
      checks++;
      if (rd_data != b[i]) begin failures++; $display("FAIL parallel entry %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
