// tb_data_block: writes random words at random addresses, keeps a model, and
// reads back every written address checking the one-cycle read latency.
module tb_data_block;
  localparam int unsigned WORDS = 256, VW = 32, AB = 8;
  logic clk = 0, we = 0;
  logic [AB-1:0] addr;
  logic [VW-1:0] wdata, rdata;
  logic [VW-1:0] model [int];
  int checks = 0, failures = 0;

  data_block #(.WORDS(WORDS), .VAL_W(VW)) dut (.clk, .we_i(we), .addr_i(addr), .wdata_i(wdata), .rdata_o(rdata));

  always #5 clk = ~clk;

  initial begin
    for (int k = 0; k < 300; k++) begin
      @(negedge clk);
      we = 1; addr = AB'($urandom); wdata = $urandom;
      model[int'(addr)] = wdata;
    end
    @(negedge clk); we = 0;
    foreach (model[a]) begin
      addr = AB'(a);
      @(negedge clk);
      checks++;
      if (rdata != model[a]) begin failures++; $display("FAIL addr %0d", a); end
    end
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
