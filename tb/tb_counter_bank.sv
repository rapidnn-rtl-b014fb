// tb_counter_bank: drives random increments on all weight groups for a few
// hundred cycles and compares every counter with a model kept in the
// testbench; then checks that clear zeroes all counters.
module tb_counter_bank;
  localparam int unsigned W = 4, U = 8, CNT_W = 12, UB = 3;
  logic clk = 0, rst_n = 0, clear = 0;
  logic [W-1:0] inc;
  logic [W-1:0][UB-1:0] x;
  logic [CNT_W-1:0] cnt [W*U];
  int model [W*U];
  int checks = 0, failures = 0;

  counter_bank #(.W(W), .U(U), .CNT_W(CNT_W)) dut (
    .clk, .rst_n, .clear_i(clear), .inc_i(inc), .x_i(x), .count_o(cnt));

  always #5 clk = ~clk;

  initial begin
    inc = '0; x = '0;
    foreach (model[i]) model[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 300; cyc++) begin
      @(negedge clk);
      for (int w = 0; w < W; w++) begin
        inc[w] = 1'($urandom_range(0, 1));
        x[w]   = UB'($urandom_range(0, U - 1));
        if (inc[w]) model[w*U + int'(x[w])]++;
      end
    end
    @(negedge clk); inc = '0;
    @(negedge clk);
    for (int i = 0; i < W * U; i++) begin
      checks++;
      if (int'(cnt[i]) != model[i]) begin
        failures++; $display("FAIL counter %0d = %0d expected %0d", i, cnt[i], model[i]);
      end
    end
    clear = 1; @(negedge clk); clear = 0;
    for (int i = 0; i < W * U; i++) begin
      checks++;
      if (cnt[i] != 0) failures++;
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
