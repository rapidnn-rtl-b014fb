// tb_inmem_adder: adds sets of random signed operands and compares the sum
// with the testbench's own addition; also checks that the latency is exactly
// 13 cycles per carry-save stage plus 13 cycles per bit of the final stage.
module tb_inmem_adder;
  import rapidnn_pkg::*;
  localparam int unsigned N_OPS = 40, N_BITS = 16;
  logic clk = 0, rst_n = 0, start = 0;
  logic [N_BITS-1:0] ops [N_OPS];
  logic busy, done;
  logic [N_BITS-1:0] sum;
  int checks = 0, failures = 0;

  inmem_adder #(.N_OPS(N_OPS), .N_BITS(N_BITS)) dut (
    .clk, .rst_n, .start_i(start), .ops_i(ops), .busy_o(busy), .done_o(done), .sum_o(sum));

  always #5 clk = ~clk;

  initial begin
    foreach (ops[i]) ops[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      logic [N_BITS-1:0] ref_sum;
      int cycles, exp_cycles;
      ref_sum = '0;
      for (int i = 0; i < int'(N_OPS); i++) begin
        ops[i] = (t == 0) ? N_BITS'(i + 1) : (t == 1) ? '1 : N_BITS'($urandom);
        ref_sum += ops[i];
      end
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cycles = 1;
      while (!done) begin @(negedge clk); cycles++; end
      exp_cycles = 1 + 13 * int'(csa_stages(N_OPS)) + 13 * int'(N_BITS);
      checks++;
      if (sum !== ref_sum) begin failures++; $display("FAIL sum %h expected %h", sum, ref_sum); end
      checks++;
      if (cycles != exp_cycles) begin failures++; $display("FAIL latency %0d expected %0d", cycles, exp_cycles); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
