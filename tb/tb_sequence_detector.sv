// tb_sequence_detector: exhaustive check of the count recoder over every
// 12-bit count. For each count the digits must reconstruct the count, no
// digit may be both positive and negative, no two non-zero digits may be
// adjacent, and the paper's examples (4, 9, 15) must give the terms it lists.
module tb_sequence_detector;
  localparam int unsigned CNT_W = 12;
  logic [CNT_W-1:0] cnt;
  logic [CNT_W:0]   pos, neg;
  int checks = 0, failures = 0;

  sequence_detector #(.CNT_W(CNT_W)) dut (.count_i(cnt), .pos_o(pos), .neg_o(neg));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s count=%0d pos=%b neg=%b", what, cnt, pos, neg);
    end
  endtask

  initial begin
    for (int c = 0; c < (1 << CNT_W); c++) begin
      int signed recon;
      logic [CNT_W:0] nz;
      cnt = CNT_W'(c);
      #1;
      recon = 0;
      for (int k = 0; k <= CNT_W; k++) begin
        if (pos[k]) recon += (1 << k);
        if (neg[k]) recon -= (1 << k);
      end
      nz = pos | neg;
      check(recon == c, "value");
      check((pos & neg) == '0, "disjoint");
      check((nz & (nz >> 1)) == '0, "non-adjacent");
    end
    cnt = 4;  #1; check(pos == 13'b100 && neg == 0, "4 = one shift by two");
    cnt = 9;  #1; check(pos == 13'b1001 && neg == 0, "9 = 8+1");
    cnt = 15; #1; check(pos == 13'b10000 && neg == 13'b1, "15 = 16-1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
