// tb_controller: self-checking testbench for the layer-pipeline controller.
//
// The controller is surrounded by behavioural stubs: a data block with one
// cycle read latency, an input encoder that answers every search after
// ENC_LAT cycles with a code derived from the query, and three tiles that
// pulse done a tile-specific number of cycles after start. Each tile's
// output buffer returns (swaps seen * 8 + read address) mod 64, so every
// written-back word tells in which pipeline step it was read.
// Checked: register programming; the encoder is fed the raw inputs of each
// sample in order; the input buffer receives the codes in order; every
// layer tile gets exactly its fan-in of loads with ascending addresses,
// one start per step and never a start before loading is over; the number
// of pipeline steps is S+L+1; write-back addresses and data (the last
// layer's outputs of sample s are read in step s+L+1); one done pulse per
// run; a second run with other registers.
`timescale 1ns/1ps
module tb_controller;
  import rapidnn_pkg::*;
  localparam int NT = 3, NR = 4, U = 64, VW = 16, FI = 16, DBW = 256;
  localparam int UB = $clog2(U), IB = $clog2(FI), RB = $clog2(NR);
  localparam int AW = (IB > RB) ? IB : RB, DB = $clog2(DBW);
  localparam int ENC_LAT = 5;
  localparam int TILE_LAT [NT] = '{3, 9, 6};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  top_cfg_t cfg;
  logic start, busy, done;
  logic db_we; logic [DB-1:0] db_addr; logic [VW-1:0] db_wdata, db_rdata;
  logic enc_search; logic [VW-1:0] enc_query; logic enc_valid; logic [UB-1:0] enc_code;
  logic ib_we; logic [IB-1:0] ib_addr; logic [UB-1:0] ib_data;
  logic [AW-1:0] rd_addr;
  logic [NT-1:0] tin_we, tstart, tdone;
  logic [RB:0] tactive [NT];
  logic [UB-1:0] trd [NT];
  logic swap; logic [2:0] phase;

  controller #(.N_TILES(NT), .N_RNA(NR), .U(U), .VAL_W(VW), .FANIN(FI), .DB_WORDS(DBW)) dut (
    .clk, .rst_n, .cfg_i(cfg), .start_i(start), .busy_o(busy), .done_o(done),
    .db_we_o(db_we), .db_addr_o(db_addr), .db_wdata_o(db_wdata), .db_rdata_i(db_rdata),
    .enc_search_o(enc_search), .enc_query_o(enc_query), .enc_valid_i(enc_valid), .enc_code_i(enc_code),
    .ib_we_o(ib_we), .ib_addr_o(ib_addr), .ib_data_o(ib_data),
    .rd_addr_o(rd_addr), .tile_in_we_o(tin_we), .tile_start_o(tstart), .tile_done_i(tdone),
    .tile_active_o(tactive), .tile_rd_data_i(trd), .swap_o(swap), .phase_o(phase));

  // ---------------- stubs ----------------
  logic [VW-1:0] mem [DBW];
  always @(posedge clk) begin
    if (db_we) mem[db_addr] <= db_wdata;
    db_rdata <= mem[db_addr];
  end

  function automatic logic [UB-1:0] enc_of(logic [VW-1:0] v);
    return UB'(v * 7 + 3);
  endfunction
  logic [ENC_LAT-1:0] enc_v_pipe;
  logic [UB-1:0]      enc_c_pipe [ENC_LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) enc_v_pipe <= '0;
    else begin
      enc_v_pipe <= {enc_v_pipe[ENC_LAT-2:0], enc_search};
      enc_c_pipe[0] <= enc_of(enc_query);
      for (int i = 1; i < ENC_LAT; i++) enc_c_pipe[i] <= enc_c_pipe[i-1];
    end
  end
  assign enc_valid = enc_v_pipe[ENC_LAT-1];
  assign enc_code  = enc_c_pipe[ENC_LAT-1];

  int swaps_seen = 0;
  int tcnt [NT];
  bit tpend [NT];
  always @(posedge clk) begin
    for (int t = 0; t < NT; t++) begin
      tdone[t] <= 1'b0;
      if (tstart[t]) begin tpend[t] <= 1'b1; tcnt[t] <= TILE_LAT[t]; end
      else if (tpend[t]) begin
        if (tcnt[t] == 1) begin tdone[t] <= 1'b1; tpend[t] <= 1'b0; end
        tcnt[t] <= tcnt[t] - 1;
      end
    end
  end
  always_comb
    for (int t = 0; t < NT; t++) trd[t] = UB'(swaps_seen * 8 + int'(rd_addr));

  // ---------------- monitors ----------------
  int n_search, n_ibwr, n_swap, n_done, n_dbwr;
  int n_load [NT];
  int n_start [NT];
  int exp_load_addr [NT];
  logic [VW-1:0] exp_q [$];
  logic [UB-1:0] exp_code [$];
  int ib_next;
  int nraw_r, nsamp_r, layers_r, inbase_r, outbase_r;
  int inlen_r [NT];
  int active_r [NT];
  bit in_run;

  always @(posedge clk) if (rst_n) begin
    if (enc_search) begin
      n_search++;
      check(exp_q.size() > 0 && enc_query == exp_q[0],
            $sformatf("encoder query %0d exp %0d", enc_query, exp_q.size() ? exp_q[0] : -1));
      if (exp_q.size()) void'(exp_q.pop_front());
      exp_code.push_back(enc_of(enc_query));
    end
    if (ib_we) begin
      n_ibwr++;
      check(int'(ib_addr) == ib_next && exp_code.size() > 0 && ib_data == exp_code[0],
            $sformatf("input buffer write addr %0d data %0d", ib_addr, ib_data));
      if (exp_code.size()) void'(exp_code.pop_front());
      ib_next = (ib_next + 1) % nraw_r;
    end
    for (int t = 0; t < NT; t++) begin
      if (tin_we[t]) begin
        n_load[t]++;
        if (int'(rd_addr) != exp_load_addr[t] || t >= layers_r || in_run) begin
          failures++; $display("FAIL: tile %0d load addr %0d exp %0d", t, rd_addr, exp_load_addr[t]);
        end
        exp_load_addr[t]++;
      end
      if (tstart[t]) begin
        n_start[t]++;
        if (tpend[t] || t >= layers_r) begin failures++; $display("FAIL: tile %0d bad start", t); end
      end
    end
    if (|tstart) in_run = 1'b1;
    if (db_we) n_dbwr++;
    if (swap) begin
      n_swap++;
      swaps_seen <= swaps_seen + 1;
      in_run = 1'b0;
      for (int t = 0; t < NT; t++) begin
        if (t < layers_r && exp_load_addr[t] != inlen_r[t]) begin
          failures++; $display("FAIL: tile %0d loaded %0d of %0d", t, exp_load_addr[t], inlen_r[t]);
        end
        if (tpend[t]) begin failures++; $display("FAIL: swap while tile %0d busy", t); end
        exp_load_addr[t] = 0;
      end
    end
    if (done) n_done++;
  end

  task automatic wr_reg(input int addr, input int data);
    cfg = '0; cfg.we = 1'b1; cfg.space = SP_CTRL; cfg.addr = 16'(addr); cfg.data = data;
    @(posedge clk); cfg = '0;
  endtask

  task automatic run(input int layers, input int nraw, input int nsamp, input int inbase,
                     input int outbase, input int inlen [NT], input int active [NT]);
    int cyc;
    layers_r = layers; nraw_r = nraw; nsamp_r = nsamp; inbase_r = inbase; outbase_r = outbase;
    inlen_r = inlen; active_r = active;
    wr_reg(REG_LAYERS, layers); wr_reg(REG_NRAW, nraw); wr_reg(REG_NSAMP, nsamp);
    wr_reg(REG_INBASE, inbase); wr_reg(REG_OUTBASE, outbase);
    for (int t = 0; t < NT; t++) begin wr_reg(REG_INLEN + t, inlen[t]); wr_reg(REG_ACTIVE + t, active[t]); end
    foreach (tactive[t]) check(int'(tactive[t]) == active[t], $sformatf("active reg tile %0d", t));
    for (int i = 0; i < DBW; i++) mem[i] = VW'(i < outbase ? $urandom : 0);
    exp_q.delete(); exp_code.delete();
    for (int s = 0; s < nsamp; s++)
      for (int k = 0; k < nraw; k++) exp_q.push_back(mem[inbase + s * nraw + k]);
    n_search = 0; n_ibwr = 0; n_swap = 0; n_done = 0; n_dbwr = 0; ib_next = 0;
    for (int t = 0; t < NT; t++) begin n_load[t] = 0; n_start[t] = 0; exp_load_addr[t] = 0; end
    swaps_seen = 0; in_run = 1'b0;
    start = 1'b1; @(posedge clk); start = 1'b0;
    check(busy, "busy after start");
    cyc = 0;
    while (!done && cyc < 20000) begin @(posedge clk); cyc++; end
    check(done, "run finished");
    @(posedge clk); @(posedge clk);
    check(!busy, "idle after done");
    check(n_done == 1, $sformatf("done pulses %0d", n_done));
    check(n_search == nsamp * nraw, $sformatf("encoder searches %0d", n_search));
    check(n_ibwr == nsamp * nraw, $sformatf("input buffer writes %0d", n_ibwr));
    check(n_swap == nsamp + layers + 1, $sformatf("pipeline steps %0d exp %0d", n_swap, nsamp + layers + 1));
    for (int t = 0; t < NT; t++) begin
      int steps = (t < layers) ? nsamp + layers + 1 : 0;
      check(n_start[t] == steps, $sformatf("tile %0d starts %0d exp %0d", t, n_start[t], steps));
      check(n_load[t] == steps * ((t < layers) ? inlen[t] : 0), $sformatf("tile %0d loads %0d", t, n_load[t]));
    end
    check(n_dbwr == nsamp * active[layers-1], $sformatf("write-backs %0d", n_dbwr));
    for (int s = 0; s < nsamp; s++)
      for (int j = 0; j < active[layers-1]; j++) begin
        int a = outbase + s * active[layers-1] + j;
        int e = ((s + layers + 1) * 8 + j) % U;
        check(int'(mem[a]) == e, $sformatf("output s%0d j%0d = %0d exp %0d", s, j, mem[a], e));
      end
    check(mem[outbase + nsamp * active[layers-1]] == 0, "no write past the outputs");
  endtask

  initial begin
    int inlen1 [NT] = '{5, 3, 4};
    int act1   [NT] = '{3, 4, 2};
    int inlen2 [NT] = '{16, 4, 0};
    int act2   [NT] = '{4, 3, 1};
    cfg = '0; start = 1'b0;
    for (int t = 0; t < NT; t++) begin tpend[t] = 0; tcnt[t] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    run(3, 5, 4, 10, 100, inlen1, act1);
    run(2, 16, 3, 0, 200, inlen2, act2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2_000_000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
