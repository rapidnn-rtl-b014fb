// inmem_adder: multi-operand addition as it is done inside the crossbar.
//
// The crossbar can only evaluate NOR, one NOR per cycle, but that NOR acts on
// every row and bit column selected at once. Addition of N_OPS numbers is
// therefore organised as a carry-save tree: the operand rows are taken three
// at a time, and all triples compute sum and carry rows in parallel, so n
// operands become 2*floor(n/3) + n%3 after one stage. A stage is a fixed
// 13-cycle program:
//   1  t0 = NOR(A,B)      2  t1 = NOR(A,t0)     3  t2 = NOR(B,t0)
//   4  t3 = NOR(t1,t2)    (XNOR of A and B)
//   5  t1 = NOR(t3,C)     6  t2 = NOR(t3,t1)    7  t4 = NOR(C,t1)
//   8  t5 = NOR(t2,t4)    (sum = A^B^C)
//   9  t1 = NOR(A,C)     10  t2 = NOR(B,C)     11  t3 = NOR(t0,t1,t2) (carry)
//  12  write the sum row 13  write the carry row shifted left by one
// When two rows remain, the last stage adds them bit-serially with the same
// 13-cycle full-adder program per bit, 13*N_BITS cycles, propagating carry.
// The paper gives the stage count (log_{3/2} of the operand count), 13 cycles
// per stage and 13N cycles for the last stage; the NOR program itself, and
// spending cycles 12 and 13 on moving results into the next stage's rows, are
// this design's choice. Arithmetic is two's complement modulo 2^N_BITS.
// Interface: pulse start_i with all operands on ops_i; done_o pulses with
// sum_o valid. Latency = 1 + 13*csa_stages(N_OPS) + 13*N_BITS cycles.
// Lint reports a width truncation where the bit counter (which must reach
// N_BITS) indexes a row; it only indexes while below N_BITS, so it stands.
module inmem_adder
  import rapidnn_pkg::*;
#(
  parameter int unsigned N_OPS  = 1025,
  parameter int unsigned N_BITS = 32,
  localparam int unsigned NG    = (N_OPS + 2) / 3,
  localparam int unsigned NW    = $clog2(N_OPS + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start_i,
  input  logic [N_BITS-1:0] ops_i [N_OPS],
  output logic              busy_o,
  output logic              done_o,
  output logic [N_BITS-1:0] sum_o
);
  typedef enum logic [1:0] {S_IDLE, S_CSA, S_RIPPLE, S_DONE} state_e;
  typedef logic [N_BITS-1:0] word_t;

  state_e state_q;
  word_t  rows_q [N_OPS];
  word_t  t_q    [NG][6];        // scratch columns of every triple
  logic [5:0] rt_q;              // scratch of the bit-serial adder
  logic   rc_q;                  // carry of the bit-serial adder
  word_t  res_q;
  logic [3:0] step_q;            // 0..12
  logic [NW-1:0] n_q;            // operands left
  logic [$clog2(N_BITS+1)-1:0] bit_q;

  logic [NW-1:0] ngrp, nleft;
  assign ngrp  = NW'(n_q / 3);
  assign nleft = NW'(n_q % 3);

  function automatic word_t nor2(input word_t a, input word_t b);
    return ~(a | b);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      step_q  <= '0;
      n_q     <= '0;
      bit_q   <= '0;
      rc_q    <= 1'b0;
      rt_q    <= '0;
      res_q   <= '0;
      for (int r = 0; r < int'(N_OPS); r++) rows_q[r] <= '0;
      for (int g = 0; g < int'(NG); g++)
        for (int k = 0; k < 6; k++) t_q[g][k] <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (start_i) begin
          rows_q <= ops_i;
          n_q    <= NW'(N_OPS);
          step_q <= '0;
          bit_q  <= '0;
          rc_q   <= 1'b0;
          res_q  <= '0;
          state_q <= (N_OPS > 2) ? S_CSA : S_RIPPLE;
        end
        S_CSA: begin
          // one NOR (or row write) per cycle, in every triple at once
          for (int g = 0; g < int'(NG); g++) begin
            if (g < int'(ngrp)) begin
              word_t a, b, c;
              a = rows_q[3*g]; b = rows_q[3*g+1]; c = rows_q[3*g+2];
              unique case (step_q)
                4'd0:  t_q[g][0] <= nor2(a, b);
                4'd1:  t_q[g][1] <= nor2(a, t_q[g][0]);
                4'd2:  t_q[g][2] <= nor2(b, t_q[g][0]);
                4'd3:  t_q[g][3] <= nor2(t_q[g][1], t_q[g][2]);
                4'd4:  t_q[g][1] <= nor2(t_q[g][3], c);
                4'd5:  t_q[g][2] <= nor2(t_q[g][3], t_q[g][1]);
                4'd6:  t_q[g][4] <= nor2(c, t_q[g][1]);
                4'd7:  t_q[g][5] <= nor2(t_q[g][2], t_q[g][4]);
                4'd8:  t_q[g][1] <= nor2(a, c);
                4'd9:  t_q[g][2] <= nor2(b, c);
                4'd10: t_q[g][3] <= ~(t_q[g][0] | t_q[g][1] | t_q[g][2]);
                4'd11: rows_q[2*g]   <= t_q[g][5];
                4'd12: rows_q[2*g+1] <= t_q[g][3] << 1;
                default: ;
              endcase
            end
          end
          if (step_q == 4'd12) begin
            // rows not in a full triple move down behind the new rows
            if (nleft >= 1) rows_q[2*ngrp]     <= rows_q[3*ngrp];
            if (nleft == 2) rows_q[2*ngrp + 1] <= rows_q[3*ngrp + 1];
            n_q    <= NW'(2 * ngrp + nleft);
            step_q <= '0;
            if (2 * ngrp + nleft <= 2) state_q <= S_RIPPLE;
          end else begin
            step_q <= step_q + 1'b1;
          end
        end
        S_RIPPLE: begin
          // same program on one bit column of the last two rows
          logic a, b, c;
          a = rows_q[0][bit_q];
          b = (N_OPS > 1 && n_q > 1) ? rows_q[1][bit_q] : 1'b0;
          c = rc_q;
          unique case (step_q)
            4'd0:  rt_q[0] <= ~(a | b);
            4'd1:  rt_q[1] <= ~(a | rt_q[0]);
            4'd2:  rt_q[2] <= ~(b | rt_q[0]);
            4'd3:  rt_q[3] <= ~(rt_q[1] | rt_q[2]);
            4'd4:  rt_q[1] <= ~(rt_q[3] | c);
            4'd5:  rt_q[2] <= ~(rt_q[3] | rt_q[1]);
            4'd6:  rt_q[4] <= ~(c | rt_q[1]);
            4'd7:  rt_q[5] <= ~(rt_q[2] | rt_q[4]);
            4'd8:  rt_q[1] <= ~(a | c);
            4'd9:  rt_q[2] <= ~(b | c);
            4'd10: rt_q[3] <= ~(rt_q[0] | rt_q[1] | rt_q[2]);
            4'd11: res_q[bit_q] <= rt_q[5];
            4'd12: rc_q <= rt_q[3];
            default: ;
          endcase
          if (step_q == 4'd12) begin
            step_q <= '0;
            if (int'(bit_q) == int'(N_BITS) - 1) state_q <= S_DONE;
            else bit_q <= bit_q + 1'b1;
          end else begin
            step_q <= step_q + 1'b1;
          end
        end
        S_DONE: state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign busy_o = (state_q != S_IDLE);
  assign done_o = (state_q == S_DONE);
  assign sum_o  = res_q;
endmodule
