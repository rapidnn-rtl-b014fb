// broadcast_buffer: the encoded-value buffer between two layers.
//
// It holds one encoded value (UB bits) per entry, DEPTH entries. The RNAs of
// a tile write their outputs into it bit-serially, all in parallel: during a
// transfer each cycle shifts one bit, most significant first, from every
// source r into entry r (ser_we_i, ser_bits_i), so a transfer takes UB cycles
// whatever the number of RNAs. The next layer reads the entries one at a
// time and broadcasts each to all its RNAs (rd_addr_i -> rd_data_o, same
// cycle). To let consecutive layers work as a pipeline, the buffer has two
// banks: writes go to one bank while reads come from the other, and swap_i
// exchanges them at the end of a pipeline step. A parallel write port
// (pw_*) lets the input encoder fill it word by word.
// Follows the paper: one buffer of encoded values per layer, bit-serial
// transfer, reading of old values while new ones are written. This design's
// choices: the two-bank organisation that realises the last point, and MSB
// first order.
module broadcast_buffer #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned UB    = 6,
  localparam int unsigned AB   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             swap_i,
  input  logic             ser_we_i,
  input  logic [DEPTH-1:0] ser_bits_i,
  input  logic             pw_we_i,
  input  logic [AB-1:0]    pw_addr_i,
  input  logic [UB-1:0]    pw_data_i,
  input  logic [AB-1:0]    rd_addr_i,
  output logic [UB-1:0]    rd_data_o
);
  logic [UB-1:0] bank_q [2][DEPTH];
  logic          wsel_q;                 // bank being written

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wsel_q <= 1'b0;
      for (int b = 0; b < 2; b++)
        for (int i = 0; i < int'(DEPTH); i++) bank_q[b][i] <= '0;
    end else begin
      if (ser_we_i)
        for (int i = 0; i < int'(DEPTH); i++)
          bank_q[wsel_q][i] <= {bank_q[wsel_q][i][UB-2:0], ser_bits_i[i]};
      else if (pw_we_i)
        bank_q[wsel_q][pw_addr_i] <= pw_data_i;
      if (swap_i) wsel_q <= ~wsel_q;
    end
  end

  assign rd_data_o = bank_q[~wsel_q][rd_addr_i];
endmodule
