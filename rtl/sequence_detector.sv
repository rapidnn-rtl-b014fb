// sequence_detector: recodes an occurrence count into signed powers of two.
//
// The weighted accumulation does not add a stored product N times; it
// multiplies the product by its count with shifts. A count that is a power of
// two is one shift, a count such as 9 becomes 8+1, and every run of ones is
// replaced by a power of two minus one (15 = 16-1), as the paper describes.
// This design realises that rule with non-adjacent-form recoding: bit k of
// pos_o means +2^k, bit k of neg_o means -2^k, and no two adjacent digits are
// both non-zero, so a run of ones of any length costs two terms. The exact
// recoding circuit is not given in the paper; this is the simplest one that
// does what it describes. Purely combinational.
module sequence_detector #(
  parameter int unsigned CNT_W = 12
) (
  input  logic [CNT_W-1:0] count_i,
  output logic [CNT_W:0]   pos_o,   // +2^k digits
  output logic [CNT_W:0]   neg_o    // -2^k digits
);
  logic [CNT_W:0] half, triple, diff;

  always_comb begin
    half   = {1'b0, count_i} >> 1;
    triple = {1'b0, count_i} + half;   // 1.5 x count, cannot overflow CNT_W+1 bits
    diff   = half ^ triple;
    pos_o  = triple & diff;
    neg_o  = half & diff;
  end
endmodule
