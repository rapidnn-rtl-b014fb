// am_block: associative memory, the lookup table of the activation function
// and of the encoder (also the pooling unit).
//
// An AM block pairs a nearest distance table (an ndcam) with a crossbar that
// stores one DATA_W-bit word per row. A lookup searches the table for the row
// whose key is nearest to the query and reads that row's word through the
// sense amplifiers: for the activation table the keys are the y coordinates
// of the sampled function and the words are its z values; for the encoder
// the keys are the next layer's input cluster centres and the words their
// codes. Keys are signed two's-complement numbers; the table compares them as
// offset binary (sign bit inverted on both key and query) so that the
// unsigned nearest search of the CAM orders negative and positive values
// correctly. That conversion, the row-valid bits and the port timing are this
// design's choices. A row takes part in a search only after its key has been
// written since the last clear_i.
// Timing: key and data writes take one cycle; a lookup issued with search_i
// returns data_o with valid_o NSTAGE+1 cycles later (NSTAGE CAM stages plus
// the crossbar read), fully pipelined.
module am_block #(
  parameter int unsigned ROWS       = 64,
  parameter int unsigned KEY_W      = 32,
  parameter int unsigned DATA_W     = 32,
  parameter int unsigned STAGE_BITS = 8,
  localparam int unsigned RB        = $clog2(ROWS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear_i,       // invalidate all rows
  input  logic              key_we_i,
  input  logic              data_we_i,
  input  logic [RB-1:0]     waddr_i,
  input  logic [KEY_W-1:0]  wkey_i,
  input  logic [DATA_W-1:0] wdata_i,
  input  logic              search_i,
  input  logic [KEY_W-1:0]  query_i,
  output logic              valid_o,
  output logic              hit_o,
  output logic [RB-1:0]     row_o,
  output logic [DATA_W-1:0] data_o
);
  localparam logic [KEY_W-1:0] SIGN = {1'b1, {(KEY_W-1){1'b0}}};

  logic [ROWS-1:0]   row_valid_q;
  logic [DATA_W-1:0] xbar_q [ROWS];
  logic              cam_v, cam_hit;
  logic [RB-1:0]     cam_row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_valid_q <= '0;
      for (int r = 0; r < int'(ROWS); r++) xbar_q[r] <= '0;
    end else begin
      if (clear_i)       row_valid_q <= '0;
      else if (key_we_i) row_valid_q[waddr_i] <= 1'b1;
      if (data_we_i)     xbar_q[waddr_i] <= wdata_i;
    end
  end

  ndcam #(.ROWS(ROWS), .KEY_W(KEY_W), .STAGE_BITS(STAGE_BITS)) u_cam (
    .clk, .rst_n,
    .we_i(key_we_i), .waddr_i(waddr_i), .wkey_i(wkey_i ^ SIGN),
    .search_i(search_i), .query_i(query_i ^ SIGN), .en_i(row_valid_q),
    .result_valid_o(cam_v), .hit_o(cam_hit), .row_o(cam_row));

  // sense amplifier stage: read the crossbar row the CAM selected
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_o <= 1'b0; hit_o <= 1'b0; row_o <= '0; data_o <= '0;
    end else begin
      valid_o <= cam_v;
      hit_o   <= cam_hit;
      row_o   <= cam_row;
      data_o  <= xbar_q[cam_row];
    end
  end
endmodule
