// data_block: the crossbar memory that holds the input dataset and receives
// the results of inference.
//
// A plain single-port memory of WORDS words of VAL_W bits: a write takes
// effect at the clock edge, a read returns the addressed word one cycle later.
// The paper describes the data blocks only as typical crossbar memories that
// store the inputs and are written back with the results; their size, width
// and port timing here are this design's choices. No reset: the host writes
// whatever is read.
module data_block #(
  parameter int unsigned WORDS = 65536,
  parameter int unsigned VAL_W = 32,
  localparam int unsigned AB   = $clog2(WORDS)
) (
  input  logic             clk,
  input  logic             we_i,
  input  logic [AB-1:0]    addr_i,
  input  logic [VAL_W-1:0] wdata_i,
  output logic [VAL_W-1:0] rdata_o
);
  logic [VAL_W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we_i) mem[addr_i] <= wdata_i;
    rdata_o <= mem[addr_i];
  end
endmodule
