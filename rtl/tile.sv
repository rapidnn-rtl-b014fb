// tile: one layer of the network, N_RNA RNAs working in parallel plus the
// buffer that holds the layer's encoded outputs.
//
// Every RNA computes one neuron of the layer. The layer's encoded inputs are
// broadcast: each (in_addr_i, in_data_i) presented with in_we_i is written
// into the input buffer of all RNAs at once. start_i starts the first
// active_i RNAs together; when all of them are done, their encoded outputs
// move bit-serially into the output broadcast_buffer (UB cycles, all RNAs in
// parallel) and done_o pulses. The next tile reads that buffer through
// rd_addr_i/rd_data_o while this tile already fills the other bank (swap_i).
// Configuration writes go to the RNA named by cfg_rna_i.
// Follows the paper: many RNAs per tile, one output buffer per tile, parallel
// bit-serial write of the outputs. The paper has 1k RNAs per tile; N_RNA
// defaults to 8 because the tools cannot elaborate 1k full-size RNAs. This design's choices: the active count,
// the start/done handshake and the configuration addressing.
// Timing: done_o = slowest active RNA's latency + UB + 2 cycles after start_i.
module tile
  import rapidnn_pkg::*;
#(
  parameter int unsigned N_RNA  = 8,
  parameter int unsigned W      = rapidnn_pkg::W_CLUST,
  parameter int unsigned U      = rapidnn_pkg::U_CLUST,
  parameter int unsigned Q      = rapidnn_pkg::Q_ROWS,
  parameter int unsigned CNT_W  = rapidnn_pkg::CNT_BITS,
  parameter int unsigned VAL_W  = rapidnn_pkg::VAL_BITS,
  parameter int unsigned FANIN  = rapidnn_pkg::MAX_FANIN,
  localparam int unsigned UB    = $clog2(U),
  localparam int unsigned IB    = $clog2(FANIN),
  localparam int unsigned RB    = (N_RNA > 1) ? $clog2(N_RNA) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_wr_t          cfg_i,
  input  logic [RB-1:0]    cfg_rna_i,
  input  logic             in_we_i,
  input  logic [IB-1:0]    in_addr_i,
  input  logic [UB-1:0]    in_data_i,
  input  logic [RB:0]      active_i,
  input  logic             start_i,
  output logic             busy_o,
  output logic             done_o,
  input  logic             swap_i,
  input  logic [RB-1:0]    rd_addr_i,
  output logic [UB-1:0]    rd_data_o
);
  typedef enum logic [1:0] {T_IDLE, T_RUN, T_XFER, T_DONE} tstate_e;
  tstate_e state_q;

  logic [N_RNA-1:0] act, rdone, finished_q;
  logic [UB-1:0]    zbar [N_RNA];
  logic [UB-1:0]    shift_q [N_RNA];
  logic [$clog2(UB+1)-1:0] bit_q;
  logic [N_RNA-1:0] ser_bits;

  for (genvar r = 0; r < int'(N_RNA); r++) begin : g_rna
    cfg_wr_t c;
    logic    rbusy;
    logic [VAL_W-1:0] ry, rz;
    logic    rpool;
    assign act[r] = (r < int'(active_i));
    always_comb begin
      c    = cfg_i;
      c.we = cfg_i.we && (cfg_rna_i == RB'(r));
    end
    rna #(.W(W), .U(U), .Q(Q), .CNT_W(CNT_W), .VAL_W(VAL_W), .FANIN(FANIN)) u_rna (
      .clk, .rst_n, .cfg_i(c), .in_we_i, .in_addr_i, .in_data_i,
      .start_i(start_i && state_q == T_IDLE && act[r]),
      .busy_o(rbusy), .done_o(rdone[r]), .zbar_o(zbar[r]), .y_o(ry), .z_o(rz),
      .pool_mode_o(rpool));
    assign ser_bits[r] = shift_q[r][UB-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= T_IDLE;
      finished_q <= '0;
      bit_q <= '0;
      for (int r = 0; r < int'(N_RNA); r++) shift_q[r] <= '0;
    end else begin
      unique case (state_q)
        T_IDLE: if (start_i) begin
          finished_q <= ~act;            // inactive RNAs count as finished
          state_q <= T_RUN;
        end
        T_RUN: begin
          finished_q <= finished_q | rdone;
          if (&(finished_q | rdone)) begin
            state_q <= T_XFER;
            bit_q   <= '0;
            shift_q <= zbar;
          end
        end
        T_XFER: begin
          for (int r = 0; r < int'(N_RNA); r++) shift_q[r] <= shift_q[r] << 1;
          if (int'(bit_q) == int'(UB) - 1) state_q <= T_DONE;
          bit_q <= bit_q + 1'b1;
        end
        T_DONE: state_q <= T_IDLE;
        default: state_q <= T_IDLE;
      endcase
    end
  end

  broadcast_buffer #(.DEPTH(N_RNA), .UB(UB)) u_buf (
    .clk, .rst_n, .swap_i,
    .ser_we_i(state_q == T_XFER), .ser_bits_i(ser_bits),
    .pw_we_i(1'b0), .pw_addr_i('0), .pw_data_i('0),
    .rd_addr_i, .rd_data_o);

  assign busy_o = (state_q != T_IDLE);
  assign done_o = (state_q == T_DONE);
endmodule
