// ucnn_psum_buffer: L1 partial-sum buffer and local accumulator of a PE.
//
// The PE is output-stationary: the partial sums of its output column stay
// here while the C input channels are streamed through in C_t-channel
// tiles. The buffer has one row per output row h, each holding V_W x G
// partial sums (one per lane and filter). When a lane group finishes the
// dot product of row h over one tile, the local accumulator adds the lanes'
// MAC accumulators into row h in one cycle; on the first tile the old
// contents are ignored, which is how the buffer is zeroed.
// After the last tile the scheduler reads the finished sums out through the
// output port, which applies the non-linear activation at the PE: an
// arithmetic right shift by `out_shift` (re-quantisation back to ACT_W
// bits, a choice of this design), ReLU, and saturation.
//
// Interface: `store`/`store_h`/`store_first` with the lanes' accumulators;
// asynchronous read `rd_h`, `rd_g`, `rd_v` giving `rd_act`. Timing: a store
// is visible to reads the next cycle.
module ucnn_psum_buffer
  import ucnn_pkg::*;
#(
  parameter int unsigned V    = VW,
  parameter int unsigned G    = GF,
  parameter int unsigned HMAX = H_MAX
) (
  input  logic                     clk,
  input  logic                     store,
  input  logic [$clog2(HMAX)-1:0]  store_h,
  input  logic                     store_first,
  input  logic signed [PSUM_W-1:0] lane_acc [V][G],
  input  logic [$clog2(HMAX)-1:0]  rd_h,
  input  logic [$clog2(V)-1:0]     rd_v,
  input  logic [(G>1?$clog2(G):1)-1:0] rd_g,
  input  logic [4:0]               out_shift,
  output logic [ACT_W-1:0]         rd_act,
  output logic signed [PSUM_W-1:0] rd_psum
);

  // One memory word holds a whole output row slot (all V columns, all G
  // filters), so the store is a single read-modify-write of one word.
  localparam int unsigned RW = V * G * PSUM_W;
  logic [RW-1:0] mem [HMAX];
  logic [RW-1:0] old_row, new_row, rd_row;

  assign old_row = mem[store_h];
  always_comb begin
    for (int v = 0; v < V; v++)
      for (int g = 0; g < G; g++)
        new_row[(v*G+g)*PSUM_W +: PSUM_W] =
          (store_first ? '0 : old_row[(v*G+g)*PSUM_W +: PSUM_W]) + lane_acc[v][g];
  end

  always_ff @(posedge clk) begin
    if (store) mem[store_h] <= new_row;
  end

  assign rd_row  = mem[rd_h];
  assign rd_psum = rd_row[(32'(rd_v)*G + 32'(rd_g))*PSUM_W +: PSUM_W];
  assign rd_act  = relu_sat(rd_psum, out_shift);

endmodule
