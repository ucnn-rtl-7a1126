// ucnn_iit: input indirection table (iiT) of one PE.
//
// Holds the offline-sorted list of pointers into the PE's L1 input tile.
// Read in order, the pointers visit the input tile in activation-group order:
// all activations that meet the same unique weight of filter k1 are
// adjacent, and within them, those that share a weight of k2, and so on for
// the G filters that share this one table. Each entry is a packed
// ucnn_pkg::iit_entry_t: the pointer as an (r, s, c) tuple, which the banked
// input buffer turns into V_W bank addresses, plus two flags of this design:
// `skip` (an entry that reads nothing and only carries weight-table
// transitions) and `last` (the filter-done marker).
//
// Interface: one synchronous write port, loaded from the weight multicast
// bus, and one asynchronous read port addressed by PE control.
// Timing: a write is visible on the read port the cycle after.
module ucnn_iit
  import ucnn_pkg::*;
#(
  parameter int unsigned DEPTH = IIT_DEPTH
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  iit_entry_t               wr_data,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output iit_entry_t               rd_data
);

  iit_entry_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  assign rd_data = mem[rd_addr];

endmodule
