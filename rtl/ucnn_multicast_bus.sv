// ucnn_multicast_bus: one multicast bus from the L2 to the PE array.
//
// Each PE is fed by two such buses, one for input activations and one for
// weights and indirection tables. A word put on the bus carries a
// destination mask; every PE whose bit is set receives the write in the same
// cycle, so data shared by several PEs (the same filters, or the same input
// columns) crosses the bus once. The bus is one register stage: a word given
// in cycle t is written into the PEs' L1 at the end of cycle t+1.
module ucnn_multicast_bus
  import ucnn_pkg::*;
#(
  parameter int unsigned P = NUM_PE
) (
  input  logic         clk,
  input  logic         rst_n,
  input  l1_wr_t       in,
  input  logic [P-1:0] dest,
  output l1_wr_t       out [P],
  output logic [31:0]  n_multicast
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < P; p++) out[p] <= '0;
      n_multicast <= '0;
    end else begin
      for (int p = 0; p < P; p++) begin
        out[p]       <= in;
        out[p].valid <= in.valid && dest[p];
      end
      if (in.valid && ((dest & (dest - 1'b1)) != '0)) n_multicast <= n_multicast + 1;
    end
  end

endmodule
