// ucnn_wit: weight indirection tables (wiT_1 .. wiT_G) of one PE.
//
// Because the input indirection table is sorted by one canonical order of
// the unique weights, each filter's weight table shrinks to a group
// transition bit per entry: a set bit means the entry ends that filter's
// current activation group and its weight pointer moves on to the next
// weight. The innermost (G-th) filter has one extra bit, so its two bits
// {extra, t} form a count 0..3 of how far its weight pointer advances; 2 or
// 3 steps over empty sub-activation groups without a bubble.
//
// Beside the storage, this block decodes the entry being read:
//   trans[g]  filter g's group ends here. Filters nest, so a transition of
//             an outer filter implies one for every inner filter; trans is
//             made closed under that rule here.
//   outer[g]  an outer filter (< g) also ends here, so filter g's pointer
//             restarts from the first canonical weight.
//   adv_inner the innermost filter's advance count (1 when only forced by an
//             outer transition).
// Interface: synchronous write, asynchronous read. Timing as ucnn_iit.
module ucnn_wit
  import ucnn_pkg::*;
#(
  parameter int unsigned DEPTH = IIT_DEPTH,
  parameter int unsigned G     = GF
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [G:0]               wr_data,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [G-1:0]             trans,
  output logic [G-1:0]             outer,
  output logic [1:0]               adv_inner
);

  logic [G:0] mem [DEPTH];
  logic [G:0] ent;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  assign ent = mem[rd_addr];

  always_comb begin
    logic any;
    any = 1'b0;
    for (int g = 0; g < G; g++) begin
      outer[g] = any;
      if (g < G - 1) begin
        trans[g] = any | ent[g];
      end else begin
        trans[g] = any | (ent[G:G-1] != 2'b00);
      end
      any = trans[g];
    end
    adv_inner = ent[G:G-1];
    if (adv_inner == 2'b00 && trans[G-1]) adv_inner = 2'b01;
  end

endmodule
