// ucnn_lane: one UCNN vector lane.
//
// A lane computes G dot products (one per filter that shares the
// indirection table) for one output column. It is the group accumulators
// (components 2 and 3, ucnn_group_accum) feeding a single shared multiplier
// with G accumulator registers (component 1, ucnn_mac_unit). The PE holds
// V_W lanes, which all receive the same per-entry events from PE control
// and differ only in the activation they get.
//
// Interface: per event `ev_valid`, `act`, `flush` (which group levels end),
// `mul` (which of those ends issue a multiply) and the G weights currently
// pointed to. `clear_groups` starts a dot product, `clear_mac` empties the
// accumulators after they have been stored. Timing: see the two sub-blocks.
module ucnn_lane
  import ucnn_pkg::*;
#(
  parameter int unsigned G      = GF,
  parameter int unsigned QDEPTH = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear_groups,
  input  logic                     clear_mac,
  input  logic                     ev_valid,
  input  logic signed [ACT_W-1:0]  act,
  input  logic [G-1:0]             flush,
  input  logic [G-1:0]             mul,
  input  logic signed [WT_W-1:0]   wt [G],
  output logic signed [PSUM_W-1:0] acc [G],
  output logic                     mac_empty,
  output logic                     mac_overflow
);

  logic signed [SUM_W-1:0] req_sum [G];

  ucnn_group_accum #(.G(G)) u_groups (
    .clk      (clk),
    .rst_n    (rst_n),
    .clear    (clear_groups),
    .ev_valid (ev_valid),
    .act      (act),
    .flush    (flush),
    .req_sum  (req_sum)
  );

  ucnn_mac_unit #(.G(G), .QDEPTH(QDEPTH)) u_mac (
    .clk      (clk),
    .rst_n    (rst_n),
    .clear    (clear_mac),
    .push     (ev_valid ? mul : '0),
    .req_sum  (req_sum),
    .req_wt   (wt),
    .acc      (acc),
    .empty    (mac_empty),
    .overflow (mac_overflow)
  );

endmodule
