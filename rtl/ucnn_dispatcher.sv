// ucnn_dispatcher: data dispatcher between a PE's L1 buffers and its lanes.
//
// For an indirection entry (r, s, c), vector lane v needs the activation of
// tile column r + v, which the banked input buffer holds in bank
// (r + v) % V_W. The dispatcher rotates the V_W bank words into lane order
// and hands the lanes a zero activation for a skip entry, which reads
// nothing. It also fans the G weight-buffer words, read through the G weight
// pointers, out to the lanes' multipliers. Purely combinational.
module ucnn_dispatcher
  import ucnn_pkg::*;
#(
  parameter int unsigned V  = VW,
  parameter int unsigned RT = R_T,
  parameter int unsigned G  = GF
) (
  input  logic [$clog2(RT)-1:0]   r,
  input  logic                    act_valid,
  input  logic signed [ACT_W-1:0] bank_data [V],
  input  logic signed [WT_W-1:0]  wbuf_data [G],
  output logic signed [ACT_W-1:0] lane_act [V],
  output logic signed [WT_W-1:0]  lane_wt  [V][G]
);

  always_comb begin
    for (int v = 0; v < V; v++) begin
      lane_act[v] = act_valid ? bank_data[(32'(r) + v) % V] : '0;
      for (int g = 0; g < G; g++) lane_wt[v][g] = wbuf_data[g];
    end
  end

endmodule
