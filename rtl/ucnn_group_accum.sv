// ucnn_group_accum: activation-group accumulators of one UCNN lane.
//
// Dot-product factorization adds all activations that meet the same weight
// before multiplying once. With G filters sharing one indirection table the
// groups nest: filter k1's groups contain k2's sub-groups, which contain
// k3's, and so on. Level G-1 (the innermost filter) is summed in the group
// accumulator (component 2 of the lane); at each innermost boundary its sum
// is both sent to the multiplier for that filter and merged into the running
// sums of the G-1 outer levels (component 3). When an outer level's group
// ends too, its merged sum goes to the multiplier as well.
//
// Per event (one indirection entry):
//   s_inner     = acc2 + act
//   req_sum[G-1]= s_inner
//   req_sum[g]  = acc3[g] + s_inner          for outer levels g < G-1
// and, if flush[G-1]: acc2 <= 0, acc3[g] <= flush[g] ? 0 : req_sum[g];
// otherwise acc2 <= s_inner. PE control guarantees flush is closed towards
// the inner levels and that no sum holds more than MAX_GROUP activations,
// so SUM_W = ACT_W + 4 bits never overflow.
//
// Interface: `ev_valid` qualifies an event, `clear` zeroes everything at the
// start of a dot product. req_sum is combinational from the current event.
module ucnn_group_accum
  import ucnn_pkg::*;
#(
  parameter int unsigned G = GF
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    ev_valid,
  input  logic signed [ACT_W-1:0] act,
  input  logic [G-1:0]            flush,
  output logic signed [SUM_W-1:0] req_sum [G]
);

  localparam int unsigned NO = (G > 1) ? G - 1 : 1;  // outer accumulators

  logic signed [SUM_W-1:0] acc2;
  logic signed [SUM_W-1:0] acc3 [NO];
  logic signed [SUM_W-1:0] s_inner;

  always_comb begin
    s_inner = acc2 + SUM_W'(act);
    for (int g = 0; g < G; g++) begin
      if (g == G - 1) req_sum[g] = s_inner;
      else            req_sum[g] = acc3[g] + s_inner;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc2 <= '0;
      for (int i = 0; i < NO; i++) acc3[i] <= '0;
    end else if (clear) begin
      acc2 <= '0;
      for (int i = 0; i < NO; i++) acc3[i] <= '0;
    end else if (ev_valid) begin
      if (flush[G-1]) begin
        acc2 <= '0;
        for (int g = 0; g < G - 1; g++) acc3[g] <= flush[g] ? '0 : req_sum[g];
      end else begin
        acc2 <= s_inner;
      end
    end
  end

endmodule
