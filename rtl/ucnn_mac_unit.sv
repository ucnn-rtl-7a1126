// ucnn_mac_unit: the multiply-accumulate unit of one UCNN lane (component 1).
//
// One multiplier is shared by the G filters of the lane: it is only needed
// at (sub-)activation-group boundaries, where a group sum meets its weight.
// A boundary can ask for up to G multiplies in the same cycle (e.g. when an
// outer and an inner group end together), so requests enter a small queue
// (QDEPTH entries) and the multiplier takes one per cycle, adding
// sum * weight into the accumulator register of the requesting filter.
// PE control tracks the queue occupancy and stalls the table walk when a
// burst would overflow it; that is the stall the source warns of for
// under-provisioned multipliers.
//
// Interface: `push[g]` enqueues {req_sum[g], req_wt[g], filter g} for every
// set bit, lowest g first. `clear` zeroes the G accumulators (after PE control
// has stored them). `acc` shows the accumulators; `empty` is high when no
// request is pending. Latency: a request pushed in cycle t is accumulated at
// the earliest at the end of cycle t+1.
module ucnn_mac_unit
  import ucnn_pkg::*;
#(
  parameter int unsigned G      = GF,
  parameter int unsigned QDEPTH = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic [G-1:0]             push,
  input  logic signed [SUM_W-1:0]  req_sum [G],
  input  logic signed [WT_W-1:0]   req_wt  [G],
  output logic signed [PSUM_W-1:0] acc [G],
  output logic                     empty,
  output logic                     overflow
);

  localparam int unsigned QA_W = $clog2(QDEPTH);
  localparam int unsigned GI_W = (G > 1) ? $clog2(G) : 1;

  typedef struct packed {
    logic signed [SUM_W-1:0] sum;
    logic signed [WT_W-1:0]  wt;
    logic [GI_W-1:0]         f;
  } mreq_t;

  mreq_t             q [QDEPTH];
  logic [QA_W-1:0]   rd_ptr, wr_ptr;
  logic [QA_W:0]     count;
  logic [QA_W:0]     npush;
  logic              pop;
  logic signed [PROD_W-1:0] prod;

  assign empty = (count == '0);
  assign pop   = !empty;

  always_comb begin
    npush = '0;
    for (int g = 0; g < G; g++) npush = npush + (QA_W+1)'(push[g]);
  end

  // queue overflow can only come from a PE-control bug; flagged for checks
  assign overflow = (32'(count) - 32'(pop) + 32'(npush)) > QDEPTH;

  assign prod = q[rd_ptr].sum * q[rd_ptr].wt;

  // queue slot of each filter's request this cycle, in filter order
  logic [QA_W-1:0] widx [G];
  logic [QA_W-1:0] wr_next;
  always_comb begin
    wr_next = wr_ptr;
    for (int g = 0; g < G; g++) begin
      widx[g] = wr_next;
      if (push[g]) wr_next = wr_next + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
      for (int g = 0; g < G; g++) acc[g] <= '0;
    end else begin
      for (int g = 0; g < G; g++)
        if (push[g]) q[widx[g]] <= '{sum: req_sum[g], wt: req_wt[g], f: GI_W'(g)};
      wr_ptr <= wr_next;
      if (pop) rd_ptr <= rd_ptr + 1'b1;
      count <= count + npush - (QA_W+1)'(pop);
      if (clear) begin
        for (int g = 0; g < G; g++) acc[g] <= '0;
      end else if (pop) begin
        acc[q[rd_ptr].f] <= acc[q[rd_ptr].f] + PSUM_W'(prod);
      end
    end
  end

endmodule
