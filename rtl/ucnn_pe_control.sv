// ucnn_pe_control: PE control of a UCNN processing element.
//
// For each output row h it walks the sorted indirection tables once, one
// entry per cycle, and turns every entry into an event for the V_W lanes:
//   * which filter levels' (sub-)activation groups end at this entry
//     (`flush`), from the weight-table transition bits, the table's last
//     entry, and the activation-group size limit;
//   * which of those ends issue a multiply (`mul`): a group that holds at
//     least one activation and whose weight is not zero;
//   * the G weight pointers into the U-entry weight buffer.
// Weight pointers: a filter's pointer steps to its next canonical weight at
// a transition (the innermost filter by its 0..3 advance count) and restarts
// at the first weight when an outer filter's group ends; the count then
// gives the first weight index plus one, so leading empty sub-groups are
// skipped too. Groups longer than MAX_GROUP activations are cut into
// chunks: when a level has summed MAX_GROUP activations it and all inner
// levels are flushed and multiplied with the current weight ("peek"),
// without moving the pointers.
// The lanes' multipliers take one request per cycle from a QDEPTH queue;
// control keeps a copy of the queue occupancy and holds the walk (a stall)
// when an entry's requests would not fit. After the last entry it waits for
// the queue to drain, asks the partial-sum buffer to add the lanes'
// accumulators into row h (`store`), and pulses `done`.
//
// Timing: `start` in IDLE begins the walk the next cycle. A row takes
// (entries + stall cycles) walk cycles, drain cycles, and 1 store cycle.
// Event counters (stalls, skip entries, chunk flushes, multiplies skipped
// for zero weights, multiplies issued) are outputs for performance study.
module ucnn_pe_control
  import ucnn_pkg::*;
#(
  parameter int unsigned G      = GF,
  parameter int unsigned U      = NUM_U,
  parameter int unsigned DEPTH  = IIT_DEPTH,
  parameter int unsigned HMAX   = H_MAX,
  parameter int unsigned QDEPTH = 2
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // command
  input  logic                        start,
  input  logic [$clog2(HMAX)-1:0]     start_h,
  input  logic                        start_first,
  output logic                        busy,
  output logic                        done,
  // tables
  output logic [$clog2(DEPTH)-1:0]    iit_addr,
  input  iit_entry_t                  iit_entry,
  input  logic [G-1:0]                trans,
  input  logic [G-1:0]                outer,
  input  logic [1:0]                  adv_inner,
  // weight buffer
  output logic [G-1:0][$clog2(U)-1:0] wptr,
  input  logic signed [WT_W-1:0]      wval [G],
  // lane events
  output logic                        clear_groups,
  output logic                        clear_mac,
  output logic                        ev_valid,
  output logic                        ev_act,
  output logic [G-1:0]                ev_flush,
  output logic [G-1:0]                ev_mul,
  // partial-sum store
  output logic                        store,
  output logic [$clog2(HMAX)-1:0]     store_h,
  output logic                        store_first,
  // statistics
  output logic [31:0]                 n_stall,
  output logic [31:0]                 n_skip,
  output logic [31:0]                 n_chunk,
  output logic [31:0]                 n_zero_skip,
  output logic [31:0]                 n_mul
);

  localparam int unsigned QA_W = $clog2(QDEPTH) + 1;
  localparam int unsigned UP_W = $clog2(U);

  pe_state_e          state;
  logic [CNT_W-1:0]   cnt [G];
  logic [CNT_W-1:0]   c_new [G];
  logic [G-1:0]       force_f, flush_c, mul_c;
  logic [QA_W-1:0]    qcnt, qbase, npush;
  logic               stall, walk;

  assign busy     = (state != PE_IDLE);
  assign walk     = (state == PE_WALK);

  // -------- per-entry decode --------
  always_comb begin
    logic any_force;
    any_force = 1'b0;
    for (int g = 0; g < G; g++) begin
      c_new[g]   = cnt[g] + CNT_W'(!iit_entry.skip);
      any_force  = any_force | (!iit_entry.skip && c_new[g] == CNT_W'(MAX_GROUP));
      force_f[g] = any_force;
      flush_c[g] = trans[g] | force_f[g] | iit_entry.last;
      mul_c[g]   = flush_c[g] && (c_new[g] != '0) && (wval[g] != '0);
    end
    npush = '0;
    for (int g = 0; g < G; g++) npush = npush + QA_W'(mul_c[g]);
    qbase = qcnt - QA_W'(qcnt != '0);
    stall = walk && (32'(qbase) + 32'(npush) > QDEPTH);
  end

  assign ev_valid     = walk && !stall;
  assign clear_groups = (state == PE_IDLE) && start;
  assign ev_act   = !iit_entry.skip;
  assign ev_flush = flush_c;
  assign ev_mul   = mul_c;

  // -------- sequencing --------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= PE_IDLE;
      iit_addr     <= '0;
      qcnt         <= '0;
      done         <= 1'b0;
      store        <= 1'b0;
      store_h      <= '0;
      store_first  <= 1'b0;
      clear_mac    <= 1'b0;
      wptr         <= '0;
      for (int g = 0; g < G; g++) cnt[g] <= '0;
      n_stall <= '0; n_skip <= '0; n_chunk <= '0; n_zero_skip <= '0; n_mul <= '0;
    end else begin
      done         <= 1'b0;
      store        <= 1'b0;
      clear_mac    <= 1'b0;
      qcnt         <= qbase + (ev_valid ? npush : '0);
      case (state)
        PE_IDLE: begin
          if (start) begin
            state        <= PE_WALK;
            iit_addr     <= '0;
            wptr         <= '0;
            store_h      <= start_h;
            store_first  <= start_first;
            for (int g = 0; g < G; g++) cnt[g] <= '0;
          end
        end
        PE_WALK: begin
          if (stall) begin
            n_stall <= n_stall + 1;
          end else begin
            for (int g = 0; g < G; g++) begin
              cnt[g] <= flush_c[g] ? '0 : c_new[g];
              if (trans[g]) begin
                if (g == G - 1) begin
                  if (outer[g]) wptr[g] <= UP_W'(adv_inner - 2'd1);
                  else          wptr[g] <= wptr[g] + UP_W'(adv_inner);
                end else begin
                  wptr[g] <= outer[g] ? '0 : wptr[g] + 1'b1;
                end
              end
              if (flush_c[g] && c_new[g] != '0 && wval[g] == '0) n_zero_skip <= n_zero_skip + 1;
            end
            if (iit_entry.skip) n_skip <= n_skip + 1;
            if (force_f != '0)  n_chunk <= n_chunk + 1;
            n_mul <= n_mul + 32'(npush);
            if (iit_entry.last) state <= PE_DRAIN;
            else                iit_addr <= iit_addr + 1'b1;
          end
        end
        PE_DRAIN: begin
          if (qcnt == '0) begin
            state     <= PE_STORE;
            store     <= 1'b1;
          end
        end
        PE_STORE: begin
          clear_mac <= 1'b1;
          state     <= PE_IDLE;
          done      <= 1'b1;
        end
        default: state <= PE_IDLE;
      endcase
    end
  end

  // a pointer must stay inside the weight buffer while it is being used
  always_ff @(posedge clk) begin
    if (rst_n && ev_valid) begin
      for (int g = 0; g < G; g++)
        assert (!(flush_c[g] && c_new[g] != '0) || 32'(wptr[g]) < U)
          else $error("weight pointer %0d of filter %0d beyond U", wptr[g], g);
    end
  end

endmodule
