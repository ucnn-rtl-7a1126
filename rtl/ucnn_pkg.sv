// ucnn_pkg: constants and types shared by the UCNN accelerator.
//
// The defaults are the main configuration the accelerator is built for:
// G = 2 filters share one input indirection table, U = 17 unique weights
// (an INQ-style quantised network), a spatial vector width V_W = 4 and
// 16-bit fixed-point activations and weights. The L1 tile shape R_T x S_T x C_T
// = 3 x 3 x 32 is the one for which a 4-bank input buffer holds
// S*(R+V_W-1)*C_t = 576 16-bit activations (1152 bytes).
// Activation groups are summed in chunks of at most MAX_GROUP = 16
// activations, so the multiplier's activation operand is 4 bits wider than
// an activation.
//
// Choices of this design (not fixed by the source): 40-bit partial sums,
// a 512-entry indirection table, 64 output rows per PE column, explicit
// `skip` and `last` flags in each indirection entry, and the L2 sizes.
package ucnn_pkg;

  // ---------------- arithmetic ----------------
  localparam int unsigned ACT_W     = 16;  // activation width
  localparam int unsigned WT_W      = 16;  // weight width
  localparam int unsigned MAX_GROUP = 16;  // largest activation-group chunk
  localparam int unsigned CNT_W     = $clog2(MAX_GROUP + 1);
  localparam int unsigned SUM_W     = ACT_W + $clog2(MAX_GROUP);  // 20
  localparam int unsigned PROD_W    = SUM_W + WT_W;               // 36
  localparam int unsigned PSUM_W    = 40;

  // ---------------- PE organisation ----------------
  localparam int unsigned NUM_PE    = 32;  // P
  localparam int unsigned VW        = 4;   // spatial vector width V_W
  localparam int unsigned GF        = 2;   // filters per indirection table G
  localparam int unsigned NUM_U     = 17;  // unique weights U (weight buffer depth)
  localparam int unsigned R_T       = 3;   // filter width handled by the L1 tile
  localparam int unsigned S_T       = 3;   // filter height / rows held in L1
  localparam int unsigned C_T       = 32;  // channels per L1 tile (C_t)
  localparam int unsigned IIT_DEPTH = 512; // indirection-table entries
  localparam int unsigned H_MAX     = 64;  // output rows per PE column

  // ---------------- indirection entry ----------------
  localparam int unsigned R_W   = (R_T > 1) ? $clog2(R_T) : 1;
  localparam int unsigned S_W   = (S_T > 1) ? $clog2(S_T) : 1;
  localparam int unsigned C_W   = (C_T > 1) ? $clog2(C_T) : 1;
  localparam int unsigned PTR_W = R_W + S_W + C_W;  // ceil(log2 RSC_t) = 9

  // One input-indirection (iiT) entry: a pointer (r, s, c) into the RSC_t
  // input tile. `skip` marks an entry that reads no activation and only
  // carries weight-table transitions; `last` marks the final entry of the
  // table (the "filter done" message).
  typedef struct packed {
    logic           last;
    logic           skip;
    logic [R_W-1:0] r;
    logic [S_W-1:0] s;
    logic [C_W-1:0] c;
  } iit_entry_t;

  localparam int unsigned IIT_W = $bits(iit_entry_t);  // 11

  // Weight-indirection (wiT) entry: one group-transition bit per filter
  // level plus one extra bit for the innermost (G-th) filter, whose two
  // bits form a 0..3 weight-advance count.
  localparam int unsigned WIT_W = GF + 1;

  // L2 / bus word. A table word carries one iiT entry in its low IIT_W bits
  // and the matching wiT entry in the next WIT_W bits.
  localparam int unsigned WORD_W = 16;

  // Input-buffer column index within the R_T + VW - 1 wide L1 window.
  localparam int unsigned COL_W = $clog2(R_T + VW - 1);

  // Write port of a PE's L1 storage, as carried by the multicast buses.
  typedef enum logic [1:0] {
    L1_TABLE = 2'd0,  // addr = table entry index, data = {wiT, iiT}
    L1_WBUF  = 2'd1,  // addr = unique-weight index, data = weight
    L1_INBUF = 2'd2   // addr = {col, physical row, channel}, data = activation
  } l1_sel_e;

  typedef struct packed {
    logic              valid;
    l1_sel_e           sel;
    logic [15:0]       addr;
    logic [WORD_W-1:0] data;
  } l1_wr_t;

  // ---------------- chip level ----------------
  localparam int unsigned L2_ACT_WORDS = 131072; // per half: 256 KB of 16-bit activations
  localparam int unsigned L2_WT_WORDS  = 65536;  // 128 KB of weights and tables
  localparam int unsigned L2_U_SLOT    = 256;    // unique weights at L2 wt words 0..255
  localparam int unsigned REC_WORDS    = IIT_DEPTH + 1;  // one table record: count + entries

  // Layer descriptor given to the accelerator.
  typedef struct packed {
    logic [15:0] w;          // input width  W
    logic [15:0] h;          // input height H
    logic [15:0] c;          // input channels C
    logic [15:0] k;          // filters (output channels) K
    logic [3:0]  r;          // filter width  R (<= R_T)
    logic [3:0]  s;          // filter height S (<= S_T)
    logic [8:0]  u;          // unique weights stored for the layer
    logic [4:0]  out_shift;  // re-quantisation shift of the outputs
    logic        in_half;    // L2 activation half holding the layer input
    logic [31:0] dram_base;  // word address of the layer's weights in DRAM
  } layer_cfg_t;

  // Per-entry event that PE control sends to every lane.
  // flush[g]: level g's running sum ends at this entry and is multiplied.
  // mul[g]  : that multiply is actually issued (non-empty sum, weight != 0).
  typedef enum logic [1:0] {
    PE_IDLE  = 2'd0,
    PE_WALK  = 2'd1,
    PE_DRAIN = 2'd2,
    PE_STORE = 2'd3
  } pe_state_e;

  function automatic logic [ACT_W-1:0] relu_sat(input logic signed [PSUM_W-1:0] v,
                                                input logic [4:0] shift);
    logic signed [PSUM_W-1:0] sh;
    sh = v >>> shift;
    if (sh < 0) return '0;
    if (sh > $signed({{(PSUM_W-ACT_W+1){1'b0}}, {(ACT_W-1){1'b1}}}))
      return {1'b0, {(ACT_W-1){1'b1}}};
    return sh[ACT_W-1:0];
  endfunction

endpackage
