// ucnn_pe: UCNN processing element.
//
// The PE computes, for G filters at once and for V_W adjacent output
// columns, the dot products of an R x S x C_t input tile with the filters,
// one output row at a time, and accumulates them over the C/C_t channel
// tiles in its partial-sum buffer. Instead of one multiply per weight it
// walks an input indirection table that lists the tile's activations grouped
// by weight value: activations that share a weight are added first
// (dot-product factorization) and the groups of the G filters are nested so
// that the sums of inner filters' sub-groups are reused by outer filters
// (activation-group reuse). Zero weights take no multiply and entries where
// all G filters have weight zero are not stored at all.
//
// Blocks: indirection tables (ucnn_iit, ucnn_wit), the U-entry weight buffer,
// the V_W-bank input buffer, PE control, the data dispatcher, V_W lanes and
// the partial-sum buffer.
//
// Interface:
//   l1_wr        write port of all L1 storage, from the multicast buses
//                (L1_TABLE: {wiT, iiT} word; L1_WBUF: weight; L1_INBUF:
//                activation at {column, physical row, channel}).
//   start/...    begin the dot products of output row `start_h`;
//                `start_first` marks the first channel tile. `done` pulses
//                when the row's partial sums are stored.
//   rd_*         read a finished output: rd_act with ReLU applied, rd_psum
//                the raw partial sum.
// Timing: see ucnn_pe_control. The input tile for row h must be loaded
// before `start`; rows are held circularly at (h + s) % S_T.
module ucnn_pe
  import ucnn_pkg::*;
#(
  parameter int unsigned V      = VW,
  parameter int unsigned G      = GF,
  parameter int unsigned U      = NUM_U,
  parameter int unsigned DEPTH  = IIT_DEPTH,
  parameter int unsigned HMAX   = H_MAX,
  parameter int unsigned QDEPTH = 2
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  l1_wr_t                      l1_wr,
  input  logic                        start,
  input  logic [$clog2(HMAX)-1:0]     start_h,
  input  logic                        start_first,
  output logic                        busy,
  output logic                        done,
  input  logic [$clog2(HMAX)-1:0]     rd_h,
  input  logic [$clog2(V)-1:0]        rd_v,
  input  logic [(G>1?$clog2(G):1)-1:0] rd_g,
  input  logic [4:0]                  out_shift,
  output logic [ACT_W-1:0]            rd_act,
  output logic signed [PSUM_W-1:0]    rd_psum,
  output logic [31:0]                 n_stall,
  output logic [31:0]                 n_skip,
  output logic [31:0]                 n_chunk,
  output logic [31:0]                 n_zero_skip,
  output logic [31:0]                 n_mul,
  output logic                        mac_overflow
);

  localparam int unsigned DA_W = $clog2(DEPTH);
  localparam int unsigned UP_W = $clog2(U);

  // ---------------- L1 write decode ----------------
  logic tbl_we, wb_we, ib_we;
  iit_entry_t wr_iit;
  logic [G:0] wr_wit;

  assign tbl_we = l1_wr.valid && l1_wr.sel == L1_TABLE;
  assign wb_we  = l1_wr.valid && l1_wr.sel == L1_WBUF;
  assign ib_we  = l1_wr.valid && l1_wr.sel == L1_INBUF;
  assign wr_iit = iit_entry_t'(l1_wr.data[IIT_W-1:0]);
  assign wr_wit = l1_wr.data[IIT_W +: G+1];

  // ---------------- tables ----------------
  logic [DA_W-1:0] iit_addr;
  iit_entry_t      entry;
  logic [G-1:0]    trans, outer;
  logic [1:0]      adv_inner;

  ucnn_iit #(.DEPTH(DEPTH)) u_iit (
    .clk(clk), .wr_en(tbl_we), .wr_addr(l1_wr.addr[DA_W-1:0]), .wr_data(wr_iit),
    .rd_addr(iit_addr), .rd_data(entry)
  );

  ucnn_wit #(.DEPTH(DEPTH), .G(G)) u_wit (
    .clk(clk), .wr_en(tbl_we), .wr_addr(l1_wr.addr[DA_W-1:0]), .wr_data(wr_wit),
    .rd_addr(iit_addr), .trans(trans), .outer(outer), .adv_inner(adv_inner)
  );

  // ---------------- weight buffer ----------------
  logic [G-1:0][UP_W-1:0] wptr;
  logic signed [WT_W-1:0] wval [G];

  ucnn_weight_buffer #(.U(U), .G(G)) u_wbuf (
    .clk(clk), .wr_en(wb_we), .wr_addr(l1_wr.addr[UP_W-1:0]), .wr_data(l1_wr.data[WT_W-1:0]),
    .rd_ptr(wptr), .rd_data(wval)
  );

  // ---------------- input buffer ----------------
  logic signed [ACT_W-1:0] bank_data [V];
  logic [S_W-1:0]          row_base;

  ucnn_input_buffer #(.V(V), .RT(R_T), .ST(S_T), .CT(C_T)) u_inbuf (
    .clk      (clk),
    .wr_en    (ib_we),
    .wr_col   (l1_wr.addr[S_W+C_W +: $clog2(R_T+V-1)]),
    .wr_row   (l1_wr.addr[C_W +: S_W]),
    .wr_c     (l1_wr.addr[C_W-1:0]),
    .wr_data  (l1_wr.data[ACT_W-1:0]),
    .row_base (row_base),
    .rd_r     (entry.r),
    .rd_s     (entry.s),
    .rd_c     (entry.c),
    .bank_data(bank_data)
  );

  // ---------------- control ----------------
  logic clear_groups, clear_mac, ev_valid, ev_act, store, store_first;
  logic [G-1:0] ev_flush, ev_mul;
  logic [$clog2(HMAX)-1:0] store_h;

  ucnn_pe_control #(.G(G), .U(U), .DEPTH(DEPTH), .HMAX(HMAX), .QDEPTH(QDEPTH)) u_ctrl (
    .clk(clk), .rst_n(rst_n),
    .start(start), .start_h(start_h), .start_first(start_first), .busy(busy), .done(done),
    .iit_addr(iit_addr), .iit_entry(entry), .trans(trans), .outer(outer), .adv_inner(adv_inner),
    .wptr(wptr), .wval(wval),
    .clear_groups(clear_groups), .clear_mac(clear_mac),
    .ev_valid(ev_valid), .ev_act(ev_act), .ev_flush(ev_flush), .ev_mul(ev_mul),
    .store(store), .store_h(store_h), .store_first(store_first),
    .n_stall(n_stall), .n_skip(n_skip), .n_chunk(n_chunk), .n_zero_skip(n_zero_skip), .n_mul(n_mul)
  );

  // row of the circular input buffer that holds tile row 0 of output row h
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                row_base <= '0;
    else if (start && !busy)   row_base <= S_W'(32'(start_h) % S_T);
  end

  // ---------------- dispatcher ----------------
  logic signed [ACT_W-1:0] lane_act [V];
  logic signed [WT_W-1:0]  lane_wt  [V][G];

  ucnn_dispatcher #(.V(V), .RT(R_T), .G(G)) u_disp (
    .r(entry.r), .act_valid(ev_act), .bank_data(bank_data), .wbuf_data(wval),
    .lane_act(lane_act), .lane_wt(lane_wt)
  );

  // ---------------- lanes ----------------
  logic signed [PSUM_W-1:0] lane_acc [V][G];
  logic [V-1:0] lane_ovf;

  for (genvar v = 0; v < V; v++) begin : g_lane
    logic signed [PSUM_W-1:0] acc [G];
    ucnn_lane #(.G(G), .QDEPTH(QDEPTH)) u_lane (
      .clk(clk), .rst_n(rst_n),
      .clear_groups(clear_groups), .clear_mac(clear_mac),
      .ev_valid(ev_valid), .act(lane_act[v]), .flush(ev_flush), .mul(ev_mul),
      .wt(lane_wt[v]), .acc(acc), .mac_empty(), .mac_overflow(lane_ovf[v])
    );
    always_comb for (int g = 0; g < G; g++) lane_acc[v][g] = acc[g];
  end

  assign mac_overflow = |lane_ovf;

  // ---------------- partial sums ----------------

  ucnn_psum_buffer #(.V(V), .G(G), .HMAX(HMAX)) u_psum (
    .clk(clk), .store(store), .store_h(store_h), .store_first(store_first),
    .lane_acc(lane_acc), .rd_h(rd_h), .rd_v(rd_v), .rd_g(rd_g), .out_shift(out_shift),
    .rd_act(rd_act), .rd_psum(rd_psum)
  );

endmodule
