// ucnn_top: the UCNN accelerator (Unique Weight CNN accelerator).
//
// A convolutional layer is a set of dot products between filters and input
// windows. When weights are quantised to few unique values (U), most weights
// of a filter repeat, and UCNN exploits that: it adds up all activations that
// meet the same weight before multiplying once (dot-product factorization),
// and lets G filters share one sorted input-indirection table so that sums
// of activations common to their weight groups are computed once
// (activation-group reuse). Zero weights need no table entries at all.
//
// This top connects the chip-level blocks: the L2 global buffer (double-
// buffered activations plus a weight/table store), the layer scheduler that
// runs the dataflow, an input and a weight multicast bus, and P processing
// elements. DRAM is outside: its read port is brought out, as is a host port
// to the L2 activation halves.
//
// Use: load the layer input into L2 half cfg.in_half through the host port
// (with host_en high), put the layer's unique weights and table records in
// DRAM (format in ucnn_scheduler), pulse `start` with `cfg`, wait for
// `done`; the outputs are in the other half, layout out[k][y][x].
// `error` flags a layer the configuration cannot hold.
module ucnn_top
  import ucnn_pkg::*;
#(
  parameter int unsigned P         = NUM_PE,
  parameter int unsigned V         = VW,
  parameter int unsigned G         = GF,
  parameter int unsigned U         = NUM_U,
  parameter int unsigned DEPTH     = IIT_DEPTH,
  parameter int unsigned HMAX      = H_MAX,
  parameter int unsigned ACT_WORDS = L2_ACT_WORDS,
  parameter int unsigned WT_WORDS  = L2_WT_WORDS
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // layer control
  input  logic                         start,
  input  layer_cfg_t                   cfg,
  output logic                         busy,
  output logic                         done,
  output logic                         error,
  // DRAM read port
  output logic                         dram_req_valid,
  output logic [31:0]                  dram_req_addr,
  input  logic                         dram_req_ready,
  input  logic                         dram_rsp_valid,
  input  logic [WORD_W-1:0]            dram_rsp_data,
  // host access to the L2 activations
  input  logic                         host_en,
  input  logic                         host_half,
  input  logic                         host_we,
  input  logic [$clog2(ACT_WORDS)-1:0] host_addr,
  input  logic [WORD_W-1:0]            host_wdata,
  output logic [WORD_W-1:0]            host_rdata,
  // statistics
  output logic [31:0]                  st_stall,
  output logic [31:0]                  st_skip,
  output logic [31:0]                  st_chunk,
  output logic [31:0]                  st_zero_skip,
  output logic [31:0]                  st_mul,
  output logic [31:0]                  st_multicast,
  output logic [31:0]                  st_slide_rows,
  output logic [31:0]                  st_chunks_kc,
  output logic [31:0]                  st_rounds,
  output logic [31:0]                  st_pad_words,
  output logic [31:0]                  st_row_runs,
  output logic                         st_mac_overflow
);

  localparam int unsigned HA_W = $clog2(HMAX);
  localparam int unsigned GI_W = (G > 1) ? $clog2(G) : 1;

  // ---------------- L2 ----------------
  logic                         act_rd_en, act_wr_en, wt_wr_en, wt_rd_en;
  logic [$clog2(ACT_WORDS)-1:0] act_rd_addr, act_wr_addr;
  logic [WORD_W-1:0]            act_rd_data, act_wr_data, wt_wr_data, wt_rd_data;
  logic [$clog2(WT_WORDS)-1:0]  wt_wr_addr, wt_rd_addr;
  logic                         in_half_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     in_half_q <= 1'b0;
    else if (start && !busy) in_half_q <= cfg.in_half;
  end

  ucnn_global_buffer #(.ACT_WORDS(ACT_WORDS), .WT_WORDS(WT_WORDS)) u_l2 (
    .clk(clk), .in_half(in_half_q),
    .act_rd_en(act_rd_en), .act_rd_addr(act_rd_addr), .act_rd_data(act_rd_data),
    .act_wr_en(act_wr_en), .act_wr_addr(act_wr_addr), .act_wr_data(act_wr_data),
    .host_en(host_en && !busy), .host_half(host_half), .host_we(host_we),
    .host_addr(host_addr), .host_wdata(host_wdata), .host_rdata(host_rdata),
    .wt_wr_en(wt_wr_en), .wt_wr_addr(wt_wr_addr), .wt_wr_data(wt_wr_data),
    .wt_rd_en(wt_rd_en), .wt_rd_addr(wt_rd_addr), .wt_rd_data(wt_rd_data)
  );

  // ---------------- scheduler ----------------
  l1_wr_t              in_bus, wt_bus;
  logic [P-1:0]        in_dest, wt_dest, pe_start, pe_done;
  logic [HA_W-1:0]     pe_start_h, pe_rd_h;
  logic                pe_start_first;
  logic [$clog2(V)-1:0] pe_rd_v;
  logic [GI_W-1:0]     pe_rd_g;
  logic [ACT_W-1:0]    pe_rd_act [P];
  logic [4:0]          out_shift_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              out_shift_q <= '0;
    else if (start && !busy) out_shift_q <= cfg.out_shift;
  end

  ucnn_scheduler #(.P(P), .V(V), .G(G), .U(U), .HMAX(HMAX),
                   .ACT_WORDS(ACT_WORDS), .WT_WORDS(WT_WORDS)) u_sched (
    .clk(clk), .rst_n(rst_n), .start(start), .cfg(cfg), .busy(busy), .done(done), .error(error),
    .dram_req_valid(dram_req_valid), .dram_req_addr(dram_req_addr), .dram_req_ready(dram_req_ready),
    .dram_rsp_valid(dram_rsp_valid), .dram_rsp_data(dram_rsp_data),
    .act_rd_en(act_rd_en), .act_rd_addr(act_rd_addr), .act_rd_data(act_rd_data),
    .act_wr_en(act_wr_en), .act_wr_addr(act_wr_addr), .act_wr_data(act_wr_data),
    .wt_wr_en(wt_wr_en), .wt_wr_addr(wt_wr_addr), .wt_wr_data(wt_wr_data),
    .wt_rd_en(wt_rd_en), .wt_rd_addr(wt_rd_addr), .wt_rd_data(wt_rd_data),
    .in_bus(in_bus), .in_dest(in_dest), .wt_bus(wt_bus), .wt_dest(wt_dest),
    .pe_start(pe_start), .pe_start_h(pe_start_h), .pe_start_first(pe_start_first),
    .pe_done(pe_done), .pe_rd_h(pe_rd_h), .pe_rd_v(pe_rd_v), .pe_rd_g(pe_rd_g),
    .pe_rd_act(pe_rd_act),
    .n_slide_rows(st_slide_rows), .n_chunks(st_chunks_kc), .n_rounds(st_rounds),
    .n_pad_words(st_pad_words), .n_row_runs(st_row_runs)
  );

  // ---------------- multicast buses ----------------
  l1_wr_t      in_l1 [P];
  l1_wr_t      wt_l1 [P];
  logic [31:0] mc_in, mc_wt;

  ucnn_multicast_bus #(.P(P)) u_in_bus (
    .clk(clk), .rst_n(rst_n), .in(in_bus), .dest(in_dest), .out(in_l1), .n_multicast(mc_in)
  );
  ucnn_multicast_bus #(.P(P)) u_wt_bus (
    .clk(clk), .rst_n(rst_n), .in(wt_bus), .dest(wt_dest), .out(wt_l1), .n_multicast(mc_wt)
  );

  assign st_multicast = mc_in + mc_wt;

  // ---------------- PE array ----------------
  logic [31:0] pe_stall [P], pe_skip [P], pe_chunk [P], pe_zskip [P], pe_mul [P];
  logic [P-1:0] pe_ovf;

  for (genvar p = 0; p < P; p++) begin : g_pe
    l1_wr_t l1;
    // the two buses never drive the same cycle (the scheduler streams one
    // thing at a time), so a PE takes whichever carries a word
    assign l1 = in_l1[p].valid ? in_l1[p] : wt_l1[p];
    ucnn_pe #(.V(V), .G(G), .U(U), .DEPTH(DEPTH), .HMAX(HMAX)) u_pe (
      .clk(clk), .rst_n(rst_n), .l1_wr(l1),
      .start(pe_start[p]), .start_h(pe_start_h), .start_first(pe_start_first),
      .busy(), .done(pe_done[p]),
      .rd_h(pe_rd_h), .rd_v(pe_rd_v), .rd_g(pe_rd_g), .out_shift(out_shift_q),
      .rd_act(pe_rd_act[p]), .rd_psum(),
      .n_stall(pe_stall[p]), .n_skip(pe_skip[p]), .n_chunk(pe_chunk[p]),
      .n_zero_skip(pe_zskip[p]), .n_mul(pe_mul[p]), .mac_overflow(pe_ovf[p])
    );
  end

  always_comb begin
    st_stall = '0; st_skip = '0; st_chunk = '0; st_zero_skip = '0; st_mul = '0;
    for (int p = 0; p < P; p++) begin
      st_stall     = st_stall + pe_stall[p];
      st_skip      = st_skip + pe_skip[p];
      st_chunk     = st_chunk + pe_chunk[p];
      st_zero_skip = st_zero_skip + pe_zskip[p];
      st_mul       = st_mul + pe_mul[p];
    end
  end
  assign st_mac_overflow = |pe_ovf;

  // the scheduler keeps the two buses apart
  always_ff @(posedge clk) begin
    if (rst_n) assert (!(in_bus.valid && wt_bus.valid))
      else $error("input and weight bus driven in the same cycle");
  end

endmodule
