// ucnn_global_buffer: the shared on-chip L2 of the UCNN accelerator.
//
// Like the PEs' L1, the L2 is split into an activation part and a weight
// part. The activation part has two halves used as a double buffer: a layer
// reads its input from half `in_half` and writes its output activations to
// the other half, which becomes the next layer's input, so activations only
// go to DRAM if they do not fit. The weight part holds the unique weights
// and the compressed indirection-table records of the K_c filters being
// processed (the L2 is weight-stationary); it is refilled from DRAM for
// every K_c chunk.
//
// Interface (all reads synchronous, one cycle latency, like SRAM macros):
//   act_rd_*  scheduler reads the input half; act_wr_* writes the output
//             half. host_* gives a host direct access to either half when
//             the accelerator is idle (`host_en`), to load the first layer's
//             input and read results back.
//   wt_*      one write port (DRAM fills) and one read port (PE loads).
// Sizes: L2_ACT_WORDS 16-bit words per half (256 KB, the capacity the
// source quotes for inputs) and L2_WT_WORDS words of weight store (a choice
// of this design).
module ucnn_global_buffer
  import ucnn_pkg::*;
#(
  parameter int unsigned ACT_WORDS = L2_ACT_WORDS,
  parameter int unsigned WT_WORDS  = L2_WT_WORDS
) (
  input  logic                         clk,
  input  logic                         in_half,
  // scheduler activation ports
  input  logic                         act_rd_en,
  input  logic [$clog2(ACT_WORDS)-1:0] act_rd_addr,
  output logic [WORD_W-1:0]            act_rd_data,
  input  logic                         act_wr_en,
  input  logic [$clog2(ACT_WORDS)-1:0] act_wr_addr,
  input  logic [WORD_W-1:0]            act_wr_data,
  // host port
  input  logic                         host_en,
  input  logic                         host_half,
  input  logic                         host_we,
  input  logic [$clog2(ACT_WORDS)-1:0] host_addr,
  input  logic [WORD_W-1:0]            host_wdata,
  output logic [WORD_W-1:0]            host_rdata,
  // weight store
  input  logic                         wt_wr_en,
  input  logic [$clog2(WT_WORDS)-1:0]  wt_wr_addr,
  input  logic [WORD_W-1:0]            wt_wr_data,
  input  logic                         wt_rd_en,
  input  logic [$clog2(WT_WORDS)-1:0]  wt_rd_addr,
  output logic [WORD_W-1:0]            wt_rd_data
);

  localparam int unsigned AA_W = $clog2(ACT_WORDS);

  logic [WORD_W-1:0] act_mem [2][ACT_WORDS];
  logic [WORD_W-1:0] wt_mem  [WT_WORDS];

  // per-half port selection
  logic              rd_en   [2];
  logic [AA_W-1:0]   rd_addr [2];
  logic              we      [2];
  logic [AA_W-1:0]   wa      [2];
  logic [WORD_W-1:0] wd      [2];
  logic [WORD_W-1:0] rdq     [2];
  logic              out_sel;

  always_comb begin
    for (int b = 0; b < 2; b++) begin
      if (host_en) begin
        rd_en[b]   = (host_half == b[0]) && !host_we;
        rd_addr[b] = host_addr;
        we[b]      = (host_half == b[0]) && host_we;
        wa[b]      = host_addr;
        wd[b]      = host_wdata;
      end else begin
        rd_en[b]   = act_rd_en && (in_half == b[0]);
        rd_addr[b] = act_rd_addr;
        we[b]      = act_wr_en && (in_half != b[0]);
        wa[b]      = act_wr_addr;
        wd[b]      = act_wr_data;
      end
    end
  end

  for (genvar b = 0; b < 2; b++) begin : g_half
    always_ff @(posedge clk) begin
      if (we[b])    act_mem[b][wa[b]] <= wd[b];
      if (rd_en[b]) rdq[b] <= act_mem[b][rd_addr[b]];
    end
  end

  always_ff @(posedge clk) begin
    out_sel <= host_en ? host_half : in_half;
  end

  assign act_rd_data = rdq[out_sel];
  assign host_rdata  = rdq[out_sel];

  always_ff @(posedge clk) begin
    if (wt_wr_en) wt_mem[wt_wr_addr] <= wt_wr_data;
    if (wt_rd_en) wt_rd_data <= wt_mem[wt_rd_addr];
  end

endmodule
