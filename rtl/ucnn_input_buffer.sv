// ucnn_input_buffer: banked L1 input buffer of one PE (spatial vectorization).
//
// The PE evaluates V_W horizontally adjacent dot products at once. Each
// input-indirection entry (r, s, c) then needs the V_W activations at
// columns r, r+1, .., r+V_W-1 of the tile, and this buffer returns all of
// them in one cycle without bank conflicts. Column j of the tile lives in
// bank j % V_W at
//     addr = s*C_t + c + floor(j / V_W) * S*C_t,
// so for a fixed (r, s, c) the V_W slots v (column j = r + v) always land in
// V_W different banks. The source writes this mapping twice: once with
// ceil(j/V_W) and once while stating that R = 3, V_W = 2 wastes no space;
// only floor() satisfies the second statement, and it is used here.
//
// Rows are held circularly (slide reuse): the tile row s of output row h is
// stored at physical row (h + s) % S_T, so when the PE slides one row down
// only the one new input row is written. `row_base` = h % S_T.
//
// Interface: a write port addressed by {column, physical row, channel} and a
// read port taking the entry (r, s, c); `bank_data[b]` is bank b's word.
// Reads are asynchronous (register-file style), writes take effect the next
// cycle. The read's bank-to-lane rotation is done by ucnn_dispatcher.
module ucnn_input_buffer
  import ucnn_pkg::*;
#(
  parameter int unsigned V  = VW,
  parameter int unsigned RT = R_T,
  parameter int unsigned ST = S_T,
  parameter int unsigned CT = C_T
) (
  input  logic                           clk,
  // fill
  input  logic                           wr_en,
  input  logic [$clog2(RT+V-1)-1:0]      wr_col,
  input  logic [$clog2(ST)-1:0]          wr_row,
  input  logic [$clog2(CT)-1:0]          wr_c,
  input  logic signed [ACT_W-1:0]        wr_data,
  // vector read
  input  logic [$clog2(ST)-1:0]          row_base,
  input  logic [$clog2(RT)-1:0]          rd_r,
  input  logic [$clog2(ST)-1:0]          rd_s,
  input  logic [$clog2(CT)-1:0]          rd_c,
  output logic signed [ACT_W-1:0]        bank_data [V]
);

  localparam int unsigned NCOL   = RT + V - 1;
  localparam int unsigned NBLK   = (NCOL + V - 1) / V;  // column blocks per bank
  localparam int unsigned BDEPTH = NBLK * ST * CT;
  localparam int unsigned BA_W   = $clog2(BDEPTH);

  logic signed [ACT_W-1:0] mem [V][BDEPTH];

  // write mapping
  logic [BA_W-1:0]       wr_addr;
  logic [$clog2(V)-1:0]  wr_bank;

  always_comb begin
    wr_bank = ($clog2(V))'(32'(wr_col) % V);
    wr_addr = BA_W'(32'(wr_row) * CT + 32'(wr_c) + (32'(wr_col) / V) * ST * CT);
  end

  always_ff @(posedge clk) begin
    if (wr_en && 32'(wr_col) < NCOL && 32'(wr_row) < ST && 32'(wr_c) < CT)
      mem[wr_bank][wr_addr] <= wr_data;
  end

  // read mapping: bank b serves vector slot v = (b - r) mod V
  logic [31:0] s_phys;
  assign s_phys = (32'(rd_s) + 32'(row_base)) % ST;

  for (genvar b = 0; b < V; b++) begin : g_rd
    logic [31:0]     v, j;
    logic [BA_W-1:0] a;
    assign v = (32'(b) + V - (32'(rd_r) % V)) % V;
    assign j = 32'(rd_r) + v;
    assign a = BA_W'(s_phys * CT + 32'(rd_c) + (j / V) * ST * CT);
    assign bank_data[b] = mem[b][a];
  end

endmodule
