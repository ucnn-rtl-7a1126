// ucnn_weight_buffer: the PE's L1 weight buffer of U unique weights.
//
// With sorted indirection tables a filter reads each unique weight once per
// activation group, in one canonical order shared by all filters of the
// layer, so the buffer holds only the U unique weight values (the zero
// weight, if present, last). Each of the G filters that share an
// indirection table has its own pointer into it, so there are G read ports.
//
// Interface: synchronous write port (from the weight multicast bus), G
// asynchronous read ports. Reading past the loaded weights returns zero.
module ucnn_weight_buffer
  import ucnn_pkg::*;
#(
  parameter int unsigned U = NUM_U,
  parameter int unsigned G = GF
) (
  input  logic                        clk,
  input  logic                        wr_en,
  input  logic [$clog2(U)-1:0]        wr_addr,
  input  logic signed [WT_W-1:0]      wr_data,
  input  logic [G-1:0][$clog2(U)-1:0] rd_ptr,
  output logic signed [WT_W-1:0]      rd_data [G]
);

  logic signed [WT_W-1:0] mem [U];

  always_ff @(posedge clk) begin
    if (wr_en && 32'(wr_addr) < U) mem[wr_addr] <= wr_data;
  end

  always_comb begin
    for (int g = 0; g < G; g++) begin
      rd_data[g] = (32'(rd_ptr[g]) < U) ? mem[rd_ptr[g]] : '0;
    end
  end

endmodule
