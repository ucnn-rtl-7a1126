// End-to-end test of the accelerator at its default size: 32 PEs, 4-wide
// spatial vectors, groups of 2 filters, 17 unique weights, 3x3x32 L1 tiles,
// full L2 buffers. One convolution layer (18x5 input, 40 channels, 12
// filters, 3x3) is placed in external memory and the input buffer, run once
// and every output is compared with a reference convolution computed in the
// testbench. The 4 column groups x 6 filter groups fill 24 of the 32 PEs in a
// single round. Mechanism counters are printed and each must be non-zero.
// The top is instantiated with no parameter overrides.
module tb_ucnn_top_full;
  import ucnn_pkg::*;
  import ucnn_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done, error;
  layer_cfg_t cfg = '0;
  logic dram_req_valid, dram_req_ready, dram_rsp_valid;
  logic [31:0] dram_req_addr;
  logic [15:0] dram_rsp_data;
  logic host_en = 0, host_half = 0, host_we = 0;
  logic [$clog2(L2_ACT_WORDS)-1:0] host_addr = '0;
  logic [15:0] host_wdata = '0, host_rdata;
  logic [31:0] st_stall, st_skip, st_chunk, st_zero_skip, st_mul, st_multicast;
  logic [31:0] st_slide_rows, st_chunks_kc, st_rounds, st_pad_words, st_row_runs;
  logic st_mac_overflow;

  ucnn_top dut (.*);

  ucnn_dram_model #(.WORDS(1 << 16), .LATENCY(3)) dram (
    .clk(clk), .rst_n(rst_n), .req_valid(dram_req_valid), .req_addr(dram_req_addr),
    .req_ready(dram_req_ready), .rsp_valid(dram_rsp_valid), .rsp_data(dram_rsp_data)
  );

  `include "tb/ucnn_top_tests.svh"

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    layer_gen l1;
    longint c1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    l1 = new(18, 5, 40, 12, 3, 3, NUM_U, GF, VW, 6);
    l1.generate_layer(90, 40);
    run_layer(l1, 0, 1, 0, c1);
    $display("layer: %0d cycles", c1);
    mechanism("multiplier stall", st_stall);
    mechanism("skip entry", st_skip);
    mechanism("group chunk flush", st_chunk);
    mechanism("zero-weight multiply skip", st_zero_skip);
    mechanism("multicast bus word", st_multicast);
    mechanism("slide-reuse row load", st_slide_rows);
    mechanism("padded input word", st_pad_words);
    mechanism("multiplies", st_mul);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
