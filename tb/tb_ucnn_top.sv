// tb_ucnn_top: end-to-end test of the UCNN accelerator at reduced size.
//
// 4 PEs and a 2048-word L2 weight store (so K_c is one or a few filter
// groups), otherwise the default PE. Two chained 3x3 layers:
//   layer 1: 14x6x40 input, 6 filters: two channel tiles (the second half
//            empty -> zero padding), three K_c chunks, column padding;
//   layer 2: reads layer 1's output from the other L2 half (double
//            buffering), 12x4x6 -> 4 filters: two job rounds on 4 PEs.
// All outputs are compared with a direct convolution + shift + ReLU.
// Every mechanism (multiplier stall, skip entry, group chunking, zero-weight
// skip, multicast, slide reuse, padding, K_c chunks, job rounds, channel
// tiles) must occur at least once.
module tb_ucnn_top;
  import ucnn_pkg::*;
  import ucnn_tb_pkg::*;

  localparam int unsigned P_CFG = 4;
  localparam int unsigned ACTW_CFG = 4096;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done, error;
  layer_cfg_t cfg = '0;
  logic dram_req_valid, dram_req_ready, dram_rsp_valid;
  logic [31:0] dram_req_addr;
  logic [15:0] dram_rsp_data;
  logic host_en = 0, host_half = 0, host_we = 0;
  logic [$clog2(ACTW_CFG)-1:0] host_addr = '0;
  logic [15:0] host_wdata = '0, host_rdata;
  logic [31:0] st_stall, st_skip, st_chunk, st_zero_skip, st_mul, st_multicast;
  logic [31:0] st_slide_rows, st_chunks_kc, st_rounds, st_pad_words, st_row_runs;
  logic st_mac_overflow;

  ucnn_top #(.P(P_CFG), .ACT_WORDS(ACTW_CFG), .WT_WORDS(2048)) dut (.*);

  ucnn_dram_model #(.WORDS(1 << 16), .LATENCY(3)) dram (
    .clk(clk), .rst_n(rst_n), .req_valid(dram_req_valid), .req_addr(dram_req_addr),
    .req_ready(dram_req_ready), .rsp_valid(dram_rsp_valid), .rsp_data(dram_rsp_data)
  );

  `include "tb/ucnn_top_tests.svh"

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    layer_gen l1, l2;
    longint c1, c2, chunks1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    l1 = new(14, 6, 40, 6, 3, 3, NUM_U, GF, VW, 6);
    l1.generate_layer(90, 35);
    run_layer(l1, 0, 1, 0, c1);
    chunks1 = st_chunks_kc;
    $display("layer 1: %0d cycles", c1);
    l2 = new(12, 4, 6, 4, 3, 3, NUM_U, GF, VW, 4);
    l2.generate_layer(50, 0);
    l2.act = l1.expect_out;
    run_layer(l2, 1, 0, 32768, c2);
    $display("layer 2: %0d cycles", c2);
    mechanism("multiplier stall", st_stall);
    mechanism("skip entry", st_skip);
    mechanism("group chunk flush", st_chunk);
    mechanism("zero-weight multiply skip", st_zero_skip);
    mechanism("multicast bus word", st_multicast);
    mechanism("slide-reuse row load", st_slide_rows);
    mechanism("padded input word", st_pad_words);
    mechanism("extra K_c chunk", chunks1 - 1);
    mechanism("job rounds beyond chunks", st_rounds - st_chunks_kc);
    mechanism("multiplies", st_mul);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
