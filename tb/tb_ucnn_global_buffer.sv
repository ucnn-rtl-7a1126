// Unit test of the global (L2) buffer at a reduced size. The host port fills
// both activation halves; the layer-side port then reads the input half
// (one-cycle read latency) and writes results, which must land only in the
// other half; the host reads everything back. The weight store is written
// and read through its own ports. All values are checked against model
// arrays kept by the testbench.
module tb_ucnn_global_buffer;
  import ucnn_pkg::*;
  localparam int unsigned ACT_WORDS = 1024, WT_WORDS = 512;
  localparam int unsigned AW = $clog2(ACT_WORDS), WW = $clog2(WT_WORDS);
  logic clk = 0;
  always #5 clk = ~clk;
  logic in_half = 0;
  logic act_rd_en = 0, act_wr_en = 0, host_en = 0, host_half = 0, host_we = 0;
  logic [AW-1:0] act_rd_addr = '0, act_wr_addr = '0, host_addr = '0;
  logic [WORD_W-1:0] act_rd_data, act_wr_data = '0, host_wdata = '0, host_rdata;
  logic wt_wr_en = 0, wt_rd_en = 0;
  logic [WW-1:0] wt_wr_addr = '0, wt_rd_addr = '0;
  logic [WORD_W-1:0] wt_wr_data = '0, wt_rd_data;
  int model [2][ACT_WORDS];
  int wmodel [WT_WORDS];
  int checks = 0, failures = 0;

  ucnn_global_buffer #(.ACT_WORDS(ACT_WORDS), .WT_WORDS(WT_WORDS)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL: %s got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    // host fills both halves
    for (int h = 0; h < 2; h++)
      for (int a = 0; a < ACT_WORDS; a++) begin
        @(negedge clk);
        host_en = 1; host_we = 1; host_half = h[0]; host_addr = a[AW-1:0];
        host_wdata = WORD_W'($urandom); model[h][a] = int'(host_wdata);
      end
    @(negedge clk);
    host_en = 0; host_we = 0;
    for (int pass = 0; pass < 2; pass++) begin
      in_half = pass[0];
      // layer side: read input half, write output half
      for (int t = 0; t < 600; t++) begin
        int ra, wa;
        ra = $urandom_range(ACT_WORDS - 1); wa = $urandom_range(ACT_WORDS - 1);
        @(negedge clk);
        act_rd_en = 1; act_rd_addr = ra[AW-1:0];
        act_wr_en = 1; act_wr_addr = wa[AW-1:0]; act_wr_data = WORD_W'($urandom);
        model[!in_half][wa] = int'(act_wr_data);
        @(negedge clk);
        act_rd_en = 0; act_wr_en = 0;
        chk(int'(act_rd_data), model[in_half][ra], "layer read");
      end
      // host reads everything back
      for (int h = 0; h < 2; h++)
        for (int a = 0; a < ACT_WORDS; a += 3) begin
          @(negedge clk);
          host_en = 1; host_we = 0; host_half = h[0]; host_addr = a[AW-1:0];
          @(negedge clk);
          host_en = 0;
          chk(int'(host_rdata), model[h][a], $sformatf("host read half %0d addr %0d", h, a));
        end
    end
    // weight store
    for (int a = 0; a < WT_WORDS; a++) begin
      @(negedge clk);
      wt_wr_en = 1; wt_wr_addr = a[WW-1:0]; wt_wr_data = WORD_W'($urandom);
      wmodel[a] = int'(wt_wr_data);
    end
    @(negedge clk);
    wt_wr_en = 0;
    for (int t = 0; t < 300; t++) begin
      int a;
      a = $urandom_range(WT_WORDS - 1);
      @(negedge clk);
      wt_rd_en = 1; wt_rd_addr = a[WW-1:0];
      @(negedge clk);
      wt_rd_en = 0;
      chk(int'(wt_rd_data), wmodel[a], "weight read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
