// Unit test of the unique-weight buffer: all U entries are written with
// random weights, then random pointers are applied to the G read ports and
// each port's output is compared with the stored weight. Pointers beyond the
// last entry must read as zero.
module tb_ucnn_weight_buffer;
  import ucnn_pkg::*;
  localparam int unsigned U = NUM_U;
  localparam int unsigned G = GF;
  localparam int unsigned AW = $clog2(U);
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0;
  logic [AW-1:0] wr_addr = '0;
  logic signed [WT_W-1:0] wr_data = '0;
  logic [G-1:0][AW-1:0] rd_ptr = '0;
  logic signed [WT_W-1:0] rd_data [G];
  int model [U];
  int checks = 0, failures = 0;

  ucnn_weight_buffer dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < U; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = a[AW-1:0]; wr_data = WT_W'($urandom);
      model[a] = int'(wr_data);
    end
    @(negedge clk);
    wr_en = 0;
    for (int t = 0; t < 300; t++) begin
      int p [G];
      for (int g = 0; g < G; g++) begin
        p[g] = $urandom_range((1 << AW) - 1);
        rd_ptr[g] = p[g][AW-1:0];
      end
      #1;
      for (int g = 0; g < G; g++) begin
        int e;
        e = (p[g] < U) ? model[p[g]] : 0;
        checks++;
        if (int'(rd_data[g]) != e) begin
          failures++;
          if (failures < 10) $display("FAIL: port %0d ptr %0d read %0d expected %0d", g, p[g], rd_data[g], e);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
