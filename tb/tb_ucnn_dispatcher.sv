// Unit test of the data dispatcher. For random bank words, weights and
// filter-column offsets r, lane v must receive the word of bank (r+v) mod V
// (zero when no activation is read) and every lane must receive the same G
// weights.
module tb_ucnn_dispatcher;
  import ucnn_pkg::*;
  localparam int unsigned V = VW, RT = R_T, G = GF;
  logic [$clog2(RT)-1:0] r = '0;
  logic act_valid = 0;
  logic signed [ACT_W-1:0] bank_data [V];
  logic signed [WT_W-1:0] wbuf_data [G];
  logic signed [ACT_W-1:0] lane_act [V];
  logic signed [WT_W-1:0] lane_wt [V][G];
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  ucnn_dispatcher dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      int rr;
      rr = $urandom_range(RT - 1);
      r = rr[$clog2(RT)-1:0];
      act_valid = ($urandom_range(4) != 0);
      for (int b = 0; b < V; b++) bank_data[b] = ACT_W'($urandom);
      for (int g = 0; g < G; g++) wbuf_data[g] = WT_W'($urandom);
      #1;
      for (int v = 0; v < V; v++) begin
        int e;
        e = act_valid ? int'(bank_data[(rr + v) % V]) : 0;
        checks++;
        if (int'(lane_act[v]) != e) begin
          failures++;
          if (failures < 10) $display("FAIL: r=%0d lane %0d act %0d expected %0d", rr, v, lane_act[v], e);
        end
        for (int g = 0; g < G; g++) begin
          checks++;
          if (lane_wt[v][g] != wbuf_data[g]) failures++;
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
