// Unit test of the output-stationary partial-sum buffer. Random lane
// accumulators are stored to random output rows, either as the first
// contribution (overwrite) or added to what the row already holds; a model
// array does the same. Every row, lane and filter is then read back and both
// the raw partial sum and the activation after ReLU, right shift and
// saturation (computed here independently) are compared.
module tb_ucnn_psum_buffer;
  import ucnn_pkg::*;
  localparam int unsigned V = VW, G = GF, HMAX = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic store = 0, store_first = 0;
  logic [$clog2(HMAX)-1:0] store_h = '0, rd_h = '0;
  logic signed [PSUM_W-1:0] lane_acc [V][G];
  logic [$clog2(V)-1:0] rd_v = '0;
  logic [(G>1?$clog2(G):1)-1:0] rd_g = '0;
  logic [4:0] out_shift = '0;
  logic [ACT_W-1:0] rd_act;
  logic signed [PSUM_W-1:0] rd_psum;
  longint model [HMAX][V][G];
  int checks = 0, failures = 0;

  ucnn_psum_buffer #(.V(V), .G(G), .HMAX(HMAX)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint ref_act(longint p, int sh);
    longint x;
    x = p >>> sh;
    if (x < 0) return 0;
    if (x > 32767) return 32767;
    return x;
  endfunction

  task automatic store_row(int h, bit first);
    @(negedge clk);
    store = 1; store_h = h[$clog2(HMAX)-1:0]; store_first = first;
    for (int v = 0; v < V; v++)
      for (int g = 0; g < G; g++) begin
        lane_acc[v][g] = PSUM_W'(longint'($signed($urandom_range(2000000))) - 1000000);
        model[h][v][g] = (first ? 0 : model[h][v][g]) + longint'(lane_acc[v][g]);
      end
    @(negedge clk);
    store = 0;
  endtask

  initial begin
    for (int h = 0; h < HMAX; h++) store_row(h, 1);
    for (int t = 0; t < 100; t++) store_row($urandom_range(HMAX - 1), ($urandom_range(4) == 0));
    for (int h = 0; h < HMAX; h++)
      for (int v = 0; v < V; v++)
        for (int g = 0; g < G; g++) begin
          int sh;
          sh = $urandom_range(8);
          rd_h = h[$clog2(HMAX)-1:0]; rd_v = v[$clog2(V)-1:0]; rd_g = g[0:0]; out_shift = sh[4:0];
          #1;
          checks += 2;
          if (longint'(rd_psum) != model[h][v][g]) begin
            failures++;
            if (failures < 10) $display("FAIL: psum[%0d][%0d][%0d] = %0d expected %0d", h, v, g, rd_psum, model[h][v][g]);
          end
          if (longint'(rd_act) != ref_act(model[h][v][g], sh)) begin
            failures++;
            if (failures < 10) $display("FAIL: act[%0d][%0d][%0d] = %0d expected %0d", h, v, g, rd_act, ref_act(model[h][v][g], sh));
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
