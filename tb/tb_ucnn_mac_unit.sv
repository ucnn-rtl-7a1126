// Unit test of the per-lane multiplier with its request queue. Random
// multiply requests (one per filter level and cycle at most, never more than
// the queue can take) are pushed; a model sums sum*weight per filter. The
// unit must retire one request per cycle, so after the last push it has to
// be empty within as many cycles as requests were pending; then every
// accumulator is compared. A clear must zero the accumulators, and pushing
// past the queue depth must raise the overflow flag.
module tb_ucnn_mac_unit;
  import ucnn_pkg::*;
  localparam int unsigned G = GF;
  localparam int unsigned QDEPTH = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0;
  logic [G-1:0] push = '0;
  logic signed [SUM_W-1:0] req_sum [G];
  logic signed [WT_W-1:0] req_wt [G];
  logic signed [PSUM_W-1:0] acc [G];
  logic empty, overflow;
  longint model [G];
  int pending = 0;
  int checks = 0, failures = 0;

  ucnn_mac_unit #(.G(G), .QDEPTH(QDEPTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic drain_and_compare(string tag);
    int n;
    n = 0;
    push = '0;
    while (!empty && n < 10) begin @(negedge clk); n++; end
    chk(empty && n <= QDEPTH, $sformatf("%s: queue took %0d cycles to drain", tag, n));
    for (int g = 0; g < G; g++)
      chk(longint'(acc[g]) == model[g], $sformatf("%s: acc[%0d] = %0d expected %0d", tag, g, acc[g], model[g]));
    pending = 0;
  endtask

  initial begin
    for (int g = 0; g < G; g++) begin model[g] = 0; req_sum[g] = '0; req_wt[g] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      for (int t = 0; t < 200; t++) begin
        int room;
        @(negedge clk);
        room = QDEPTH - (pending > 0 ? pending - 1 : 0);
        push = '0;
        for (int g = 0; g < G; g++) begin
          req_sum[g] = SUM_W'($signed($urandom_range(65535)) - 32768);
          req_wt[g]  = WT_W'($signed($urandom_range(2047)) - 1024);
          if (room > 0 && $urandom_range(2) != 0) begin
            push[g] = 1'b1;
            room--;
            model[g] += longint'(req_sum[g]) * longint'(req_wt[g]);
          end
        end
        pending = (pending > 0 ? pending - 1 : 0) + $countones(push);
        #1;
        chk(!overflow, "overflow flagged for a legal push");
      end
      @(negedge clk);
      pending = pending > 0 ? pending - 1 : 0;
      drain_and_compare($sformatf("round %0d", round));
    end
    // clear
    clear = 1;
    @(negedge clk);
    clear = 0;
    for (int g = 0; g < G; g++) model[g] = 0;
    drain_and_compare("after clear");
    // overflow: fill the queue, then push more than it can take
    push = '1;
    #1;
    chk(!overflow, "overflow flagged on first full push");
    @(negedge clk);
    push = '1;
    #1;
    chk(overflow, "overflow not flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
