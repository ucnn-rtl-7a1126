// Unit test of the activation group accumulator. Random streams of events
// (activation plus a per-filter flush vector, closed towards inner filters as
// the table decoder produces it) are applied. The testbench keeps a plain
// running sum per filter that restarts after each flush of that filter, and
// at every flushed event compares the group sum offered to the multiplier
// with it. Idle cycles and clears are mixed in.
module tb_ucnn_group_accum;
  import ucnn_pkg::*;
  localparam int unsigned G = GF;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, ev_valid = 0;
  logic signed [ACT_W-1:0] act = '0;
  logic [G-1:0] flush = '0;
  logic signed [SUM_W-1:0] req_sum [G];
  longint model [G];
  int checks = 0, failures = 0;

  ucnn_group_accum dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int g = 0; g < G; g++) model[g] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      clear = ($urandom_range(199) == 0);
      ev_valid = !clear && ($urandom_range(9) != 0);
      act = ACT_W'($urandom_range(255));
      if ($urandom_range(3) == 0) act = -act;
      flush = '0;
      for (int g = 0; g < G; g++)
        if ((g > 0 && flush[g-1]) || $urandom_range(3) == 0) flush[g] = 1'b1;
      if (g_last_force(t)) flush[G-1] = 1'b1;
      #1;
      if (clear) begin
        for (int g = 0; g < G; g++) model[g] = 0;
      end else if (ev_valid) begin
        for (int g = 0; g < G; g++) begin
          model[g] += longint'(act);
          if (flush[g]) begin
            checks++;
            if (longint'(req_sum[g]) != model[g]) begin
              failures++;
              if (failures < 10) $display("FAIL: t=%0d filter %0d sum %0d expected %0d", t, g, req_sum[g], model[g]);
            end
            model[g] = 0;
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit g_last_force(int t);
    return (t % 17) == 0;
  endfunction
endmodule
