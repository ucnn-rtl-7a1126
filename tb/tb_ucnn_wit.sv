// Unit test of the weight indirection table and its transition decoder.
// Every one of the 2^(G+1) entry codes is written, read back and decoded; the
// expected decode is worked out here from the table format: bit g < G-1
// flags a transition of filter g, the top two bits are the innermost filter's
// pointer advance, a transition of an outer filter implies one of every inner
// filter, and an implied innermost transition advances by at least one.
module tb_ucnn_wit;
  import ucnn_pkg::*;
  localparam int unsigned DEPTH = IIT_DEPTH;
  localparam int unsigned G = GF;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0;
  logic [$clog2(DEPTH)-1:0] wr_addr = '0, rd_addr = '0;
  logic [G:0] wr_data = '0;
  logic [G-1:0] trans, outer;
  logic [1:0] adv_inner;
  int checks = 0, failures = 0;

  ucnn_wit dut (.*);

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

  initial begin
    for (int code = 0; code < (1 << (G + 1)); code++) begin
      int a;
      a = (code * 37 + 5) % DEPTH;
      @(negedge clk);
      wr_en = 1; wr_addr = a[$clog2(DEPTH)-1:0]; wr_data = code[G:0];
      @(negedge clk);
      wr_en = 0; rd_addr = a[$clog2(DEPTH)-1:0];
      #1;
      begin
        bit [G-1:0] et, eo;
        int adv;
        bit any;
        any = 0;
        for (int g = 0; g < G; g++) begin
          eo[g] = any;
          if (g < G - 1) et[g] = any || code[g];
          else           et[g] = any || ((code >> (G - 1)) & 3) != 0;
          any = et[g];
        end
        adv = (code >> (G - 1)) & 3;
        if (adv == 0 && et[G-1]) adv = 1;
        chk(trans == et, $sformatf("code %0d trans %b expected %b", code, trans, et));
        chk(outer == eo, $sformatf("code %0d outer %b expected %b", code, outer, eo));
        chk(int'(adv_inner) == adv, $sformatf("code %0d adv %0d expected %0d", code, adv_inner, adv));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
