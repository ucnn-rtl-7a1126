// Unit test of the registered multicast bus. Random words with random
// destination masks are sent; one cycle later each PE port must carry the
// word, marked valid only where its destination bit was set. The count of
// words that went to more than one PE is compared with a model.
module tb_ucnn_multicast_bus;
  import ucnn_pkg::*;
  localparam int unsigned P = NUM_PE;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  l1_wr_t in = '0;
  logic [P-1:0] dest = '0;
  l1_wr_t out [P];
  logic [31:0] n_multicast;
  int checks = 0, failures = 0, n_model = 0;

  ucnn_multicast_bus dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      l1_wr_t w;
      logic [P-1:0] d;
      w = l1_wr_t'({$urandom, $urandom});
      w.valid = ($urandom_range(3) != 0);
      case ($urandom_range(2))
        0: d = P'(1) << $urandom_range(P - 1);
        1: d = '1;
        default: d = P'({$urandom, $urandom});
      endcase
      in = w; dest = d;
      if (w.valid && $countones(d) > 1) n_model++;
      @(negedge clk);
      for (int p = 0; p < P; p++) begin
        checks++;
        if (out[p].valid != (w.valid && d[p]) ||
            (out[p].valid && (out[p].sel != w.sel || out[p].addr != w.addr || out[p].data != w.data))) begin
          failures++;
          if (failures < 10) $display("FAIL: t=%0d port %0d", t, p);
        end
      end
      checks++;
      if (int'(n_multicast) != n_model) begin
        failures++;
        if (failures < 10) $display("FAIL: multicast count %0d expected %0d", n_multicast, n_model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
