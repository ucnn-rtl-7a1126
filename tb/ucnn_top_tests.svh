// Shared body of the accelerator end-to-end testbenches. The including module
// declares the clock, reset, DUT ports (names as on ucnn_top), the DRAM model
// instance `dram`, and the localparams P_CFG, ACTW_CFG (L2 half size).
//
// It runs one layer or two chained layers (the second reading the first's
// outputs from the other L2 half), compares every output activation with a
// direct convolution, and checks that each mechanism of the design happened.

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic host_write(bit half, int addr, int data);
    @(negedge clk);
    host_en = 1; host_we = 1; host_half = half; host_addr = addr; host_wdata = 16'(data);
    @(negedge clk);
    host_we = 0; host_en = 0;
  endtask

  task automatic host_read(bit half, int addr, output int data);
    @(negedge clk);
    host_en = 1; host_we = 0; host_half = half; host_addr = addr;
    @(negedge clk);
    data = int'(host_rdata);
    host_en = 0;
  endtask

  task automatic run_layer(ucnn_tb_pkg::layer_gen lg, bit in_half, bit load_input,
                           int unsigned base, output longint cycles);
    longint t0;
    lg.build(base);
    foreach (lg.dram[a]) dram.mem[a] = 16'(lg.dram[a]);
    if (load_input)
      foreach (lg.act[i]) host_write(in_half, i, lg.act[i]);
    @(negedge clk);
    cfg = '{w: 16'(lg.W), h: 16'(lg.H), c: 16'(lg.C), k: 16'(lg.K), r: 4'(lg.R), s: 4'(lg.S),
            u: 9'(lg.U), out_shift: 5'(lg.shift), in_half: in_half, dram_base: base};
    start = 1;
    t0 = cyc;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    cycles = cyc - t0;
    check(!error, "layer rejected");
    for (int i = 0; i < int'(lg.K * lg.ho * lg.wo); i++) begin
      int d;
      host_read(!in_half, i, d);
      check(d == lg.expect_out[i], $sformatf("out[%0d] = %0d, expected %0d", i, d, lg.expect_out[i]));
    end
  endtask

  longint cyc = 0;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n && st_mac_overflow) begin
    failures++;
    $display("FAIL: multiplier queue overflow");
  end

  task automatic mechanism(string name, longint count);
    $display("mechanism %-28s %0d", name, count);
    check(count > 0, {"mechanism never happened: ", name});
  endtask
