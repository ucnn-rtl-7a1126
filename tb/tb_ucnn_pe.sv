// tb_ucnn_pe: self-checking testbench of the UCNN processing element.
//
// 1. The activation-group-reuse example with G = 2, weights a, b and eight
//    inputs x..n: its input table (2 6 5 1 4 7 3 0) and the two weight
//    tables are loaded as given, and both filters' results are checked for
//    all four vector lanes, together with the multiply count (6).
// 2. Random layers: U = 17 canonical weights (zero last), random densities,
//    tables built by ucnn_tb_pkg::table_builder, two output rows (the second
//    loads one new input row: slide reuse) and two channel tiles (the second
//    accumulates onto the first). Every partial sum and every ReLU output
//    is compared with a direct dot product. Skip entries, chunk flushes,
//    zero-weight multiply skips and multiplier stalls must all occur.
// 3. Walk rate: a row takes at most entries + stalls + QDEPTH + 4 cycles.
module tb_ucnn_pe;
  import ucnn_pkg::*;
  import ucnn_tb_pkg::*;

  localparam int unsigned V = VW, G = GF, U = NUM_U;
  localparam int unsigned NCOL = R_T + V - 1;
  localparam int unsigned NPOS = R_T * S_T * C_T;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  l1_wr_t l1_wr;
  logic start, start_first, busy, done;
  logic [$clog2(H_MAX)-1:0] start_h, rd_h;
  logic [$clog2(V)-1:0] rd_v;
  logic [0:0] rd_g;
  logic [4:0] out_shift;
  logic [ACT_W-1:0] rd_act;
  logic signed [PSUM_W-1:0] rd_psum;
  logic [31:0] n_stall, n_skip, n_chunk, n_zero_skip, n_mul;
  logic mac_overflow;

  ucnn_pe dut (.*);

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle++;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && mac_overflow) begin
    failures++; $display("multiplier queue overflow");
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(l1_sel_e sel, int addr, int data);
    @(negedge clk);
    l1_wr = '{valid: 1'b1, sel: sel, addr: 16'(addr), data: 16'(data)};
    @(negedge clk);
    l1_wr.valid = 1'b0;
  endtask

  task automatic wr_in(int col, int prow, int c, int data);
    wr(L1_INBUF, (col << (S_W + C_W)) | (prow << C_W) | c, data);
  endtask

  task automatic run_row(int h, bit first, output int cycles);
    int t0;
    @(negedge clk);
    start = 1; start_h = 6'(h); start_first = first;
    t0 = cycle;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    cycles = cycle - t0;
  endtask

  // ---------------- test 1: the G = 2 worked example ----------------
  task automatic example();
    int iit[8]  = '{2, 6, 5, 1, 4, 7, 3, 0};
    int wit1[8] = '{0, 0, 0, 0, 1, 0, 0, 1};
    int wit2[8] = '{0, 1, 0, 0, 1, 1, 0, 1};
    int a = 3, b = -5;
    int act[4][8];
    int mul0, cyc;
    wr(L1_WBUF, 0, a);
    wr(L1_WBUF, 1, b);
    for (int i = 0; i < 8; i++) begin
      iit_entry_t e;
      logic [15:0] w;
      e = '{last: (i == 7), skip: 1'b0, r: '0, s: '0, c: C_W'(iit[i])};
      w = '0;
      w[IIT_W-1:0] = e;
      w[IIT_W] = wit1[i][0];
      w[IIT_W+1] = wit2[i][0];
      wr(L1_TABLE, i, w);
    end
    // lane v reads column v (r = 0); channel c holds input x,y,z,k,h,l,m,n
    for (int v = 0; v < 4; v++)
      for (int c = 0; c < 8; c++) begin
        act[v][c] = 10 * v + c + 1;
        wr_in(v, 0, c, act[v][c]);
      end
    mul0 = n_mul;
    run_row(0, 1, cyc);
    check(n_mul - mul0 == 6, $sformatf("example multiplies %0d != 6", n_mul - mul0));
    for (int v = 0; v < 4; v++) begin
      // x=0 y=1 z=2 k=3 h=4 l=5 m=6 n=7
      int x = act[v][0], y = act[v][1], z = act[v][2], k = act[v][3];
      int hh = act[v][4], l = act[v][5], m = act[v][6], n = act[v][7];
      int e1 = a * (z + m + l + y + hh) + b * (n + k + x);
      int e2 = a * (z + m) + b * (l + y + hh) + a * n + b * (k + x);
      rd_h = 0; rd_v = 2'(v);
      rd_g = 0; #1;
      check(rd_psum == PSUM_W'(e1), $sformatf("example k1 lane %0d: %0d != %0d", v, rd_psum, e1));
      rd_g = 1; #1;
      check(rd_psum == PSUM_W'(e2), $sformatf("example k2 lane %0d: %0d != %0d", v, rd_psum, e2));
    end
  endtask

  // ---------------- test 2: random layers ----------------
  int img [2][C_T][S_T+1][NCOL];   // [tile][c][image row][col]
  int wv  [U];
  longint expect_ps [2][V][G];     // [h][v][g]

  task automatic random_layer(int density_pct, int seed_mix);
    table_builder tbld [2];
    int cyc, nent;
    for (int i = 0; i < int'(U) - 1; i++) wv[i] = (i % 2 ? -1 : 1) * (i / 2 + 1);
    wv[U-1] = 0;
    for (int i = 0; i < int'(U); i++) wr(L1_WBUF, i, wv[i]);
    foreach (expect_ps[h, v, g]) expect_ps[h][v][g] = 0;
    for (int t = 0; t < 2; t++) begin
      tbld[t] = new(G, U);
      for (int g = 0; g < int'(G); g++)
        for (int p = 0; p < int'(NPOS); p++)
          tbld[t].widx[g][p] = (($urandom % 100) < density_pct) ? ($urandom % (U - 1)) : U - 1;
      tbld[t].build();
      foreach (img[t][c, y, x]) img[t][c][y][x] = ($urandom % 64) - 8;
    end
    for (int t = 0; t < 2; t++) begin
      nent = tbld[t].words.size();
      for (int i = 0; i < nent; i++) wr(L1_TABLE, i, tbld[t].words[i]);
      for (int h = 0; h < 2; h++) begin
        int st0;
        int ys[$];
        if (h == 0) ys = '{0, 1, 2}; else ys = '{3};
        foreach (ys[i])
          for (int c = 0; c < int'(C_T); c++)
            for (int x = 0; x < int'(NCOL); x++)
              wr_in(x, ys[i] % S_T, c, img[t][c][ys[i]][x]);
        for (int v = 0; v < int'(V); v++)
          for (int g = 0; g < int'(G); g++)
            for (int p = 0; p < int'(NPOS); p++) begin
              int r = p / (S_T * C_T), s = (p / C_T) % S_T, c = p % C_T;
              expect_ps[h][v][g] += longint'(wv[tbld[t].widx[g][p]]) * img[t][c][h + s][r + v];
            end
        st0 = n_stall;
        run_row(h, t == 0, cyc);
        check(cyc <= nent + (n_stall - st0) + 4 + 4 && cyc >= nent,
              $sformatf("row cycles %0d for %0d entries, %0d stalls", cyc, nent, n_stall - st0));
      end
    end
    out_shift = 0;
    for (int h = 0; h < 2; h++)
      for (int v = 0; v < int'(V); v++)
        for (int g = 0; g < int'(G); g++) begin
          longint e = expect_ps[h][v][g];
          logic [ACT_W-1:0] ea;
          rd_h = 6'(h); rd_v = 2'(v); rd_g = 1'(g); #1;
          check(rd_psum == PSUM_W'(e), $sformatf("psum h%0d v%0d g%0d: %0d != %0d", h, v, g, rd_psum, e));
          ea = (e < 0) ? '0 : (e > 32767) ? 16'h7fff : 16'(e);
          check(rd_act == ea, $sformatf("relu h%0d v%0d g%0d", h, v, g));
        end
  endtask

  initial begin
    l1_wr = '0; start = 0; start_h = '0; start_first = 0;
    rd_h = '0; rd_v = '0; rd_g = '0; out_shift = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    example();
    random_layer(90, 1);
    random_layer(50, 2);
    random_layer(15, 3);
    random_layer(100, 4);
    $display("stalls=%0d skips=%0d chunks=%0d zero_skips=%0d muls=%0d",
             n_stall, n_skip, n_chunk, n_zero_skip, n_mul);
    check(n_stall > 0,     "no multiplier stall happened");
    check(n_skip > 0,      "no skip entry happened");
    check(n_chunk > 0,     "no activation-group chunk flush happened");
    check(n_zero_skip > 0, "no zero-weight multiply was skipped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
