// Unit test of the banked input buffer. A full tile (R_T+V_W-1 columns,
// S_T rows, C_T channels) is written with random activations, then random
// (r, s, c, row_base) reads are made. Lane v of the vector is column r+v, so
// bank (r+v) mod V must return model[r+v][(s+row_base) mod S_T][c]; this
// checks that the V lanes never collide on a bank. Single rows are then
// rewritten, as a slide does, and the reads repeated.
module tb_ucnn_input_buffer;
  import ucnn_pkg::*;
  localparam int unsigned V = VW, RT = R_T, ST = S_T, CT = C_T;
  localparam int unsigned NCOL = RT + V - 1;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0;
  logic [$clog2(NCOL)-1:0] wr_col = '0;
  logic [$clog2(ST)-1:0] wr_row = '0, row_base = '0, rd_s = '0;
  logic [$clog2(CT)-1:0] wr_c = '0, rd_c = '0;
  logic [$clog2(RT)-1:0] rd_r = '0;
  logic signed [ACT_W-1:0] wr_data = '0;
  logic signed [ACT_W-1:0] bank_data [V];
  int model [NCOL][ST][CT];
  int checks = 0, failures = 0;

  ucnn_input_buffer dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int col, int row, int c);
    @(negedge clk);
    wr_en = 1; wr_col = col[$clog2(NCOL)-1:0]; wr_row = row[$clog2(ST)-1:0];
    wr_c = c[$clog2(CT)-1:0]; wr_data = ACT_W'($urandom);
    model[col][row][c] = int'(wr_data);
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic reads(int n);
    for (int t = 0; t < n; t++) begin
      int r, s, c, rb;
      r = $urandom_range(RT - 1); s = $urandom_range(ST - 1);
      c = $urandom_range(CT - 1); rb = $urandom_range(ST - 1);
      rd_r = r[$clog2(RT)-1:0]; rd_s = s[$clog2(ST)-1:0];
      rd_c = c[$clog2(CT)-1:0]; row_base = rb[$clog2(ST)-1:0];
      #1;
      for (int v = 0; v < V; v++) begin
        int e;
        e = model[r + v][(s + rb) % ST][c];
        checks++;
        if (int'(bank_data[(r + v) % V]) != e) begin
          failures++;
          if (failures < 10) $display("FAIL: r=%0d s=%0d c=%0d base=%0d lane %0d got %0d expected %0d",
                                      r, s, c, rb, v, bank_data[(r + v) % V], e);
        end
      end
    end
  endtask

  initial begin
    for (int col = 0; col < NCOL; col++)
      for (int row = 0; row < ST; row++)
        for (int c = 0; c < CT; c++) wr(col, row, c);
    reads(500);
    for (int k = 0; k < 3; k++) begin
      int row;
      row = $urandom_range(ST - 1);
      for (int col = 0; col < NCOL; col++)
        for (int c = 0; c < CT; c++) wr(col, row, c);
      reads(200);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
