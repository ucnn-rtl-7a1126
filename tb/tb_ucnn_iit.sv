// Unit test of the input indirection table memory. Random entries are written
// to every address, read back through the asynchronous read port and compared
// with a copy kept in the testbench; a second pass overwrites half of the
// addresses and checks that the others are unchanged.
module tb_ucnn_iit;
  import ucnn_pkg::*;
  localparam int unsigned DEPTH = IIT_DEPTH;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0;
  logic [$clog2(DEPTH)-1:0] wr_addr = '0, rd_addr = '0;
  iit_entry_t wr_data = '0, rd_data;
  iit_entry_t model [DEPTH];
  int checks = 0, failures = 0;

  ucnn_iit dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int a, iit_entry_t d);
    @(negedge clk);
    wr_en = 1; wr_addr = a[$clog2(DEPTH)-1:0]; wr_data = d; model[a] = d;
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic check_all();
    for (int a = 0; a < DEPTH; a++) begin
      rd_addr = a[$clog2(DEPTH)-1:0];
      #1;
      checks++;
      if (rd_data != model[a]) begin
        failures++;
        if (failures < 10) $display("FAIL: addr %0d read %h expected %h", a, rd_data, model[a]);
      end
    end
  endtask

  initial begin
    for (int a = 0; a < DEPTH; a++) wr(a, iit_entry_t'($urandom));
    check_all();
    for (int a = 0; a < DEPTH; a += 2) wr(a, iit_entry_t'($urandom));
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
