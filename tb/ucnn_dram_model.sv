// ucnn_dram_model: behavioural model of the off-chip DRAM (test only).
//
// A word-addressed memory answering one read at a time: a request is
// accepted when no read is pending, and its data comes back LATENCY cycles
// later on rsp_valid/rsp_data. Testbenches fill `mem` directly.
module ucnn_dram_model #(
  parameter int unsigned WORDS   = 1 << 20,
  parameter int unsigned LATENCY = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  input  logic [31:0] req_addr,
  output logic        req_ready,
  output logic        rsp_valid,
  output logic [15:0] rsp_data
);

  logic [15:0] mem [WORDS];
  logic        pending;
  int unsigned wait_cnt;
  logic [31:0] addr_q;
  int unsigned reads;

  assign req_ready = !pending;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending   <= 1'b0;
      rsp_valid <= 1'b0;
      rsp_data  <= '0;
      wait_cnt  <= 0;
      addr_q    <= '0;
      reads     <= 0;
    end else begin
      rsp_valid <= 1'b0;
      if (!pending && req_valid) begin
        pending  <= 1'b1;
        addr_q   <= req_addr;
        wait_cnt <= LATENCY;
      end else if (pending) begin
        if (wait_cnt <= 1) begin
          pending   <= 1'b0;
          rsp_valid <= 1'b1;
          rsp_data  <= mem[addr_q % WORDS];
          reads     <= reads + 1;
        end else wait_cnt <= wait_cnt - 1;
      end
    end
  end

endmodule
