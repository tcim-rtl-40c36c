// graph_mem_model: behavioural main memory for the accelerator testbenches.
//
// 64-bit words, word addresses. A read request (req with addr) is answered once, after a
// random latency of 1 to MAX_LAT cycles, with rvalid and rdata; one request at a time.
// Addresses beyond DEPTH read as zero. The testbench fills mem directly.
module graph_mem_model #(
  parameter int DEPTH   = 4096,
  parameter int MAX_LAT = 4
) (
  input  logic        clk,
  input  logic        req,
  input  logic [31:0] addr,
  output logic        rvalid,
  output logic [63:0] rdata
);
  logic [63:0] mem [DEPTH];
  int          wait_cnt = -1;
  logic [31:0] addr_q;
  int          n_reads = 0;

  initial begin rvalid = 0; rdata = 0; end

  always @(posedge clk) begin
    rvalid <= 1'b0;
    if (req) begin
      addr_q   <= addr;
      wait_cnt <= $urandom_range(MAX_LAT - 1);
      n_reads  <= n_reads + 1;
    end else if (wait_cnt == 0) begin
      rvalid   <= 1'b1;
      rdata    <= (addr_q < 32'(DEPTH)) ? mem[addr_q] : 64'd0;
      wait_cnt <= -1;
    end else if (wait_cnt > 0) wait_cnt <= wait_cnt - 1;
  end
endmodule
