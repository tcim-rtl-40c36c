// tb_mram_mat: writes random slices into a small mat, then checks READ (single-row activation)
// and AND (two-row activation) results in the local data buffer, the bit count, and the
// latencies (done 1 cycle after a write, 2 after READ/AND). Expected values come from a copy
// of the written data kept in the testbench.
module tb_mram_mat;
  import tcim_pkg::*;
  localparam int ROWS = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mat_cmd_e    cmd;
  logic [2:0]  ra, rb;
  logic [63:0] wdata, ldb;
  logic [6:0]  count;
  logic        done;
  logic [63:0] model [ROWS];

  mram_mat #(.ROWS(ROWS), .WIDTH(64)) dut (.clk, .rst_n, .cmd, .row_a(ra), .row_b(rb), .wdata,
                                           .ldb, .count, .done);

  task automatic issue(input mat_cmd_e c, input int a, input int b, input logic [63:0] d,
                       input int exp_lat);
    int lat;
    @(negedge clk); cmd = c; ra = 3'(a); rb = 3'(b); wdata = d;
    @(negedge clk); cmd = MAT_NOP;
    lat = 1;
    while (!done && lat < 10) begin @(negedge clk); lat++; end
    checks++;
    if (lat != exp_lat) begin failures++; $display("FAIL latency %0d exp %0d", lat, exp_lat); end
  endtask

  initial begin
    cmd = MAT_NOP; ra = '0; rb = '0; wdata = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      model[r] = {$urandom, $urandom};
      issue(MAT_WRITE, r, 0, model[r], 1);
    end
    for (int t = 0; t < 200; t++) begin
      automatic int a = $urandom_range(ROWS-1), b = $urandom_range(ROWS-1);
      logic [63:0] e;
      if (t % 3 == 0) begin
        issue(MAT_READ, a, b, '0, 2); e = model[a];
      end else begin
        issue(MAT_AND, a, b, '0, 2); e = model[a] & model[b];
      end
      checks += 2;
      if (ldb !== e) begin failures++; $display("FAIL ldb=%h exp=%h", ldb, e); end
      if (count !== 7'($countones(e))) begin failures++; $display("FAIL count"); end
      if (t % 17 == 0) begin
        model[a] = {$urandom, $urandom};
        issue(MAT_WRITE, a, 0, model[a], 1);
      end
    end
    // paper's step-2 example in the low 4 bits: R0=0110 AND C2=1100 -> 0100, count 1
    model[1] = 64'h6; model[2] = 64'h3;
    issue(MAT_WRITE, 1, 0, model[1], 1);
    issue(MAT_WRITE, 2, 0, model[2], 1);
    issue(MAT_AND, 1, 2, '0, 2);
    checks++;
    if (count !== 7'd1 || ldb !== 64'h2) begin failures++; $display("FAIL example"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
