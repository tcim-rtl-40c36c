// tb_pim_array: 2 banks x 2 mats x 8 rows. Random slices are written to every (mat, row);
// READ and AND commands on random mats are checked against a testbench copy of the data
// (the same row number in different banks and mats holds different data, so a wrong mat decode is
// seen), together with the bank latency (done 2 cycles after a write, 3 after READ/AND).
module tb_pim_array;
  import tcim_pkg::*;
  localparam int BANKS = 2, MATS = 2, ROWS = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mat_cmd_e    cmd;
  logic        bs, ms;
  logic [2:0]  ra, rb;
  logic [63:0] wdata, gdata;
  logic [6:0]  gcount;
  logic        done;
  logic [63:0] model [BANKS*MATS][ROWS];

  pim_array #(.BANKS(BANKS), .MATS(MATS), .ROWS(ROWS), .WIDTH(64)) dut (
    .clk, .rst_n, .cmd, .bank_sel(bs), .mat_sel(ms), .row_a(ra), .row_b(rb), .wdata,
    .rdata(gdata), .count(gcount), .done);

  task automatic issue(input mat_cmd_e c, input int m, input int a, input int b,
                       input logic [63:0] d, input int exp_lat);
    int lat;
    @(negedge clk); cmd = c; bs = 1'(m / MATS); ms = 1'(m % MATS); ra = 3'(a); rb = 3'(b); wdata = d;
    @(negedge clk); cmd = MAT_NOP;
    lat = 1;
    while (!done && lat < 10) begin @(negedge clk); lat++; end
    checks++;
    if (lat != exp_lat) begin failures++; $display("FAIL latency %0d exp %0d", lat, exp_lat); end
  endtask

  initial begin
    cmd = MAT_NOP; bs = '0; ms = '0; ra = '0; rb = '0; wdata = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int m = 0; m < BANKS*MATS; m++)
      for (int r = 0; r < ROWS; r++) begin
        model[m][r] = {$urandom, $urandom};
        issue(MAT_WRITE, m, r, 0, model[m][r], 2);
      end
    for (int t = 0; t < 300; t++) begin
      automatic int m = $urandom_range(BANKS*MATS-1), a = $urandom_range(ROWS-1), b = $urandom_range(ROWS-1);
      logic [63:0] e;
      if (t % 4 == 0) begin issue(MAT_READ, m, a, b, '0, 3); e = model[m][a]; end
      else begin issue(MAT_AND, m, a, b, '0, 3); e = model[m][a] & model[m][b]; end
      checks += 2;
      if (gdata !== e) begin failures++; $display("FAIL mat %0d data=%h exp=%h", m, gdata, e); end
      if (gcount !== 7'($countones(e))) begin failures++; $display("FAIL count"); end
    end
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
