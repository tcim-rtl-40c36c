// tb_mtj_sense_amp: two cell models on one bit line feed the sense-amplifier model. For all
// four stored combinations it checks the READ of each cell (single-row activation, READ
// reference) and the AND of both (two-row activation, parallel resistance, AND reference).
module tb_mtj_sense_amp;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wl_i, wl_j, wr_en, wr_val, st_i, st_j, sen, and_mode, q, q_n;
  real  r_i, r_j, r_bl;
  mtj_bitcell cell_i (.wl(wl_i), .wr_en, .wr_val, .r_cell(r_i), .state(st_i));
  mtj_bitcell cell_j (.wl(wl_j), .wr_en, .wr_val, .r_cell(r_j), .state(st_j));
  mtj_sense_amp dut (.sen, .and_mode, .r_bl, .q, .q_n);

  // cells in parallel between bit line and source line
  assign r_bl = (r_i * r_j) / (r_i + r_j);

  task automatic sense(input bit i_on, input bit j_on, input bit am);
    wl_i = i_on; wl_j = j_on; and_mode = am; #1 sen = 1; #1 sen = 0; wl_i = 0; wl_j = 0; #1;
  endtask
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    wl_i = 0; wl_j = 0; wr_en = 0; wr_val = 0; sen = 0; and_mode = 0; #1;
    for (int c = 0; c < 4; c++) begin
      automatic bit a = c[1], b = c[0];
      wl_i = 1; wr_val = a; #1 wr_en = 1; #1 wr_en = 0; wl_i = 0;
      wl_j = 1; wr_val = b; #1 wr_en = 1; #1 wr_en = 0; wl_j = 0; #1;
      sense(1, 0, 0); chk(q == a && q_n == !a, $sformatf("READ i (%0d%0d)", a, b));
      sense(0, 1, 0); chk(q == b, $sformatf("READ j (%0d%0d)", a, b));
      sense(1, 1, 1); chk(q == (a & b), $sformatf("AND (%0d%0d)", a, b));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
