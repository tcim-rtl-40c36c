// tb_mtj_bitcell: writes P and AP into the cell model and checks the resistance it presents
// (625 ohm for P, 1250 ohm for AP from the MTJ parameters, a very high value with the word
// line off) and that a write pulse with the word line off leaves the state alone.
module tb_mtj_bitcell;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wl, wr_en, wr_val, state;
  real  r;
  mtj_bitcell dut (.wl, .wr_en, .wr_val, .r_cell(r), .state);

  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s (r=%f)", m, r); end
  endtask
  task automatic wr(input bit w, input bit v);
    wl = w; wr_val = v; #1 wr_en = 1; #1 wr_en = 0; #1 wl = 0; #1;
  endtask

  initial begin
    wl = 0; wr_en = 0; wr_val = 0; #1;
    for (int t = 0; t < 20; t++) begin
      automatic bit v = 1'($urandom);
      wr(1, v);
      chk(state == v, "state after write");
      wl = 1; #1;
      chk(v ? (r > 624.0 && r < 626.0) : (r > 1249.0 && r < 1251.0), "resistance");
      wl = 0; #1;
      chk(r > 1.0e9, "word line off");
      wr(0, !v);
      chk(state == v, "write with word line off");
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
