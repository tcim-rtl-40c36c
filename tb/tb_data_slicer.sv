// tb_data_slicer: slices the row and column of the paper's slicing example with |S| = 4
// (row i -> valid slices {0,3,5}, column j -> {2,3,5}), then random 16-bit-slice vectors; the
// emitted indexes, data, entry numbers and per-vector start/count are compared with lists
// computed in the testbench.
module tb_data_slicer;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // 4-bit instance for the worked example
  logic        clear, iv, ifirst, ilast;
  logic [3:0]  iw;
  logic        ov, vd;
  logic [31:0] oidx, oent, vstart, vcount;
  logic [3:0]  od;
  data_slicer #(.WIDTH(4)) dut (.clk, .rst_n, .clear, .in_valid(iv), .in_first(ifirst),
    .in_last(ilast), .in_word(iw), .out_valid(ov), .out_idx(oidx), .out_data(od),
    .out_entry(oent), .vec_done(vd), .vec_start(vstart), .vec_count(vcount));

  int          exp_idx[$], exp_ent[$];
  logic [3:0]  exp_dat[$];
  int          exp_start[$], exp_cnt[$];
  int          entry = 0;

  always @(posedge clk) if (rst_n) begin
    if (ov) begin
      checks++;
      if (exp_idx.size() == 0) begin failures++; $display("FAIL unexpected slice"); end
      else begin
        automatic int ei = exp_idx.pop_front(), ee = exp_ent.pop_front();
        automatic logic [3:0] ed = exp_dat.pop_front();
        if (int'(oidx) != ei || od != ed || int'(oent) != ee) begin
          failures++; $display("FAIL slice idx %0d/%0d data %h/%h", oidx, ei, od, ed);
        end
      end
    end
    if (vd) begin
      checks++;
      if (exp_start.size() == 0) begin failures++; $display("FAIL unexpected vec_done"); end
      else begin
        automatic int es = exp_start.pop_front(), ec = exp_cnt.pop_front();
        if (int'(vstart) != es || int'(vcount) != ec) begin
          failures++; $display("FAIL vec start %0d/%0d count %0d/%0d", vstart, es, vcount, ec);
        end
      end
    end
  end

  // elements listed left to right as printed; element b of a slice goes to bit b
  task automatic send_vec(input string elems);
    int ns = elems.len() / 4, c = 0, st = entry;
    for (int k = 0; k < ns; k++) begin
      logic [3:0] w;
      for (int b = 0; b < 4; b++) w[b] = (elems[4*k+b] == "1");
      if (w != 0) begin exp_idx.push_back(k); exp_dat.push_back(w); exp_ent.push_back(entry);
                        entry++; c++; end
      @(negedge clk);
      iv = 1; ifirst = (k == 0); ilast = (k == ns-1); iw = w;
    end
    exp_start.push_back(st); exp_cnt.push_back(c);
    @(negedge clk); iv = 0; ifirst = 0; ilast = 0;
  endtask

  initial begin
    clear = 0; iv = 0; ifirst = 0; ilast = 0; iw = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    send_vec("001000000000010000000010");   // row i of the example: {0,3,5}
    send_vec("000000000100110000000001");   // column j: {2,3,5}
    repeat (3) @(negedge clk);
    checks++;
    if (exp_idx.size() != 0 || exp_start.size() != 0) begin failures++; $display("FAIL left"); end
    for (int v = 0; v < 40; v++) begin
      automatic string s = "";
      automatic int n = 1 + $urandom_range(12);
      for (int e = 0; e < 4*n; e++) s = {s, ($urandom_range(9) == 0) ? "1" : "0"};
      send_vec(s);
    end
    repeat (3) @(negedge clk);
    checks++;
    if (exp_idx.size() != 0 || exp_start.size() != 0) begin failures++; $display("FAIL left"); end
    // clear restarts entry numbering
    @(negedge clk); clear = 1; @(negedge clk); clear = 0; entry = 0;
    send_vec("00000001");
    repeat (3) @(negedge clk);
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
