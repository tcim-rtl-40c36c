// tb_lru_list: drives random TOUCH / ALLOC operations into a 5-slot LRU unit and compares
// every returned slot and eviction flag with a reference recency list kept in the testbench
// (a queue, front = most recently used). Also checks that free slots are handed out first, in
// order (also after clear), and that each operation finishes within 4 cycles.
module tb_lru_list;
  import tcim_pkg::*;
  localparam int SLOTS = 5;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       clear, req, ready, done, evicted;
  lru_op_e    op;
  logic [2:0] slot_in, slot_out;
  logic [3:0] used;
  int         order[$];   // front = MRU
  int         n_evict = 0;

  lru_list #(.SLOTS(SLOTS)) dut (.clk, .rst_n, .clear, .req, .op, .slot_in, .ready, .done,
                                 .slot_out, .evicted, .used);

  task automatic do_op(input lru_op_e o, input int s);
    int lat = 0, exp_slot; bit exp_ev;
    // reference model
    if (o == LRU_ALLOC) begin
      if (order.size() < SLOTS) begin exp_slot = order.size(); exp_ev = 0; end
      else begin exp_slot = order[$]; exp_ev = 1; void'(order.pop_back()); end
    end else begin
      exp_slot = s; exp_ev = 0;
      foreach (order[k]) if (order[k] == s) begin order.delete(k); break; end
    end
    order.push_front(exp_slot);
    @(negedge clk);
    while (!ready) @(negedge clk);
    req = 1; op = o; slot_in = 3'(s);
    @(negedge clk); req = 0;
    while (!done && lat < 10) begin @(negedge clk); lat++; end
    checks += 3;
    if (lat > 3) begin failures++; $display("FAIL slow op %0d", lat); end
    if (int'(slot_out) != exp_slot) begin
      failures++; $display("FAIL op %0d slot %0d exp %0d", o, slot_out, exp_slot);
    end
    if (o == LRU_ALLOC && evicted != exp_ev) begin failures++; $display("FAIL evicted"); end
    if (exp_ev) n_evict++;
  endtask

  initial begin
    clear = 0; req = 0; op = LRU_TOUCH; slot_in = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      if (t == 300) begin   // clear empties the list: allocation restarts at slot 0
        @(negedge clk); clear = 1; @(negedge clk); clear = 0;
        order.delete();
        checks++;
        if (used != 0) begin failures++; $display("FAIL used after clear"); end
      end
      if (order.size() == 0 || $urandom_range(2) == 0) do_op(LRU_ALLOC, 0);
      else do_op(LRU_TOUCH, order[$urandom_range(order.size()-1)]);
    end
    checks += 2;
    if (int'(used) != SLOTS) begin failures++; $display("FAIL used=%0d", used); end
    if (n_evict == 0) begin failures++; $display("FAIL no eviction exercised"); end
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
