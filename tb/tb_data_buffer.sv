// tb_data_buffer: row buffer write/read-back, storage status (miss before load, hit after,
// miss again once another slice takes over the slot, no hit for slots beyond the used count)
// and per-mat operand-row tags (also after clear), all against values kept in the testbench.
module tb_data_buffer;
  localparam int ROW_DEPTH = 16, ID_W = 6, SLOTS = 8, NUM_MATS = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        clear, rb_we;
  logic [3:0]  rb_waddr, rb_raddr;
  logic [31:0] rb_widx, rb_ridx;
  logic [7:0]  rb_wdata, rb_rdata;
  logic [5:0]  st_id, st_wid, op_id;
  logic [3:0]  st_used;
  logic        st_hit, st_we, op_hit, op_we;
  logic [2:0]  st_slot, st_wslot;
  logic [1:0]  op_mat;

  data_buffer #(.WIDTH(8), .ROW_DEPTH(ROW_DEPTH), .ID_W(ID_W), .SLOTS(SLOTS),
                .NUM_MATS(NUM_MATS)) dut (.*);

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  int slot_of_id [64];   // -1 = not resident
  int owner [SLOTS];

  initial begin
    logic [31:0] ix [ROW_DEPTH]; logic [7:0] dx [ROW_DEPTH];
    clear = 0; rb_we = 0; st_we = 0; op_we = 0; rb_waddr = 0; rb_raddr = 0; rb_widx = 0; rb_wdata = 0;
    st_id = 0; st_wid = 0; st_wslot = 0; op_id = 0; op_mat = 0; st_used = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // row buffer
    for (int a = 0; a < ROW_DEPTH; a++) begin
      ix[a] = $urandom; dx[a] = 8'($urandom);
      rb_we = 1; rb_waddr = 4'(a); rb_widx = ix[a]; rb_wdata = dx[a];
      @(negedge clk);
    end
    rb_we = 0;
    for (int a = ROW_DEPTH-1; a >= 0; a--) begin
      rb_raddr = 4'(a); #1;
      chk(rb_ridx == ix[a] && rb_rdata == dx[a], "row buffer");
    end
    // storage status: sequential allocation with random replacement, as the controller does
    foreach (slot_of_id[k]) slot_of_id[k] = -1;
    for (int t = 0; t < 300; t++) begin
      automatic int id = $urandom_range(63);
      @(negedge clk); st_id = 6'(id); #1;
      chk(st_hit == (slot_of_id[id] >= 0), $sformatf("hit id %0d", id));
      if (st_hit) chk(int'(st_slot) == slot_of_id[id], "slot");
      if (!st_hit) begin
        int s;
        if (int'(st_used) < SLOTS) begin s = st_used; st_used++; end
        else begin s = $urandom_range(SLOTS-1); slot_of_id[owner[s]] = -1; end
        owner[s] = id; slot_of_id[id] = s;
        st_we = 1; st_wid = 6'(id); st_wslot = 3'(s);
        @(negedge clk); st_we = 0;
      end
    end
    // operand row tags: invalid after reset, then follow the last write per mat
    op_mat = 2; op_id = 0; #1; chk(!op_hit, "operand tag valid after reset");
    for (int m = 0; m < NUM_MATS; m++) begin
      op_mat = 2'(m); op_id = 6'(10 + m); op_we = 1; @(negedge clk);
    end
    op_we = 0;
    for (int m = 0; m < NUM_MATS; m++) begin
      op_mat = 2'(m); op_id = 6'(10 + m); #1; chk(op_hit, "operand tag hit");
      op_id = 6'(11 + m); #1; chk(!op_hit, "operand tag mismatch");
    end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int m = 0; m < NUM_MATS; m++) begin
      op_mat = 2'(m); op_id = 6'(10 + m); #1; chk(!op_hit, "operand tag after clear");
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
