// tb_tcim_ctrl: the controller driving the real data buffer, LRU unit and a small PIM array
// (1 bank x 2 mats x 3 rows = 4 column-slice slots, |S| = 4) against a behavioural main memory.
// First the paper's 4-vertex example (edges 0-1, 0-2, 1-2, 1-3, 2-3): 2 triangles, 5 edges,
// 5 slice pairs, columns C1, C2, C3 loaded once (3 misses) and reused twice (2 hits). Then
// random graphs: triangle count, edges and pairs against tb_graph_pkg references, with
// hits + misses = pairs, and slot exchanges (evictions) must occur.
module tb_tcim_ctrl;
  import tcim_pkg::*;
  import tb_graph_pkg::*;
  localparam int WIDTH = 4, BANKS = 1, MATS = 2, ROWS = 3, ROW_DEPTH = 8, ID_W = 10;
  localparam int NUM_MATS = BANKS*MATS, SLOTS = NUM_MATS*(ROWS-1);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, clear, error;
  logic [31:0] cfg_num_v, cfg_row, cfg_col, cfg_idx, cfg_dat;
  logic [63:0] tc;
  logic [31:0] n_edges, n_pairs, n_skips, n_hits, n_misses, n_exch, n_roww;
  logic mem_req, mem_rvalid; logic [31:0] mem_addr; logic [63:0] mem_rdata;
  logic rb_we; logic [2:0] rb_waddr, rb_raddr; logic [31:0] rb_widx, rb_ridx;
  logic [3:0] rb_wdata, rb_rdata;
  logic [9:0] st_id, st_wid, op_id; logic st_hit, st_we, op_hit, op_we;
  logic [1:0] st_slot, st_wslot, lru_slot, lru_slot_out; logic [2:0] lru_used;
  logic op_mat;
  logic lru_req, lru_ready, lru_done, lru_evicted; lru_op_e lru_op;
  mat_cmd_e pim_cmd; logic pim_bank, pim_mat; logic [1:0] pim_row_a, pim_row_b;
  logic [3:0] pim_wdata, pim_rdata; logic pim_done; logic [2:0] pim_count;

  tcim_ctrl #(.WIDTH(WIDTH), .BANKS(BANKS), .MATS(MATS), .ROWS(ROWS), .ROW_DEPTH(ROW_DEPTH),
              .ID_W(ID_W)) dut (
    .clk, .rst_n, .start, .cfg_num_v, .cfg_row_ptr_base(cfg_row), .cfg_col_ptr_base(cfg_col),
    .cfg_idx_base(cfg_idx), .cfg_data_base(cfg_dat), .busy, .done, .clear, .error,
    .tc_count(tc), .n_edges, .n_pairs, .n_skips, .n_hits, .n_misses, .n_exchanges(n_exch),
    .n_row_writes(n_roww), .mem_req, .mem_addr, .mem_rvalid, .mem_rdata,
    .rb_we, .rb_waddr, .rb_widx, .rb_wdata, .rb_raddr, .rb_ridx, .rb_rdata,
    .st_id, .st_hit, .st_slot, .st_we, .st_wid, .st_wslot, .op_mat, .op_id, .op_hit, .op_we,
    .lru_req, .lru_op, .lru_slot, .lru_done, .lru_slot_out, .lru_evicted,
    .pim_cmd, .pim_bank, .pim_mat, .pim_row_a, .pim_row_b, .pim_wdata, .pim_done, .pim_count);

  data_buffer #(.WIDTH(WIDTH), .ROW_DEPTH(ROW_DEPTH), .ID_W(ID_W), .SLOTS(SLOTS),
                .NUM_MATS(NUM_MATS)) u_dbuf (
    .clk, .rst_n, .clear, .rb_we, .rb_waddr, .rb_widx, .rb_wdata, .rb_raddr, .rb_ridx, .rb_rdata,
    .st_id, .st_used(lru_used), .st_hit, .st_slot, .st_we, .st_wid, .st_wslot,
    .op_mat, .op_id, .op_hit, .op_we);

  lru_list #(.SLOTS(SLOTS)) u_lru (.clk, .rst_n, .clear, .req(lru_req), .op(lru_op),
    .slot_in(lru_slot), .ready(lru_ready), .done(lru_done), .slot_out(lru_slot_out),
    .evicted(lru_evicted), .used(lru_used));

  pim_array #(.BANKS(BANKS), .MATS(MATS), .ROWS(ROWS), .WIDTH(WIDTH)) u_pim (
    .clk, .rst_n, .cmd(pim_cmd), .bank_sel(pim_bank), .mat_sel(pim_mat), .row_a(pim_row_a),
    .row_b(pim_row_b), .wdata(pim_wdata), .rdata(pim_rdata), .count(pim_count), .done(pim_done));

  graph_mem_model #(.DEPTH(8192), .MAX_LAT(3)) u_mem (.clk, .req(mem_req), .addr(mem_addr),
    .rvalid(mem_rvalid), .rdata(mem_rdata));

  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic run(ref bit adj[], input int n);
    longint unsigned img[];
    layout_t l = build_image(adj, n, WIDTH, img);
    foreach (img[a]) u_mem.mem[a] = img[a];
    cfg_num_v = n; cfg_row = l.row_base; cfg_col = l.col_base;
    cfg_idx = l.idx_base; cfg_dat = l.data_base;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
  endtask

  int total_exch = 0;

  initial begin
    bit adj[];
    start = 0; cfg_num_v = 0; cfg_row = 0; cfg_col = 0; cfg_idx = 0; cfg_dat = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    // worked example
    adj = new[16];
    adj[0*4+1] = 1; adj[0*4+2] = 1; adj[1*4+2] = 1; adj[1*4+3] = 1; adj[2*4+3] = 1;
    run(adj, 4);
    chk(tc == 2, $sformatf("example tc=%0d", tc));
    chk(n_edges == 5 && n_pairs == 5, "example edges/pairs");
    chk(n_misses == 3 && n_hits == 2 && n_exch == 0, $sformatf("example miss %0d hit %0d",
        n_misses, n_hits));
    chk(!error, "example error");
    // random graphs
    for (int g = 0; g < 6; g++) begin
      automatic int n = 16 + 3*g;
      automatic longint e_tc; automatic int e_p, e_e;
      random_graph(adj, n, 30);
      e_tc = ref_tc(adj, n, WIDTH, ROW_DEPTH);
      e_p  = ref_pairs(adj, n, WIDTH, ROW_DEPTH);
      e_e  = ref_edges(adj, n, WIDTH, ROW_DEPTH);
      run(adj, n);
      chk(tc == 64'(e_tc), $sformatf("graph %0d tc %0d exp %0d", g, tc, e_tc));
      chk(int'(n_pairs) == e_p, $sformatf("graph %0d pairs %0d exp %0d", g, n_pairs, e_p));
      chk(int'(n_edges) == e_e, $sformatf("graph %0d edges %0d exp %0d", g, n_edges, e_e));
      chk(n_hits + n_misses == n_pairs, "hits+misses");
      total_exch += int'(n_exch);
    end
    chk(total_exch > 0, "no exchange exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
