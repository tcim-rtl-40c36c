// tb_tcim_top: end-to-end test of the accelerator at reduced size (|S| = 8, 2 banks x 2 mats x
// 4 rows = 12 column-slice slots, row buffer of 4 slices).
// For each graph the dense upper-triangular adjacency rows and columns are streamed through
// the accelerator's data slicer; its output (slice indexes, slice data, pointer records) is
// stored in a behavioural main memory, and the count is then started. Triangle count, edge
// and pair counts are compared with references computed directly from the adjacency matrix.
// Several graphs run back to back without reset. The test counts how often each mechanism
// occurred and fails if one never did: slice reuse (hit), load into a free slot, exchange of
// the least recently used slice, operand-row write, operand-row reuse, skipping a slice valid
// on one side only, and skipping a row that overflows the row buffer (error flag).
module tb_tcim_top;
  import tb_graph_pkg::*;
  localparam int WIDTH = 8, BANKS = 2, MATS = 2, ROWS = 4, ROW_DEPTH = 4, ID_W = 12;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sl_clear, sl_in_valid, sl_in_first, sl_in_last, sl_out_valid, sl_vec_done;
  logic [WIDTH-1:0] sl_in_word, sl_out_data;
  logic [31:0] sl_out_idx, sl_out_entry, sl_vec_start, sl_vec_count;
  logic start, busy, done, error;
  logic [31:0] cfg_num_v, cfg_row, cfg_col, cfg_idx, cfg_dat;
  logic [63:0] tc;
  logic [31:0] n_edges, n_pairs, n_skips, n_hits, n_misses, n_exch, n_roww;
  logic mem_req, mem_rvalid; logic [31:0] mem_addr; logic [63:0] mem_rdata;

  tcim_top #(.WIDTH(WIDTH), .BANKS(BANKS), .MATS(MATS), .ROWS(ROWS), .ROW_DEPTH(ROW_DEPTH),
             .ID_W(ID_W)) dut (
    .clk, .rst_n, .sl_clear, .sl_in_valid, .sl_in_first, .sl_in_last, .sl_in_word,
    .sl_out_valid, .sl_out_idx, .sl_out_data, .sl_out_entry, .sl_vec_done, .sl_vec_start,
    .sl_vec_count, .start, .cfg_num_v, .cfg_row_ptr_base(cfg_row), .cfg_col_ptr_base(cfg_col),
    .cfg_idx_base(cfg_idx), .cfg_data_base(cfg_dat), .busy, .done, .error, .tc_count(tc),
    .n_edges, .n_pairs, .n_skips, .n_hits, .n_misses, .n_exchanges(n_exch),
    .n_row_writes(n_roww), .mem_req, .mem_addr, .mem_rvalid, .mem_rdata);

  graph_mem_model #(.DEPTH(16384), .MAX_LAT(4)) u_mem (.clk, .req(mem_req), .addr(mem_addr),
    .rvalid(mem_rvalid), .rdata(mem_rdata));

  // host side: store the slicer output in main memory
  int ptr_addr_q[$];
  always @(posedge clk) begin
    if (sl_out_valid) begin
      u_mem.mem[cfg_idx + sl_out_entry] = 64'(sl_out_idx);
      u_mem.mem[cfg_dat + sl_out_entry] = 64'(sl_out_data);
    end
    if (sl_vec_done) begin
      automatic int pa = ptr_addr_q.pop_front();
      u_mem.mem[pa] = {sl_vec_count, sl_vec_start};
    end
  end

  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic load_graph(ref bit adj[], input int n);
    int ns = (n + WIDTH - 1) / WIDTH;
    cfg_num_v = n; cfg_row = 0; cfg_col = n; cfg_idx = 2*n; cfg_dat = 2*n + 2*n*ns;
    @(negedge clk); sl_clear = 1; @(negedge clk); sl_clear = 0;
    for (int r = 0; r < 2; r++)
      for (int v = 0; v < n; v++) begin
        ptr_addr_q.push_back(r == 0 ? v : n + v);
        for (int k = 0; k < ns; k++) begin
          sl_in_valid = 1; sl_in_first = (k == 0); sl_in_last = (k == ns - 1);
          sl_in_word = WIDTH'(slice_word(adj, n, WIDTH, r == 0, v, k));
          @(negedge clk);
        end
        sl_in_valid = 0;
      end
    repeat (3) @(negedge clk);
  endtask

  int m_hit = 0, m_free = 0, m_exch = 0, m_roww = 0, m_opreuse = 0, m_skip = 0, m_err = 0;

  task automatic run(ref bit adj[], input int n);
    longint e_tc; int e_p, e_e, cyc = 0;
    load_graph(adj, n);
    e_tc = ref_tc(adj, n, WIDTH, ROW_DEPTH);
    e_p  = ref_pairs(adj, n, WIDTH, ROW_DEPTH);
    e_e  = ref_edges(adj, n, WIDTH, ROW_DEPTH);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    chk(tc == 64'(e_tc), $sformatf("n=%0d tc %0d exp %0d", n, tc, e_tc));
    chk(int'(n_pairs) == e_p, $sformatf("n=%0d pairs %0d exp %0d", n, n_pairs, e_p));
    chk(int'(n_edges) == e_e, $sformatf("n=%0d edges %0d exp %0d", n, n_edges, e_e));
    chk(n_hits + n_misses == n_pairs, "hits + misses = pairs");
    chk(!busy, "busy after done");
    $display("graph n=%0d: triangles %0d, edges %0d, pairs %0d, hits %0d, misses %0d, exchanges %0d, operand writes %0d, skips %0d, error %0d, %0d cycles",
             n, tc, n_edges, n_pairs, n_hits, n_misses, n_exch, n_roww, n_skips, error, cyc);
    m_hit += int'(n_hits); m_free += int'(n_misses - n_exch); m_exch += int'(n_exch);
    m_roww += int'(n_roww); m_opreuse += int'(n_pairs - n_roww); m_skip += int'(n_skips);
    m_err += int'(error);
  endtask

  initial begin
    bit adj[];
    sl_clear = 0; sl_in_valid = 0; sl_in_first = 0; sl_in_last = 0; sl_in_word = 0;
    start = 0; cfg_num_v = 0; cfg_row = 0; cfg_col = 0; cfg_idx = 0; cfg_dat = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    // the 4-vertex example: 2 triangles
    adj = new[16];
    adj[0*4+1] = 1; adj[0*4+2] = 1; adj[1*4+2] = 1; adj[1*4+3] = 1; adj[2*4+3] = 1;
    run(adj, 4);
    chk(tc == 2, "example");
    for (int g = 0; g < 5; g++) begin
      random_graph(adj, 20 + 5*g, 12);
      run(adj, 20 + 5*g);
    end
    // a graph with one dense row that overflows the row buffer (6 valid slices > 4)
    random_graph(adj, 48, 6);
    for (int j = 1; j < 48; j++) adj[j] = 1;
    run(adj, 48);
    chk(error == 1'b1, "row-buffer overflow not flagged");
    $display("mechanisms: hits %0d, free-slot loads %0d, exchanges %0d, operand writes %0d, operand reuses %0d, skips %0d, overflow rows %0d",
             m_hit, m_free, m_exch, m_roww, m_opreuse, m_skip, m_err);
    chk(m_hit > 0, "no slice reuse");
    chk(m_free > 0, "no free-slot load");
    chk(m_exch > 0, "no exchange");
    chk(m_roww > 0, "no operand-row write");
    chk(m_opreuse > 0, "no operand-row reuse");
    chk(m_skip > 0, "no one-sided slice skipped");
    chk(m_err > 0, "no row-buffer overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
