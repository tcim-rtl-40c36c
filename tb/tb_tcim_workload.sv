// tb_tcim_workload: the accelerator at its default size on a graph of the size of the
// ego-facebook social network (4,039 vertices, 88,234 edges, the smallest graph in the
// evaluation). The real edge list is not part of this testbench, so a graph of the same
// vertex and edge count is generated: most edges join vertices less than WINDOW apart, which
// gives the clustered, sparse slice pattern of a social graph, and the rest join random
// vertices. The graph goes through the accelerator's data slicer into a behavioural main
// memory and is counted.
//
// The references are computed from the edge list, not from slices. Triangles come from a
// neighbour-list intersection (for each edge (i,j), the neighbours k of i with k < j that are
// also joined to j). Pairs are the (edge, slice index) combinations where row i and column j
// both have a 1 in that slice. Because the 16 MB array holds every column slice of this
// graph, misses must equal the number of distinct column slices used, and nothing is
// exchanged. The share of valid slices is printed next to the 7.017 % reported for the real
// graph.
module tb_tcim_workload;
  localparam int WIDTH = 64;
  localparam int NV = 4039, NE = 88234, WINDOW = 256, LOCAL_PCT = 95;
  localparam int NS = (NV + WIDTH - 1) / WIDTH;
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

  tcim_top dut (
    .clk, .rst_n, .sl_clear, .sl_in_valid, .sl_in_first, .sl_in_last, .sl_in_word,
    .sl_out_valid, .sl_out_idx, .sl_out_data, .sl_out_entry, .sl_vec_done, .sl_vec_start,
    .sl_vec_count, .start, .cfg_num_v, .cfg_row_ptr_base(cfg_row), .cfg_col_ptr_base(cfg_col),
    .cfg_idx_base(cfg_idx), .cfg_data_base(cfg_dat), .busy, .done, .error, .tc_count(tc),
    .n_edges, .n_pairs, .n_skips, .n_hits, .n_misses, .n_exchanges(n_exch),
    .n_row_writes(n_roww), .mem_req, .mem_addr, .mem_rvalid, .mem_rdata);

  graph_mem_model #(.DEPTH(2 * NV + 4 * NV * NS), .MAX_LAT(4)) u_mem (.clk, .req(mem_req),
    .addr(mem_addr), .rvalid(mem_rvalid), .rdata(mem_rdata));

  // host side: store the slicer output in main memory
  int ptr_addr_q[$];
  int n_valid = 0;
  always @(posedge clk) begin
    if (sl_out_valid) begin
      u_mem.mem[cfg_idx + sl_out_entry] = 64'(sl_out_idx);
      u_mem.mem[cfg_dat + sl_out_entry] = 64'(sl_out_data);
      n_valid++;
    end
    if (sl_vec_done) begin
      automatic int pa = ptr_addr_q.pop_front();
      u_mem.mem[pa] = {sl_vec_count, sl_vec_start};
    end
  end

  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  // rw[i*NS+k]: bits of row i in slice k; cl[j*NS+k]: bits of column j in slice k
  longint unsigned rw[NV*NS], cl[NV*NS];
  int ea[NE], eb[NE];
  int nb[NV][$];

  function automatic bit has_edge(int a, int b);
    return rw[a*NS + b/WIDTH][b%WIDTH];
  endfunction

  initial begin
    automatic longint e_tc = 0;
    automatic int e_p = 0, e_miss = 0, cyc = 0, ne = 0;
    automatic bit used_cs[];
    sl_clear = 0; sl_in_valid = 0; sl_in_first = 0; sl_in_last = 0; sl_in_word = 0;
    start = 0; cfg_num_v = 0; cfg_row = 0; cfg_col = 0; cfg_idx = 0; cfg_dat = 0;
    foreach (rw[x]) begin rw[x] = 0; cl[x] = 0; end

    // graph of NV vertices and NE distinct edges a < b
    while (ne < NE) begin
      automatic int a = $urandom_range(NV - 2);
      automatic int b = ($urandom_range(99) < LOCAL_PCT)
                        ? a + 1 + $urandom_range(WINDOW - 1) : $urandom_range(NV - 1);
      if (b < NV && b > a && !has_edge(a, b)) begin
        rw[a*NS + b/WIDTH][b%WIDTH] = 1'b1;
        cl[b*NS + a/WIDTH][a%WIDTH] = 1'b1;
        ea[ne] = a; eb[ne] = b; nb[a].push_back(b);
        ne++;
      end
    end

    // references
    used_cs = new[NV*NS];
    for (int e = 0; e < NE; e++) begin
      for (int x = 0; x < nb[ea[e]].size(); x++)
        if (nb[ea[e]][x] < eb[e] && has_edge(nb[ea[e]][x], eb[e])) e_tc++;
      for (int k = 0; k < NS; k++)
        if (rw[ea[e]*NS + k] != 0 && cl[eb[e]*NS + k] != 0) begin
          e_p++;
          if (!used_cs[eb[e]*NS + k]) begin used_cs[eb[e]*NS + k] = 1'b1; e_miss++; end
        end
    end

    repeat (3) @(negedge clk); rst_n = 1;

    // slice and store: rows, then columns
    cfg_num_v = NV; cfg_row = 0; cfg_col = NV; cfg_idx = 2*NV; cfg_dat = 2*NV + 2*NV*NS;
    @(negedge clk); sl_clear = 1; @(negedge clk); sl_clear = 0;
    for (int r = 0; r < 2; r++)
      for (int v = 0; v < NV; v++) begin
        ptr_addr_q.push_back(r == 0 ? v : NV + v);
        for (int k = 0; k < NS; k++) begin
          sl_in_valid = 1; sl_in_first = (k == 0); sl_in_last = (k == NS - 1);
          sl_in_word = (r == 0) ? rw[v*NS + k] : cl[v*NS + k];
          @(negedge clk);
        end
        sl_in_valid = 0;
      end
    repeat (3) @(negedge clk);

    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cyc++; end

    chk(tc == 64'(e_tc), $sformatf("triangles %0d exp %0d", tc, e_tc));
    chk(n_edges == 32'(NE), $sformatf("edges %0d exp %0d", n_edges, NE));
    chk(int'(n_pairs) == e_p, $sformatf("pairs %0d exp %0d", n_pairs, e_p));
    chk(int'(n_misses) == e_miss, $sformatf("misses %0d exp %0d", n_misses, e_miss));
    chk(n_hits + n_misses == n_pairs, "hits + misses = pairs");
    chk(n_exch == 0, "exchange although every column slice fits");
    chk(!error && !busy, "error or busy after done");
    $display("ego-facebook-sized graph: %0d vertices, %0d edges, valid slices %0d of %0d (%0.3f %%)",
             NV, NE, n_valid, 2*NV*NS, 100.0 * n_valid / (2.0*NV*NS));
    $display("triangles %0d, pairs %0d, hits %0d, misses %0d, exchanges %0d, operand writes %0d, skips %0d, %0d cycles",
             tc, n_pairs, n_hits, n_misses, n_exch, n_roww, n_skips, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
