// tcim_top: triangle-counting accelerator built on a computational STT-MRAM array.
//
// Blocks (as in the paper's architecture figure):
//   data_slicer - cuts adjacency-matrix rows/columns into |S|-bit slices and emits the valid
//                 ones (index + data). Its input and output are ports: the compressed graph it
//                 produces is stored in main memory by the host, which is outside this design.
//   tcim_ctrl   - the controller: walks the edges, intersects valid slice indexes, manages
//                 data reuse and exchange, issues AND + BitCount and accumulates the count.
//   data_buffer - valid slice indexes of the current row, storage status of the array.
//   lru_list    - least-recently-used replacement of column slices.
//   pim_array   - the computational STT-MRAM: BANKS x MATS mats of ROWS x |S| bits, each mat
//                 with AND-capable sense amplifiers and its own bit counter.
// Main memory (holding the compressed graph) is external and reached through the mem_* read
// port. With the defaults the array is 8 x 16 x 16384 x 64 bits = 16 MB, the paper's array
// size, and |S| = 64, the paper's slice size; the bank/mat/row split is this design's choice.
// One row per mat is reserved as the operand row for row slices, the other ROWS-1 rows hold
// column slices, giving BANKS*MATS*(ROWS-1) slots.
//
// The array's READ output (pim_rdata) is wired but unused: the controller only needs AND +
// BitCount results, so the lint tool reports it as an unused signal.
//
// Timing: see tcim_ctrl. start pulses while idle; done pulses when tc_count is final.
module tcim_top
  import tcim_pkg::*;
#(
  parameter int unsigned WIDTH     = SLICE_W_DEF,
  parameter int unsigned BANKS     = 8,
  parameter int unsigned MATS      = 16,
  parameter int unsigned ROWS      = 16384,
  parameter int unsigned ROW_DEPTH = 65536,
  parameter int unsigned ID_W      = 25,
  localparam int unsigned NUM_MATS = BANKS * MATS,
  localparam int unsigned SLOTS    = NUM_MATS * (ROWS - 1),
  localparam int unsigned BW       = (BANKS > 1) ? $clog2(BANKS) : 1,
  localparam int unsigned MW       = (MATS > 1) ? $clog2(MATS) : 1,
  localparam int unsigned RW       = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned NMW      = (NUM_MATS > 1) ? $clog2(NUM_MATS) : 1,
  localparam int unsigned SW       = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned RBW      = (ROW_DEPTH > 1) ? $clog2(ROW_DEPTH) : 1,
  localparam int unsigned CW       = $clog2(WIDTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // data slicing (host side)
  input  logic              sl_clear,
  input  logic              sl_in_valid,
  input  logic              sl_in_first,
  input  logic              sl_in_last,
  input  logic [WIDTH-1:0]  sl_in_word,
  output logic              sl_out_valid,
  output logic [31:0]       sl_out_idx,
  output logic [WIDTH-1:0]  sl_out_data,
  output logic [31:0]       sl_out_entry,
  output logic              sl_vec_done,
  output logic [31:0]       sl_vec_start,
  output logic [31:0]       sl_vec_count,
  // counting
  input  logic              start,
  input  logic [31:0]       cfg_num_v,
  input  logic [31:0]       cfg_row_ptr_base,
  input  logic [31:0]       cfg_col_ptr_base,
  input  logic [31:0]       cfg_idx_base,
  input  logic [31:0]       cfg_data_base,
  output logic              busy,
  output logic              done,
  output logic              error,
  output logic [63:0]       tc_count,
  output logic [31:0]       n_edges,
  output logic [31:0]       n_pairs,
  output logic [31:0]       n_skips,
  output logic [31:0]       n_hits,
  output logic [31:0]       n_misses,
  output logic [31:0]       n_exchanges,
  output logic [31:0]       n_row_writes,
  // main memory read port
  output logic              mem_req,
  output logic [31:0]       mem_addr,
  input  logic              mem_rvalid,
  input  logic [63:0]       mem_rdata
);

  data_slicer #(.WIDTH(WIDTH)) u_slicer (
    .clk, .rst_n, .clear(sl_clear), .in_valid(sl_in_valid), .in_first(sl_in_first),
    .in_last(sl_in_last), .in_word(sl_in_word), .out_valid(sl_out_valid), .out_idx(sl_out_idx),
    .out_data(sl_out_data), .out_entry(sl_out_entry), .vec_done(sl_vec_done),
    .vec_start(sl_vec_start), .vec_count(sl_vec_count)
  );

  logic              clear;
  logic              rb_we;
  logic [RBW-1:0]    rb_waddr, rb_raddr;
  logic [31:0]       rb_widx, rb_ridx;
  logic [WIDTH-1:0]  rb_wdata, rb_rdata;
  logic [ID_W-1:0]   st_id, st_wid, op_id;
  logic              st_hit, st_we, op_hit, op_we;
  logic [SW-1:0]     st_slot, st_wslot;
  logic [NMW-1:0]    op_mat;
  logic              lru_req, lru_ready, lru_done, lru_evicted;
  lru_op_e           lru_op;
  logic [SW-1:0]     lru_slot, lru_slot_out;
  logic [SW:0]       lru_used;
  mat_cmd_e          pim_cmd;
  logic [BW-1:0]     pim_bank;
  logic [MW-1:0]     pim_mat;
  logic [RW-1:0]     pim_row_a, pim_row_b;
  logic [WIDTH-1:0]  pim_wdata, pim_rdata;
  logic              pim_done;
  logic [CW-1:0]     pim_count;

  tcim_ctrl #(
    .WIDTH(WIDTH), .BANKS(BANKS), .MATS(MATS), .ROWS(ROWS), .ROW_DEPTH(ROW_DEPTH), .ID_W(ID_W)
  ) u_ctrl (
    .clk, .rst_n, .start, .cfg_num_v, .cfg_row_ptr_base, .cfg_col_ptr_base, .cfg_idx_base,
    .cfg_data_base, .busy, .done, .clear, .error, .tc_count, .n_edges, .n_pairs, .n_skips, .n_hits,
    .n_misses, .n_exchanges, .n_row_writes, .mem_req, .mem_addr, .mem_rvalid, .mem_rdata,
    .rb_we, .rb_waddr, .rb_widx, .rb_wdata, .rb_raddr, .rb_ridx, .rb_rdata,
    .st_id, .st_hit, .st_slot, .st_we, .st_wid, .st_wslot, .op_mat, .op_id, .op_hit, .op_we,
    .lru_req, .lru_op, .lru_slot, .lru_done, .lru_slot_out, .lru_evicted,
    .pim_cmd, .pim_bank, .pim_mat, .pim_row_a, .pim_row_b, .pim_wdata, .pim_done, .pim_count
  );

  data_buffer #(
    .WIDTH(WIDTH), .ROW_DEPTH(ROW_DEPTH), .ID_W(ID_W), .SLOTS(SLOTS), .NUM_MATS(NUM_MATS)
  ) u_dbuf (
    .clk, .rst_n, .clear, .rb_we, .rb_waddr, .rb_widx, .rb_wdata, .rb_raddr, .rb_ridx, .rb_rdata,
    .st_id, .st_used(lru_used), .st_hit, .st_slot, .st_we, .st_wid, .st_wslot,
    .op_mat, .op_id, .op_hit, .op_we
  );

  lru_list #(.SLOTS(SLOTS)) u_lru (
    .clk, .rst_n, .clear, .req(lru_req), .op(lru_op), .slot_in(lru_slot), .ready(lru_ready),
    .done(lru_done), .slot_out(lru_slot_out), .evicted(lru_evicted), .used(lru_used)
  );

  pim_array #(.BANKS(BANKS), .MATS(MATS), .ROWS(ROWS), .WIDTH(WIDTH)) u_pim (
    .clk, .rst_n, .cmd(pim_cmd), .bank_sel(pim_bank), .mat_sel(pim_mat), .row_a(pim_row_a),
    .row_b(pim_row_b), .wdata(pim_wdata), .rdata(pim_rdata), .count(pim_count), .done(pim_done)
  );

  // The controller only issues LRU requests when the unit is idle.
  a_lru_ready: assert property (@(posedge clk) disable iff (!rst_n) lru_req |-> lru_ready);

endmodule
