// data_buffer: on-chip data buffer of the accelerator.
//
// The paper's data buffer holds two things: the valid slice indexes that steer which slice
// pairs are loaded, and the storage status of the computational STT-MRAM (which slices are
// already resident), used for data reuse and exchange. This module provides:
//   * Row buffer (ROW_DEPTH entries): valid slice index and slice data of the row currently
//     processed. A row is fetched from main memory once and then serves all of its edges. Its
//     depth, 65536, covers ceil(|V|/64) slices for every graph the paper evaluates (largest
//     |V| = 3,997,962 -> 62,469 slices), so no row can overflow it.
//   * Slot status: for every column slice, identified by its entry number in the compressed
//     graph (ID_W bits), the slot it was last loaded to; and for every slot the entry number
//     it holds (owner). A slice is resident (hit) when its recorded slot has been handed out
//     (slot < used) and that slot's owner is the slice itself. Evicting a slice therefore needs
//     no clearing: writing the new owner invalidates the old record, and neither table needs
//     initialising.
//   * Operand row status: for every mat, which row slice (entry number) sits in its operand
//     row, so that a row slice is written to a mat only when it is not already there.
// Reads are combinational (same-cycle); writes take effect at the clock edge. Only the operand
// tags are reset (and cleared by clear); slot records become stale by themselves when the LRU
// unit's used count is cleared. The table organisation is this design's choice; the paper does not describe
// how the status is stored.
module data_buffer
  import tcim_pkg::*;
#(
  parameter int unsigned WIDTH     = SLICE_W_DEF,
  parameter int unsigned ROW_DEPTH = 65536,
  parameter int unsigned ID_W      = 25,
  parameter int unsigned SLOTS     = 2097024,
  parameter int unsigned NUM_MATS  = 128,
  localparam int unsigned RBW      = (ROW_DEPTH > 1) ? $clog2(ROW_DEPTH) : 1,
  localparam int unsigned SW       = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned NMW      = (NUM_MATS > 1) ? $clog2(NUM_MATS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,     // start of a new graph: forget operand-row contents
  // row buffer
  input  logic              rb_we,
  input  logic [RBW-1:0]    rb_waddr,
  input  logic [31:0]       rb_widx,
  input  logic [WIDTH-1:0]  rb_wdata,
  input  logic [RBW-1:0]    rb_raddr,
  output logic [31:0]       rb_ridx,
  output logic [WIDTH-1:0]  rb_rdata,
  // slot status lookup / update
  input  logic [ID_W-1:0]   st_id,
  input  logic [SW:0]       st_used,
  output logic              st_hit,
  output logic [SW-1:0]     st_slot,
  input  logic              st_we,
  input  logic [ID_W-1:0]   st_wid,
  input  logic [SW-1:0]     st_wslot,
  // operand row status
  input  logic [NMW-1:0]    op_mat,
  input  logic [ID_W-1:0]   op_id,
  output logic              op_hit,
  input  logic              op_we
);

  logic [31:0]      rb_idx  [ROW_DEPTH];
  logic [WIDTH-1:0] rb_data [ROW_DEPTH];
  logic [SW-1:0]    slot_of [2**ID_W];
  logic [ID_W-1:0]  owner   [SLOTS];
  logic [ID_W-1:0]  op_tag  [NUM_MATS];
  logic [NUM_MATS-1:0] op_valid;

  always_ff @(posedge clk) begin
    if (rb_we) begin
      rb_idx[rb_waddr]  <= rb_widx;
      rb_data[rb_waddr] <= rb_wdata;
    end
    if (st_we) begin
      slot_of[st_wid] <= st_wslot;
      owner[st_wslot] <= st_wid;
    end
    if (op_we) op_tag[op_mat] <= op_id;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      op_valid <= '0;
    else if (clear)  op_valid <= '0;
    else if (op_we)  op_valid[op_mat] <= 1'b1;
  end

  assign rb_ridx  = rb_idx[rb_raddr];
  assign rb_rdata = rb_data[rb_raddr];

  assign st_slot = slot_of[st_id];
  assign st_hit  = ((SW+1)'(st_slot) < st_used) && (32'(st_slot) < SLOTS) &&
                   (owner[st_slot] == st_id);

  assign op_hit  = op_valid[op_mat] && (op_tag[op_mat] == op_id);

endmodule
