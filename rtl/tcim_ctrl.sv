// tcim_ctrl: controller running the in-memory triangle-counting algorithm.
//
// Triangle count = sum over all edges (i,j), i<j, of BitCount(AND(R_i, C_j)), with R_i a row and
// C_j a column of the upper-triangular adjacency matrix: every triangle i<k<j is then found
// exactly once, at edge (i,j) through the common neighbour k. Rows and columns are stored
// compressed as lists of valid |S|-bit slices, and only slice pairs that are valid on both
// sides are computed. The controller walks the graph as follows:
//   1. Row i: read its pointer record, fetch all of its valid slices (index and data) into the
//      row buffer of the data buffer - each row is fetched once.
//   2. Edges of row i are the 1-bits of its slices, taken in ascending order; for edge (i,j)
//      read the pointer record of column j.
//   3. Merge-intersect the sorted slice indexes of R_i (row buffer) and C_j (read one by one):
//      a mismatch skips a slice that is valid on one side only.
//   4. Matching pair (R_iS_k, C_jS_k): look up the storage status. Hit: tell the LRU unit the
//      slot was reused. Miss: ask the LRU unit for a free or least-recently-used slot, fetch the
//      column slice from main memory, write it into that slot, record the new owner.
//   5. The AND needs both operands on the bit lines of one mat. Each mat keeps one operand row
//      (local row 0) for row slices; the row slice is written there only when the mat does not
//      already hold it.
//   6. Activate operand row and column-slice row together (AND), add the mat's bit count.
// Slot s lives in mat s mod NUM_MATS, local row s / NUM_MATS + 1.
//
// Compressed graph in main memory (64-bit words, word addresses): row pointer record of row i
// at cfg_row_ptr_base+i and column record of column j at cfg_col_ptr_base+j, each
// {count[63:32], first_entry[31:0]}; for entry e its slice index at cfg_idx_base+e (bits 31:0)
// and its slice data at cfg_data_base+e (bits WIDTH-1:0, element k*|S|+b in bit b). Entries of
// one vector are consecutive and sorted by slice index. Column slices are identified by their
// entry number, which indexes the storage status.
//
// Main memory port: mem_req pulses with mem_addr; the memory answers some cycles later with one
// mem_rvalid pulse and mem_rdata. One read is outstanding at a time.
// start (pulse, while idle) begins a count; busy is high until done pulses; tc_count and the
// event counters are valid then. error is set if a row has more valid slices than the row
// buffer holds (that row is then skipped). The steps follow the paper's Algorithm 1 and its data
// reuse and exchange rules; the memory layout, the operand-row scheme and the ordering are this
// design's choices. Work is sequential: one memory read, LRU operation or mat command at a time.
module tcim_ctrl
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
  // command / configuration
  input  logic              start,
  input  logic [31:0]       cfg_num_v,
  input  logic [31:0]       cfg_row_ptr_base,
  input  logic [31:0]       cfg_col_ptr_base,
  input  logic [31:0]       cfg_idx_base,
  input  logic [31:0]       cfg_data_base,
  output logic              busy,
  output logic              done,
  output logic              clear,      // one-cycle pulse at start: empty LRU list and tags
  output logic              error,
  output logic [63:0]       tc_count,
  // event counters
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
  input  logic [63:0]       mem_rdata,
  // data buffer
  output logic              rb_we,
  output logic [RBW-1:0]    rb_waddr,
  output logic [31:0]       rb_widx,
  output logic [WIDTH-1:0]  rb_wdata,
  output logic [RBW-1:0]    rb_raddr,
  input  logic [31:0]       rb_ridx,
  input  logic [WIDTH-1:0]  rb_rdata,
  output logic [ID_W-1:0]   st_id,
  input  logic              st_hit,
  input  logic [SW-1:0]     st_slot,
  output logic              st_we,
  output logic [ID_W-1:0]   st_wid,
  output logic [SW-1:0]     st_wslot,
  output logic [NMW-1:0]    op_mat,
  output logic [ID_W-1:0]   op_id,
  input  logic              op_hit,
  output logic              op_we,
  // LRU unit
  output logic              lru_req,
  output lru_op_e           lru_op,
  output logic [SW-1:0]     lru_slot,
  input  logic              lru_done,
  input  logic [SW-1:0]     lru_slot_out,
  input  logic              lru_evicted,
  // computational STT-MRAM
  output mat_cmd_e          pim_cmd,
  output logic [BW-1:0]     pim_bank,
  output logic [MW-1:0]     pim_mat,
  output logic [RW-1:0]     pim_row_a,
  output logic [RW-1:0]     pim_row_b,
  output logic [WIDTH-1:0]  pim_wdata,
  input  logic              pim_done,
  input  logic [CW-1:0]     pim_count
);

  typedef enum logic [4:0] {
    S_IDLE, S_ROW_PTR, S_ROW_PTR_R, S_ROW_IDX, S_ROW_IDX_R, S_ROW_STORE,
    S_EDGE_LOAD, S_EDGE_SCAN, S_COL_PTR, S_COL_PTR_R, S_COL_IDX, S_CMP,
    S_LOOKUP, S_LRU_WAIT, S_FETCH, S_CWRITE, S_OPCHK, S_AND, S_ACC,
    S_NEXT_ROW, S_DONE, S_MWAIT, S_PWAIT
  } state_e;

  state_e state, ret;

  logic [31:0]      i_q, rs_q, rc_q, p_q, ep_q, ebase_q, j_q, cs_q, cc_q, p1_q, q_q, ridx_q;
  logic [63:0]      mdata_q;
  logic [WIDTH-1:0] bits_q;
  logic [SW-1:0]    slot_q;
  logic             miss_q;

  // slot -> (bank, mat, local row)
  logic [NMW-1:0] slot_mat;
  logic [RW-1:0]  slot_row;
  assign slot_mat = NMW'(32'(slot_q) % NUM_MATS);
  assign slot_row = RW'(32'(slot_q) / NUM_MATS + 1);

  // lowest set bit of the current row slice = next edge
  logic [$clog2(WIDTH)-1:0] ffs;
  always_comb begin
    ffs = '0;
    for (int b = int'(WIDTH) - 1; b >= 0; b--) if (bits_q[b]) ffs = b[$clog2(WIDTH)-1:0];
  end

  // data buffer combinational controls
  assign rb_we    = (state == S_ROW_STORE);
  assign rb_waddr = RBW'(p_q);
  assign rb_widx  = ridx_q;
  assign rb_wdata = mdata_q[WIDTH-1:0];
  assign rb_raddr = (state == S_EDGE_LOAD) ? RBW'(ep_q) : RBW'(p1_q);
  assign st_id    = ID_W'(cs_q + q_q);
  assign st_we    = (state == S_CWRITE);
  assign st_wid   = ID_W'(cs_q + q_q);
  assign st_wslot = slot_q;
  assign op_mat   = slot_mat;
  assign op_id    = ID_W'(rs_q + p1_q);
  assign op_we    = (state == S_OPCHK) && !op_hit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; ret <= S_IDLE;
      busy <= 1'b0; done <= 1'b0; clear <= 1'b0; error <= 1'b0; tc_count <= '0;
      n_edges <= '0; n_pairs <= '0; n_skips <= '0; n_hits <= '0; n_misses <= '0;
      n_exchanges <= '0; n_row_writes <= '0;
      mem_req <= 1'b0; mem_addr <= '0;
      lru_req <= 1'b0; lru_op <= LRU_TOUCH; lru_slot <= '0;
      pim_cmd <= MAT_NOP; pim_bank <= '0; pim_mat <= '0; pim_row_a <= '0; pim_row_b <= '0;
      pim_wdata <= '0;
      i_q <= '0; rs_q <= '0; rc_q <= '0; p_q <= '0; ep_q <= '0; ebase_q <= '0; j_q <= '0;
      cs_q <= '0; cc_q <= '0; p1_q <= '0; q_q <= '0; ridx_q <= '0; mdata_q <= '0;
      bits_q <= '0; slot_q <= '0; miss_q <= 1'b0;
    end else begin
      done    <= 1'b0;
      clear   <= 1'b0;
      mem_req <= 1'b0;
      lru_req <= 1'b0;
      pim_cmd <= MAT_NOP;
      unique case (state)
        S_IDLE: if (start) begin
          busy <= 1'b1; clear <= 1'b1; error <= 1'b0; tc_count <= '0; i_q <= '0;
          n_edges <= '0; n_pairs <= '0; n_skips <= '0; n_hits <= '0; n_misses <= '0;
          n_exchanges <= '0; n_row_writes <= '0;
          state <= S_ROW_PTR;
        end
        // ---- step 1: fetch row i into the row buffer
        S_ROW_PTR: begin
          if (i_q == cfg_num_v) state <= S_DONE;
          else begin
            mem_req <= 1'b1; mem_addr <= cfg_row_ptr_base + i_q;
            ret <= S_ROW_PTR_R; state <= S_MWAIT;
          end
        end
        S_ROW_PTR_R: begin
          rs_q <= mdata_q[31:0];
          rc_q <= mdata_q[63:32];
          p_q  <= '0;
          if (mdata_q[63:32] == '0) state <= S_NEXT_ROW;
          else if (mdata_q[63:32] > ROW_DEPTH) begin
            error <= 1'b1; state <= S_NEXT_ROW;
          end else state <= S_ROW_IDX;
        end
        S_ROW_IDX: begin
          mem_req <= 1'b1; mem_addr <= cfg_idx_base + rs_q + p_q;
          ret <= S_ROW_IDX_R; state <= S_MWAIT;
        end
        S_ROW_IDX_R: begin
          ridx_q  <= mdata_q[31:0];
          mem_req <= 1'b1; mem_addr <= cfg_data_base + rs_q + p_q;
          ret <= S_ROW_STORE; state <= S_MWAIT;
        end
        S_ROW_STORE: begin   // rb_we is high in this state
          p_q <= p_q + 1;
          if (p_q + 1 == rc_q) begin ep_q <= '0; state <= S_EDGE_LOAD; end
          else state <= S_ROW_IDX;
        end
        // ---- step 2: edges = 1-bits of the row slices
        S_EDGE_LOAD: begin
          bits_q  <= rb_rdata;
          ebase_q <= rb_ridx * WIDTH;
          state   <= S_EDGE_SCAN;
        end
        S_EDGE_SCAN: begin
          if (bits_q == '0) begin
            if (ep_q + 1 == rc_q) state <= S_NEXT_ROW;
            else begin ep_q <= ep_q + 1; state <= S_EDGE_LOAD; end
          end else begin
            j_q          <= ebase_q + 32'(ffs);
            bits_q[ffs]  <= 1'b0;
            n_edges      <= n_edges + 1;
            state        <= S_COL_PTR;
          end
        end
        S_COL_PTR: begin
          mem_req <= 1'b1; mem_addr <= cfg_col_ptr_base + j_q;
          ret <= S_COL_PTR_R; state <= S_MWAIT;
        end
        S_COL_PTR_R: begin
          cs_q <= mdata_q[31:0]; cc_q <= mdata_q[63:32];
          p1_q <= '0; q_q <= '0;
          state <= S_COL_IDX;
        end
        // ---- step 3: intersect the valid slice indexes
        S_COL_IDX: begin
          if (p1_q == rc_q || q_q == cc_q) state <= S_EDGE_SCAN;
          else begin
            mem_req <= 1'b1; mem_addr <= cfg_idx_base + cs_q + q_q;
            ret <= S_CMP; state <= S_MWAIT;
          end
        end
        S_CMP: begin         // mdata_q[31:0] holds the column slice index
          if (rb_ridx == mdata_q[31:0]) state <= S_LOOKUP;
          else if (rb_ridx < mdata_q[31:0]) begin
            n_skips <= n_skips + 1;
            p1_q    <= p1_q + 1;
            if (p1_q + 1 == rc_q) state <= S_EDGE_SCAN;
          end else begin
            n_skips <= n_skips + 1;
            q_q     <= q_q + 1;
            state   <= S_COL_IDX;
          end
        end
        // ---- step 4: storage status, data reuse and exchange
        S_LOOKUP: begin
          lru_req <= 1'b1;
          if (st_hit) begin
            n_hits <= n_hits + 1; miss_q <= 1'b0;
            lru_op <= LRU_TOUCH; lru_slot <= st_slot;
          end else begin
            n_misses <= n_misses + 1; miss_q <= 1'b1;
            lru_op <= LRU_ALLOC;
          end
          state <= S_LRU_WAIT;
        end
        S_LRU_WAIT: if (lru_done) begin
          slot_q <= lru_slot_out;
          if (miss_q) begin
            if (lru_evicted) n_exchanges <= n_exchanges + 1;
            state <= S_FETCH;
          end else state <= S_OPCHK;
        end
        S_FETCH: begin
          mem_req <= 1'b1; mem_addr <= cfg_data_base + cs_q + q_q;
          ret <= S_CWRITE; state <= S_MWAIT;
        end
        S_CWRITE: begin      // st_we is high in this state
          pim_cmd   <= MAT_WRITE;
          pim_bank  <= BW'(slot_mat / MATS);
          pim_mat   <= MW'(slot_mat % MATS);
          pim_row_a <= slot_row;
          pim_wdata <= mdata_q[WIDTH-1:0];
          ret <= S_OPCHK; state <= S_PWAIT;
        end
        // ---- step 5: row slice into the operand row of the mat
        S_OPCHK: begin       // op_we is high here when the operand row must be rewritten
          if (op_hit) state <= S_AND;
          else begin
            n_row_writes <= n_row_writes + 1;
            pim_cmd   <= MAT_WRITE;
            pim_bank  <= BW'(slot_mat / MATS);
            pim_mat   <= MW'(slot_mat % MATS);
            pim_row_a <= '0;
            pim_wdata <= rb_rdata;
            ret <= S_AND; state <= S_PWAIT;
          end
        end
        // ---- step 6: AND + BitCount in the mat
        S_AND: begin
          pim_cmd   <= MAT_AND;
          pim_bank  <= BW'(slot_mat / MATS);
          pim_mat   <= MW'(slot_mat % MATS);
          pim_row_a <= '0;
          pim_row_b <= slot_row;
          ret <= S_ACC; state <= S_PWAIT;
        end
        S_ACC: begin
          tc_count <= tc_count + 64'(mdata_q[CW-1:0]);
          n_pairs  <= n_pairs + 1;
          p1_q     <= p1_q + 1;
          q_q      <= q_q + 1;
          state    <= S_COL_IDX;
        end
        S_NEXT_ROW: begin
          i_q   <= i_q + 1;
          state <= S_ROW_PTR;
        end
        S_DONE: begin
          busy  <= 1'b0;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        S_MWAIT: if (mem_rvalid) begin
          mdata_q <= mem_rdata;
          state   <= ret;
        end
        S_PWAIT: if (pim_done) begin
          mdata_q <= 64'(pim_count);
          state   <= ret;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  initial begin
    if (WIDTH > 64) $error("slice width above the 64-bit memory word is not supported");
  end

  a_mem_one_outstanding: assert property (@(posedge clk) disable iff (!rst_n)
                                          mem_req |-> state == S_MWAIT);

endmodule
