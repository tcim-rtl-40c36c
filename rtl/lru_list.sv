// lru_list: data reuse and exchange unit - least-recently-used slot replacement.
//
// The paper keeps column slices resident in the computational array and, when the array is
// full, replaces the least recently used slice. This unit keeps the exact recency order of
// all SLOTS slots as a doubly linked list (prev/next pointer tables, head = most recently
// used, tail = least recently used), so each operation costs a fixed few cycles however large
// the array is. Slots are handed out in order 0, 1, 2, ... while free slots remain (a free
// slot is "spare memory space" in the paper's words); only then is the tail evicted.
//   op = LRU_TOUCH, slot_in : a resident slot was used again, move it to the head.
//   op = LRU_ALLOC          : return a slot in slot_out; evicted=1 if it was the LRU victim,
//                             0 if it was free. The slot becomes the most recently used.
// The linked-list organisation, the fixed allocation order and the handshake are this design's
// choices; the paper specifies only the LRU policy.
//
// Handshake: req is sampled when ready=1; done pulses for one cycle with slot_out / evicted
// valid. Latency: 1 cycle (slot already at the head, or free-slot allocation) or 2-3 cycles
// (unlink, then push to the head). clear (while idle) empties the list. used counts the slots handed out so far (saturates at SLOTS).
module lru_list
  import tcim_pkg::*;
#(
  parameter int unsigned SLOTS = 2097024,
  localparam int unsigned SW   = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,   // forget all slots (start of a new graph); only while ready
  input  logic          req,
  input  lru_op_e       op,
  input  logic [SW-1:0] slot_in,
  output logic          ready,
  output logic          done,
  output logic [SW-1:0] slot_out,
  output logic          evicted,
  output logic [SW:0]   used
);

  typedef enum logic [1:0] {S_IDLE, S_UNLINK, S_PUSH, S_DONE} state_e;
  state_e state;

  logic [SW-1:0] prev_t [SLOTS];
  logic [SW-1:0] next_t [SLOTS];
  logic [SW-1:0] head, tail;
  logic [SW-1:0] cur, cur_prev, cur_next;
  logic          was_empty;

  assign ready = (state == S_IDLE);

  // slot an operation on resident slots works on: the LRU victim or the touched slot
  logic [SW-1:0] pick;
  assign pick = (op == LRU_ALLOC) ? tail : slot_in;

  // pointer tables (not reset: an entry is written before it is read)
  always_ff @(posedge clk) begin
    if (state == S_UNLINK) begin
      next_t[cur_prev] <= cur_next;
      if (cur != tail) prev_t[cur_next] <= cur_prev;
    end
    if (state == S_PUSH) begin
      next_t[cur] <= head;
      if (!was_empty) prev_t[head] <= cur;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      head      <= '0;
      tail      <= '0;
      cur       <= '0;
      cur_prev  <= '0;
      cur_next  <= '0;
      was_empty <= 1'b0;
      used      <= '0;
      done      <= 1'b0;
      slot_out  <= '0;
      evicted   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (clear) begin
          used <= '0;
          head <= '0;
          tail <= '0;
        end else if (req) begin
          if (op == LRU_ALLOC && used < (SW+1)'(SLOTS)) begin
            // free slot: push it at the head
            cur       <= used[SW-1:0];
            was_empty <= (used == '0);
            used      <= used + 1'b1;
            evicted   <= 1'b0;
            state     <= S_PUSH;
          end else begin
            evicted   <= (op == LRU_ALLOC);
            cur       <= pick;
            cur_prev  <= prev_t[pick];
            cur_next  <= next_t[pick];
            was_empty <= 1'b0;
            state     <= (pick == head) ? S_DONE : S_UNLINK;
          end
        end
        S_UNLINK: begin
          if (cur == tail) tail <= cur_prev;
          state <= S_PUSH;
        end
        S_PUSH: begin
          if (was_empty) tail <= cur;
          head  <= cur;
          state <= S_DONE;
        end
        S_DONE: begin
          done     <= 1'b1;
          slot_out <= cur;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_touch_resident: assert property (@(posedge clk) disable iff (!rst_n)
    (req && ready && op == LRU_TOUCH) |-> (SW+1)'(slot_in) < used);

endmodule
