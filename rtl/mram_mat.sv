// mram_mat: one computational STT-MRAM mat (cell array plus its modified periphery).
//
// A mat stores ROWS words of WIDTH bits; one word holds one |S|-bit graph slice, so a slice
// spans all bit lines of the mat and one sense amplifier (SA) serves each bit line. Following
// the paper, the periphery is modified for in-memory logic:
//   * column driver  - writes a slice into the row selected by row_a (MAT_WRITE);
//   * row driver     - multi-row activation: MAT_AND turns on the word lines of row_a and row_b
//                      together, MAT_READ turns on row_a alone;
//   * SA (READ/AND)  - with the READ reference the SA returns the single activated cell; with the
//                      AND reference, placed between R(P,P) and R(P,AP), it returns 1 only when
//                      both activated cells are in the low-resistance state, i.e. the AND;
//   * local data buffer - registers the SA outputs;
//   * bit counter    - counts the ones of the local data buffer.
// Here the SA is modelled at logic level (cell value 1 = parallel, low resistance); the
// resistive behaviour is in the separate mtj_bitcell / mtj_sense_amp models.
//
// Timing: a command is accepted in any cycle (one at a time). MAT_WRITE completes with done=1
// one cycle later. MAT_READ / MAT_AND: the SA result is in ldb one cycle later, count one cycle
// after that, when done=1 (latency 2). The paper gives no cycle timing; these latencies are
// this design's choice. Cell contents are not reset (non-volatile array; unwritten rows are
// never read by the controller).
module mram_mat
  import tcim_pkg::*;
#(
  parameter int unsigned ROWS  = 16384,
  parameter int unsigned WIDTH = SLICE_W_DEF,
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW   = $clog2(WIDTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  mat_cmd_e          cmd,
  input  logic [RW-1:0]     row_a,
  input  logic [RW-1:0]     row_b,
  input  logic [WIDTH-1:0]  wdata,
  output logic [WIDTH-1:0]  ldb,      // local data buffer (SA outputs)
  output logic [CW-1:0]     count,    // BitCount of ldb
  output logic              done
);

  logic [WIDTH-1:0] cells [ROWS];

  // Row driver: word lines of the activated rows (multi-row activation for AND).
  logic [WIDTH-1:0] bl_a, bl_b;
  logic             and_ref;
  assign bl_a    = cells[row_a];
  assign bl_b    = cells[row_b];
  assign and_ref = (cmd == MAT_AND);

  // Sense amplifiers: per bit line, READ reference -> cell of row_a; AND reference -> both P.
  logic [WIDTH-1:0] sa_out;
  assign sa_out = and_ref ? (bl_a & bl_b) : bl_a;

  logic [CW-1:0] cnt_c;
  bit_counter #(.WIDTH(WIDTH)) u_bc (.vec(ldb), .count(cnt_c));

  logic sensed_q;

  // Column driver: write the operand slice.
  always_ff @(posedge clk) begin
    if (cmd == MAT_WRITE) cells[row_a] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ldb      <= '0;
      count    <= '0;
      sensed_q <= 1'b0;
      done     <= 1'b0;
    end else begin
      sensed_q <= (cmd == MAT_READ) || (cmd == MAT_AND);
      if ((cmd == MAT_READ) || (cmd == MAT_AND)) ldb <= sa_out;
      if (sensed_q) count <= cnt_c;
      done <= sensed_q || (cmd == MAT_WRITE);
    end
  end

  // A new command may not be issued while a sensing operation is still in flight.
  a_one_op: assert property (@(posedge clk) disable iff (!rst_n)
                             sensed_q |-> cmd == MAT_NOP);

endmodule
