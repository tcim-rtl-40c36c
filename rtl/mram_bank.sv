// mram_bank: one bank of the computational STT-MRAM.
//
// A bank holds MATS mats that share a global row decoder, a column selection line, a small
// bank control block and a global data buffer, as in the bank drawing of the paper's
// architecture figure. The global row decoder turns the mat number into a one-hot mat enable
// and broadcasts the local row addresses; only the enabled mat sees the command, all others
// see MAT_NOP. Every column of the selected mat is selected (a slice fills the mat width), so
// the column selection reduces to routing the full-width write data. The bank control records
// which mat is busy and, when that mat signals done, the global data buffer captures its local
// data buffer and bit count.
//
// Timing: one command at a time. done rises one cycle after the selected mat's done, i.e.
// 2 cycles after MAT_WRITE and 3 cycles after MAT_READ / MAT_AND. The number of mats per bank
// is not given in the paper; 16 is this design's choice (see tcim_top for the 16 MB total).
module mram_bank
  import tcim_pkg::*;
#(
  parameter int unsigned MATS  = 16,
  parameter int unsigned ROWS  = 16384,
  parameter int unsigned WIDTH = SLICE_W_DEF,
  localparam int unsigned MW   = (MATS > 1) ? $clog2(MATS) : 1,
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW   = $clog2(WIDTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  mat_cmd_e          cmd,
  input  logic [MW-1:0]     mat_sel,
  input  logic [RW-1:0]     row_a,
  input  logic [RW-1:0]     row_b,
  input  logic [WIDTH-1:0]  wdata,
  output logic [WIDTH-1:0]  gdb_data,   // global data buffer: sensed slice
  output logic [CW-1:0]     gdb_count,  // global data buffer: bit count
  output logic              done
);

  // Global row decoder: one-hot mat enable.
  logic [MATS-1:0] mat_en;
  always_comb begin
    mat_en = '0;
    if (cmd != MAT_NOP) mat_en[mat_sel] = 1'b1;
  end

  logic [WIDTH-1:0] m_ldb   [MATS];
  logic [CW-1:0]    m_count [MATS];
  logic [MATS-1:0]  m_done;

  for (genvar m = 0; m < MATS; m++) begin : g_mat
    mat_cmd_e m_cmd;
    assign m_cmd = mat_en[m] ? cmd : MAT_NOP;
    mram_mat #(.ROWS(ROWS), .WIDTH(WIDTH)) u_mat (
      .clk, .rst_n, .cmd(m_cmd), .row_a, .row_b, .wdata,
      .ldb(m_ldb[m]), .count(m_count[m]), .done(m_done[m])
    );
  end

  // Bank control: remember the busy mat so its result can be steered to the global buffer.
  logic [MW-1:0] busy_mat;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               busy_mat <= '0;
    else if (cmd != MAT_NOP)  busy_mat <= mat_sel;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gdb_data  <= '0;
      gdb_count <= '0;
      done      <= 1'b0;
    end else begin
      done <= |m_done;
      if (|m_done) begin
        gdb_data  <= m_ldb[busy_mat];
        gdb_count <= m_count[busy_mat];
      end
    end
  end

  a_sel_range: assert property (@(posedge clk) disable iff (!rst_n)
                                cmd != MAT_NOP |-> 32'(mat_sel) < MATS);

endmodule
