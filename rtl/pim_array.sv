// pim_array: the computational STT-MRAM array (all banks of the accelerator's PIM memory).
//
// BANKS banks of MATS mats of ROWS rows x WIDTH bits. With the defaults (8 x 16 x 16384 x 64
// bits) the array holds 16 MB, the computational array size used for the paper's results; the
// split into banks, mats and rows is this design's choice, since the paper gives only the total.
// The bank number selects one bank, which receives the command; all other banks see MAT_NOP.
// Only one command is in flight at a time, so the outputs are the OR / select of the banks'
// global data buffers, steered by the bank that was last addressed.
//
// Timing: same as mram_bank (done 2 cycles after a write, 3 after a READ or AND).
module pim_array
  import tcim_pkg::*;
#(
  parameter int unsigned BANKS = 8,
  parameter int unsigned MATS  = 16,
  parameter int unsigned ROWS  = 16384,
  parameter int unsigned WIDTH = SLICE_W_DEF,
  localparam int unsigned BW   = (BANKS > 1) ? $clog2(BANKS) : 1,
  localparam int unsigned MW   = (MATS > 1) ? $clog2(MATS) : 1,
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW   = $clog2(WIDTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  mat_cmd_e          cmd,
  input  logic [BW-1:0]     bank_sel,
  input  logic [MW-1:0]     mat_sel,
  input  logic [RW-1:0]     row_a,
  input  logic [RW-1:0]     row_b,
  input  logic [WIDTH-1:0]  wdata,
  output logic [WIDTH-1:0]  rdata,
  output logic [CW-1:0]     count,
  output logic              done
);

  logic [WIDTH-1:0] b_data  [BANKS];
  logic [CW-1:0]    b_count [BANKS];
  logic [BANKS-1:0] b_done;

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    mat_cmd_e b_cmd;
    assign b_cmd = (32'(bank_sel) == b) ? cmd : MAT_NOP;
    mram_bank #(.MATS(MATS), .ROWS(ROWS), .WIDTH(WIDTH)) u_bank (
      .clk, .rst_n, .cmd(b_cmd), .mat_sel, .row_a, .row_b, .wdata,
      .gdb_data(b_data[b]), .gdb_count(b_count[b]), .done(b_done[b])
    );
  end

  logic [BW-1:0] last_bank;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              last_bank <= '0;
    else if (cmd != MAT_NOP) last_bank <= bank_sel;
  end

  assign rdata = b_data[last_bank];
  assign count = b_count[last_bank];
  assign done  = |b_done;

endmodule
