// data_slicer: data slicing and compression of the adjacency matrix.
//
// A row R_i (or column C_j) of the adjacency matrix is cut into slices of WIDTH = |S| bits;
// slice k holds matrix elements k*|S| .. (k+1)*|S|-1, element k*|S|+b in bit b. A slice is
// valid when at least one of its bits is 1. Only valid slices are kept: for each one the
// slicer emits its slice index k (a 32-bit integer, as in the paper's compressed format) and
// its data, numbered by a running entry counter. At the end of each row or column it reports
// the entry number of the vector's first valid slice and the number of valid slices, which
// is the pointer record the controller later reads. This is the paper's slicing rule; the
// streaming interface and the entry numbering are this design's choices.
//
// Interface: one slice per cycle on in_valid/in_word; in_first marks slice 0 of a vector and
// in_last its final slice (both may be set for a one-slice vector). clear resets the entry
// counter. Outputs are registered: out_valid one cycle after a valid slice arrives, vec_done
// one cycle after in_last. No back-pressure: the consumer must take every output.
module data_slicer
  import tcim_pkg::*;
#(
  parameter int unsigned WIDTH = SLICE_W_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              in_valid,
  input  logic              in_first,
  input  logic              in_last,
  input  logic [WIDTH-1:0]  in_word,
  output logic              out_valid,
  output logic [31:0]       out_idx,
  output logic [WIDTH-1:0]  out_data,
  output logic [31:0]       out_entry,
  output logic              vec_done,
  output logic [31:0]       vec_start,
  output logic [31:0]       vec_count
);

  logic [31:0] k_q, cnt_q, start_q, entry_q;

  logic        slice_valid;
  logic [31:0] k, cnt, start;
  assign slice_valid = |in_word;
  assign k     = in_first ? '0 : k_q;
  assign cnt   = in_first ? '0 : cnt_q;
  assign start = in_first ? entry_q : start_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k_q <= '0; cnt_q <= '0; start_q <= '0; entry_q <= '0;
      out_valid <= 1'b0; out_idx <= '0; out_data <= '0; out_entry <= '0;
      vec_done <= 1'b0; vec_start <= '0; vec_count <= '0;
    end else begin
      out_valid <= 1'b0;
      vec_done  <= 1'b0;
      if (clear) begin
        entry_q <= '0;
        k_q     <= '0;
        cnt_q   <= '0;
        start_q <= '0;
      end else if (in_valid) begin
        k_q     <= k + 1;
        cnt_q   <= cnt + 32'(slice_valid);
        start_q <= start;
        if (slice_valid) begin
          out_valid <= 1'b1;
          out_idx   <= k;
          out_data  <= in_word;
          out_entry <= entry_q;
          entry_q   <= entry_q + 1;
        end
        if (in_last) begin
          vec_done  <= 1'b1;
          vec_start <= start;
          vec_count <= cnt + 32'(slice_valid);
        end
      end
    end
  end

endmodule
