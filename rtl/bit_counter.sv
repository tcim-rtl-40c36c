// bit_counter: number of ones in a WIDTH-bit vector (the BitCount of the AND result).
//
// Built as the paper describes its bit counter: the vector is split into 8-bit sub-vectors,
// each sub-vector indexes an 8-input, 256-entry look-up table that holds its number of ones,
// and the per-sub-vector counts are summed. The table is computed at elaboration time
// (entry n = number of ones in n). A WIDTH that is not a multiple of 8 is padded with zeros
// in the last sub-vector. Purely combinational; the enclosing mat registers the result.
//
// Interface: vec (WIDTH bits) in, count ($clog2(WIDTH+1) bits) out.
module bit_counter #(
  parameter int unsigned WIDTH = 64
) (
  input  logic [WIDTH-1:0]               vec,
  output logic [$clog2(WIDTH+1)-1:0]     count
);

  localparam int unsigned NSUB = (WIDTH + 7) / 8;
  localparam int unsigned CW   = $clog2(WIDTH + 1);

  typedef logic [255:0][3:0] lut_t;

  function automatic lut_t build_lut();
    lut_t t;
    for (int n = 0; n < 256; n++) begin
      logic [3:0] c;
      c = '0;
      for (int b = 0; b < 8; b++) c += 4'(n >> b & 1);
      t[n] = c;
    end
    return t;
  endfunction

  localparam lut_t LUT = build_lut();

  logic [NSUB*8-1:0] padded;
  assign padded = (NSUB*8)'(vec);

  always_comb begin
    count = '0;
    for (int s = 0; s < int'(NSUB); s++) begin
      count += CW'(LUT[padded[s*8 +: 8]]);
    end
  end

endmodule
