// mtj_bitcell: behavioural model (not synthesizable) of a 1T1MTJ STT-MRAM bit cell.
//
// The cell is an access transistor in series with a magnetic tunnel junction between bit
// line and source line, the transistor gated by the word line. The free layer is either
// parallel (P, low resistance) or anti-parallel (AP, high resistance) to the pinned layer.
// Resistances follow from the MTJ parameters used in the paper's device simulation:
// R_P = RA / (length x width) = 1e-12 / (40 nm x 40 nm) = 625 ohm, R_AP = R_P x (1 + TMR) with
// TMR = 100 %, i.e. 1250 ohm. Logic 1 is stored as P: this is the assignment under which an
// AND reference between R(P,P) and R(P,AP), as the paper places it, yields the AND of the
// stored bits. The access-transistor resistance, switching delay and write-current
// threshold are not modelled.
//
// Ports: wl (word line), wr_en (write pulse: its rising edge switches the cell if wl is on), wr_val (current
// direction: 1 switches to P, 0 to AP), r_cell (resistance seen between bit line and source
// line; R_OFF when the word line is off), state (stored bit, for observation).
module mtj_bitcell #(
  parameter real LENGTH_NM = 40.0,
  parameter real WIDTH_NM  = 40.0,
  parameter real RA        = 1.0e-12,   // ohm * m^2
  parameter real TMR       = 1.0,       // 100 %
  parameter real R_OFF     = 1.0e12,
  parameter bit  INIT      = 1'b0
) (
  input  logic wl,
  input  logic wr_en,
  input  logic wr_val,
  output real  r_cell,
  output logic state
);
  localparam real R_P  = RA / (LENGTH_NM * 1.0e-9 * WIDTH_NM * 1.0e-9);
  localparam real R_AP = R_P * (1.0 + TMR);

  initial state = INIT;

  // A write pulse switches the free layer when it starts, if the word line is on.
  always @(posedge wr_en) begin
    if (wl) state <= wr_val;
  end

  assign r_cell = !wl ? R_OFF : (state ? R_P : R_AP);
endmodule
