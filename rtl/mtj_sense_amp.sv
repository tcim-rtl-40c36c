// mtj_sense_amp: behavioural model (not synthesizable) of the READ/AND sense amplifier.
//
// The sense amplifier compares the resistance of the bit-line path, i.e. of the cells whose
// word lines are on (one cell for READ, two in parallel for AND), with a reference. With the
// READ reference, placed between R_P and R_AP, it returns the stored bit. With the AND
// reference, placed between R(P,P) (both cells low) and R(P,AP), the output is 1 only when
// both activated cells hold 1 (P), which is the AND. Both references sit at the middle of their
// interval, computed from the MTJ parameters (R_P = 625 ohm, R_AP = 1250 ohm): R_ref-READ =
// 937.5 ohm, R_ref-AND = (312.5 + 416.7) / 2 = 364.6 ohm. The midpoint placement is this
// model's choice; the paper gives only the intervals.
//
// Ports: sen (sense enable: the latch resolves on its rising edge and holds while it is high
// and after), and_mode (selects R_ref-AND instead of R_ref-READ), r_bl (bit-line path
// resistance), q / q_n (latched result and its complement, Qm in the circuit drawing).
module mtj_sense_amp #(
  parameter real R_P  = 625.0,
  parameter real R_AP = 1250.0
) (
  input  logic sen,
  input  logic and_mode,
  input  real  r_bl,
  output logic q,
  output logic q_n
);
  localparam real R_PP      = R_P / 2.0;
  localparam real R_PAP     = (R_P * R_AP) / (R_P + R_AP);
  localparam real R_REF_RD  = (R_P + R_AP) / 2.0;
  localparam real R_REF_AND = (R_PP + R_PAP) / 2.0;

  initial q = 1'b0;

  always @(posedge sen) q <= (r_bl < (and_mode ? R_REF_AND : R_REF_RD));

  assign q_n = ~q;
endmodule
