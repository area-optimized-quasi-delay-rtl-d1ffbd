// ao222 -- AND-OR complex gate: y = a1&a2 | b1&b2 | c1&c2.
//
// Standard-cell style gate used by the RTZ majority voter (paper Fig. 5a),
// where its three AND pairs are wired to (P,Q), (Q,R) and (P,R) so that it
// computes the majority PQ + QR + PR of one rail. Purely combinational.
module ao222 (
  input  logic a1, a2,
  input  logic b1, b2,
  input  logic c1, c2,
  output logic y
);

  assign y = (a1 & a2) | (b1 & b2) | (c1 & c2);

endmodule
