// oa222 -- OR-AND complex gate: y = (a1|a2) & (b1|b2) & (c1|c2).
//
// The dual of ao222, used by the RTO majority voter (paper Fig. 5b). With its
// OR pairs wired to (P,Q), (Q,R) and (P,R) it computes (P+Q)(Q+R)(P+R), which
// is again the majority of one rail. Purely combinational.
module oa222 (
  input  logic a1, a2,
  input  logic b1, b2,
  input  logic c1, c2,
  output logic y
);

  assign y = (a1 | a2) & (b1 | b2) & (c1 | c2);

endmodule
