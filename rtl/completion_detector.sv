// completion_detector -- acknowledges that every dual-rail input holds data,
// or that every input holds the spacer.
//
// Each dual-rail input is first reduced to one wire: an OR of its two rails for
// RTZ (1 once data arrived, 0 on spacer) or an AND of its rails for RTO (0 once
// data arrived, 1 on spacer). Those wires are then joined by a chain of 2-input
// C-elements, C(...C(C(g0,g1),g2)...,gN-1), so the output changes only when
// all N inputs have changed the same way. This is the detector of paper Fig. 1
// (two inputs) and the internal detector NCD of the voter in Fig. 5 (three
// inputs, first two joined first, then the third). The chain shape for other
// N is this design's choice.
// Output ack_o (the paper's ACKOT): RTZ 1 = all data, 0 = all spacer;
// RTO 0 = all data, 1 = all spacer; otherwise it holds. ACKIT = ~ACKOT.
// Timing: no clock.
module completion_detector
  import qdi_pkg::*;
#(
  parameter int        N        = 2,
  parameter protocol_e PROTOCOL = RTZ
) (
  input  dr_t  [N-1:0] d_i,
  output logic         ack_o
);

  logic [N-1:0] g;    // one "arrived" wire per dual-rail input
  logic [N-1:0] acc;  // running C-element chain

  always_comb begin
    for (int i = 0; i < N; i++) begin
      g[i] = (PROTOCOL == RTZ) ? (d_i[i].r1 | d_i[i].r0) : (d_i[i].r1 & d_i[i].r0);
    end
  end

  assign acc[0] = g[0];

  for (genvar i = 1; i < N; i++) begin : g_chain
    c_element u_c (.j(acc[i-1]), .k(g[i]), .l(acc[i]));
  end

  assign ack_o = acc[N-1];

endmodule
