// c_element -- 2-input Muller C-element, the state-holding cell of QDI logic.
//
// The output L goes to 1 when both inputs J and K are 1, to 0 when both are 0,
// and keeps its value while the inputs disagree: L = JK + JL + KL (paper Fig. 2).
// The paper builds it as a static complex gate; here it is written as a
// level-sensitive latch that is transparent while J == K and stores J, which is
// the same next-state function without a combinational feedback loop. The
// latch that tools report for this module is therefore intended: it is the
// C-element's memory. (Verilator's lint, once the cell is inlined into a
// parent, may claim that no latch is inferred; synthesis does infer one latch
// bit per C-element, and simulation holds state as required.) There is no
// reset; the cell takes the spacer value as soon as a spacer reaches both
// inputs.
// Interface: j, k in; l out. Timing: no clock, zero-delay behaviour.
module c_element (
  input  logic j,
  input  logic k,
  output logic l
);

  logic agree;  // latch enable: inputs equal

  assign agree = j ~^ k;

  always_latch begin
    if (agree) l = j;
  end

endmodule
