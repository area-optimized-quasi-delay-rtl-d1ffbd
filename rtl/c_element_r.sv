// c_element_r -- 2-input Muller C-element with an asynchronous reset.
//
// Same behaviour as c_element (L = JK + JL + KL, hold while J != K), plus an
// active-low reset that forces the output to RESET_VAL. Used for the register
// bank, whose C-elements see ACKIT on one input and would otherwise power up in
// an unknown state. The reset is this design's own addition: the paper does not
// mention reset. The latch reported for this module is the C-element's memory
// (the same remark on Verilator's inlined-latch lint applies as for c_element).
// Interface: j, k, rst_ni in; l out. Timing: no clock, zero-delay behaviour.
module c_element_r #(
  parameter bit RESET_VAL = 1'b0
) (
  input  logic rst_ni,
  input  logic j,
  input  logic k,
  output logic l
);

  always_latch begin
    if (!rst_ni)     l = RESET_VAL;
    else if (j ~^ k) l = j;
  end

endmodule
