// qdi_tmr_fa -- one QDI circuit stage holding a triple modular redundant
// (TMR) full adder with complex-gate majority voters.
//
// Three dual-rail input bits (A, B, Cin; the paper's J, K, L) enter an input
// register bank of C-elements. A completion detector on the bank's outputs
// drives ack_o (ACKOT) back to the sender. The registered bits feed three
// identical QDI full adders; their three sums are voted by one CG_MV voter and
// their three carries by another, so a wrong or stuck output of any one adder
// is outvoted. The voters are strongly indicating: sum_o and carry_o change
// only after all three adders have produced data (or returned to spacer).
// ack_i is ACKIT from the receiver: it must go low once the receiver has taken
// the voted outputs and high again once it has seen them return to spacer.
// The composition (register bank + 3 full adders + 2 voters) follows the
// paper's evaluated circuit; the reset and the observation outputs fb_sum_o /
// fb_carry_o (each adder's own result) are this design's additions.
// Protocol: PROTOCOL = RTZ (default) or RTO, for the whole stage.
// Timing: no clock; one transaction is data then spacer (RTZ) or spacer then
// data (RTO), paced by ack_i. Because the adders are early output (a voted
// spacer does not prove every input has returned to spacer), the sender must
// have put its whole spacer on in_i before the receiver re-opens the register
// bank with ack_i; this is the usual timing assumption of early-output stages.
// Synthesis note: the three adders are identical and share their inputs, so
// logic optimisation merges them unless the flow keeps the three instances
// apart (keep hierarchy / don't-touch); a merged TMR is no longer redundant.
module qdi_tmr_fa
  import qdi_pkg::*;
#(
  parameter protocol_e PROTOCOL = RTZ
) (
  input  logic       rst_ni,
  input  dr_t  [2:0] in_i,        // [0] = A, [1] = B, [2] = Cin
  output logic       ack_o,       // ACKOT to the sender
  input  logic       ack_i,       // ACKIT from the receiver
  output dr_t        sum_o,       // voted sum
  output dr_t        carry_o,     // voted carry
  output dr_t  [2:0] fb_sum_o,    // sum of each function block
  output dr_t  [2:0] fb_carry_o   // carry of each function block
);

  dr_t [2:0] in_q;
  dr_t [2:0] fb_sum, fb_carry;

  qdi_register_bank #(.N(3), .PROTOCOL(PROTOCOL)) u_in_reg (
    .rst_ni(rst_ni), .d_i(in_i), .ack_i(ack_i), .q_o(in_q)
  );

  completion_detector #(.N(3), .PROTOCOL(PROTOCOL)) u_in_cd (
    .d_i(in_q), .ack_o(ack_o)
  );

  for (genvar i = 0; i < 3; i++) begin : g_fb
    qdi_full_adder #(.PROTOCOL(PROTOCOL)) u_fa (
      .a_i(in_q[0]), .b_i(in_q[1]), .cin_i(in_q[2]),
      .sum_o(fb_sum[i]), .cout_o(fb_carry[i])
    );
  end

  cg_mv #(.PROTOCOL(PROTOCOL)) u_mv_sum (
    .p_i(fb_sum[0]), .q_i(fb_sum[1]), .r_i(fb_sum[2]), .m_o(sum_o)
  );

  cg_mv #(.PROTOCOL(PROTOCOL)) u_mv_carry (
    .p_i(fb_carry[0]), .q_i(fb_carry[1]), .r_i(fb_carry[2]), .m_o(carry_o)
  );

  assign fb_sum_o   = fb_sum;
  assign fb_carry_o = fb_carry;

endmodule
