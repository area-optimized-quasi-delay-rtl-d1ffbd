// qdi_full_adder -- dual-rail QDI full adder, the function block of the TMR.
//
// Adds three dual-rail bits a, b, cin and returns the dual-rail sum and carry.
// The paper uses the early-output QDI full adder of an earlier publication and
// gives only its function, so this is the simplest gate network with the same
// early-output character, not a copy of that adder:
//   carry rails are rail-wise majorities (AO222 under RTZ), so a carry rail can
//   rise as soon as two inputs agree;
//   sum rails are sums of products of one rail of each input, so the sum waits
//   for all three inputs.
// RTZ (AND-OR):
//   cout.r1 = a1b1 + b1c1 + a1c1            cout.r0 = a0b0 + b0c0 + a0c0
//   sum.r1  = a1b1c1 + a1b0c0 + a0b1c0 + a0b0c1
//   sum.r0  = a0b0c0 + a0b1c1 + a1b0c1 + a1b1c0
// RTO is the dual circuit (every AND <-> OR), as the paper prescribes for
// converting RTZ logic to RTO. There are no C-elements, so nothing holds state;
// a spacer on any input returns the sum to spacer.
// Interface: a_i, b_i, cin_i, sum_o, cout_o (dr_t). Timing: combinational.
module qdi_full_adder
  import qdi_pkg::*;
#(
  parameter protocol_e PROTOCOL = RTZ
) (
  input  dr_t a_i,
  input  dr_t b_i,
  input  dr_t cin_i,
  output dr_t sum_o,
  output dr_t cout_o
);

  logic a1, a0, b1, b0, c1, c0;
  assign {a1, a0} = a_i;
  assign {b1, b0} = b_i;
  assign {c1, c0} = cin_i;

  if (PROTOCOL == RTZ) begin : g_rtz
    ao222 u_c1 (.a1(a1), .a2(b1), .b1(b1), .b2(c1), .c1(a1), .c2(c1), .y(cout_o.r1));
    ao222 u_c0 (.a1(a0), .a2(b0), .b1(b0), .b2(c0), .c1(a0), .c2(c0), .y(cout_o.r0));
    assign sum_o.r1 = (a1 & b1 & c1) | (a1 & b0 & c0) | (a0 & b1 & c0) | (a0 & b0 & c1);
    assign sum_o.r0 = (a0 & b0 & c0) | (a0 & b1 & c1) | (a1 & b0 & c1) | (a1 & b1 & c0);
  end else begin : g_rto
    oa222 u_c1 (.a1(a1), .a2(b1), .b1(b1), .b2(c1), .c1(a1), .c2(c1), .y(cout_o.r1));
    oa222 u_c0 (.a1(a0), .a2(b0), .b1(b0), .b2(c0), .c1(a0), .c2(c0), .y(cout_o.r0));
    assign sum_o.r1 = (a1 | b1 | c1) & (a1 | b0 | c0) & (a0 | b1 | c0) & (a0 | b0 | c1);
    assign sum_o.r0 = (a0 | b0 | c0) & (a0 | b1 | c1) & (a1 | b0 | c1) & (a1 | b1 | c0);
  end

endmodule
