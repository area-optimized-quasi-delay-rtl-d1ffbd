// cg_mv -- complex-gate strong-indication QDI 3-input majority voter (CG_MV).
//
// Votes three dual-rail inputs P, Q, R (the same output of three redundant
// function blocks) into one dual-rail output M, rail by rail:
//   M1 = P1Q1 + Q1R1 + P1R1,   M0 = P0Q0 + Q0R0 + P0R0.
// Each rail's majority is one complex gate (AO222 under RTZ, its dual OA222
// under RTO), giving NM1 and NM0. On its own that voter would be early output:
// two agreeing inputs already produce NM, and a third late input would go
// unacknowledged (a gate orphan). So an internal completion detector (OR of
// each input's rails for RTZ, AND for RTO, joined by two C-elements) produces
// NCD, which only changes once all three inputs carry data, or all three carry
// the spacer. The outputs are M1 = C(NM1, NCD) and M0 = C(NM0, NCD), so M
// changes only after every input has arrived: strong indication.
// Structure and gate types follow the paper (Fig. 5a RTZ, Fig. 5b RTO).
// Interface: p_i, q_i, r_i, m_o (dr_t). Timing: no clock; M goes to data after
// all inputs hold data, and to spacer after all inputs hold the spacer.
// An assertion checks that M never shows the illegal codeword.
module cg_mv
  import qdi_pkg::*;
#(
  parameter protocol_e PROTOCOL = RTZ
) (
  input  dr_t p_i,
  input  dr_t q_i,
  input  dr_t r_i,
  output dr_t m_o
);

  logic nm1, nm0, ncd;

  if (PROTOCOL == RTZ) begin : g_rtz
    ao222 u_nm1 (.a1(p_i.r1), .a2(q_i.r1), .b1(q_i.r1), .b2(r_i.r1),
                 .c1(p_i.r1), .c2(r_i.r1), .y(nm1));
    ao222 u_nm0 (.a1(p_i.r0), .a2(q_i.r0), .b1(q_i.r0), .b2(r_i.r0),
                 .c1(p_i.r0), .c2(r_i.r0), .y(nm0));
  end else begin : g_rto
    oa222 u_nm1 (.a1(p_i.r1), .a2(q_i.r1), .b1(q_i.r1), .b2(r_i.r1),
                 .c1(p_i.r1), .c2(r_i.r1), .y(nm1));
    oa222 u_nm0 (.a1(p_i.r0), .a2(q_i.r0), .b1(q_i.r0), .b2(r_i.r0),
                 .c1(p_i.r0), .c2(r_i.r0), .y(nm0));
  end

  // Internal completion detector over (P1,P0), (Q1,Q0), (R1,R0).
  completion_detector #(.N(3), .PROTOCOL(PROTOCOL)) u_icd (
    .d_i({r_i, q_i, p_i}),
    .ack_o(ncd)
  );

  c_element u_m1 (.j(nm1), .k(ncd), .l(m_o.r1));
  c_element u_m0 (.j(nm0), .k(ncd), .l(m_o.r0));

  localparam dr_t ILLEGAL = (PROTOCOL == RTZ) ? 2'b11 : 2'b00;

  always_comb begin
    assert final (m_o != ILLEGAL) else $error("voter output holds the illegal codeword %b", m_o);
  end

endmodule
