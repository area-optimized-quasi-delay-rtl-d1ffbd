// tb_cg_mv -- self-checking testbench for the complex-gate strong-indication
// majority voter, RTZ and RTO instances side by side.
//
// All 8 value combinations of the three dual-rail inputs P, Q, R are applied
// (the 6 with one dissenting input stand for one faulty function block),
// each input arriving at a separate time in a random order. Checks:
//   * M stays spacer until the last input has arrived, even when two agreeing
//     inputs already fix the majority (strong indication; counted);
//   * after the last arrival M = majority(P, Q, R);
//   * inputs return to spacer in a random order and M keeps its data until the
//     last input is spacer, then becomes spacer.
// Expected values come from counting ones, independent of the gates.
module tb_cg_mv;
  import qdi_pkg::*;

  dr_t p_z, q_z, r_z, m_z;
  dr_t p_o, q_o, r_o, m_o;
  int  checks = 0, failures = 0;
  int  held_back = 0;   // times two agreeing inputs did not yet release M
  int  outvoted  = 0;   // vectors with a dissenting input

  cg_mv #(.PROTOCOL(RTZ)) u_rtz (.p_i(p_z), .q_i(q_z), .r_i(r_z), .m_o(m_z));
  cg_mv #(.PROTOCOL(RTO)) u_rto (.p_i(p_o), .q_i(q_o), .r_i(r_o), .m_o(m_o));

  task automatic expect_dr(protocol_e p, dr_t got, dr_t exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s %s: got %b expected %b", p.name(), what, got, exp);
    end
  endtask

  task automatic set_in(int idx, protocol_e p, dr_t v);
    if (p == RTZ) begin
      case (idx) 0: p_z = v; 1: q_z = v; default: r_z = v; endcase
    end else begin
      case (idx) 0: p_o = v; 1: q_o = v; default: r_o = v; endcase
    end
  endtask

  task automatic run_vector(protocol_e p, logic [2:0] bits);
    int   order[3] = '{0, 1, 2};
    logic maj;
    int   n1, n0;
    maj = (bits[0] & bits[1]) | (bits[1] & bits[2]) | (bits[0] & bits[2]);
    if (bits != 3'b000 && bits != 3'b111) outvoted++;
    order.shuffle();
    n1 = 0; n0 = 0;
    for (int s = 0; s < 3; s++) begin
      set_in(order[s], p, dr_encode(p, bits[order[s]]));
      if (bits[order[s]]) n1++; else n0++;
      #1;
      if (s < 2) begin
        expect_dr(p, (p == RTZ) ? m_z : m_o, dr_spacer(p), "M waits for all inputs");
        if (n1 == 2 || n0 == 2) held_back++;
      end else begin
        expect_dr(p, (p == RTZ) ? m_z : m_o, dr_encode(p, maj), "M = majority");
      end
    end
    order.shuffle();
    for (int s = 0; s < 3; s++) begin
      set_in(order[s], p, dr_spacer(p));
      #1;
      if (s < 2) expect_dr(p, (p == RTZ) ? m_z : m_o, dr_encode(p, maj), "M holds until all spacer");
      else       expect_dr(p, (p == RTZ) ? m_z : m_o, dr_spacer(p), "M spacer");
    end
  endtask

  initial begin
    p_z = dr_spacer(RTZ); q_z = dr_spacer(RTZ); r_z = dr_spacer(RTZ);
    p_o = dr_spacer(RTO); q_o = dr_spacer(RTO); r_o = dr_spacer(RTO);
    #1;
    expect_dr(RTZ, m_z, dr_spacer(RTZ), "initial spacer");
    expect_dr(RTO, m_o, dr_spacer(RTO), "initial spacer");
    for (int rep = 0; rep < 25; rep++) begin
      for (int v = 0; v < 8; v++) begin
        run_vector(RTZ, 3'(v));
        run_vector(RTO, 3'(v));
      end
    end
    checks += 2;
    if (held_back == 0) begin failures++; $display("FAIL strong indication never exercised"); end
    if (outvoted == 0)  begin failures++; $display("FAIL no dissenting input applied"); end
    $display("held back: %0d, outvoted: %0d", held_back, outvoted);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
