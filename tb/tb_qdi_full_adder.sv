// tb_qdi_full_adder -- self-checking testbench for the dual-rail full adder
// under RTZ and RTO.
//
// For every one of the 8 input combinations, and in a random input arrival
// order, it checks after each arriving input:
//   * the sum stays spacer until all three inputs hold data (sum needs all);
//   * the carry becomes data exactly when two arrived inputs agree, or when
//     all three arrived (early output), with the value a+b+cin >> 1;
//   * once all inputs arrived, sum = a^b^cin and carry = majority.
// Inputs then return to spacer in a random order and both outputs must be
// spacer at the end. The reference is integer arithmetic, not the gates.
module tb_qdi_full_adder;
  import qdi_pkg::*;

  dr_t  a_z, b_z, c_z, s_z, co_z;
  dr_t  a_o, b_o, c_o, s_o, co_o;
  int   checks = 0, failures = 0;
  int   early_carries = 0;

  qdi_full_adder #(.PROTOCOL(RTZ)) u_rtz (.a_i(a_z), .b_i(b_z), .cin_i(c_z), .sum_o(s_z), .cout_o(co_z));
  qdi_full_adder #(.PROTOCOL(RTO)) u_rto (.a_i(a_o), .b_i(b_o), .cin_i(c_o), .sum_o(s_o), .cout_o(co_o));

  task automatic expect_dr(protocol_e p, dr_t got, dr_t exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s %s: got %b expected %b", p.name(), what, got, exp);
    end
  endtask

  task automatic set_in(int idx, protocol_e p, dr_t v);
    if (p == RTZ) begin
      case (idx) 0: a_z = v; 1: b_z = v; default: c_z = v; endcase
    end else begin
      case (idx) 0: a_o = v; 1: b_o = v; default: c_o = v; endcase
    end
  endtask

  task automatic run_vector(protocol_e p, logic [2:0] bits);
    int   order[3] = '{0, 1, 2};
    bit   arrived[3] = '{0, 0, 0};
    dr_t  s, co;
    order.shuffle();
    for (int s_i = 0; s_i < 3; s_i++) begin
      int n1, n0, na;
      set_in(order[s_i], p, dr_encode(p, bits[order[s_i]]));
      arrived[order[s_i]] = 1'b1;
      #1;
      s  = (p == RTZ) ? s_z  : s_o;
      co = (p == RTZ) ? co_z : co_o;
      n1 = 0; n0 = 0; na = 0;
      for (int i = 0; i < 3; i++) if (arrived[i]) begin
        na++;
        if (bits[i]) n1++; else n0++;
      end
      if (na < 3) expect_dr(p, s, dr_spacer(p), "sum waits");
      else        expect_dr(p, s, dr_encode(p, ^bits), "sum");
      if (n1 >= 2)      begin expect_dr(p, co, dr_encode(p, 1'b1), "carry 1"); if (na < 3) early_carries++; end
      else if (n0 >= 2) begin expect_dr(p, co, dr_encode(p, 1'b0), "carry 0"); if (na < 3) early_carries++; end
      else              expect_dr(p, co, dr_spacer(p), "carry waits");
    end
    order.shuffle();
    for (int s_i = 0; s_i < 3; s_i++) begin
      set_in(order[s_i], p, dr_spacer(p));
      #1;
    end
    expect_dr(p, (p == RTZ) ? s_z : s_o, dr_spacer(p), "sum spacer");
    expect_dr(p, (p == RTZ) ? co_z : co_o, dr_spacer(p), "carry spacer");
  endtask

  initial begin
    a_z = dr_spacer(RTZ); b_z = dr_spacer(RTZ); c_z = dr_spacer(RTZ);
    a_o = dr_spacer(RTO); b_o = dr_spacer(RTO); c_o = dr_spacer(RTO);
    #1;
    for (int rep = 0; rep < 20; rep++) begin
      for (int v = 0; v < 8; v++) begin
        run_vector(RTZ, 3'(v));
        run_vector(RTO, 3'(v));
      end
    end
    checks++;
    if (early_carries == 0) begin
      failures++;
      $display("FAIL early carry output never observed");
    end
    $display("early carries observed: %0d", early_carries);
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
