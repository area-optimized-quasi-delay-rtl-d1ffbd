// tb_qdi_register_bank -- self-checking testbench for the C-element register
// bank under RTZ and RTO.
//
// Two 3-bit banks (one per protocol) get random stimulus: random legal
// codewords (spacer or data) on d_i and random ACKIT values, plus resets. Each rail is
// compared with a reference C-element state kept in the testbench (output
// takes the rail value when rail == ACKIT, holds otherwise; reset gives the
// protocol's spacer). Then a few ordered 4-phase transactions check that data
// passes only in the phase the protocol allows.
module tb_qdi_register_bank;
  import qdi_pkg::*;

  localparam int N = 3;

  logic        rst_n;
  logic        ack;
  dr_t [N-1:0] d_z, d_o, q_z, q_o;
  logic [2*N-1:0] ref_z, ref_o;
  int          checks = 0, failures = 0;

  qdi_register_bank #(.N(N), .PROTOCOL(RTZ)) u_rtz (
    .rst_ni(rst_n), .d_i(d_z), .ack_i(ack), .q_o(q_z));
  qdi_register_bank #(.N(N), .PROTOCOL(RTO)) u_rto (
    .rst_ni(rst_n), .d_i(d_o), .ack_i(ack), .q_o(q_o));

  function automatic logic [2*N-1:0] c_next(logic [2*N-1:0] st, logic [2*N-1:0] d, logic a);
    for (int i = 0; i < 2 * N; i++) if (d[i] == a) st[i] = a;
    return st;
  endfunction

  // A random legal codeword: spacer, data 0 or data 1.
  function automatic dr_t legal(protocol_e p);
    int unsigned c = $urandom_range(0, 2);
    return (c == 0) ? dr_spacer(p) : dr_encode(p, 1'(c - 1));
  endfunction

  task automatic compare(string what);
    checks++;
    if (q_z !== ref_z || q_o !== ref_o) begin
      failures++;
      $display("FAIL %s: rtz q=%b exp %b | rto q=%b exp %b", what, q_z, ref_z, q_o, ref_o);
    end
  endtask

  initial begin
    rst_n = 1'b0; ack = 1'b1;
    d_z = '0; d_o = '1;
    ref_z = '0; ref_o = '1;
    #1; compare("reset");
    rst_n = 1'b1; #1; compare("after reset");

    // Random stimulus, reference C-element per rail.
    for (int n = 0; n < 3000; n++) begin
      if ($urandom_range(0, 99) == 0) begin
        rst_n = 1'b0;
        ref_z = '0; ref_o = '1;
        #1; compare("random reset");
        rst_n = 1'b1;
      end
      for (int i = 0; i < N; i++) begin
        d_z[i] = legal(RTZ);
        d_o[i] = legal(RTO);
      end
      ack = 1'($urandom);
      ref_z = c_next(ref_z, d_z, ack);
      ref_o = c_next(ref_o, d_o, ack);
      #1; compare("random");
    end

    // Ordered RTZ transactions: data passes under ACKIT=1 and is held while
    // the sender already returns to spacer; spacer passes under ACKIT=0.
    rst_n = 1'b0; #1; rst_n = 1'b1; ack = 1'b1; d_z = '0; #1;
    for (int n = 0; n < 50; n++) begin
      dr_t [N-1:0] v;
      for (int i = 0; i < N; i++) v[i] = dr_encode(RTZ, 1'($urandom));
      d_z = v; #1;
      checks++; if (q_z !== v) begin failures++; $display("FAIL RTZ data pass"); end
      d_z = '0; #1;
      checks++; if (q_z !== v) begin failures++; $display("FAIL RTZ data hold"); end
      ack = 1'b0; #1;
      checks++; if (q_z !== '0) begin failures++; $display("FAIL RTZ spacer pass"); end
      ack = 1'b1; #1;
    end

    // Ordered RTO transactions: spacer (all ones) passes under ACKIT=1, data
    // passes under ACKIT=0 and is held while the sender returns to spacer.
    rst_n = 1'b0; #1; rst_n = 1'b1; ack = 1'b1; d_o = '1; #1;
    for (int n = 0; n < 50; n++) begin
      dr_t [N-1:0] v;
      for (int i = 0; i < N; i++) v[i] = dr_encode(RTO, 1'($urandom));
      checks++; if (q_o !== '1) begin failures++; $display("FAIL RTO spacer pass"); end
      ack = 1'b0; d_o = v; #1;
      checks++; if (q_o !== v) begin failures++; $display("FAIL RTO data pass"); end
      d_o = '1; #1;
      checks++; if (q_o !== v) begin failures++; $display("FAIL RTO data hold"); end
      ack = 1'b1; #1;
    end

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
