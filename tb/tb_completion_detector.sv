// tb_completion_detector -- self-checking testbench for the RTZ and RTO
// completion detectors (2-input and 3-input chains).
//
// For each detector the dual-rail inputs are moved, one input at a time in a
// random order, from spacer to random data and back. After every single step
// the acknowledge must still show the previous phase until the last input has
// changed, and must show the new phase right after it:
//   RTZ: 1 = all data, 0 = all spacer;  RTO: 0 = all data, 1 = all spacer.
module tb_completion_detector;
  import qdi_pkg::*;

  localparam int N = 3;

  dr_t [N-1:0] d_rtz3, d_rto3;
  dr_t [1:0]   d_rtz2, d_rto2;
  logic        a_rtz3, a_rto3, a_rtz2, a_rto2;
  int          checks = 0, failures = 0;

  completion_detector #(.N(3), .PROTOCOL(RTZ)) u_rtz3 (.d_i(d_rtz3), .ack_o(a_rtz3));
  completion_detector #(.N(3), .PROTOCOL(RTO)) u_rto3 (.d_i(d_rto3), .ack_o(a_rto3));
  completion_detector #(.N(2), .PROTOCOL(RTZ)) u_rtz2 (.d_i(d_rtz2), .ack_o(a_rtz2));
  completion_detector #(.N(2), .PROTOCOL(RTO)) u_rto2 (.d_i(d_rto2), .ack_o(a_rto2));

  task automatic expect_bit(logic got, logic exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: ack=%0b expected %0b", what, got, exp);
    end
  endtask

  // One wave (to data or to spacer) on all four detectors, inputs changing in
  // a random order. to_data selects the wave.
  task automatic wave(bit to_data);
    int order[N];
    int ord2[2];
    logic exp_rtz_before, exp_rto_before;
    foreach (order[i]) order[i] = i;
    order.shuffle();
    ord2[0] = $urandom_range(0, 1);
    ord2[1] = 1 - ord2[0];
    // Previous phase: RTZ ack 1 after data, RTO ack 0 after data.
    exp_rtz_before = !to_data;
    exp_rto_before = to_data;
    for (int s = 0; s < N; s++) begin
      logic b;
      b = 1'($urandom);
      d_rtz3[order[s]] = to_data ? dr_encode(RTZ, b) : dr_spacer(RTZ);
      d_rto3[order[s]] = to_data ? dr_encode(RTO, b) : dr_spacer(RTO);
      if (s < 2) begin
        d_rtz2[ord2[s]] = to_data ? dr_encode(RTZ, b) : dr_spacer(RTZ);
        d_rto2[ord2[s]] = to_data ? dr_encode(RTO, b) : dr_spacer(RTO);
      end
      #1;
      if (s < N - 1) begin
        expect_bit(a_rtz3, exp_rtz_before, "RTZ3 early");
        expect_bit(a_rto3, exp_rto_before, "RTO3 early");
      end else begin
        expect_bit(a_rtz3, !exp_rtz_before, "RTZ3 complete");
        expect_bit(a_rto3, !exp_rto_before, "RTO3 complete");
      end
      if (s == 0) begin
        expect_bit(a_rtz2, exp_rtz_before, "RTZ2 early");
        expect_bit(a_rto2, exp_rto_before, "RTO2 early");
      end else if (s == 1) begin
        expect_bit(a_rtz2, !exp_rtz_before, "RTZ2 complete");
        expect_bit(a_rto2, !exp_rto_before, "RTO2 complete");
      end
    end
  endtask

  initial begin
    // Start from spacer on every input: the C-element chains settle to the
    // spacer acknowledgement.
    d_rtz3 = {N{dr_spacer(RTZ)}};
    d_rto3 = {N{dr_spacer(RTO)}};
    d_rtz2 = {2{dr_spacer(RTZ)}};
    d_rto2 = {2{dr_spacer(RTO)}};
    #1;
    expect_bit(a_rtz3, 1'b0, "RTZ3 reset");
    expect_bit(a_rto3, 1'b1, "RTO3 reset");
    expect_bit(a_rtz2, 1'b0, "RTZ2 reset");
    expect_bit(a_rto2, 1'b1, "RTO2 reset");
    for (int n = 0; n < 200; n++) begin
      wave(1'b1);
      wave(1'b0);
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
