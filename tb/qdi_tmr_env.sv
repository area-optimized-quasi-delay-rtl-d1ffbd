// qdi_tmr_env -- sender, receiver and checker for one QDI TMR full-adder
// stage (testbench helper, not synthesizable).
//
// Sender: drives the three dual-rail inputs. It sends a data word once the
// stage's ACKOT (ack_o) shows that the input register bank holds the spacer,
// and the spacer once ack_o shows the data has been latched, one rail-pair at
// a time in a random order with random gaps (4-phase handshake, RTZ or RTO).
// Receiver: waits for both voted outputs to complete a phase, then moves
// ACKIT (ack_i) after a random delay; it checks each voted data word against
// integer arithmetic on the word that was sent.
// Faults: for each transaction one mode is drawn. FLT_NONE: all blocks are
// healthy. FLT_WRONG: block fault_blk delivers the inverted sum and carry
// (rails swapped, so the handshake stays valid). FLT_LATE: block fault_blk
// delivers the right value LAG time units after the others. The testbench
// top applies fault_sum/fault_carry to that block with force.
// Monitors count the mechanisms of the design: strong indication of both
// voters, voters held back by a late block, outvoting of a wrong block,
// early carry of a full adder, the register bank holding data after the
// sender has returned to spacer. Every counter must end above zero.
module qdi_tmr_env
  import qdi_pkg::*;
#(
  parameter protocol_e PROTOCOL      = RTZ,
  parameter int        TRANSACTIONS  = 200,
  parameter bit        INJECT_FAULTS = 1'b1,
  parameter int        LAG           = 3,
  parameter int        RAIL_GAP_MAX  = 3    // sender's largest gap between two inputs
) (
  output logic       rst_no,
  output dr_t  [2:0] in_o,
  input  logic       ack_o_i,     // the stage's ACKOT
  output logic       ack_i_o,     // the stage's ACKIT
  input  dr_t        sum_i,
  input  dr_t        carry_i,
  input  dr_t  [2:0] fb_sum_i,    // voter inputs as the voters see them
  input  dr_t  [2:0] fb_carry_i,
  input  dr_t  [2:0] in_q_i,      // register bank outputs
  output int         fault_blk,   // -1: none
  output dr_t        fault_sum,
  output dr_t        fault_carry,
  output logic       done,
  output int         checks,
  output int         failures
);

  typedef enum int { FLT_NONE, FLT_WRONG, FLT_LATE } fault_e;

  // ACKOT value that shows the register bank holds the spacer.
  localparam logic ACK_SPACER = (PROTOCOL == RTO);

  fault_e     mode;
  int         nb;                    // a healthy neighbour of the faulty block
  dr_t        nb_sum, nb_carry, late_sum, late_carry;
  logic [2:0] expected_q[$];
  int         n_sent, n_received;
  int         n_masked, n_late, n_held_back, n_early_carry, n_reg_hold, n_si_checks;

  function automatic dr_t swap(dr_t d);
    return dr_t'{r1: d.r0, r0: d.r1};
  endfunction

  function automatic bit all_spacer(dr_t [2:0] v);
    return dr_is_spacer(PROTOCOL, v[0]) && dr_is_spacer(PROTOCOL, v[1]) && dr_is_spacer(PROTOCOL, v[2]);
  endfunction

  function automatic bit all_data(dr_t [2:0] v);
    return dr_is_data(v[0]) && dr_is_data(v[1]) && dr_is_data(v[2]);
  endfunction

  function automatic int count_data(dr_t [2:0] v);
    int n = 0;
    for (int i = 0; i < 3; i++) if (dr_is_data(v[i])) n++;
    return n;
  endfunction

  task automatic fail(string msg);
    failures++;
    $display("FAIL %s [%s] t=%0t: %s", PROTOCOL.name(), mode.name(), $time, msg);
  endtask

  // Faulty-block models.
  assign nb_sum   = fb_sum_i[nb];
  assign nb_carry = fb_carry_i[nb];
  always @(nb_sum)   late_sum   <= #(LAG) nb_sum;
  always @(nb_carry) late_carry <= #(LAG) nb_carry;
  always_comb begin
    fault_sum   = (mode == FLT_LATE) ? late_sum   : swap(nb_sum);
    fault_carry = (mode == FLT_LATE) ? late_carry : swap(nb_carry);
  end

  // Strong indication: a voted output may go to data only when all three
  // voter inputs hold data, and back to spacer only when all hold spacer.
  always @(sum_i) if (rst_no) begin
    n_si_checks++;
    checks++;
    if (dr_is_data(sum_i) && !all_data(fb_sum_i)) fail("sum voter produced data early");
    if (dr_is_spacer(PROTOCOL, sum_i) && !all_spacer(fb_sum_i)) fail("sum voter produced spacer early");
  end
  always @(carry_i) if (rst_no) begin
    n_si_checks++;
    checks++;
    if (dr_is_data(carry_i) && !all_data(fb_carry_i)) fail("carry voter produced data early");
    if (dr_is_spacer(PROTOCOL, carry_i) && !all_spacer(fb_carry_i)) fail("carry voter produced spacer early");
  end

  // Mechanism counters.
  always @(fb_sum_i or sum_i) if (rst_no) begin
    if (count_data(fb_sum_i) == 2 && dr_is_spacer(PROTOCOL, sum_i)) n_held_back++;
  end
  always @(fb_carry_i or in_q_i) if (rst_no) begin
    if (!all_data(in_q_i) && (dr_is_data(fb_carry_i[0]) || dr_is_data(fb_carry_i[1]) ||
                              dr_is_data(fb_carry_i[2]))) n_early_carry++;
  end
  always @(in_o or in_q_i) if (rst_no) begin
    if (all_spacer(in_o) && count_data(in_q_i) != 0) n_reg_hold++;
  end

  // Wait d time units; a zero wait is skipped rather than executed as #0,
  // which would only reorder events within the time step.
  task automatic pause(int d);
    if (d > 0) #(d);
  endtask

  // Sender.
  task automatic send_wave(dr_t [2:0] word);
    int order[3] = '{0, 1, 2};
    order.shuffle();
    for (int s = 0; s < 3; s++) begin
      pause($urandom_range(0, RAIL_GAP_MAX));
      in_o[order[s]] = word[order[s]];
    end
  endtask

  initial begin : sender
    logic [2:0] bits;
    dr_t  [2:0] word;
    rst_no     = 1'b0;
    in_o       = {3{dr_spacer(PROTOCOL)}};
    mode       = FLT_NONE;
    fault_blk  = -1;
    nb         = 1;
    late_sum   = dr_spacer(PROTOCOL);
    late_carry = dr_spacer(PROTOCOL);
    done       = 1'b0;
    checks     = 0;
    failures   = 0;
    n_sent = 0; n_received = 0; n_masked = 0; n_late = 0;
    n_held_back = 0; n_early_carry = 0; n_reg_hold = 0; n_si_checks = 0;
    #2 rst_no = 1'b1;
    for (int t = 0; t < TRANSACTIONS; t++) begin
      wait (ack_o_i == ACK_SPACER);
      // Change the fault mode only while everything rests at spacer.
      while (!(all_spacer(fb_sum_i) && all_spacer(fb_carry_i) &&
               dr_is_spacer(PROTOCOL, sum_i) && dr_is_spacer(PROTOCOL, carry_i)))
        @(fb_sum_i or fb_carry_i or sum_i or carry_i);
      #(LAG + 1);
      if (INJECT_FAULTS) begin
        mode = fault_e'($urandom_range(0, 2));
        if (mode == FLT_NONE) fault_blk = -1;
        else begin
          fault_blk = $urandom_range(0, 2);
          nb        = (fault_blk + 1) % 3;
        end
        if (mode == FLT_WRONG) n_masked++;
        if (mode == FLT_LATE)  n_late++;
      end
      #1;
      bits = 3'(t % 8) ^ 3'($urandom_range(0, 7) & (t >= 8 ? 7 : 0));
      for (int i = 0; i < 3; i++) word[i] = dr_encode(PROTOCOL, bits[i]);
      expected_q.push_back(bits);
      send_wave(word);
      n_sent++;
      wait (ack_o_i == !ACK_SPACER);
      send_wave({3{dr_spacer(PROTOCOL)}});
    end
  end

  // Receiver: rise-complete is data for RTZ and spacer for RTO.
  function automatic bit rise_done(dr_t s, dr_t c);
    return (PROTOCOL == RTZ) ? (dr_is_data(s) && dr_is_data(c))
                             : (dr_is_spacer(PROTOCOL, s) && dr_is_spacer(PROTOCOL, c));
  endfunction
  function automatic bit fall_done(dr_t s, dr_t c);
    return (PROTOCOL == RTZ) ? (dr_is_spacer(PROTOCOL, s) && dr_is_spacer(PROTOCOL, c))
                             : (dr_is_data(s) && dr_is_data(c));
  endfunction

  task automatic take_data();
    logic [2:0] bits;
    logic [1:0] total;
    if (expected_q.size() == 0) begin
      checks++;
      fail("output data without input data");
      return;
    end
    bits  = expected_q.pop_front();
    total = 2'(bits[0]) + 2'(bits[1]) + 2'(bits[2]);
    checks += 2;
    if (dr_decode(PROTOCOL, sum_i) !== total[0])
      fail($sformatf("sum %b for inputs %b", sum_i, bits));
    if (dr_decode(PROTOCOL, carry_i) !== total[1])
      fail($sformatf("carry %b for inputs %b", carry_i, bits));
    n_received++;
  endtask

  // Receiver delay before it moves ACKIT. After a spacer has arrived the delay
  // is longer than the sender's whole spacer wave: the full adders are early
  // output, so a voted spacer does not prove that every register rail has
  // already seen the sender's spacer, and ACKIT must not re-open the register
  // bank before it has (the timing assumption of early-output stages).
  function automatic int rx_delay(bit after_spacer);
    return after_spacer ? $urandom_range(3 * RAIL_GAP_MAX + 1, 3 * RAIL_GAP_MAX + 6)
                        : $urandom_range(0, 4 * RAIL_GAP_MAX);
  endfunction

  initial begin : receiver
    ack_i_o = 1'b1;
    wait (rst_no);
    forever begin
      while (!rise_done(sum_i, carry_i)) @(sum_i or carry_i);
      if (PROTOCOL == RTZ) take_data();
      pause(rx_delay(PROTOCOL == RTO));
      ack_i_o = 1'b0;
      while (!fall_done(sum_i, carry_i)) @(sum_i or carry_i);
      if (PROTOCOL == RTO) take_data();
      pause(rx_delay(PROTOCOL == RTZ));
      ack_i_o = 1'b1;
      if (n_received == TRANSACTIONS) begin
        #(LAG + 2);
        checks += 2;
        if (n_sent != TRANSACTIONS) fail("not every word was sent");
        if (n_si_checks == 0) fail("voter outputs never changed");
        if (n_early_carry == 0) fail("early carry never observed");
        if (n_reg_hold == 0) fail("register bank never held data past the sender's spacer");
        if (INJECT_FAULTS) begin
          checks += 3;
          if (n_masked == 0) fail("wrong block never injected");
          if (n_late == 0) fail("late block never injected");
          if (n_held_back == 0) fail("voter never held back by a late block");
        end
        $display("%s: words=%0d wrong_block_outvoted=%0d late_block=%0d voter_held_back=%0d early_carry=%0d reg_hold=%0d si_checks=%0d",
                 PROTOCOL.name(), n_received, n_masked, n_late, n_held_back, n_early_carry, n_reg_hold, n_si_checks);
        done = 1'b1;
        break;
      end
    end
  end

endmodule
