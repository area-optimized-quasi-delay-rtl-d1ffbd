// tb_qdi_tmr_fa -- end-to-end testbench of the QDI TMR full-adder stage,
// one RTZ and one RTO instance running at the same time.
//
// Each instance is driven by a qdi_tmr_env: random words under the 4-phase
// handshake, one function block made wrong or late in about two thirds of
// the transactions (applied here with force on that block's output net),
// voted sum and carry checked against integer addition, strong indication of
// the voters monitored on every output change, and each mechanism counted.
module tb_qdi_tmr_fa;
  import qdi_pkg::*;

  localparam int TRANSACTIONS = 240;

  logic      rst_z, ack_o_z, ack_i_z, done_z;
  dr_t [2:0] in_z, fbs_z, fbc_z;
  dr_t       sum_z, carry_z, fsum_z, fcar_z;
  int        fblk_z, checks_z, failures_z;

  logic      rst_o, ack_o_o, ack_i_o, done_o;
  dr_t [2:0] in_o, fbs_o, fbc_o;
  dr_t       sum_o, carry_o, fsum_o, fcar_o;
  int        fblk_o, checks_o, failures_o;

  qdi_tmr_fa u_rtz (
    .rst_ni(rst_z), .in_i(in_z), .ack_o(ack_o_z), .ack_i(ack_i_z),
    .sum_o(sum_z), .carry_o(carry_z), .fb_sum_o(fbs_z), .fb_carry_o(fbc_z));

  qdi_tmr_fa #(.PROTOCOL(RTO)) u_rto (
    .rst_ni(rst_o), .in_i(in_o), .ack_o(ack_o_o), .ack_i(ack_i_o),
    .sum_o(sum_o), .carry_o(carry_o), .fb_sum_o(fbs_o), .fb_carry_o(fbc_o));

  qdi_tmr_env #(.PROTOCOL(RTZ), .TRANSACTIONS(TRANSACTIONS)) u_env_z (
    .rst_no(rst_z), .in_o(in_z), .ack_o_i(ack_o_z), .ack_i_o(ack_i_z),
    .sum_i(sum_z), .carry_i(carry_z), .fb_sum_i(fbs_z), .fb_carry_i(fbc_z),
    .in_q_i(u_rtz.in_q), .fault_blk(fblk_z), .fault_sum(fsum_z), .fault_carry(fcar_z),
    .done(done_z), .checks(checks_z), .failures(failures_z));

  qdi_tmr_env #(.PROTOCOL(RTO), .TRANSACTIONS(TRANSACTIONS)) u_env_o (
    .rst_no(rst_o), .in_o(in_o), .ack_o_i(ack_o_o), .ack_i_o(ack_i_o),
    .sum_i(sum_o), .carry_i(carry_o), .fb_sum_i(fbs_o), .fb_carry_i(fbc_o),
    .in_q_i(u_rto.in_q), .fault_blk(fblk_o), .fault_sum(fsum_o), .fault_carry(fcar_o),
    .done(done_o), .checks(checks_o), .failures(failures_o));

  // Apply the faulty-block model to the chosen function block's outputs.
  always @(fblk_z) begin
    release u_rtz.fb_sum[0]; release u_rtz.fb_carry[0];
    release u_rtz.fb_sum[1]; release u_rtz.fb_carry[1];
    release u_rtz.fb_sum[2]; release u_rtz.fb_carry[2];
    case (fblk_z)
      0: begin force u_rtz.fb_sum[0] = fsum_z; force u_rtz.fb_carry[0] = fcar_z; end
      1: begin force u_rtz.fb_sum[1] = fsum_z; force u_rtz.fb_carry[1] = fcar_z; end
      2: begin force u_rtz.fb_sum[2] = fsum_z; force u_rtz.fb_carry[2] = fcar_z; end
      default: ;
    endcase
  end

  always @(fblk_o) begin
    release u_rto.fb_sum[0]; release u_rto.fb_carry[0];
    release u_rto.fb_sum[1]; release u_rto.fb_carry[1];
    release u_rto.fb_sum[2]; release u_rto.fb_carry[2];
    case (fblk_o)
      0: begin force u_rto.fb_sum[0] = fsum_o; force u_rto.fb_carry[0] = fcar_o; end
      1: begin force u_rto.fb_sum[1] = fsum_o; force u_rto.fb_carry[1] = fcar_o; end
      2: begin force u_rto.fb_sum[2] = fsum_o; force u_rto.fb_carry[2] = fcar_o; end
      default: ;
    endcase
  end

  initial begin
    #1 wait (done_z && done_o);
    $display("TB_RESULT checks=%0d failures=%0d", checks_z + checks_o, failures_z + failures_o);
    $finish;
  end

  initial begin : watchdog
    #(TRANSACTIONS * 1000);
    $display("FAIL watchdog expired: rtz done=%0b rto done=%0b", done_z, done_o);
    $display("rtz: in=%b q=%b ack_o=%b ack_i=%b fbs=%b fbc=%b sum=%b carry=%b blk=%0d",
             in_z, u_rtz.in_q, ack_o_z, ack_i_z, fbs_z, fbc_z, sum_z, carry_z, fblk_z);
    $display("rto: in=%b q=%b ack_o=%b ack_i=%b fbs=%b fbc=%b sum=%b carry=%b blk=%0d",
             in_o, u_rto.in_q, ack_o_o, ack_i_o, fbs_o, fbc_o, sum_o, carry_o, fblk_o);
    $display("TB_RESULT checks=%0d failures=%0d", checks_z + checks_o, failures_z + failures_o + 1);
    $finish;
  end

endmodule
