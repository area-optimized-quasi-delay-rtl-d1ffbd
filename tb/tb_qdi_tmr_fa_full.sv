// tb_qdi_tmr_fa_full -- the QDI TMR full-adder stage at its default
// configuration (RTZ handshake), driven end to end.
//
// 64 handshake transactions: the first 8 apply every input combination of the
// full adder in turn, the rest are random; about two thirds of them have one
// function block delivering a wrong or a late result (forced onto that
// block's output net). Voted sum and carry are checked against integer
// addition and the voters' strong indication is monitored (see qdi_tmr_env).
module tb_qdi_tmr_fa_full;
  import qdi_pkg::*;

  localparam int TRANSACTIONS = 64;

  logic      rst_n, ack_o, ack_i, done;
  dr_t [2:0] in, fbs, fbc;
  dr_t       sum, carry, fsum, fcar;
  int        fblk, checks, failures;

  qdi_tmr_fa dut (
    .rst_ni(rst_n), .in_i(in), .ack_o(ack_o), .ack_i(ack_i),
    .sum_o(sum), .carry_o(carry), .fb_sum_o(fbs), .fb_carry_o(fbc));

  qdi_tmr_env #(.PROTOCOL(RTZ), .TRANSACTIONS(TRANSACTIONS)) u_env (
    .rst_no(rst_n), .in_o(in), .ack_o_i(ack_o), .ack_i_o(ack_i),
    .sum_i(sum), .carry_i(carry), .fb_sum_i(fbs), .fb_carry_i(fbc),
    .in_q_i(dut.in_q), .fault_blk(fblk), .fault_sum(fsum), .fault_carry(fcar),
    .done(done), .checks(checks), .failures(failures));

  always @(fblk) begin
    release dut.fb_sum[0]; release dut.fb_carry[0];
    release dut.fb_sum[1]; release dut.fb_carry[1];
    release dut.fb_sum[2]; release dut.fb_carry[2];
    case (fblk)
      0: begin force dut.fb_sum[0] = fsum; force dut.fb_carry[0] = fcar; end
      1: begin force dut.fb_sum[1] = fsum; force dut.fb_carry[1] = fcar; end
      2: begin force dut.fb_sum[2] = fsum; force dut.fb_carry[2] = fcar; end
      default: ;
    endcase
  end

  initial begin
    #1 wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #(TRANSACTIONS * 1000);
    $display("FAIL watchdog expired: in=%b q=%b ack_o=%b ack_i=%b fbs=%b fbc=%b sum=%b carry=%b blk=%0d",
             in, dut.in_q, ack_o, ack_i, fbs, fbc, sum, carry, fblk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule
