// qdi_register_bank -- QDI register bank (the paper's CSRB / NSRB).
//
// One 2-input C-element per rail: one input is the rail from the sender, the
// other is ACKIT, the acknowledgement from the next stage (ACKIT = ~ACKOT of
// the next stage's completion detector). With ACKIT = 1 a rising rail passes
// and is held; with ACKIT = 0 a falling rail passes. Under RTZ this lets data
// through while ACKIT = 1 and the spacer while ACKIT = 0; under RTO the spacer
// (all ones) passes while ACKIT = 1 and data while ACKIT = 0 (paper Sec. II.A,
// Fig. 1). The circuit is identical for both protocols; PROTOCOL only selects
// the spacer value the bank is reset to. The active-low asynchronous reset is
// this design's addition; the paper does not mention reset.
// Interface: d_i (N dual-rail bits), ack_i (ACKIT), rst_ni; q_o (N dual-rail bits).
// Timing: no clock. An assertion flags an input bit in the illegal codeword
// ((1,1) under RTZ, (0,0) under RTO), which the dual-rail code forbids.
module qdi_register_bank
  import qdi_pkg::*;
#(
  parameter int        N        = 3,
  parameter protocol_e PROTOCOL = RTZ
) (
  input  logic         rst_ni,
  input  dr_t  [N-1:0] d_i,
  input  logic         ack_i,
  output dr_t  [N-1:0] q_o
);

  localparam bit SPACER_RAIL = (PROTOCOL == RTO);

  localparam dr_t ILLEGAL = (PROTOCOL == RTZ) ? 2'b11 : 2'b00;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      if (rst_ni) assert final (d_i[i] != ILLEGAL)
        else $error("register bank input %0d holds the illegal codeword %b", i, d_i[i]);
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_bit
    c_element_r #(.RESET_VAL(SPACER_RAIL)) u_r1 (
      .rst_ni(rst_ni), .j(d_i[i].r1), .k(ack_i), .l(q_o[i].r1)
    );
    c_element_r #(.RESET_VAL(SPACER_RAIL)) u_r0 (
      .rst_ni(rst_ni), .j(d_i[i].r0), .k(ack_i), .l(q_o[i].r0)
    );
  end

endmodule
