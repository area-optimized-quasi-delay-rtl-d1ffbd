// tb_c_element -- self-checking testbench for the 2-input Muller C-element.
//
// Applies random input pairs and compares the output with a reference state
// that is updated only when both inputs agree (L = JK + JL + KL). Also checks
// that a disagreement keeps both possible stored values. A watchdog ends the
// run if it hangs.
module tb_c_element;

  logic j, k, l;
  logic ref_l;
  int   checks = 0, failures = 0;

  c_element dut (.j(j), .k(k), .l(l));

  task automatic check(string what);
    checks++;
    if (l !== ref_l) begin
      failures++;
      $display("FAIL %s: j=%0b k=%0b l=%0b expected %0b", what, j, k, l, ref_l);
    end
  endtask

  initial begin
    // Establish a known state: both inputs 0, then both 1.
    j = 1'b0; k = 1'b0; ref_l = 1'b0; #1; check("init 00");
    j = 1'b1; #1; check("hold 0 on 10");
    k = 1'b1; ref_l = 1'b1; #1; check("set 11");
    j = 1'b0; #1; check("hold 1 on 01");
    k = 1'b0; ref_l = 1'b0; #1; check("reset 00");
    // Random sequence.
    for (int n = 0; n < 2000; n++) begin
      j = 1'($urandom);
      k = 1'($urandom);
      if (j == k) ref_l = j;
      #1;
      check("random");
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
