// tb_gf16_inv: self-checking testbench for gf16_inv.
//
// Every input is applied; a * out must be 1 in the polynomial field, and
// zero must map to zero.
// Expected values come from gf_ref_pkg, which does the arithmetic in the
// polynomial representation of GF(2^16) and never uses the tower circuits.
// The DUT is combinational: one vector is applied per 1 ns step.
// A watchdog ends the run with a failure if it has not finished in time.
module tb_gf16_inv;
  import gf_ref_pkg::*;

  int checks = 0;
  int failures = 0;
  logic [3:0] a, i;
  gf16_inv dut (.a(a), .i(i));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL %s", msg);
    end
  endtask

  initial begin
    #(1000000ns);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 0; x < 16; x++) begin
      a = x[3:0];
      #1;
      check((a == 0) ? (i == 0) : (pmul(tower_to_poly(16'(a), 4), tower_to_poly(16'(i), 4)) == 16'h0001), $sformatf("in=%h out=%h", a, i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
