// tb_gf16_mul_lambda: self-checking testbench for gf16_mul_lambda.
//
// Every input is compared with its product by lambda = alpha^2*beta, the
// constant being built from the powers of omega that define the tower.
// Expected values come from gf_ref_pkg, which does the arithmetic in the
// polynomial representation of GF(2^16) and never uses the tower circuits.
// The DUT is combinational: one vector is applied per 1 ns step.
// A watchdog ends the run with a failure if it has not finished in time.
module tb_gf16_mul_lambda;
  import gf_ref_pkg::*;

  int checks = 0;
  int failures = 0;
  logic [3:0] a, k;
  gf16_mul_lambda dut (.a(a), .k(k));

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
      check(tower_to_poly(16'(k), 4) == pmul(tower_to_poly(16'(a), 4), LAMBDA), $sformatf("in=%h out=%h", a, k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
