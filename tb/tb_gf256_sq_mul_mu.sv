// tb_gf256_sq_mul_mu: self-checking testbench for gf256_sq_mul_mu.
//
// Every input a is compared with mu*a^2 in the polynomial field,
// mu = beta + lambda*gamma.
// Expected values come from gf_ref_pkg, which does the arithmetic in the
// polynomial representation of GF(2^16) and never uses the tower circuits.
// The DUT is combinational: one vector is applied per 1 ns step.
// A watchdog ends the run with a failure if it has not finished in time.
module tb_gf256_sq_mul_mu;
  import gf_ref_pkg::*;

  int checks = 0;
  int failures = 0;
  logic [7:0] a, k;
  gf256_sq_mul_mu dut (.a(a), .k(k));

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
    for (int x = 0; x < 256; x++) begin
      a = x[7:0];
      #1;
      check(tower_to_poly(16'(k), 8) == pmul(pmul(tower_to_poly(16'(a), 8), tower_to_poly(16'(a), 8)), MU), $sformatf("in=%h out=%h", a, k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
