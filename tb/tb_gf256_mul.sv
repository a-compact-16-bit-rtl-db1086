// tb_gf256_mul: self-checking testbench for gf256_mul.
//
// All 65536 operand pairs are applied and the product is compared with the
// product of the operands mapped into the polynomial field.
// Expected values come from gf_ref_pkg, which does the arithmetic in the
// polynomial representation of GF(2^16) and never uses the tower circuits.
// The DUT is combinational: one vector is applied per 1 ns step.
// A watchdog ends the run with a failure if it has not finished in time.
module tb_gf256_mul;
  import gf_ref_pkg::*;

  int checks = 0;
  int failures = 0;
  logic [7:0] a, b, m;
  gf256_mul dut (.a(a), .b(b), .m(m));

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
      for (int y = 0; y < 256; y++) begin
        a = x[7:0];
        b = y[7:0];
        #1;
        check(tower_to_poly(16'(m), 8) == pmul(tower_to_poly(16'(a), 8), tower_to_poly(16'(b), 8)),
              $sformatf("a=%h b=%h m=%h", a, b, m));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
