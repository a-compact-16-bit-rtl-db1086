// tb_affine_inv: self-checking testbench for affine_inv.
//
// Every input is compared with the paper's matrix N applied row by row.
// Expected values come from gf_ref_pkg, which does the arithmetic in the
// polynomial representation of GF(2^16) and never uses the tower circuits.
// The DUT is combinational: one vector is applied per 1 ns step.
// A watchdog ends the run with a failure if it has not finished in time.
module tb_affine_inv;
  import gf_ref_pkg::*;

  int checks = 0;
  int failures = 0;
  logic [15:0] b, a;
  affine_inv dut (.b(b), .a(a));

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
    for (int x = 0; x < 65536; x++) begin
      b = x[15:0];
      #1;
      check(a == apply_rows(ATI_ROWS, b), $sformatf("in=%h out=%h", b, a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
