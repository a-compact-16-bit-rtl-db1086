// tb_affine: self-checking testbench for affine.
//
// Every input is compared with the paper's matrix M applied row by row.
// Expected values come from gf_ref_pkg, which does the arithmetic in the
// polynomial representation of GF(2^16) and never uses the tower circuits.
// The DUT is combinational: one vector is applied per 1 ns step.
// A watchdog ends the run with a failure if it has not finished in time.
module tb_affine;
  import gf_ref_pkg::*;

  int checks = 0;
  int failures = 0;
  logic [15:0] a, b;
  affine dut (.a(a), .b(b));

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
      a = x[15:0];
      #1;
      check(b == apply_rows(AT_ROWS, a), $sformatf("in=%h out=%h", a, b));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
