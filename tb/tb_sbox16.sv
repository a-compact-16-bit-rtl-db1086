// tb_sbox16: self-checking testbench for sbox16.
//
// Every input is applied. Undoing the output transformation with the paper's
// matrix N must leave the field inverse of the input (normal basis): their
// product in the polynomial field is 1. Zero maps to zero.
// Expected values come from gf_ref_pkg, which does the arithmetic in the
// polynomial representation of GF(2^16) and never uses the tower circuits.
// The DUT is combinational: one vector is applied per 1 ns step.
// A watchdog ends the run with a failure if it has not finished in time.
module tb_sbox16;
  import gf_ref_pkg::*;

  int checks = 0;
  int failures = 0;
  logic [15:0] a, s;
  sbox16 dut (.a(a), .s(s));

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
      check((a == 0) ? (s == 0) : (pmul(nb_to_poly(a), nb_to_poly(apply_rows(ATI_ROWS, s))) == 16'h0001), $sformatf("in=%h out=%h", a, s));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
