// tb_tower_to_nb: self-checking testbench for tower_to_nb.
//
// Every input is applied: the tower vector and the normal-basis vector
// must name the same field element.
// Expected values come from gf_ref_pkg, which does the arithmetic in the
// polynomial representation of GF(2^16) and never uses the tower circuits.
// The DUT is combinational: one vector is applied per 1 ns step.
// A watchdog ends the run with a failure if it has not finished in time.
module tb_tower_to_nb;
  import gf_ref_pkg::*;

  int checks = 0;
  int failures = 0;
  logic [15:0] t, a;
  tower_to_nb dut (.t(t), .a(a));

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
      t = x[15:0];
      #1;
      check(tower_to_poly(t, 16) == nb_to_poly(a), $sformatf("in=%h out=%h", t, a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
