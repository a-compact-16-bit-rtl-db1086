// tb_sbox16_top: end-to-end testbench of the S-box top at its default (and
// only) size.
//
// Every one of the 65536 inputs is sent through the forward S-box; its output
// is checked against the field inverse computed in the polynomial field (with
// the paper's matrix N undoing the output transformation), and is then fed
// to the inverse S-box, which must return the original input. A 65536-bit
// map of seen outputs checks that the forward S-box is a permutation. The
// paths the design has are each counted: the zero input (inversion of zero
// is defined as zero), inputs whose tower-field high half is zero (the
// GF(2^8) inverter then sees a_l^2*mu only), inputs with a zero low half,
// and fixed points S(x) = x. A path that never occurs counts as a failure.
// A watchdog ends the run with a failure if it has not finished in time.
module tb_sbox16_top;
  import gf_ref_pkg::*;

  int checks = 0;
  int failures = 0;
  int n_zero = 0, n_hi_zero = 0, n_lo_zero = 0, n_fixed = 0;

  logic [15:0] fwd_in, fwd_out, inv_in, inv_out;
  logic [15:0] t_in;
  bit          seen [65536];

  sbox16_top dut (.fwd_in(fwd_in), .fwd_out(fwd_out), .inv_in(inv_in), .inv_out(inv_out));

  // tower representation of the input, observed only to classify the input
  assign t_in = dut.u_fwd.t;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL %s", msg);
    end
  endtask

  initial begin
    #(2ms);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fwd_in = '0;
    inv_in = '0;
    for (int x = 0; x < 65536; x++) begin
      fwd_in = x[15:0];
      #1;
      inv_in = fwd_out;
      #1;
      if (fwd_in == 0)                        n_zero++;
      else if (t_in[15:8] == 0)               n_hi_zero++;
      else if (t_in[7:0] == 0)                n_lo_zero++;
      if (fwd_out == fwd_in)                  n_fixed++;
      check((fwd_in == 0) ? (fwd_out == 0)
                          : (pmul(nb_to_poly(fwd_in), nb_to_poly(apply_rows(ATI_ROWS, fwd_out))) == 16'h0001),
            $sformatf("S(%h) = %h is not the inverse", fwd_in, fwd_out));
      check(inv_out == fwd_in, $sformatf("S^-1(S(%h)) = %h", fwd_in, inv_out));
      check(!seen[fwd_out], $sformatf("output %h produced twice", fwd_out));
      seen[fwd_out] = 1'b1;
    end
    $display("zero input: %0d, tower high half zero: %0d, tower low half zero: %0d, fixed points: %0d",
             n_zero, n_hi_zero, n_lo_zero, n_fixed);
    check(n_zero == 1,      "zero input never applied");
    check(n_hi_zero == 255, "inputs with zero tower high half not all seen");
    check(n_lo_zero == 255, "inputs with zero tower low half not all seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
