// tb_sbox16_security: measures the cryptographic figures of the S-box on
// the RTL and compares them with the values the design is known to reach
// for field inversion in GF(2^16).
//
// The full 65536-entry table is read from the forward S-box, then:
//   - differential uniformity: the difference distribution row of 24 input
//     differences (fixed and pseudo-random) is counted over all inputs;
//     every row of a GF(2^16) inversion peaks at exactly 4;
//   - algebraic degree: the algebraic normal form of every output bit is
//     obtained with the binary Moebius transform; the largest monomial
//     degree must be 15;
//   - nonlinearity: the Walsh spectrum of the 16 single-bit components and
//     8 pseudo-random components (mask v) is obtained with the fast
//     Walsh-Hadamard transform; max |W| must be 512, i.e. NL = 2^15 - 256 = 32512.
// Transparency order and the DPA signal-to-noise figure need work of order
// 2^32 per value and are not measured.
// A watchdog ends the run with a failure if it has not finished in time.
module tb_sbox16_security;

  int checks = 0;
  int failures = 0;

  logic [15:0] fwd_in, fwd_out, inv_in, inv_out;
  logic [15:0] sbox [65536];
  int          cnt  [65536];
  int          wal  [65536];
  bit          anf  [65536];

  sbox16_top dut (.fwd_in(fwd_in), .fwd_out(fwd_out), .inv_in(inv_in), .inv_out(inv_out));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL %s", msg);
    end
  endtask

  initial begin
    #(1ms);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int du_max, deg_max, walsh_max;
    logic [15:0] dx, v;
    inv_in = '0;
    for (int x = 0; x < 65536; x++) begin
      fwd_in = x[15:0];
      #1;
      sbox[x] = fwd_out;
    end

    // differential uniformity over 24 rows
    du_max = 0;
    for (int r = 0; r < 24; r++) begin
      int row_max;
      dx = (r < 8) ? (16'h1 << (2 * r)) : 16'($urandom_range(1, 65535));
      if (r == 0) dx = 16'hFFFF;
      foreach (cnt[i]) cnt[i] = 0;
      for (int x = 0; x < 65536; x++) cnt[sbox[x] ^ sbox[x ^ int'(dx)]]++;
      row_max = 0;
      for (int y = 1; y < 65536; y++) if (cnt[y] > row_max) row_max = cnt[y];
      check(row_max == 4, $sformatf("DDT row %h peaks at %0d", dx, row_max));
      if (row_max > du_max) du_max = row_max;
    end

    // algebraic degree of every output bit
    deg_max = 0;
    for (int b = 0; b < 16; b++) begin
      int deg;
      for (int x = 0; x < 65536; x++) anf[x] = sbox[x][b];
      for (int s = 1; s < 65536; s <<= 1)
        for (int x = 0; x < 65536; x++)
          if ((x & s) != 0) anf[x] ^= anf[x ^ s];
      deg = 0;
      for (int x = 0; x < 65536; x++) if (anf[x] && $countones(x) > deg) deg = $countones(x);
      check(deg == 15, $sformatf("output bit %0d has degree %0d", b, deg));
      if (deg > deg_max) deg_max = deg;
    end

    // nonlinearity of 24 components
    walsh_max = 0;
    for (int c = 0; c < 24; c++) begin
      int m;
      v = (c < 16) ? (16'h1 << c) : 16'($urandom_range(1, 65535));
      for (int x = 0; x < 65536; x++) wal[x] = ($countones(sbox[x] & v) % 2 == 1) ? -1 : 1;
      for (int s = 1; s < 65536; s <<= 1)
        for (int x = 0; x < 65536; x++)
          if ((x & s) == 0) begin
            int p, q;
            p = wal[x];
            q = wal[x | s];
            wal[x]     = p + q;
            wal[x | s] = p - q;
          end
      m = 0;
      for (int u = 0; u < 65536; u++) if ((wal[u] < 0 ? -wal[u] : wal[u]) > m) m = (wal[u] < 0 ? -wal[u] : wal[u]);
      check(m == 512, $sformatf("component %h has max |W| = %0d", v, m));
      if (m > walsh_max) walsh_max = m;
    end

    $display("differential uniformity (24 rows): %0d", du_max);
    $display("algebraic degree: %0d", deg_max);
    $display("nonlinearity (24 components): %0d", 32768 - walsh_max / 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
