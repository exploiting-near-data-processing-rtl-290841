// tb_natsa_dcu -- self-checking testbench of the DCU.
// Builds real windows, takes their exact dot product, mean and standard
// deviation in fixed point, and compares the DCU distance with the reference
// fixed-point formula. Also checks the value against the real-valued squared
// z-normalised distance (within rounding) and that a flat window (sigma = 0)
// gives the largest distance.
module tb_natsa_dcu;
  import natsa_pkg::*;
  import natsa_ref_pkg::*;

  fix_t q, mu_i, mu_j, sig_i, sig_j, d;
  idx_t m;
  int checks = 0, failures = 0;

  natsa_dcu dut (.*);

  initial begin
    for (int trial = 0; trial < 300; trial++) begin
      int mm, qq;
      real a [32], b [32];
      real ma, mb, sa, sb, dz, err;
      mm = 4 + $urandom % 28;
      qq = 0; ma = 0; mb = 0; sa = 0; sb = 0; dz = 0;
      for (int s = 0; s < mm; s++) begin
        a[s] = real'(int'($urandom % 2048) - 1024) / 256.0;
        b[s] = (trial % 5 == 0) ? a[s] * 2.0 + 1.0 : real'(int'($urandom % 2048) - 1024) / 256.0;
        ma += a[s] / mm;  mb += b[s] / mm;
        qq += rmul(to_fix(a[s]), to_fix(b[s]));
      end
      for (int s = 0; s < mm; s++) begin
        sa += (a[s] - ma) ** 2 / mm;  sb += (b[s] - mb) ** 2 / mm;
      end
      sa = $sqrt(sa); sb = $sqrt(sb);
      for (int s = 0; s < mm; s++) dz += ((a[s] - ma) / sa - (b[s] - mb) / sb) ** 2;
      m = idx_t'(mm); q = qq;
      mu_i = to_fix(ma); mu_j = to_fix(mb); sig_i = to_fix(sa); sig_j = to_fix(sb);
      #1;
      checks++;
      if (d !== rdist(q, mm, mu_i, mu_j, sig_i, sig_j)) begin
        failures++;
        $display("FAIL trial %0d: d=%0d exp %0d", trial, d, rdist(q, mm, mu_i, mu_j, sig_i, sig_j));
      end
      checks++;
      err = real'(d) / 65536.0 - dz;
      if (err < 0) err = -err;
      if (err > 0.05 * mm + 0.05) begin
        failures++;
        $display("FAIL trial %0d: d=%f real %f", trial, real'(d) / 65536.0, dz);
      end
    end
    // a flat window never matches
    sig_i = 0; #1;
    checks++;
    if (d !== FIX_MAX) begin failures++; $display("FAIL flat window d=%0d", d); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
