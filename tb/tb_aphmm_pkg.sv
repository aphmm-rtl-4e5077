// tb_aphmm_pkg: self-checking test of the fp32 arithmetic shared by every
// datapath unit (fp_mul, fp_add, fp_bin in aphmm_pkg).
// Random positive operands over a wide range of exponents (the Baum-Welch
// values are probabilities and products of probabilities) are multiplied and
// added and compared with double precision (relative 2^-22: both functions
// truncate); products below the normal range must flush to zero, x + 0 = x,
// and fp_bin must equal floor(16 v), with values >= 1 in bin 15.
module tb_aphmm_pkg;
  import aphmm_pkg::*;
  import tb_phmm_pkg::*;

  int checks = 0, failures = 0;

  initial begin
    for (int n = 0; n < 20000; n++) begin
      int    ua, ub, sa, sb, bn;
      real   a, b, e;
      fp32_t fa, fb, q;
      ua = 1 + $urandom % 1000000; ub = 1 + $urandom % 1000000;
      sa = $urandom % 60;          sb = $urandom % 60;
      a = real'(ua) / 1e6 * (2.0 ** (-sa)); b = real'(ub) / 1e6 * (2.0 ** (-sb));
      fa = r2f(a); fb = r2f(b);
      a = f2r(fa); b = f2r(fb);
      q = fp_mul(fa, fb); e = a * b;
      checks++;
      if (!close(f2r(q), e, 2.4e-7) && !(e < 1.2e-38 && q == FP_ZERO)) begin
        failures++; $display("FAIL %g * %g = %g, expected %g", a, b, f2r(q), e);
      end
      q = fp_add(fa, fb); e = a + b;
      checks++;
      if (!close(f2r(q), e, 2.4e-7)) begin
        failures++; $display("FAIL %g + %g = %g, expected %g", a, b, f2r(q), e);
      end
      q = fp_add(fa, FP_ZERO);
      checks++;
      if (q != fa) begin failures++; $display("FAIL %g + 0 = %g", a, f2r(q)); end
      bn = int'(fp_bin(fa, 4));
      e  = a * 16.0;
      checks++;
      if (bn != ((a >= 1.0) ? 15 : int'($floor(e)))) begin
        failures++; $display("FAIL bin(%g) = %0d", a, bn);
      end
    end
    // values around the bin edges and above one
    for (int k = 0; k <= 20; k++) begin
      int    bn;
      fp32_t fv;
      fv = r2f(real'(k) / 16.0);
      bn = int'(fp_bin(fv, 4));
      checks++;
      if (bn != ((k >= 16) ? 15 : k)) begin failures++; $display("FAIL bin(%0d/16) = %0d", k, bn); end
    end
    checks++;
    if (fp_mul(32'h1F800000, 32'h1F800000) != FP_ZERO) begin failures++; $display("FAIL no flush to zero"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
