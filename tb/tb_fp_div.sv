// tb_fp_div: self-checking test of the iterative fp32 divider.
// Random operands over a wide exponent range are divided and compared with
// the double precision quotient (relative error below 2^-22, the divider
// truncates); the latency from start to done must be 26 cycles, busy must be
// high in between, and a zero operand must give zero. Random gaps between
// divisions and a start while busy (ignored) are exercised.
module tb_fp_div;
  import aphmm_pkg::*;
  import tb_phmm_pkg::*;

  logic  clk = 0, rst_n = 0, start = 0, busy, done;
  fp32_t a = '0, b = '0, q;
  int    checks = 0, failures = 0;
  always #5 clk = ~clk;

  fp_div dut (.*);

  task automatic divide(fp32_t x, fp32_t y, real expq);
    int lat;
    @(negedge clk);
    a = x; b = y; start = 1'b1;
    @(negedge clk) start = 1'b0;
    a = 32'h40490FDB; b = 32'h3F800000;
    // a start while busy must be ignored
    if ($urandom % 2 == 1) start = 1'b1;
    lat = 0;
    while (!done) begin
      checks++;
      if (!busy) begin failures++; $display("FAIL busy low before done"); end
      @(negedge clk) start = 1'b0;
      lat++;
    end
    checks += 2;
    if (!close(f2r(q), expq, 2.5e-7)) begin
      failures++; $display("FAIL %g / %g = %g, expected %g", f2r(x), f2r(y), f2r(q), expq);
    end
    if (lat != 26) begin
      failures++; $display("FAIL latency %0d", lat);
    end
    repeat ($urandom % 3) @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      real   x, y, e;
      fp32_t fx, fy;
      int    ux, uy, sx, sy;
      ux = $urandom % 100000 + 1; uy = $urandom % 100000 + 1;
      sx = $urandom % 40;         sy = $urandom % 40;
      x = real'(ux) / 997.0 * (2.0 ** (sx - 20));
      y = real'(uy) / 991.0 * (2.0 ** (sy - 20));
      fx = r2f(x); fy = r2f(y);
      e  = f2r(fx) / f2r(fy);
      divide(fx, fy, e);
    end
    divide(FP_ZERO, 32'h40400000, 0.0);
    divide(32'h40400000, FP_ZERO, 0.0);
    divide(32'h3F400000, 32'h3F400000, 1.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
