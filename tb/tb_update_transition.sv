// tb_update_transition: self-checking test of the Update Transition unit.
// Each round clears the unit, sends a random stream of accumulation beats
// (slot, transition k, alpha*e, F, B) with gaps and back-to-back beats to the
// same word, then finalises with a randomly stalled output handshake. The
// reference keeps the numerators in double precision; each output must be
// num[slot][k] / sum_k num[slot][k] (relative 1e-3, the unit truncates), each
// used (slot, k) must come out exactly once, and unused ones never.
module tb_update_transition;
  import aphmm_pkg::*;
  import tb_phmm_pkg::*;

  localparam int SPB = 1024;           // 16 slots of 16 words
  localparam int NSL = SPB / 4 / 16;
  logic        clk = 0, rst_n = 0, clear = 0, in_valid = 0, fin_start = 0, out_ready = 0;
  logic [3:0]  in_slot = '0, in_k = '0, out_slot, out_k;
  fp32_t       in_coef = '0, in_f = '0, in_b = '0, out_alpha;
  logic        idle, fin_busy, out_valid;
  int          checks = 0, failures = 0;
  real         num [NSL][16];
  bit          used [NSL][16], got [NSL][16];
  always #5 clk = ~clk;

  update_transition #(.K(9), .KPAD(16), .SP_BYTES(SPB)) dut (.*);

  always_ff @(posedge clk) out_ready <= ($urandom % 3) != 0;

  always_ff @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      real d, e;
      int  s, k;
      s = int'(out_slot); k = int'(out_k);
      d = 0;
      for (int x = 0; x < 16; x++) d += num[s][x];
      e = (d == 0) ? 0.0 : num[s][k] / d;
      checks++;
      if (!used[s][k] || got[s][k] || !close(f2r(out_alpha), e, 1e-3)) begin
        failures++;
        $display("FAIL slot %0d k %0d: %g, expected %g (used %b, repeated %b)", s, k, f2r(out_alpha), e, used[s][k], got[s][k]);
      end
      got[s][k] <= 1'b1;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 8; r++) begin
      int nb;
      foreach (num[s, k]) begin num[s][k] = 0; used[s][k] = 0; got[s][k] = 0; end
      @(negedge clk) clear = 1'b1;
      @(negedge clk) clear = 1'b0;
      nb = 50 + $urandom % 300;
      for (int n = 0; n < nb; n++) begin
        int s, k, uc, uf, ub;
        real c, f, b;
        s = $urandom % NSL; k = $urandom % 9;
        if (n > 0 && $urandom % 4 == 0) begin s = int'(in_slot); k = int'(in_k); end
        uc = 1 + $urandom % 1000; uf = 1 + $urandom % 1000; ub = 1 + $urandom % 1000;
        c = f2r(r2f(real'(uc) / 1000.0)); f = f2r(r2f(real'(uf) / 1e5)); b = f2r(r2f(real'(ub) / 1e3));
        num[s][k] += c * f * b; used[s][k] = 1'b1;
        in_valid = 1'b1; in_slot = 4'(s); in_k = 4'(k);
        in_coef = r2f(c); in_f = r2f(f); in_b = r2f(b);
        @(negedge clk);
        in_valid = 1'b0;
        if ($urandom % 3 == 0) @(negedge clk);
      end
      while (!idle) @(negedge clk);
      repeat (2) @(negedge clk);
      fin_start = 1'b1;
      @(negedge clk) fin_start = 1'b0;
      while (fin_busy || out_valid) @(negedge clk);
      @(negedge clk);
      foreach (used[s, k]) begin
        checks++;
        if (used[s][k] != got[s][k]) begin
          failures++; $display("FAIL round %0d slot %0d k %0d: used %b, output %b", r, s, k, used[s][k], got[s][k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
