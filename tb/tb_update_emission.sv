// tb_update_emission: self-checking test of the Update Emission unit.
// Each round clears the unit and sends random (state, character, F, B)
// contributions, some states never touched; then it finalises with a randomly
// stalled output. Each state seen must give N_SIGMA = 4 outputs
// e*_c = sum F*B [char = c] / sum F*B (double precision reference, relative
// 1e-3), states not seen none, and no output may repeat.
module tb_update_emission;
  import aphmm_pkg::*;
  import tb_phmm_pkg::*;

  localparam int MS = 32;
  logic        clk = 0, rst_n = 0, clear = 0, in_valid = 0, fin_start = 0, out_ready = 0;
  logic [4:0]  in_idx = '0, out_idx;
  logic [1:0]  in_char = '0, out_c;
  fp32_t       in_f = '0, in_b = '0, out_e;
  logic        fin_busy, out_valid;
  int          checks = 0, failures = 0;
  real         num [MS][4], den [MS];
  bit          used [MS], got [MS][4];
  always #5 clk = ~clk;

  update_emission #(.MAX_ST(MS), .NS(4)) dut (.*);

  always_ff @(posedge clk) out_ready <= ($urandom % 3) != 0;

  always_ff @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      real e;
      int  s, c;
      s = int'(out_idx); c = int'(out_c);
      e = (den[s] == 0) ? 0.0 : num[s][c] / den[s];
      checks++;
      if (!used[s] || got[s][c] || !close(f2r(out_e), e, 1e-3)) begin
        failures++;
        $display("FAIL state %0d c %0d: %g, expected %g (used %b, repeated %b)", s, c, f2r(out_e), e, used[s], got[s][c]);
      end
      got[s][c] <= 1'b1;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 10; r++) begin
      int nb;
      foreach (used[s]) begin
        used[s] = 0; den[s] = 0;
        for (int c = 0; c < 4; c++) begin num[s][c] = 0; got[s][c] = 0; end
      end
      @(negedge clk) clear = 1'b1;
      @(negedge clk) clear = 1'b0;
      nb = 20 + $urandom % 200;
      for (int n = 0; n < nb; n++) begin
        int s, c, uf, ub;
        real f, b;
        s = $urandom % (MS - 4); c = $urandom % 4;
        uf = 1 + $urandom % 1000; ub = 1 + $urandom % 1000;
        f = f2r(r2f(real'(uf) / 1e4)); b = f2r(r2f(real'(ub) / 1e3));
        num[s][c] += f * b; den[s] += f * b; used[s] = 1'b1;
        in_valid = 1'b1; in_idx = 5'(s); in_char = 2'(c); in_f = r2f(f); in_b = r2f(b);
        @(negedge clk);
        in_valid = 1'b0;
        if ($urandom % 3 == 0) @(negedge clk);
      end
      repeat (2) @(negedge clk);
      fin_start = 1'b1;
      @(negedge clk) fin_start = 1'b0;
      while (fin_busy || out_valid) @(negedge clk);
      @(negedge clk);
      foreach (used[s]) for (int c = 0; c < 4; c++) begin
        checks++;
        if (used[s] != got[s][c]) begin
          failures++; $display("FAIL round %0d state %0d c %0d: used %b, output %b", r, s, c, used[s], got[s][c]);
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
