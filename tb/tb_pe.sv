// tb_pe: self-checking test of one Processing Engine.
// Each round loads a random neighbour table (up to 9 neighbours among states
// 0..31) with random alpha and emissions, in either direction, with the LUT
// on or off. Previous-step values are broadcast as 8 lines of 4 lanes (some
// lanes invalid) and the result must equal the sum over the matched
// neighbours of value * alpha_k * e_k(c) (double precision reference,
// relative 1e-4). Checked as well: the LUT fill takes 36 cycles of `ready`
// low after a load, a kept load (ld_keep) needs no fill, a Backward beat with
// m matched lanes and updates on holds `ready` low for exactly m cycles (the
// stall), and the two initialisation modes give pi*e and 1.0.
module tb_pe;
  import aphmm_pkg::*;
  import tb_phmm_pkg::*;

  logic        clk = 0, rst_n = 0;
  dir_e        dir = DIR_FWD;
  logic        lut_en = 0, upd_en = 0, mode_init = 0;
  logic        ld_valid = 0, ld_act = 0, ld_keep = 0;
  graph_rec_t  ld_rec = '0;
  fp32_t       ld_f = '0;
  logic [6:0]  ld_slot = '0;
  logic        ready;
  logic        bc_valid = 0;
  sid_t        bc_base = '0;
  logic [3:0]  bc_lvld = '0;
  fp32_t       bc_val [4];
  logic [1:0]  bc_char = '0;
  logic        fin = 0, res_valid, act;
  fp32_t       result, f_val;
  logic        ut_clear = 0, ut_fin_start = 0, ut_fin_busy, ut_out_valid, ut_out_ready = 1;
  logic [6:0]  ut_out_slot;
  logic [3:0]  ut_out_k;
  fp32_t       ut_out_alpha;
  logic        ut_idle, te_mul_use;
  int          checks = 0, failures = 0, n_stall = 0;
  always #5 clk = ~clk;

  pe #(.LN(4), .SP_BYTES(8192)) dut (.*);

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    foreach (bc_val[l]) bc_val[l] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      graph_rec_t rc;
      real        al [9], em [9][4], sum, pi;
      int         id [9], nn, c, waitc, lo;
      bit         keep;
      keep = (r > 0) && ($urandom % 4 == 0);
      if (keep) rc = ld_rec;
      else begin
        rc = '0;
        nn = 1 + $urandom % 9;
        for (int k = 0; k < nn; k++) begin
          int u;
          rc.nbr_vld[k] = 1'b1;
          rc.nbr_id[k]  = sid_t'((k * 3 + $urandom % 3) % 32);
          u = 1 + $urandom % 999;
          rc.alpha[k] = r2f(real'(u) / 1000.0);
          for (int x = 0; x < 4; x++) begin u = 1 + $urandom % 999; rc.emis[k][x] = r2f(real'(u) / 1000.0); end
        end
        rc.pi = r2f(0.5);
      end
      for (int k = 0; k < 9; k++) begin
        id[k] = rc.nbr_vld[k] ? int'(rc.nbr_id[k]) : -1;
        al[k] = f2r(rc.alpha[k]);
        for (int x = 0; x < 4; x++) em[k][x] = f2r(rc.emis[k][x]);
      end
      dir = keep ? dir : (($urandom % 2) ? DIR_BWD : DIR_FWD);
      lut_en = keep ? lut_en : 1'(r % 3 != 0);
      upd_en = 1'b1;
      c = $urandom % 4;
      @(negedge clk);
      ld_valid = 1'b1; ld_act = 1'b1; ld_keep = keep; ld_rec = rc; ld_f = r2f(0.25); ld_slot = 7'(r);
      @(negedge clk) ld_valid = 1'b0;
      waitc = 0;
      while (!ready) begin waitc++; @(negedge clk); end
      check(waitc == ((lut_en && !keep) ? 36 : 0), $sformatf("round %0d: %0d fill cycles", r, waitc));
      // broadcast lines 0..31
      sum = 0;
      bc_char = 2'(c);
      for (int ln = 0; ln < 8; ln++) begin
        int m;
        m = 0;
        bc_base = sid_t'(4 * ln);
        for (int l = 0; l < 4; l++) begin
          int  u;
          real v;
          u = 1 + $urandom % 999;
          v = f2r(r2f(real'(u) / 1000.0));
          bc_lvld[l] = ($urandom % 5) != 0;
          bc_val[l] = r2f(v);
          for (int k = 0; k < 9; k++)
            if (bc_lvld[l] && id[k] == 4 * ln + l) begin sum += v * al[k] * em[k][c]; m++; end
        end
        bc_valid = 1'b1;
        @(negedge clk) bc_valid = 1'b0;
        waitc = 0;
        while (!ready) begin waitc++; n_stall++; @(negedge clk); end
        check(waitc == ((dir == DIR_BWD) ? m : 0), $sformatf("round %0d line %0d: ready low %0d cycles for %0d matches", r, ln, waitc, m));
      end
      fin = 1'b1;
      @(negedge clk) fin = 1'b0;
      check(res_valid && close(f2r(result), sum, 1e-4), $sformatf("round %0d: result %g, expected %g", r, f2r(result), sum));
      // initialisation mode
      mode_init = 1'b1; fin = 1'b1;
      @(negedge clk) begin fin = 1'b0; mode_init = 1'b0; end
      pi = 0.5 * em[0][c];
      check(f2r(result) == ((dir == DIR_FWD) ? f2r(r2f(pi)) : 1.0) ||
            close(f2r(result), (dir == DIR_FWD) ? pi : 1.0, 1e-6), $sformatf("round %0d: init %g", r, f2r(result)));
    end
    check(n_stall > 0, "no stall seen");
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
