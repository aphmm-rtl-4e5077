// tb_hist_filter: self-checking test of the histogram filter.
// Each round files N random states (values in [0, 1.1), with clusters so that
// bins fill unevenly) and runs a selection with a random filter size. The
// reference, computed here in double precision, bins each value with
// floor(16 v) (values >= 1 in the top bin), walks the bins from the top and
// keeps every bin down to the one where the running count reaches the filter
// size. The kept ids must come out exactly once each, from the highest bin
// down, and `done` must follow. Selection time is checked against one cycle
// per bin walked plus one per kept id (plus the fixed start/end cycles).
module tb_hist_filter;
  import aphmm_pkg::*;
  import tb_phmm_pkg::*;

  localparam int MS = 64;
  logic        clk = 0, rst_n = 0, clear = 0, in_valid = 0, sel_start = 0;
  sid_t        in_id = '0, out_id;
  fp32_t       in_value = '0;
  logic [15:0] filter_size = '0;
  logic        out_valid, done;
  logic [3:0]  cutoff_bin;
  int          checks = 0, failures = 0;
  always #5 clk = ~clk;

  hist_filter #(.NB(16), .MAX_ST(MS)) dut (.*);

  function automatic int bin_of(real v);
    int b;
    if (v >= 1.0) return 15;
    b = int'($floor(v * 16.0));
    return b;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 60; r++) begin
      int  n, fsz, cnt [16], cum, cut, nkept, nout, last_bin, cyc, walked;
      real v [];
      int  bin [];
      bit  seen [];
      n = 1 + $urandom % MS;
      fsz = 1 + $urandom % (n + 2);
      v = new[n]; bin = new[n]; seen = new[n];
      foreach (cnt[b]) cnt[b] = 0;
      @(negedge clk);
      clear = 1'b1;
      @(negedge clk) clear = 1'b0;
      for (int i = 0; i < n; i++) begin
        int u;
        u = $urandom % 1100;
        if ($urandom % 2 == 0) u = u % 200;
        v[i] = f2r(r2f(real'(u) / 1000.0 + 0.0001));
        bin[i] = bin_of(v[i]);
        cnt[bin[i]]++;
        seen[i] = 1'b0;
        in_valid = 1'b1; in_id = sid_t'(i); in_value = r2f(v[i]);
        @(negedge clk);
      end
      in_valid = 1'b0;
      cum = 0; cut = 0; walked = 0;
      for (int b = 15; b >= 0; b--) begin
        walked++;
        if (cum + cnt[b] >= fsz || b == 0) begin cut = b; break; end
        cum += cnt[b];
      end
      nkept = 0;
      for (int i = 0; i < n; i++) if (bin[i] >= cut) nkept++;
      filter_size = 16'(fsz); sel_start = 1'b1;
      @(negedge clk) sel_start = 1'b0;
      nout = 0; last_bin = 15; cyc = 0;
      while (!done && cyc < 5000) begin
        @(negedge clk);
        cyc++;
        if (out_valid) begin
          int id;
          id = int'(out_id);
          nout++;
          checks++;
          if (id >= n || seen[id] || bin[id] < cut || bin[id] > last_bin) begin
            failures++; $display("FAIL round %0d: id %0d out of order or not kept", r, id);
          end else begin
            seen[id] = 1'b1; last_bin = bin[id];
          end
        end
      end
      checks += 3;
      if (nout != nkept) begin failures++; $display("FAIL round %0d: %0d ids out, expected %0d", r, nout, nkept); end
      if (int'(cutoff_bin) != cut) begin failures++; $display("FAIL round %0d: cutoff %0d, expected %0d", r, cutoff_bin, cut); end
      // walk of the bins + one cycle per id + one per kept bin boundary + done
      if (cyc > walked + nkept + 2 * (16 - cut) + 2) begin
        failures++; $display("FAIL round %0d: selection took %0d cycles", r, cyc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
