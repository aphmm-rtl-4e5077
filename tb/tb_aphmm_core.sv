// tb_aphmm_core: end-to-end test of one ApHMM core at a reduced size
// (8 PEs, so a timestamp takes several passes and the PEs reload their
// states and LUTs every pass).
//
// A behavioural graph memory and forward store answer the core's ports with
// one cycle of latency. Three runs on random traditional pHMMs:
//  A: filter on (small filter size), LUTs on, full Baum-Welch;
//  B: filter off, LUTs off (TE MUL path), full Baum-Welch;
//  C: Forward only.
// Every Forward value in the forward store, every updated transition and
// emission probability on the result stream is compared with a double
// precision reference (relative tolerance 1e-3, the hardware truncates).
// The number of results and the occurrence of stalls, skipped lines and
// filtered states are checked too. The reference follows Baum-Welch as the
// accelerator computes it (every state emits, filter by 16 bins); the test
// models, sizes and tolerances are this testbench's own choices.
module tb_aphmm_core;
  import aphmm_pkg::*;
  import tb_phmm_pkg::*;

  localparam int unsigned NP = 8, NUE = 4, MAXS = 64, MAXL = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          cfg_we = 0, seq_we = 0, start = 0, busy, done;
  cfg_t          cfg_in;
  logic [4:0]    seq_addr;
  logic [1:0]    seq_char;
  logic          gr_req, gr_design, fs_we, fs_re, res_valid, res_ready;
  dir_e          gr_dir;
  sid_t          gr_id, res_state;
  graph_rec_t    gr_rec;
  logic [22:0]   fs_waddr, fs_raddr;
  fp32_t         fs_wdata, fs_rdata, res_value;
  res_kind_e     res_kind;
  logic [3:0]    res_idx;
  logic          ev_stall, ev_skip, ev_lut_keep, ev_drop;

  aphmm_core #(.NP(NP), .NUE(NUE), .MAXS(MAXS), .MAXL(MAXL)) dut (.*);

  phmm_model m;
  fp32_t     fs_mem [int];
  int        checks = 0, failures = 0;
  int        n_stall = 0, n_skip = 0, n_keep = 0, n_drop = 0;
  int        n_tr, n_em;

  assign res_ready = 1'b1;

  always_ff @(posedge clk) begin
    if (gr_req) gr_rec <= m.rec(gr_dir, int'(gr_id));
    if (fs_we)  fs_mem[int'(fs_waddr)] = fs_wdata;
    if (fs_re)  fs_rdata <= fs_mem.exists(int'(fs_raddr)) ? fs_mem[int'(fs_raddr)] : FP_ZERO;
    n_stall += int'(ev_stall);
    n_skip  += int'(ev_skip);
    n_keep  += int'(ev_lut_keep);
    n_drop  += int'(ev_drop);
  end

  // check the result stream as it comes
  always_ff @(posedge clk) begin
    if (res_valid && res_ready && m != null) begin
      real exp;
      int  rs, ri;
      rs = int'(res_state); ri = int'(res_idx);
      checks++;
      if (res_kind == RES_TRANSITION) begin
        n_tr++;
        exp = m.alpha_new(rs, ri);
        if (!m.tseen[rs][ri] || !close(f2r(res_value), exp, 1e-3)) begin
          failures++;
          $display("FAIL alpha*[%0d][%0d] = %g, expected %g", res_state, res_idx, f2r(res_value), exp);
        end
      end else begin
        n_em++;
        exp = m.emis_new(rs, ri);
        if (!close(f2r(res_value), exp, 1e-3)) begin
          failures++;
          $display("FAIL e*[%0d][%0d] = %g, expected %g", res_state, res_idx, f2r(res_value), exp);
        end
      end
    end
  end

  task automatic run_case(string name, int L, int T, bit filt, int fsz, bit lut, bit bwd, int seed);
    int exp_tr;
    m = new(L, T, filt, fsz, seed);
    m.run();
    fs_mem.delete();
    n_tr = 0; n_em = 0;
    @(negedge clk);
    cfg_in = '0;
    cfg_in.phmm_mod = 1'b0;
    cfg_in.bwd_en = bwd; cfg_in.upd_en = bwd; cfg_in.filter_en = filt; cfg_in.lut_en = lut;
    cfg_in.filter_size = 16'(fsz); cfg_in.n_states = 12'(m.N); cfg_in.seq_len = 11'(T);
    cfg_in.win = 6'd8;
    cfg_we = 1;
    @(negedge clk) cfg_we = 0;
    for (int t = 1; t <= T; t++) begin
      seq_we = 1; seq_addr = 5'(t - 1); seq_char = 2'(m.seq[t]);
      @(negedge clk);
    end
    seq_we = 0;
    start = 1;
    @(negedge clk) start = 0;
    wait (done);
    @(negedge clk);
    // Forward values
    for (int t = 1; t <= T; t++)
      for (int i = 0; i < m.N; i++) begin
        int a = (t << 12) | i;
        real got = fs_mem.exists(a) ? f2r(fs_mem[a]) : -1.0;
        checks++;
        if (!close(got, m.F[t][i], 1e-3)) begin
          failures++;
          $display("FAIL %s F[%0d][%0d] = %g, expected %g", name, t, i, got, m.F[t][i]);
        end
      end
    // result counts
    exp_tr = 0;
    for (int i = 0; i < m.N; i++) for (int k = 0; k < 9; k++) exp_tr += int'(m.tseen[i][k]);
    checks += 2;
    if (n_tr != (bwd ? exp_tr : 0)) begin
      failures++; $display("FAIL %s %0d transition results, expected %0d", name, n_tr, bwd ? exp_tr : 0);
    end
    if (n_em != (bwd ? 4 * m.N : 0)) begin
      failures++; $display("FAIL %s %0d emission results, expected %0d", name, n_em, bwd ? 4 * m.N : 0);
    end
    $display("%s done: %0d transitions, %0d emissions", name, n_tr, n_em);
  endtask

  initial begin
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_case("A", 6, 8, 1'b1, 3, 1'b1, 1'b1, 11);
    run_case("B", 7, 9, 1'b0, 500, 1'b0, 1'b1, 23);
    cyc = 0;
    run_case("C", 5, 6, 1'b0, 500, 1'b1, 1'b0, 37);
    checks += 4;
    if (n_stall == 0) begin failures++; $display("FAIL no broadcast stall seen"); end
    if (n_skip  == 0) begin failures++; $display("FAIL no skipped line seen"); end
    if (n_drop  == 0) begin failures++; $display("FAIL no state filtered out"); end
    if (n_keep  != 0) begin failures++; $display("FAIL states kept across passes with 8 PEs"); end
    $display("events: stall=%0d skip=%0d keep=%0d drop=%0d", n_stall, n_skip, n_keep, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
