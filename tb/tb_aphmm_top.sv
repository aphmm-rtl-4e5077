// tb_aphmm_top: end-to-end test of the whole accelerator at its default
// (paper) size: 4 cores of 64 PEs, 4 UEs, 3072 states, sequences of up to
// 1000 characters. No parameter is overridden.
//
// Each core gets its own random traditional pHMM and sequence and its own
// behavioural graph memory and forward store (1-cycle latency each, as the
// core expects). The host side writes every core's parameters and sequence,
// then starts a set of cores through the Global Event Control with a core
// mask and waits for host_done. Two jobs are run:
//  job 1, mask 1111: core 0 filter on (size 3) + LUTs, core 1 LUTs off with a
//         randomly stalled result stream, core 2 Forward only, core 3 filter
//         on with the default filter size 500 (nothing dropped);
//  job 2, mask 0101: cores 0 and 2 get a new model and a different mode
//         (core 0 drops filter and LUTs, core 2 runs the full Baum-Welch);
//         cores 1 and 3 must stay idle.
// Every Forward value, updated transition and updated emission is compared
// with the double precision reference of tb_phmm_pkg. The mechanisms are
// counted and each one that never happens is a failure: broadcast stalls,
// skipped lines, filtered-out states, LUTs kept across timestamps (models
// of at most 64 states fit in one pass), LUT reuse (broadcast beats served
// from a preset LUT) and mode switches (a core rerun with another mode).
module tb_aphmm_top;
  import aphmm_pkg::*;
  import tb_phmm_pkg::*;

  localparam int NC = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             host_start = 0, host_busy, host_done;
  logic [NC-1:0]    core_mask = '0, cfg_we = '0, seq_we = '0, core_busy;
  cfg_t             cfg_in;
  logic [9:0]       seq_addr;
  logic [1:0]       seq_char;
  logic [NC-1:0]    gr_req, gr_design, fs_we, fs_re, res_valid, res_ready;
  dir_e             gr_dir [NC];
  sid_t             gr_id [NC], res_state [NC];
  graph_rec_t       gr_rec [NC];
  logic [22:0]      fs_waddr [NC], fs_raddr [NC];
  fp32_t            fs_wdata [NC], fs_rdata [NC], res_value [NC];
  res_kind_e        res_kind [NC];
  logic [3:0]       res_idx [NC];
  logic [NC-1:0]    ev_stall, ev_skip, ev_lut_keep, ev_drop;

  aphmm_top dut (.*);

  phmm_model m [NC];
  fp32_t     fs_mem [NC][int];
  int        checks = 0, failures = 0;
  int        n_stall = 0, n_skip = 0, n_keep = 0, n_drop = 0, n_reuse = 0, n_switch = 0;
  int        n_tr [NC], n_em [NC];
  logic      slow_ready = 1'b0;
  cfg_t      last_cfg [NC];
  bit        ran [NC];

  assign res_ready = {2'b11, slow_ready, 1'b1};

  for (genvar c = 0; c < NC; c++) begin : g_mem
    always_ff @(posedge clk) begin
      if (gr_req[c] && m[c] != null) gr_rec[c] <= m[c].rec(gr_dir[c], int'(gr_id[c]));
      if (fs_we[c])  fs_mem[c][int'(fs_waddr[c])] = fs_wdata[c];
      if (fs_re[c])  fs_rdata[c] <= fs_mem[c].exists(int'(fs_raddr[c])) ?
                                    fs_mem[c][int'(fs_raddr[c])] : FP_ZERO;
    end

    // result stream of core c
    always_ff @(posedge clk) begin
      if (rst_n && res_valid[c] && res_ready[c] && m[c] != null) begin
        real exp;
        int  rs, ri;
        rs = int'(res_state[c]); ri = int'(res_idx[c]);
        checks++;
        if (res_kind[c] == RES_TRANSITION) begin
          n_tr[c]++;
          exp = m[c].alpha_new(rs, ri);
          if (!m[c].tseen[rs][ri] || !close(f2r(res_value[c]), exp, 1e-3)) begin
            failures++;
            $display("FAIL core %0d alpha*[%0d][%0d] = %g, expected %g", c, rs, ri, f2r(res_value[c]), exp);
          end
        end else begin
          n_em[c]++;
          exp = m[c].emis_new(rs, ri);
          if (!close(f2r(res_value[c]), exp, 1e-3)) begin
            failures++;
            $display("FAIL core %0d e*[%0d][%0d] = %g, expected %g", c, rs, ri, f2r(res_value[c]), exp);
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    slow_ready <= ($urandom % 3) == 0;
    for (int c = 0; c < NC; c++) begin
      n_stall += int'(ev_stall[c]);
      n_skip  += int'(ev_skip[c]);
      n_keep  += int'(ev_lut_keep[c]);
      n_drop  += int'(ev_drop[c]);
    end
  end

  // LUT reuse: a PE with its LUT enabled serving matched lanes of a beat
  for (genvar c = 0; c < NC; c++) begin : g_reuse
    for (genvar g = 0; g < 16; g++) begin : g_g
      for (genvar p = 0; p < 4; p++) begin : g_p
        always_ff @(posedge clk)
          if (dut.g_core[c].u_core.g_peg[g].g_pe[p].u_pe.bc_valid &&
              dut.g_core[c].u_core.g_peg[g].g_pe[p].u_pe.lut_en &&
              dut.g_core[c].u_core.g_peg[g].g_pe[p].u_pe.match != '0)
            n_reuse++;
      end
    end
  end

  // write the parameters and sequence of core c
  task automatic load_core(int c, int L, int T, bit filt, int fsz, bit lut, bit bwd, int seed);
    cfg_t cf;
    m[c] = new(L, T, filt, fsz, seed);
    m[c].run();
    fs_mem[c].delete();
    n_tr[c] = 0; n_em[c] = 0;
    cf = '0;
    cf.bwd_en = bwd; cf.upd_en = bwd; cf.filter_en = filt; cf.lut_en = lut;
    cf.filter_size = 16'(fsz); cf.n_states = 12'(m[c].N); cf.seq_len = 11'(T);
    cf.win = 6'd8;
    if (ran[c] && cf != last_cfg[c]) n_switch++;
    last_cfg[c] = cf; ran[c] = 1'b1;
    @(negedge clk);
    cfg_in = cf; cfg_we = NC'(1) << c;
    @(negedge clk) cfg_we = '0;
    for (int t = 1; t <= T; t++) begin
      seq_we = NC'(1) << c; seq_addr = 10'(t - 1); seq_char = 2'(m[c].seq[t]);
      @(negedge clk);
    end
    seq_we = '0;
  endtask

  task automatic check_core(int c, bit bwd);
    int exp_tr;
    for (int t = 1; t <= m[c].T; t++)
      for (int i = 0; i < m[c].N; i++) begin
        int  a = (t << 12) | i;
        real got = fs_mem[c].exists(a) ? f2r(fs_mem[c][a]) : -1.0;
        checks++;
        if (!close(got, m[c].F[t][i], 1e-3)) begin
          failures++;
          $display("FAIL core %0d F[%0d][%0d] = %g, expected %g", c, t, i, got, m[c].F[t][i]);
        end
      end
    exp_tr = 0;
    for (int i = 0; i < m[c].N; i++) for (int k = 0; k < 9; k++) exp_tr += int'(m[c].tseen[i][k]);
    checks += 2;
    if (n_tr[c] != (bwd ? exp_tr : 0)) begin
      failures++; $display("FAIL core %0d: %0d transition results, expected %0d", c, n_tr[c], bwd ? exp_tr : 0);
    end
    if (n_em[c] != (bwd ? 4 * m[c].N : 0)) begin
      failures++; $display("FAIL core %0d: %0d emission results, expected %0d", c, n_em[c], bwd ? 4 * m[c].N : 0);
    end
    $display("core %0d: %0d transitions, %0d emissions", c, n_tr[c], n_em[c]);
  endtask

  task automatic run_job(logic [NC-1:0] mask);
    @(negedge clk);
    core_mask = mask; host_start = 1'b1;
    @(negedge clk) host_start = 1'b0;
    checks++;
    @(negedge clk);
    if (!host_busy || core_busy != mask) begin
      failures++; $display("FAIL mask %b: host_busy=%b core_busy=%b", mask, host_busy, core_busy);
    end
    wait (host_done);
    @(negedge clk);
    checks++;
    if (host_busy || core_busy != '0) begin
      failures++; $display("FAIL busy after host_done");
    end
  endtask

  initial begin
    foreach (ran[c]) ran[c] = 1'b0;
    cfg_in = '0; seq_addr = '0; seq_char = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // job 1
    load_core(0, 6, 8, 1'b1, 3,   1'b1, 1'b1, 101);
    load_core(1, 7, 9, 1'b0, 500, 1'b0, 1'b1, 202);
    load_core(2, 5, 7, 1'b0, 500, 1'b1, 1'b0, 303);
    load_core(3, 6, 6, 1'b1, 500, 1'b1, 1'b1, 404);
    run_job(4'b1111);
    check_core(0, 1'b1); check_core(1, 1'b1); check_core(2, 1'b0); check_core(3, 1'b1);
    // job 2
    n_tr[1] = 0; n_em[1] = 0; n_tr[3] = 0; n_em[3] = 0;
    load_core(0, 7, 7, 1'b0, 500, 1'b0, 1'b1, 505);
    load_core(2, 6, 8, 1'b0, 500, 1'b1, 1'b1, 606);
    run_job(4'b0101);
    check_core(0, 1'b1); check_core(2, 1'b1);
    checks++;
    if (n_tr[1] + n_em[1] + n_tr[3] + n_em[3] != 0) begin
      failures++; $display("FAIL unselected cores produced results");
    end
    checks += 6;
    if (n_stall  == 0) begin failures++; $display("FAIL no broadcast stall seen"); end
    if (n_skip   == 0) begin failures++; $display("FAIL no skipped line seen"); end
    if (n_drop   == 0) begin failures++; $display("FAIL no state filtered out"); end
    if (n_keep   == 0) begin failures++; $display("FAIL no PE kept its LUT across timestamps"); end
    if (n_reuse  == 0) begin failures++; $display("FAIL no LUT reuse seen"); end
    if (n_switch == 0) begin failures++; $display("FAIL no mode switch"); end
    $display("mechanisms: stall=%0d skip=%0d drop=%0d lut_keep=%0d lut_reuse=%0d mode_switch=%0d",
             n_stall, n_skip, n_drop, n_keep, n_reuse, n_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
