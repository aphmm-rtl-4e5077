// aphmm_core: one ApHMM core, running the Baum-Welch algorithm of one
// observation sequence S (a chunk of up to MAX_LEN characters) against one
// pHMM (sub)graph of up to MAX_STATES states.
//
// Control Block
//   Parameters   cfg_t register written by the host (cfg_we): pHMM design,
//                which steps run (Backward, Parameter Updates), filter and
//                LUT enables, filter size, sizes, widest transition span.
//   Data Control issues the reads of the graph port (one graph_rec_t per
//                state and direction, 1-cycle latency), of the forward store
//                (F_t(i), 1-cycle latency) and collects the PE results into
//                the L1 value buffers, the forward store, the filter and UEs.
//   Histogram Filter (hist_filter) picks the states kept for the next
//                timestamp when filtering is on.
// Compute Block
//   Index Control the sequencer below: timestamps, passes of NUM_PE states,
//                and the broadcast of previous-step values, one 4-value line
//                per beat, to all PEs (groups of PES_PER_GRP PEs).
//   PEs          (pe, each with LUT and Update Transition unit).
//   Write Selector drains one PE result per cycle and sends F_t(i)*B_t(i) to
//                Update Emission unit (state id mod NUM_UE).
//   UEs          (update_emission).
//
// Operation (start pulse; done pulses at the end):
//  Forward, t = 1..T: t = 1 initialises F_1(j) = pi_j e_{S[1]}(j); each later
//   t computes F_t from F_{t-1} (Eq. 1) and writes it to the forward store
//   (the full Forward pass completes before anything else, as in the source).
//  Backward, t = T..1 (if bwd_en): t = T sets B_T = 1; each earlier t
//   computes B_t from B_{t+1} (Eq. 2). With upd_en, the transition numerators
//   are accumulated as B_{t+1} is broadcast and F_t(i)B_t(i) goes to the UEs
//   as each B_t(i) is produced (partial compute: no Backward array is kept).
//  Update (if upd_en): every UT and then every UE divides its numerators and
//   the new probabilities leave on the res_* stream.
// Each timestamp runs ceil(N/NUM_PE) passes: load (one state per cycle into
// PE p = state mod NUM_PE, scratchpad slot = pass), broadcast of the lines of
// the window around the pass's states (lines whose states were all filtered
// out are skipped; a beat waits while any PE is not ready: a stall), end of
// pass, and drain. With a single pass per timestamp a PE keeps its state, its
// neighbour table and its preset LUT across timestamps (only F is reloaded).
// The value buffers are two L1 regions of MAX_STATES words (previous and
// current timestamp) with a kept-state bit per word; they swap each timestamp.
// Beyond what the source states, the pass structure, the broadcast window
// (cfg.win states before, Forward, or after, Backward, the pass), one result
// drained per cycle, the port formats and the start-in-pi initialisation are
// this design's choices. No scaling of F and B against underflow is done.
// Lint lists pe_res_valid, pe_act, ut_idle, te_use, hf_cut and the top bit of
// ld_p as unused: they are observation points for testbenches, the PE
// outputs are drained by index instead, and ld_p counts one past NP-1 to end
// the load; they are left as they are.
module aphmm_core
  import aphmm_pkg::*;
#(
  parameter int unsigned NP     = 64,          // PEs
  parameter int unsigned GRP    = 4,           // PEs per PE group
  parameter int unsigned NUE    = 4,           // Update Emission units
  parameter int unsigned MAXS   = 3072,        // states
  parameter int unsigned MAXL   = 1000,        // sequence length
  parameter int unsigned NBIN   = 16,          // filter bins
  parameter int unsigned SPB    = 8192,        // scratchpad bytes per UT
  localparam int unsigned CW    = $clog2(N_SIGMA),
  localparam int unsigned SW    = $clog2(SPB / 4 / 16),
  localparam int unsigned LW    = $clog2(MAXL),
  localparam int unsigned UIW   = $clog2(MAXS / NUE),
  localparam int unsigned SIW   = $clog2(MAXS),
  localparam int unsigned UEW   = (NUE > 1) ? $clog2(NUE) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // host
  input  logic          cfg_we,
  input  cfg_t          cfg_in,
  input  logic          seq_we,
  input  logic [LW-1:0] seq_addr,      // position t-1 of S[t]
  input  logic [CW-1:0] seq_char,
  input  logic          start,
  output logic          busy,
  output logic          done,
  // graph port (pHMM graph G(V,A)), read data one cycle after gr_req
  output logic          gr_req,
  output logic          gr_design,
  output dir_e          gr_dir,
  output sid_t          gr_id,
  input  graph_rec_t    gr_rec,
  // forward store (DRAM/L2), address {t, state}, read data one cycle later
  output logic          fs_we,
  output logic [22:0]   fs_waddr,
  output fp32_t         fs_wdata,
  output logic          fs_re,
  output logic [22:0]   fs_raddr,
  input  fp32_t         fs_rdata,
  // updated probabilities
  output logic          res_valid,
  input  logic          res_ready,
  output res_kind_e     res_kind,
  output sid_t          res_state,
  output logic [3:0]    res_idx,
  output fp32_t         res_value,
  // events, one pulse each (observability)
  output logic          ev_stall,      // broadcast beat held by a busy PE
  output logic          ev_skip,       // line skipped: all its states filtered
  output logic          ev_lut_keep,   // PE state and LUT kept across timestamps
  output logic          ev_drop        // a state was filtered out
);
  // ---------------- Parameters ----------------
  cfg_t cfg;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      cfg <= '0;
    else if (cfg_we) cfg <= cfg_in;
  end

  logic [CW-1:0] seq [MAXL];
  always_ff @(posedge clk) if (seq_we) seq[seq_addr] <= seq_char;

  // ---------------- L1 value buffers ----------------
  fp32_t           vbuf [2][MAXS];
  logic [MAXS-1:0] vact [2];
  logic            pp;                 // vbuf[pp]: previous step, vbuf[!pp]: current

  // ---------------- sequencer state ----------------
  typedef enum logic [4:0] {
    S_IDLE, S_TSTART, S_LOAD, S_LWAIT, S_BC, S_FIN, S_FIN1, S_DRAIN,
    S_TEND, S_FWAIT, S_SWAP, S_UT, S_UT1, S_UE, S_UE1, S_DONE
  } st_e;
  st_e         st;
  dir_e        dir;
  logic        init;
  logic        keep;                   // PEs keep their states this timestep
  logic [10:0] t;
  logic [6:0]  g;                      // pass
  logic [6:0]  p;                      // PE counter
  logic [12:0] line;
  logic [12:0] hi;
  logic        ld_pend;
  logic [6:0]  ld_p;
  logic [12:0] ld_i;

  logic [12:0] n_st;
  logic [12:0] pass_base;
  assign n_st      = 13'(cfg.n_states);
  assign pass_base = 13'(g) * 13'(NP);

  // character used this step: Forward F_t uses S[t]; Backward B_t uses S[t+1]
  logic [CW-1:0] step_char, ue_char;
  assign step_char = (dir == DIR_FWD) ? seq[LW'(t - 11'd1)] : seq[LW'(t)];
  assign ue_char   = seq[LW'(t - 11'd1)];

  // ---------------- PE array ----------------
  logic [NP-1:0]     pe_ld, pe_ready, pe_res_valid, pe_act;
  fp32_t             pe_result [NP];
  fp32_t             pe_f [NP];
  logic              bc_valid, pe_fin;
  logic [LANES-1:0]  bc_lvld;
  fp32_t             bc_val [LANES];
  logic              ut_clear, ut_fin_start;
  logic [NP-1:0]     ut_busy, ut_ovalid, ut_oready, ut_idle, te_use;
  logic [SW-1:0]     ut_oslot [NP];
  logic [3:0]        ut_ok [NP];
  fp32_t             ut_oalpha [NP];

  for (genvar gi = 0; gi < int'(NP / GRP); gi++) begin : g_peg      // PE groups
    for (genvar pj = 0; pj < int'(GRP); pj++) begin : g_pe
      localparam int unsigned IDX = gi * GRP + pj;
      pe #(.LN(LANES), .SP_BYTES(SPB)) u_pe (
        .clk, .rst_n,
        .dir(dir), .lut_en(cfg.lut_en), .upd_en(cfg.upd_en), .mode_init(init),
        .ld_valid(pe_ld[IDX]), .ld_act(ld_i < n_st), .ld_keep(keep),
        .ld_rec(gr_rec), .ld_f(fs_rdata), .ld_slot(SW'(g)),
        .ready(pe_ready[IDX]),
        .bc_valid(bc_valid), .bc_base(sid_t'(line)), .bc_lvld(bc_lvld),
        .bc_val(bc_val), .bc_char(step_char),
        .fin(pe_fin), .res_valid(pe_res_valid[IDX]), .result(pe_result[IDX]),
        .f_val(pe_f[IDX]), .act(pe_act[IDX]),
        .ut_clear(ut_clear), .ut_fin_start(ut_fin_start), .ut_fin_busy(ut_busy[IDX]),
        .ut_out_valid(ut_ovalid[IDX]), .ut_out_ready(ut_oready[IDX]),
        .ut_out_slot(ut_oslot[IDX]), .ut_out_k(ut_ok[IDX]), .ut_out_alpha(ut_oalpha[IDX]),
        .ut_idle(ut_idle[IDX]), .te_mul_use(te_use[IDX])
      );
    end
  end

  // ---------------- Histogram filter ----------------
  logic  hf_clear, hf_in, hf_sel, hf_ovalid, hf_done;
  sid_t  hf_oid;
  logic [$clog2(NBIN)-1:0] hf_cut;
  sid_t  dr_id;
  fp32_t dr_val;
  hist_filter #(.NB(NBIN), .MAX_ST(MAXS)) u_hf (
    .clk, .rst_n, .clear(hf_clear), .in_valid(hf_in), .in_id(dr_id), .in_value(dr_val),
    .sel_start(hf_sel), .filter_size(cfg.filter_size),
    .out_valid(hf_ovalid), .out_id(hf_oid), .done(hf_done), .cutoff_bin(hf_cut)
  );

  // ---------------- Update Emission units ----------------
  logic [NUE-1:0] ue_in, ue_busy, ue_ovalid, ue_oready;
  logic           ue_clear, ue_fin_start;
  logic [UIW-1:0] ue_oidx [NUE];
  logic [CW-1:0]  ue_oc [NUE];
  fp32_t          ue_oe [NUE];
  fp32_t          dr_f;
  for (genvar u = 0; u < int'(NUE); u++) begin : g_ue
    update_emission #(.MAX_ST(MAXS / NUE), .NS(N_SIGMA)) u_ue (
      .clk, .rst_n, .clear(ue_clear),
      .in_valid(ue_in[u]), .in_idx(UIW'(dr_id / sid_t'(NUE))), .in_char(ue_char),
      .in_f(dr_f), .in_b(dr_val),
      .fin_start(ue_fin_start), .fin_busy(ue_busy[u]),
      .out_valid(ue_ovalid[u]), .out_ready(ue_oready[u]),
      .out_idx(ue_oidx[u]), .out_c(ue_oc[u]), .out_e(ue_oe[u])
    );
  end

  // ---------------- Write Selector (drain) ----------------
  logic drain_v;
  assign drain_v  = (st == S_DRAIN) && (13'(pass_base) + 13'(p) < n_st);
  assign dr_id    = sid_t'(pass_base + 13'(p));
  assign dr_val   = pe_result[p[$clog2(NP)-1:0]];
  assign dr_f     = pe_f[p[$clog2(NP)-1:0]];
  assign hf_in    = drain_v && cfg.filter_en;
  always_comb begin
    ue_in = '0;
    if (drain_v && dir == DIR_BWD && cfg.upd_en) ue_in[UEW'(dr_id % sid_t'(NUE))] = 1'b1;
  end
  assign fs_we    = drain_v && dir == DIR_FWD;
  assign fs_waddr = {t, dr_id};
  assign fs_wdata = dr_val;

  // ---------------- broadcast line ----------------
  logic all_ready;
  assign all_ready = &pe_ready;
  always_comb begin
    for (int l = 0; l < int'(LANES); l++) begin
      bc_lvld[l] = (line + 13'(l) < n_st) && vact[pp][SIW'(line + 13'(l))];
      bc_val[l]  = vbuf[pp][SIW'(line + 13'(l))];
    end
  end
  assign bc_valid = (st == S_BC) && (line <= hi) && (bc_lvld != '0) && all_ready;
  assign ev_stall = (st == S_BC) && (line <= hi) && (bc_lvld != '0) && !all_ready;
  assign ev_skip  = (st == S_BC) && (line <= hi) && (bc_lvld == '0);
  assign pe_fin   = (st == S_FIN) && all_ready;

  // ---------------- Data Control: loads ----------------
  logic [12:0] ld_cur;
  assign ld_cur    = pass_base + 13'(p);
  assign gr_req    = (st == S_LOAD) && !keep && (ld_cur < n_st);
  assign gr_design = cfg.phmm_mod;
  assign gr_dir    = dir;
  assign gr_id     = sid_t'(ld_cur);
  assign fs_re     = (st == S_LOAD) && (dir == DIR_BWD) && (ld_cur < n_st);
  assign fs_raddr  = {t, sid_t'(ld_cur)};
  always_comb begin
    pe_ld = '0;
    if (ld_pend) pe_ld[ld_p[$clog2(NP)-1:0]] = 1'b1;
  end
  assign ev_lut_keep = ld_pend && keep && (ld_i < n_st);

  // ---------------- result stream ----------------
  logic [$clog2(NP)-1:0]  ut_sel;
  logic [$clog2(NUE)-1:0] ue_sel;
  always_comb begin
    ut_sel = '0;
    for (int i = int'(NP) - 1; i >= 0; i--) if (ut_ovalid[i]) ut_sel = ($clog2(NP))'(i);
    ue_sel = '0;
    for (int i = int'(NUE) - 1; i >= 0; i--) if (ue_ovalid[i]) ue_sel = ($clog2(NUE))'(i);
    ut_oready = '0;
    ue_oready = '0;
    res_valid = 1'b0;
    res_kind  = RES_TRANSITION;
    res_state = '0;
    res_idx   = '0;
    res_value = FP_ZERO;
    if (|ut_ovalid) begin
      res_valid = 1'b1;
      res_state = sid_t'(13'(ut_oslot[ut_sel]) * 13'(NP) + 13'(ut_sel));
      res_idx   = ut_ok[ut_sel];
      res_value = ut_oalpha[ut_sel];
      ut_oready[ut_sel] = res_ready;
    end else if (|ue_ovalid) begin
      res_valid = 1'b1;
      res_kind  = RES_EMISSION;
      res_state = sid_t'(13'(ue_oidx[ue_sel]) * 13'(NUE) + 13'(ue_sel));
      res_idx   = 4'(ue_oc[ue_sel]);
      res_value = ue_oe[ue_sel];
      ue_oready[ue_sel] = res_ready;
    end
  end

  assign hf_clear     = (st == S_TSTART);
  assign hf_sel       = (st == S_TEND) && cfg.filter_en;
  assign ut_clear     = (st == S_SWAP) && dir == DIR_FWD;
  assign ue_clear     = ut_clear;
  assign ut_fin_start = (st == S_UT);
  assign ue_fin_start = (st == S_UE);
  assign ev_drop      = (st == S_SWAP) && cfg.filter_en &&
                        ($countones(vact[!pp]) < int'(cfg.n_states));

  // ---------------- Index Control sequencer ----------------
  logic last_pass;
  assign last_pass = (pass_base + 13'(NP) >= n_st);

  always_ff @(posedge clk) begin
    if (drain_v) vbuf[!pp][SIW'(dr_id)] <= dr_val;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; dir <= DIR_FWD; init <= 1'b0; keep <= 1'b0; t <= '0;
      g <= '0; p <= '0; line <= '0; hi <= '0; pp <= 1'b0;
      ld_pend <= 1'b0; ld_p <= '0; ld_i <= '0;
      busy <= 1'b0; done <= 1'b0;
      vact[0] <= '0; vact[1] <= '0;
    end else begin
      done    <= 1'b0;
      ld_pend <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          busy <= 1'b1; dir <= DIR_FWD; t <= 11'd1; init <= 1'b1; keep <= 1'b0;
          st <= S_TSTART;
        end
        S_TSTART: begin
          g <= '0; p <= '0;
          for (int i = 0; i < int'(MAXS); i++)
            vact[!pp][i] <= !cfg.filter_en && (13'(i) < n_st);
          st <= S_LOAD;
        end
        S_LOAD: begin                              // one state per cycle
          ld_pend <= 1'b1; ld_p <= p; ld_i <= ld_cur;
          if (32'(p) == NP - 1) st <= S_LWAIT;
          p <= p + 1'b1;
        end
        S_LWAIT: if (!ld_pend && all_ready) begin
          if (init) st <= S_FIN;
          else begin
            st <= S_BC;
            if (dir == DIR_FWD) begin
              line <= (pass_base > 13'(cfg.win)) ?
                      ((pass_base - 13'(cfg.win)) & ~13'(LANES - 1)) : 13'd0;
              hi   <= last_pass ? n_st - 13'd1 : pass_base + 13'(NP) - 13'd1;
            end else begin
              line <= pass_base;
              hi   <= (pass_base + 13'(NP) - 13'd1 + 13'(cfg.win) >= n_st) ?
                      n_st - 13'd1 : pass_base + 13'(NP) - 13'd1 + 13'(cfg.win);
            end
          end
        end
        S_BC: begin
          if (line > hi) st <= S_FIN;
          else if (bc_lvld == '0 || all_ready) line <= line + 13'(LANES);
        end
        S_FIN:  if (all_ready) st <= S_FIN1;       // pe_fin pulses
        S_FIN1: begin st <= S_DRAIN; p <= '0; end
        S_DRAIN: begin                             // one result per cycle
          if (32'(p) == NP - 1) begin
            p <= '0;
            if (last_pass) st <= S_TEND;
            else begin g <= g + 1'b1; st <= S_LOAD; end
          end else p <= p + 1'b1;
        end
        S_TEND: st <= cfg.filter_en ? S_FWAIT : S_SWAP;
        S_FWAIT: begin
          if (hf_ovalid) vact[!pp][SIW'(hf_oid)] <= 1'b1;
          if (hf_done) st <= S_SWAP;
        end
        S_SWAP: begin
          pp   <= !pp;
          init <= 1'b0;
          st   <= S_TSTART;
          if (dir == DIR_FWD) begin
            if (t == cfg.seq_len) begin
              if (cfg.bwd_en) begin
                dir <= DIR_BWD; init <= 1'b1; keep <= 1'b0;
              end else st <= S_DONE;
            end else begin
              t <= t + 11'd1; keep <= (n_st <= 13'(NP));
            end
          end else begin
            if (t == 11'd1) st <= cfg.upd_en ? S_UT : S_DONE;
            else begin
              t <= t - 11'd1; keep <= (n_st <= 13'(NP));
            end
          end
        end
        S_UT:  st <= S_UT1;                       // ut_fin_start pulses
        S_UT1: if (ut_busy == '0 && ut_ovalid == '0) st <= S_UE;
        S_UE:  st <= S_UE1;
        S_UE1: if (ue_busy == '0 && ue_ovalid == '0) st <= S_DONE;
        S_DONE: begin busy <= 1'b0; done <= 1'b1; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
