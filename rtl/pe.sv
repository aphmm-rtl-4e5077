// pe: one Processing Engine of the Compute Block.
//
// A PE computes, for the one state it is assigned per pass, one Forward value
//   F_{t+1}(j) = sum_i F_t(i) alpha_ij e_{S[t+1]}(j)            (Eq. 1)
// or one Backward value
//   B_t(i)     = sum_j B_{t+1}(j) alpha_ij e_{S[t+1]}(j)         (Eq. 2).
// Previous-step values are broadcast to all PEs as lines of LANES = 4 values
// (one 128-bit line, states base..base+3). Each lane is compared with the
// PE's neighbour table; on a match the lane's value is multiplied by the
// neighbour's alpha x e product in the Dot Product Tree, the four products are
// added lane-wise into the Accumulator, and at the end of the pass the
// Reduction Tree sums the four accumulators into the result.
// The alpha x e products come from the LUT, preset when the state is loaded
// (K_NBR*N_SIGMA = 36 products, one per cycle through the TE MUL), or, with
// LUTs disabled, from the TE MUL on every use.
// In the Backward step with updates enabled, each matched lane is also handed
// to the PE's Update Transition unit with F_t(i) (partial compute: the
// transition numerators are accumulated as the Backward values arrive). The UT
// takes one lane per cycle, so a beat with m matches keeps `ready` low for m
// cycles: the broadcast stalls until every PE is ready.
// Interface: ld_* loads a state (ld_keep keeps the table and LUT, and only
// replaces F and the scratchpad slot); bc_* is the broadcast beat, taken when
// bc_valid is high (the sender must only send when ready is high); fin ends
// the pass and `result` holds the value one cycle later (res_valid).
// Initialisation passes: mode_init with DIR_FWD gives pi * e_{S[1]}(j), with
// DIR_BWD gives B_T(i) = 1.
// The lane matching, the serialised UT hand-off and the placement of the
// TE MUL in front of both the dot product and the UT are this design's own.
module pe
  import aphmm_pkg::*;
#(
  parameter int unsigned LN       = 4,
  parameter int unsigned SP_BYTES = 8192,
  localparam int unsigned SW      = $clog2(SP_BYTES / 4 / 16),
  localparam int unsigned LA      = $clog2(LUT_ENTRIES),
  localparam int unsigned CW      = $clog2(N_SIGMA)
) (
  input  logic          clk,
  input  logic          rst_n,
  // configuration
  input  dir_e          dir,
  input  logic          lut_en,
  input  logic          upd_en,
  input  logic          mode_init,
  // load a state
  input  logic          ld_valid,
  input  logic          ld_act,     // 0: no state this pass
  input  logic          ld_keep,    // keep neighbour table and LUT
  input  graph_rec_t    ld_rec,
  input  fp32_t         ld_f,       // F_t(i) (Backward)
  input  logic [SW-1:0] ld_slot,    // scratchpad slot of the state
  output logic          ready,
  // broadcast of previous-step values
  input  logic          bc_valid,
  input  sid_t          bc_base,
  input  logic [LN-1:0] bc_lvld,
  input  fp32_t         bc_val [LN],
  input  logic [CW-1:0] bc_char,
  // end of pass
  input  logic          fin,
  output logic          res_valid,
  output fp32_t         result,
  output fp32_t         f_val,
  output logic          act,
  // transition update
  input  logic          ut_clear,
  input  logic          ut_fin_start,
  output logic          ut_fin_busy,
  output logic          ut_out_valid,
  input  logic          ut_out_ready,
  output logic [SW-1:0] ut_out_slot,
  output logic [3:0]    ut_out_k,
  output fp32_t         ut_out_alpha,
  output logic          ut_idle,
  // activity counters for the testbenches
  output logic          te_mul_use
);
  graph_rec_t     rec;
  logic [SW-1:0]  slot;
  fp32_t          acc [LN];
  logic           filling;
  logic [LA-1:0]  fill_cnt;

  // LUT
  logic           lut_we;
  logic [LA-1:0]  lut_waddr;
  fp32_t          lut_wdata;
  logic [LA-1:0]  lut_raddr [LN];
  fp32_t          lut_rdata [LN];

  pe_lut #(.ENTRIES(LUT_ENTRIES), .RD_PORTS(LN)) u_lut (
    .clk, .we(lut_we), .waddr(lut_waddr), .wdata(lut_wdata),
    .raddr(lut_raddr), .rdata(lut_rdata)
  );

  // TE MUL used to fill the LUT
  logic [3:0]    fill_k;
  logic [CW-1:0] fill_c;
  assign fill_k    = 4'(fill_cnt / LA'(N_SIGMA));
  assign fill_c    = CW'(fill_cnt % LA'(N_SIGMA));
  assign lut_we    = filling;
  assign lut_waddr = fill_cnt;
  assign lut_wdata = fp_mul(rec.alpha[fill_k], rec.emis[fill_k][fill_c]);

  // lane matching against the neighbour table
  logic [LN-1:0] match;
  logic [3:0]    mk   [LN];
  fp32_t         coef [LN];
  fp32_t         prod [LN];
  always_comb begin
    for (int l = 0; l < int'(LN); l++) begin
      match[l] = 1'b0;
      mk[l]    = '0;
      for (int k = 0; k < int'(K_NBR); k++) begin
        if (act && bc_lvld[l] && rec.nbr_vld[k] && rec.nbr_id[k] == bc_base + sid_t'(l)) begin
          match[l] = 1'b1;
          mk[l]    = 4'(k);
        end
      end
      lut_raddr[l] = LA'(mk[l]) * LA'(N_SIGMA) + LA'(bc_char);
    end
  end

  always_comb begin
    te_mul_use = 1'b0;
    for (int l = 0; l < int'(LN); l++) begin
      if (lut_en) coef[l] = lut_rdata[l];
      else begin
        coef[l]    = fp_mul(rec.alpha[mk[l]], rec.emis[mk[l]][bc_char]);   // TE MUL
        te_mul_use = te_mul_use | (bc_valid & match[l]);
      end
      // Dot Product Tree
      prod[l] = match[l] ? fp_mul(bc_val[l], coef[l]) : FP_ZERO;
    end
  end

  // pending lanes for the Update Transition unit
  logic [LN-1:0] pend;
  logic [3:0]    pend_k    [LN];
  fp32_t         pend_coef [LN];
  fp32_t         pend_val  [LN];
  logic [$clog2(LN)-1:0] sel;
  always_comb begin
    sel = '0;
    for (int l = int'(LN) - 1; l >= 0; l--) if (pend[l]) sel = ($clog2(LN))'(l);
  end

  assign ready = !filling && (pend == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rec <= '0; slot <= '0; f_val <= FP_ZERO; act <= 1'b0;
      filling <= 1'b0; fill_cnt <= '0;
      res_valid <= 1'b0; result <= FP_ZERO;
      pend <= '0;
      for (int l = 0; l < int'(LN); l++) begin
        acc[l] <= FP_ZERO; pend_k[l] <= '0; pend_coef[l] <= FP_ZERO; pend_val[l] <= FP_ZERO;
      end
    end else begin
      res_valid <= 1'b0;
      if (ld_valid) begin
        act   <= ld_act;
        f_val <= ld_f;
        slot  <= ld_slot;
        for (int l = 0; l < int'(LN); l++) acc[l] <= FP_ZERO;
        if (!ld_keep) begin
          rec      <= ld_rec;
          filling  <= lut_en && ld_act;
          fill_cnt <= '0;
        end
      end else if (filling) begin
        if (32'(fill_cnt) == LUT_ENTRIES - 1) filling <= 1'b0;
        fill_cnt <= fill_cnt + 1'b1;
      end
      if (bc_valid) begin
        for (int l = 0; l < int'(LN); l++) begin
          acc[l]       <= fp_add(acc[l], prod[l]);     // Accumulator
          pend_k[l]    <= mk[l];
          pend_coef[l] <= coef[l];
          pend_val[l]  <= bc_val[l];
        end
        pend <= (dir == DIR_BWD && upd_en) ? match : '0;
      end else if (pend != '0) begin
        pend[sel] <= 1'b0;
      end
      if (fin) begin
        res_valid <= act;
        if (mode_init)
          result <= (dir == DIR_FWD) ? fp_mul(rec.pi, rec.emis[0][bc_char]) : FP_ONE;
        else   // Reduction Tree
          result <= fp_add(fp_add(acc[0], acc[1]), fp_add(acc[2], acc[3]));
      end
    end
  end

  update_transition #(.K(K_NBR), .KPAD(16), .SP_BYTES(SP_BYTES)) u_ut (
    .clk, .rst_n, .clear(ut_clear),
    .in_valid(pend != '0), .in_slot(slot), .in_k(pend_k[sel]),
    .in_coef(pend_coef[sel]), .in_f(f_val), .in_b(pend_val[sel]),
    .idle(ut_idle),
    .fin_start(ut_fin_start), .fin_busy(ut_fin_busy),
    .out_valid(ut_out_valid), .out_ready(ut_out_ready),
    .out_slot(ut_out_slot), .out_k(ut_out_k), .out_alpha(ut_out_alpha)
  );
endmodule
