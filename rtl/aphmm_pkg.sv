// aphmm_pkg: shared constants, types and single-precision arithmetic of the
// ApHMM Baum-Welch accelerator.
//
// The accelerator works on IEEE-754 single-precision (32-bit) values, as the
// design it follows does (four 32-bit values per 128-bit memory line). The
// multiply and add here are combinational functions, so each datapath unit
// that calls one gets its own operator. They are simplified for probabilities:
// subnormal inputs and results are flushed to zero, results are truncated
// (round toward zero), and infinities and NaNs are not produced or handled.
// A result too large for the format saturates to the largest finite value.
//
// The bin function maps a value in [0,1] to one of NBINS equal-width bins
// (NBINS a power of two), the addressing rule of the histogram filter.
package aphmm_pkg;

  // Sizes of the main configuration (defaults of the modules).
  localparam int unsigned NUM_PE      = 64;   // PEs per core
  localparam int unsigned PES_PER_GRP = 4;    // 16 PE groups of 4
  localparam int unsigned LANES       = 4;    // 128-bit line = 4 x fp32
  localparam int unsigned NUM_UE      = 4;    // update-emission units
  localparam int unsigned K_NBR       = 9;    // transitions kept per state
  localparam int unsigned N_SIGMA     = 4;    // alphabet size (DNA)
  localparam int unsigned LUT_ENTRIES = 36;   // K_NBR * N_SIGMA
  localparam int unsigned SP_BYTES    = 8192; // transition scratchpad
  localparam int unsigned NBINS       = 16;   // histogram filter bins
  localparam int unsigned FILTER_SIZE = 500;  // default filter size
  localparam int unsigned MAX_LEN     = 1000; // longest chunk (bases)
  localparam int unsigned MAX_STATES  = 3072; // >= 3 states x 1000 bases
  localparam int unsigned NUM_CORES   = 4;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_ZERO = 32'h0000_0000;
  localparam fp32_t FP_ONE  = 32'h3F80_0000;

  typedef enum logic [1:0] {
    DIR_FWD  = 2'd0,
    DIR_BWD  = 2'd1
  } dir_e;

  // Kind of an entry on a core's result stream.
  typedef enum logic [1:0] {
    RES_TRANSITION = 2'd0,   // updated alpha*_ij, idx = neighbour slot k
    RES_EMISSION   = 2'd1    // updated e*_X(v_i), idx = character X
  } res_kind_e;

  // Run-time parameters held by the Control Block.
  typedef struct packed {
    logic        phmm_mod;     // 0 traditional pHMM, 1 modified (error correction)
    logic        bwd_en;       // run the Backward step
    logic        upd_en;       // run Parameter Updates (needs bwd_en)
    logic        filter_en;    // histogram filter on
    logic        lut_en;       // use LUTs, else TE MUL
    logic [15:0] filter_size;  // states kept per timestamp
    logic [11:0] n_states;     // states in the pHMM (sub)graph
    logic [10:0] seq_len;      // characters in the sequence chunk
    logic [5:0]  win;          // widest transition span (in states)
  } cfg_t;

  typedef logic [11:0] sid_t;          // state id

  // One state's entry of the pHMM graph G(V,A) as a PE needs it for one
  // direction. Forward, for state j: neighbours are the predecessors i,
  // alpha[k] = alpha_ij, emis[k][c] = e_c(v_j). Backward, for state i:
  // neighbours are the successors j, alpha[k] = alpha_ij, emis[k][c] = e_c(v_j).
  // pi is the initial probability of the state (forward initialisation).
  typedef struct packed {
    logic [K_NBR-1:0]              nbr_vld;
    sid_t [K_NBR-1:0]              nbr_id;
    fp32_t [K_NBR-1:0]             alpha;
    fp32_t [K_NBR-1:0][N_SIGMA-1:0] emis;
    fp32_t                         pi;
  } graph_rec_t;

  // --- single-precision arithmetic -------------------------------------

  function automatic fp32_t fp_mul(fp32_t a, fp32_t b);
    logic        s;
    logic [47:0] p;
    logic [22:0] m;
    logic signed [10:0] e;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = 11'(a[30:23]) + 11'(b[30:23]) - 11'sd127;
    if (p[47]) begin
      m = p[46:24];
      e = e + 11'sd1;
    end else begin
      m = p[45:23];
    end
    if (e <= 0)   return {s, 31'd0};
    if (e >= 255) return {s, 8'hFE, 23'h7FFFFF};
    return {s, e[7:0], m};
  endfunction

  function automatic fp32_t fp_add(fp32_t a, fp32_t b);
    fp32_t       x, y;
    logic [7:0]  d;
    logic [26:0] mx, my;
    logic [27:0] sum;
    logic signed [10:0] e;
    int          lz;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? FP_ZERO : b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else begin x = b; y = a; end
    d  = x[30:23] - y[30:23];
    mx = {1'b1, x[22:0], 3'b000};
    my = (d > 8'd26) ? 27'd0 : ({1'b1, y[22:0], 3'b000} >> d);
    e  = 11'(x[30:23]);
    if (x[31] == y[31]) begin
      sum = {1'b0, mx} + {1'b0, my};
      if (sum[27]) begin
        sum = sum >> 1;
        e   = e + 11'sd1;
      end
    end else begin
      sum = {1'b0, mx} - {1'b0, my};
      if (sum == 28'd0) return FP_ZERO;
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      e   = e - 11'(lz);
    end
    if (e <= 0)   return FP_ZERO;
    if (e >= 255) return {x[31], 8'hFE, 23'h7FFFFF};
    return {x[31], e[7:0], sum[25:3]};
  endfunction

  // Bin of a value v in [0,1] among nbins equal ranges of width 1/nbins:
  // floor(v * nbins), with v >= 1 in the top bin. nbins must be 2^lg.
  function automatic logic [7:0] fp_bin(fp32_t v, int unsigned lg);
    int unsigned e;
    logic [23:0] m;
    int unsigned nb;
    nb = 1 << lg;
    e  = int'(v[30:23]);
    m  = {1'b1, v[22:0]};
    if (v[31] || e == 0)  return 8'd0;
    if (e >= 127)         return 8'(nb - 1);
    if (e + lg < 127)     return 8'd0;
    // v * nb = 1.m * 2^(e-127+lg), an integer part of (e-127+lg+1) bits
    return 8'(m >> (23 - (e + lg - 127)));
  endfunction

endpackage
