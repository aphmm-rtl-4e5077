// aphmm_top: the ApHMM accelerator, NCORE = 4 ApHMM cores started together by
// the global event control.
//
// Every core has its own configuration, sequence buffer, graph port, forward
// store port and result stream; they are brought out here as arrays indexed
// by core, for the memory system around the accelerator (L1/L2 fill by the
// DMA tables, DRAM holding the forward values), which is not part of this
// RTL. The host writes each core's parameters and sequence, then pulses
// host_start with a core mask; host_done pulses when every started core is
// done. Four cores follow the source's chosen configuration; how the cores
// share buses and DMA engines is left to the surrounding system.
module aphmm_top
  import aphmm_pkg::*;
#(
  parameter int unsigned NCORE = 4,
  parameter int unsigned NP    = 64,
  parameter int unsigned NUE   = 4,
  parameter int unsigned MAXS  = 3072,
  parameter int unsigned MAXL  = 1000,
  localparam int unsigned CW   = $clog2(N_SIGMA),
  localparam int unsigned LW   = $clog2(MAXL)
) (
  input  logic             clk,
  input  logic             rst_n,
  // host
  input  logic             host_start,
  input  logic [NCORE-1:0] core_mask,
  output logic             host_busy,
  output logic             host_done,
  input  logic [NCORE-1:0] cfg_we,
  input  cfg_t             cfg_in,
  input  logic [NCORE-1:0] seq_we,
  input  logic [LW-1:0]    seq_addr,
  input  logic [CW-1:0]    seq_char,
  output logic [NCORE-1:0] core_busy,
  // per-core memory ports
  output logic [NCORE-1:0] gr_req,
  output logic [NCORE-1:0] gr_design,
  output dir_e             gr_dir    [NCORE],
  output sid_t             gr_id     [NCORE],
  input  graph_rec_t       gr_rec    [NCORE],
  output logic [NCORE-1:0] fs_we,
  output logic [22:0]      fs_waddr  [NCORE],
  output fp32_t            fs_wdata  [NCORE],
  output logic [NCORE-1:0] fs_re,
  output logic [22:0]      fs_raddr  [NCORE],
  input  fp32_t            fs_rdata  [NCORE],
  // per-core result streams
  output logic [NCORE-1:0] res_valid,
  input  logic [NCORE-1:0] res_ready,
  output res_kind_e        res_kind  [NCORE],
  output sid_t             res_state [NCORE],
  output logic [3:0]       res_idx   [NCORE],
  output fp32_t            res_value [NCORE],
  // events
  output logic [NCORE-1:0] ev_stall,
  output logic [NCORE-1:0] ev_skip,
  output logic [NCORE-1:0] ev_lut_keep,
  output logic [NCORE-1:0] ev_drop
);
  logic [NCORE-1:0] core_start, core_done;

  global_event_control #(.NC(NCORE)) u_gec (
    .clk, .rst_n, .host_start, .core_mask, .core_start, .core_done,
    .busy(host_busy), .host_done
  );

  for (genvar c = 0; c < int'(NCORE); c++) begin : g_core
    aphmm_core #(.NP(NP), .NUE(NUE), .MAXS(MAXS), .MAXL(MAXL)) u_core (
      .clk, .rst_n,
      .cfg_we(cfg_we[c]), .cfg_in, .seq_we(seq_we[c]), .seq_addr, .seq_char,
      .start(core_start[c]), .busy(core_busy[c]), .done(core_done[c]),
      .gr_req(gr_req[c]), .gr_design(gr_design[c]), .gr_dir(gr_dir[c]),
      .gr_id(gr_id[c]), .gr_rec(gr_rec[c]),
      .fs_we(fs_we[c]), .fs_waddr(fs_waddr[c]), .fs_wdata(fs_wdata[c]),
      .fs_re(fs_re[c]), .fs_raddr(fs_raddr[c]), .fs_rdata(fs_rdata[c]),
      .res_valid(res_valid[c]), .res_ready(res_ready[c]), .res_kind(res_kind[c]),
      .res_state(res_state[c]), .res_idx(res_idx[c]), .res_value(res_value[c]),
      .ev_stall(ev_stall[c]), .ev_skip(ev_skip[c]), .ev_lut_keep(ev_lut_keep[c]),
      .ev_drop(ev_drop[c])
    );
  end
endmodule
