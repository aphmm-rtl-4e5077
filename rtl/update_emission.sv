// update_emission: an Update Emission (UE) unit.
//
// It re-estimates emission probabilities (Eq. 4 of Baum-Welch):
//   e*_X(v_i) = sum_t F_t(i) B_t(i) [S[t] = X]  /  sum_t F_t(i) B_t(i)
// The Write Selector hands it, per Backward result, the state's local index,
// the character S[t], F_t(i) and B_t(i). The product F*B is formed once and
// added, in the same cycle and in parallel, to the numerator of (i, S[t])
// ("Calculate Emission Numerator") and to the denominator of i ("Calculate
// Emission Denominator"). After the last timestamp, fin_start runs "Division &
// Update Emission": every state seen gets N_SIGMA divisions, each result
// leaving on out_* with a valid/ready handshake.
// The source keeps numerators and denominators in the L1 cache; here each UE
// owns the L1 region of its states as an array of MAX_ST states (states are
// spread over the UEs by state id modulo the UE count, a choice of this
// design). A state's first contribution initialises its entries, so clearing
// only resets one valid bit per state.
module update_emission
  import aphmm_pkg::*;
#(
  parameter int unsigned MAX_ST = 768,
  parameter int unsigned NS     = 4,
  localparam int unsigned IW    = $clog2(MAX_ST),
  localparam int unsigned CW    = (NS > 1) ? $clog2(NS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          in_valid,
  input  logic [IW-1:0] in_idx,
  input  logic [CW-1:0] in_char,
  input  fp32_t         in_f,
  input  fp32_t         in_b,
  input  logic          fin_start,
  output logic          fin_busy,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [IW-1:0] out_idx,
  output logic [CW-1:0] out_c,
  output fp32_t         out_e
);
  fp32_t             num [MAX_ST][NS];
  fp32_t             den [MAX_ST];
  logic [MAX_ST-1:0] vld;
  fp32_t             fb;

  assign fb = fp_mul(in_f, in_b);

  // numerator and denominator accumulation (storage has no reset)
  always_ff @(posedge clk) begin
    if (in_valid && !clear) begin
      for (int c = 0; c < int'(NS); c++) begin
        if (c == int'(in_char))
          num[in_idx][c] <= vld[in_idx] ? fp_add(num[in_idx][c], fb) : fb;
        else if (!vld[in_idx])
          num[in_idx][c] <= FP_ZERO;
      end
      den[in_idx] <= vld[in_idx] ? fp_add(den[in_idx], fb) : fb;
    end
  end

  typedef enum logic [2:0] {U_IDLE, U_SCAN, U_DIV, U_WAIT, U_OUT} ust_e;
  ust_e          ust;
  logic          div_start, div_busy, div_done;
  fp32_t         div_q;

  assign fin_busy  = (ust != U_IDLE);
  assign div_start = (ust == U_DIV);

  fp_div u_div (
    .clk, .rst_n, .start(div_start), .a(num[out_idx][out_c]), .b(den[out_idx]),
    .busy(div_busy), .done(div_done), .q(div_q)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0; ust <= U_IDLE; out_idx <= '0; out_c <= '0;
      out_valid <= 1'b0; out_e <= FP_ZERO;
    end else begin
      if (clear) vld <= '0;
      else if (in_valid) vld[in_idx] <= 1'b1;
      case (ust)
        U_IDLE: if (fin_start) begin
          ust <= U_SCAN; out_idx <= '0; out_c <= '0;
        end
        U_SCAN: begin
          if (vld[out_idx]) ust <= U_DIV;
          else if (32'(out_idx) == MAX_ST - 1) ust <= U_IDLE;
          else out_idx <= out_idx + 1'b1;
        end
        U_DIV:  ust <= U_WAIT;
        U_WAIT: if (div_done) begin
          out_e <= div_q; out_valid <= 1'b1; ust <= U_OUT;
        end
        U_OUT: if (out_ready) begin
          out_valid <= 1'b0;
          if (32'(out_c) == NS - 1) begin
            out_c <= '0;
            if (32'(out_idx) == MAX_ST - 1) ust <= U_IDLE;
            else begin
              out_idx <= out_idx + 1'b1; ust <= U_SCAN;
            end
          end else begin
            out_c <= out_c + 1'b1; ust <= U_DIV;
          end
        end
        default: ust <= U_IDLE;
      endcase
    end
  end
endmodule
