// update_transition: the Update Transition (UT) unit coupled to one PE.
//
// It re-estimates the transition probabilities of the states this PE works on
// (Eq. 3 of Baum-Welch):
//   alpha*_ij = sum_t alpha_ij e_{S[t+1]}(j) F_t(i) B_{t+1}(j)
//             / sum_t sum_x alpha_ix e_{S[t+1]}(x) F_t(i) B_{t+1}(x)
// Accumulate: each input beat carries the product coef = alpha_ij x e(j)
// (from the PE's LUT or TE MUL), F_t(i) of the PE's state and the broadcast
// B_{t+1}(j). MUL forms coef*F*B; ADD adds it to the previous numerator of
// (state slot, transition k) kept in the transition scratchpad (memoization:
// all numerators of one state i sit side by side in one slot) and writes it
// back. Two pipeline stages: multiply, then read-add-write of the scratchpad
// in one cycle, so back-to-back beats to the same word need no forwarding.
// One beat per cycle is accepted.
// Finalize: for every slot in use, ADD sums the slot's numerators into the
// denominator (the denominator of Eq. 3 is the sum of the numerators of state
// i over all its transitions), then FP DIV divides each numerator by it and
// the result leaves on out_* with a valid/ready handshake.
// The scratchpad is 8 KB (2048 fp32 words) as in the source, organised here as
// SLOTS = 2048 / KPAD slots of KPAD = 16 words; the slot layout, the valid bit
// per word used for clearing, and the handshakes are this design's choice.
module update_transition
  import aphmm_pkg::*;
#(
  parameter int unsigned K        = 9,
  parameter int unsigned KPAD     = 16,
  parameter int unsigned SP_BYTES = 8192,
  localparam int unsigned WORDS   = SP_BYTES / 4,
  localparam int unsigned SLOTS   = WORDS / KPAD,
  localparam int unsigned SW      = $clog2(SLOTS),
  localparam int unsigned KW      = $clog2(KPAD)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,       // forget all numerators
  // accumulate
  input  logic          in_valid,
  input  logic [SW-1:0] in_slot,
  input  logic [KW-1:0] in_k,
  input  fp32_t         in_coef,     // alpha_ij * e(j)
  input  fp32_t         in_f,        // F_t(i)
  input  fp32_t         in_b,        // B_{t+1}(j)
  output logic          idle,        // no accumulation in flight
  // finalize
  input  logic          fin_start,
  output logic          fin_busy,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [SW-1:0] out_slot,
  output logic [KW-1:0] out_k,
  output fp32_t         out_alpha
);
  fp32_t            sp    [WORDS];   // 8KB Transition Scratchpad
  logic [WORDS-1:0] sp_vld;

  // stage 1: MUL
  logic          s1_valid;
  logic [SW-1:0] s1_slot;
  logic [KW-1:0] s1_k;
  fp32_t         s1_prod;

  typedef enum logic [2:0] {F_IDLE, F_SCAN, F_SUM, F_DIV, F_WAIT, F_OUT} fst_e;
  fst_e          fst;
  logic [SW-1:0] f_slot;
  logic [KW-1:0] f_k;
  fp32_t         den;
  logic          div_start, div_busy, div_done;
  fp32_t         div_q;

  function automatic int unsigned adr(logic [SW-1:0] s, logic [KW-1:0] k);
    return int'(s) * KPAD + int'(k);
  endfunction

  fp_div u_div (
    .clk, .rst_n, .start(div_start), .a(sp[adr(f_slot, f_k)]), .b(den),
    .busy(div_busy), .done(div_done), .q(div_q)
  );

  assign idle      = !s1_valid && !in_valid;
  assign fin_busy  = (fst != F_IDLE);
  assign div_start = (fst == F_DIV);
  assign out_slot  = f_slot;
  assign out_k     = f_k;

  // scratchpad write port (read-add-write of stage 2)
  always_ff @(posedge clk) begin
    if (!clear && s1_valid)
      sp[adr(s1_slot, s1_k)] <= sp_vld[adr(s1_slot, s1_k)]
                                ? fp_add(sp[adr(s1_slot, s1_k)], s1_prod)
                                : s1_prod;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0; s1_slot <= '0; s1_k <= '0; s1_prod <= FP_ZERO;
      sp_vld   <= '0;
      fst <= F_IDLE; f_slot <= '0; f_k <= '0; den <= FP_ZERO;
      out_valid <= 1'b0; out_alpha <= FP_ZERO;
    end else begin
      // MUL: coef * F_t(i) * B_{t+1}(j)
      s1_valid <= in_valid;
      s1_slot  <= in_slot;
      s1_k     <= in_k;
      s1_prod  <= fp_mul(in_coef, fp_mul(in_f, in_b));
      // ADD with the previous numerator, write back
      if (clear) begin
        sp_vld <= '0;
      end else if (s1_valid) begin
        sp_vld[adr(s1_slot, s1_k)] <= 1'b1;
      end

      case (fst)
        F_IDLE: if (fin_start) begin
          fst <= F_SCAN; f_slot <= '0; f_k <= '0;
        end
        F_SCAN: begin                     // find next slot in use
          if (|sp_vld[adr(f_slot, '0) +: KPAD]) begin
            fst <= F_SUM; f_k <= '0; den <= FP_ZERO;
          end else if (32'(f_slot) == SLOTS - 1) fst <= F_IDLE;
          else f_slot <= f_slot + 1'b1;
        end
        F_SUM: begin                      // denominator = sum of numerators
          if (sp_vld[adr(f_slot, f_k)]) den <= fp_add(den, sp[adr(f_slot, f_k)]);
          if (32'(f_k) == K - 1) begin
            f_k <= '0; fst <= F_DIV;
          end else f_k <= f_k + 1'b1;
        end
        F_DIV: fst <= F_WAIT;             // div_start pulses here
        F_WAIT: if (div_done) begin
          out_alpha <= div_q;
          out_valid <= sp_vld[adr(f_slot, f_k)];
          fst       <= F_OUT;
        end
        F_OUT: if (!out_valid || out_ready) begin
          out_valid <= 1'b0;
          if (32'(f_k) == K - 1) begin
            if (32'(f_slot) == SLOTS - 1) fst <= F_IDLE;
            else begin
              f_slot <= f_slot + 1'b1; fst <= F_SCAN;
            end
          end else begin
            f_k <= f_k + 1'b1; fst <= F_DIV;
          end
        end
        default: fst <= F_IDLE;
      endcase
    end
  end
endmodule
