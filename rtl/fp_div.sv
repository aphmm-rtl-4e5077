// fp_div: iterative single-precision divider (the FP DIV of the Update
// Transition unit and the division step of the Update Emission unit).
//
// q = a / b by restoring division of the 24-bit significands, one quotient bit
// per clock. A start pulse with the operands latches them; `done` pulses for
// one cycle with the quotient DIV_CYCLES = 26 cycles later, and `busy` is high
// in between (a start while busy is ignored). The cycle count and algorithm
// are this design's choice; the source only names an FP divider.
// As in aphmm_pkg, subnormals flush to zero and the quotient is truncated.
// A zero divisor, which here means a state that no path visited, gives zero:
// its probabilities cannot be re-estimated, and zero marks them as unused.
module fp_div
  import aphmm_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  fp32_t a,
  input  fp32_t b,
  output logic  busy,
  output logic  done,
  output fp32_t q
);
  localparam int unsigned QBITS = 25;

  logic [24:0]        rem;
  logic [23:0]        divisor;
  logic [QBITS-1:0]   quo;
  logic [4:0]         cnt;
  logic               sign, zero;
  logic signed [10:0] exp_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; q <= FP_ZERO;
      rem <= '0; divisor <= '0; quo <= '0; cnt <= '0;
      sign <= 1'b0; zero <= 1'b0; exp_r <= '0;
    end else begin
      done <= 1'b0;
      if (!busy && start) begin
        busy    <= 1'b1;
        sign    <= a[31] ^ b[31];
        zero    <= (a[30:23] == 8'd0) || (b[30:23] == 8'd0);
        exp_r   <= 11'(a[30:23]) - 11'(b[30:23]) + 11'sd127;
        rem     <= {1'b0, 1'b1, a[22:0]};
        divisor <= {1'b1, b[22:0]};
        quo     <= '0;
        cnt     <= 5'(QBITS);
      end else if (busy) begin
        if (cnt != 0) begin
          if (rem >= {1'b0, divisor}) begin
            quo <= {quo[QBITS-2:0], 1'b1};
            rem <= (rem - {1'b0, divisor}) << 1;
          end else begin
            quo <= {quo[QBITS-2:0], 1'b0};
            rem <= rem << 1;
          end
          cnt <= cnt - 5'd1;
        end else begin
          busy <= 1'b0;
          done <= 1'b1;
          if (zero) q <= FP_ZERO;
          else if (quo[QBITS-1]) begin
            if (exp_r <= 0)        q <= FP_ZERO;
            else if (exp_r >= 255) q <= {sign, 8'hFE, 23'h7FFFFF};
            else                   q <= {sign, exp_r[7:0], quo[23:1]};
          end else begin
            if (exp_r - 1 <= 0)        q <= FP_ZERO;
            else if (exp_r - 1 >= 255) q <= {sign, 8'hFE, 23'h7FFFFF};
            else                       q <= {sign, 8'(exp_r - 11'sd1), quo[22:0]};
          end
        end
      end
    end
  end
endmodule
