// global_event_control: starts the ApHMM cores and tells the host when all
// of them have finished.
//
// The host hands control to the accelerator with a start pulse and a mask of
// the cores that have work. Each selected core gets a start pulse in the next
// cycle; the unit then tracks one pending bit per core, cleared by the core's
// done pulse, and when none is left it pulses host_done (control goes back to
// the host) and drops busy. Cores run asynchronously to each other, as in the
// source's execution flow; the mask, the pending-bit bookkeeping and the
// one-cycle start latency are this design's choices. A start while busy is
// ignored.
module global_event_control #(
  parameter int unsigned NC = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          host_start,
  input  logic [NC-1:0] core_mask,
  output logic [NC-1:0] core_start,
  input  logic [NC-1:0] core_done,
  output logic          busy,
  output logic          host_done
);
  logic [NC-1:0] pending;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= '0; core_start <= '0; busy <= 1'b0; host_done <= 1'b0;
    end else begin
      core_start <= '0;
      host_done  <= 1'b0;
      if (!busy) begin
        if (host_start && core_mask != '0) begin
          busy       <= 1'b1;
          pending    <= core_mask;
          core_start <= core_mask;
        end
      end else begin
        pending <= pending & ~core_done;
        if ((pending & ~core_done) == '0) begin
          busy      <= 1'b0;
          host_done <= 1'b1;
        end
      end
    end
  end
endmodule
