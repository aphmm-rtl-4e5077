// hist_filter: the histogram filter of the Control Block.
//
// Instead of sorting the states of a timestamp by their Forward or Backward
// value and keeping the best FILTER_SIZE of them, the filter splits [0,1] into
// NBINS = 16 equal ranges (width 1/16) and files each state id into the memory
// block of its range: the block's base plus an offset that points to the next
// free entry of the block (the offset doubles as the bin's state count).
// Selection then walks the bins from the highest range down, adding up their
// counts; the bin in which the running count reaches the filter size is the
// last one kept, and all lower bins are taken as negligible. The kept set is
// therefore every state a sort would keep, plus the rest of the last bin.
// Interface: clear empties all bins; in_valid/in_id/in_value file one state
// per cycle; sel_start starts the selection, after which the kept ids leave
// on out_valid/out_id, one per cycle from the highest bin down, and `done`
// pulses once. Selection takes one cycle per bin walked plus one per id.
// Each block has room for MAX_ST ids, so no bin can overflow; sizing the
// blocks this way is this design's choice (the source resizes memory
// sections at run time). Values at or above 1.0 go to the top bin.
module hist_filter
  import aphmm_pkg::*;
#(
  parameter int unsigned NB     = 16,
  parameter int unsigned MAX_ST = 3072,
  localparam int unsigned BW    = $clog2(NB),
  localparam int unsigned OW    = $clog2(MAX_ST + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          in_valid,
  input  sid_t          in_id,
  input  fp32_t         in_value,
  input  logic          sel_start,
  input  logic [15:0]   filter_size,
  output logic          out_valid,
  output sid_t          out_id,
  output logic          done,
  output logic [BW-1:0] cutoff_bin
);
  sid_t          mem [NB * MAX_ST];
  logic [OW-1:0] offset [NB];     // next free entry = count of the bin
  logic [BW-1:0] in_bin;

  assign in_bin = BW'(fp_bin(in_value, BW));

  always_ff @(posedge clk) begin
    if (in_valid && !clear && 32'(offset[in_bin]) < MAX_ST)
      mem[int'(in_bin) * MAX_ST + int'(offset[in_bin])] <= in_id;
  end

  typedef enum logic [1:0] {H_IDLE, H_SCAN, H_OUT} hst_e;
  hst_e          hst;
  logic [BW-1:0] b;
  logic [OW-1:0] off;
  logic [16:0]   cum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NB); i++) offset[i] <= '0;
      hst <= H_IDLE; b <= '0; off <= '0; cum <= '0; cutoff_bin <= '0;
      out_valid <= 1'b0; out_id <= '0; done <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      if (clear) begin
        for (int i = 0; i < int'(NB); i++) offset[i] <= '0;
      end else if (in_valid && 32'(offset[in_bin]) < MAX_ST) begin
        offset[in_bin] <= offset[in_bin] + 1'b1;
      end
      case (hst)
        H_IDLE: if (sel_start) begin
          hst <= H_SCAN; b <= BW'(NB - 1); cum <= '0;
        end
        H_SCAN: begin                // accumulate counts from the top bin
          if (cum + 17'(offset[b]) >= 17'(filter_size) || b == '0) begin
            cutoff_bin <= b;
            hst <= H_OUT; b <= BW'(NB - 1); off <= '0;
          end else begin
            cum <= cum + 17'(offset[b]);
            b   <= b - 1'b1;
          end
        end
        H_OUT: begin                 // read the kept blocks: base + offset
          if (off < offset[b]) begin
            out_valid <= 1'b1;
            out_id    <= mem[int'(b) * MAX_ST + int'(off)];
            off       <= off + 1'b1;
          end else if (b == cutoff_bin) begin
            done <= 1'b1; hst <= H_IDLE;
          end else begin
            b <= b - 1'b1; off <= '0;
          end
        end
        default: hst <= H_IDLE;
      endcase
    end
  end
endmodule
