// pe_lut: the lookup table of one processing engine (PE).
//
// It holds the preset products alpha x e (transition probability times
// emission probability) of the PE's current state: ENTRIES = 36 words, enough
// for 9 transitions x 4 DNA characters, entry index k*N_SIGMA + c for
// transition slot k and character c. The entry count follows the source; the
// index layout is this design's own.
// One write port fills the table (one word per cycle, while the PE loads a
// state). RD_PORTS read ports, one per broadcast lane, read combinationally.
module pe_lut
  import aphmm_pkg::*;
#(
  parameter int unsigned ENTRIES  = 36,
  parameter int unsigned RD_PORTS = 4,
  localparam int unsigned AW = $clog2(ENTRIES)
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [AW-1:0]        waddr,
  input  fp32_t                wdata,
  input  logic [AW-1:0]        raddr [RD_PORTS],
  output fp32_t                rdata [RD_PORTS]
);
  fp32_t mem [ENTRIES];

  always_ff @(posedge clk) begin
    if (we && 32'(waddr) < ENTRIES) mem[waddr] <= wdata;
  end

  always_comb begin
    for (int p = 0; p < int'(RD_PORTS); p++)
      rdata[p] = (32'(raddr[p]) < ENTRIES) ? mem[raddr[p]] : FP_ZERO;
  end
endmodule
