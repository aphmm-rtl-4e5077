// tb_pe_lut: self-checking test of the PE look-up table.
// All 36 entries are written with random words, then read back through all
// four read ports at random addresses (combinational read, checked against a
// shadow copy); random rewrites are interleaved with the reads.
module tb_pe_lut;
  import aphmm_pkg::*;

  logic        clk = 0, we = 0;
  logic [5:0]  waddr = '0;
  fp32_t       wdata = '0;
  logic [5:0]  raddr [4];
  fp32_t       rdata [4];
  fp32_t       shadow [36];
  int          checks = 0, failures = 0;
  always #5 clk = ~clk;

  pe_lut #(.ENTRIES(36), .RD_PORTS(4)) dut (.*);

  initial begin
    foreach (raddr[p]) raddr[p] = '0;
    for (int i = 0; i < 36; i++) begin
      @(negedge clk);
      we = 1'b1; waddr = 6'(i); wdata = $urandom; shadow[i] = wdata;
    end
    @(negedge clk) we = 1'b0;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      we = 1'b0;
      foreach (raddr[p]) raddr[p] = 6'($urandom % 36);
      #1;
      foreach (raddr[p]) begin
        checks++;
        if (rdata[p] !== shadow[raddr[p]]) begin
          failures++;
          $display("FAIL port %0d addr %0d: %h, expected %h", p, raddr[p], rdata[p], shadow[raddr[p]]);
        end
      end
      if ($urandom % 4 == 0) begin
        we = 1'b1; waddr = 6'($urandom % 36); wdata = $urandom; shadow[waddr] = wdata;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
