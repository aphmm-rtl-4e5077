// tb_global_event_control: self-checking test of the Global Event Control.
// Random core masks start jobs; a model of each core answers its start pulse
// with a done pulse after a random delay. Checked: core_start equals the mask
// one cycle after host_start, busy stays high until the last selected core
// is done, host_done pulses exactly once per job, and starts while busy and
// an empty mask are ignored.
module tb_global_event_control;
  localparam int NC = 4;
  logic          clk = 0, rst_n = 0, host_start = 0, busy, host_done;
  logic [NC-1:0] core_mask = '0, core_start, core_done = '0;
  int            checks = 0, failures = 0, n_done = 0;
  int            delay [NC];
  logic [NC-1:0] running = '0;
  always #5 clk = ~clk;

  global_event_control #(.NC(NC)) dut (.*);

  // core models
  always_ff @(posedge clk) begin
    core_done <= '0;
    for (int c = 0; c < NC; c++) begin
      if (core_start[c]) begin running[c] <= 1'b1; delay[c] <= 1 + int'($urandom % 20); end
      else if (running[c]) begin
        if (delay[c] == 0) begin core_done[c] <= 1'b1; running[c] <= 1'b0; end
        else delay[c] <= delay[c] - 1;
      end
    end
    if (host_done) n_done++;
  end

  initial begin
    foreach (delay[c]) delay[c] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < 200; j++) begin
      logic [NC-1:0] mask;
      int            d0;
      mask = NC'($urandom);
      @(negedge clk);
      core_mask = mask; host_start = 1'b1;
      @(negedge clk) host_start = 1'b0;
      checks++;
      if (mask == '0) begin
        if (busy || core_start != '0) begin failures++; $display("FAIL empty mask started"); end
        continue;
      end
      if (core_start != mask || !busy) begin
        failures++; $display("FAIL start %b for mask %b", core_start, mask);
      end
      d0 = n_done;
      // a second start while busy is ignored
      core_mask = ~mask; host_start = 1'b1;
      @(negedge clk) host_start = 1'b0;
      checks++;
      if (core_start != '0) begin failures++; $display("FAIL start while busy"); end
      while (busy) begin
        checks++;
        if (n_done != d0) begin failures++; $display("FAIL host_done while busy"); end
        if (running == '0 && core_done == '0 && !host_done) begin
          failures++; $display("FAIL busy with no core running"); break;
        end
        @(negedge clk);
      end
      @(negedge clk);
      checks++;
      if (n_done != d0 + 1 || running != '0) begin
        failures++; $display("FAIL job %0d: %0d host_done pulses, running %b", j, n_done - d0, running);
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
