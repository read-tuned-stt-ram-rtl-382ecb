// tb_lrsc_refresh -- checks the sequential LRSC refresh schedule.
//
// With 16 lines and a 160-cycle retention the scheduler must raise a
// request every 10 cycles, visit the indices 0..15 in order and wrap. The
// array side acknowledges after a random delay shorter than the slot; in a
// second phase acknowledgements are withheld to provoke an overrun.
module tb_lrsc_refresh;
  localparam int LINES = 16, RET = 160, INTERVAL = RET / LINES;
  logic clk = 0, rst_n = 0, enable = 0;
  logic ref_valid, ref_ack = 0, overrun;
  logic [3:0] ref_idx;
  int checks = 0, failures = 0;
  int cyc = 0, last_req = -1, expect_idx = 0, overruns = 0;
  bit hold_ack = 0;

  lrsc_refresh #(.LINES(LINES), .RETENTION_CYCLES(RET)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // Acknowledge a request 0..5 cycles after it appears.
  initial begin
    forever begin
      @(posedge clk);
      if (ref_valid && !hold_ack) begin
        repeat ($urandom_range(0, 5)) @(posedge clk);
        #1 ref_ack = 1;
        @(posedge clk);
        #1 ref_ack = 0;
      end
    end
  end

  // New request edges: spacing and order.
  logic v_d = 0;
  always @(posedge clk) begin
    v_d <= ref_valid;
    if (overrun) overruns++;
    if (ref_valid && !v_d && !hold_ack) begin
      checks++;
      if (int'(ref_idx) != expect_idx) begin
        failures++; $display("FAIL idx %0d expected %0d", ref_idx, expect_idx);
      end
      if (last_req >= 0) begin
        checks++;
        if (cyc - last_req != INTERVAL) begin
          failures++; $display("FAIL interval %0d", cyc - last_req);
        end
      end
      last_req   = cyc;
      expect_idx = (expect_idx + 1) % LINES;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1; enable = 1;
    repeat (INTERVAL * LINES * 2 + 5) @(posedge clk);
    checks++;
    if (overruns != 0) begin failures++; $display("FAIL overrun with prompt acks"); end
    // Withhold acknowledgements: the request must stay and overruns appear.
    hold_ack = 1;
    repeat (INTERVAL * 3 + 2) @(posedge clk);
    checks++;
    if (!ref_valid || overruns < 2) begin
      failures++; $display("FAIL no overrun when refresh is blocked (%0d)", overruns);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
