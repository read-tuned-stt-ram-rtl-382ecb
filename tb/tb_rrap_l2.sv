// tb_rrap_l2 -- self-checking test of one private hybrid L2.
//
// The L2 is shrunk to 2 sets x 4 ways per partition and a 400-cycle
// retention (one refresh every 50 cycles). A stand-in LLC in this file
// holds the latest value of every line, answers after a random delay, and
// flags reads of line addresses 64..79 for the HRSC unless that line has
// been written. A stream of random reads and byte-masked writes, including
// immediate re-reads and writes to lines just placed in the HRSC, is run.
// Checks: every read returns the latest value of its line; every
// write-back carries the latest value; an immediate re-read hits, in the
// partition the line was placed in, RD_LAT + 1 = 5 cycles after it was
// accepted; the stand-in never flags a write; and every mechanism (LRSC
// hit, HRSC hit and fill and LRU eviction, HRSC-to-LRSC move on a write,
// dirty write-back, refresh, refresh stall) happens.
module tb_rrap_l2;
  import rrap_pkg::*;

  logic clk = 0, rst_n = 0;
  logic l1_req_valid = 0, l1_req_ready, l1_resp_valid;
  l1_req_t l1_req = '0;
  line_t l1_resp_data;
  logic llc_req_valid, llc_req_ready = 0, llc_resp_valid = 0;
  llc_req_t llc_req;
  llc_resp_t llc_resp = '0;
  l2_events_t ev;

  rrap_l2 #(.LRSC_SETS(2), .HRSC_SETS(2), .WAYS(4), .RETENTION_CYCLES(400)) dut (.*);

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  line_t golden [laddr_t];   // latest value as seen by the core
  line_t llc_mem [laddr_t];  // contents of the stand-in LLC
  bit    written [laddr_t];
  function automatic line_t init_line(laddr_t a);
    return {LINE_BITS/32{32'(a) * 32'h9e37_79b9}};
  endfunction
  function automatic line_t gold(laddr_t a);
    return golden.exists(a) ? golden[a] : init_line(a);
  endfunction
  function automatic line_t llc_val(laddr_t a);
    return llc_mem.exists(a) ? llc_mem[a] : init_line(a);
  endfunction
  function automatic bit bool_irra(laddr_t a);
    return a >= 64 && a < 80 && !written.exists(a);
  endfunction

  // stand-in LLC
  int     n_flag = 0;
  laddr_t last_flag = '0;
  initial begin
    forever begin
      @(negedge clk);
      llc_req_ready = ($urandom_range(0, 1) == 1);
      #4;
      if (llc_req_valid && llc_req_ready) begin
        automatic llc_req_t q = llc_req;
        automatic bit irra = 0;
        @(posedge clk);
        @(negedge clk);
        llc_req_ready = 0;
        if (q.op == LLC_WBACK) begin
          check(q.data == gold(q.addr), $sformatf("write-back data of line %0d", q.addr));
          llc_mem[q.addr] = q.data;
          written[q.addr] = 1;
        end else if (q.op == LLC_RFO) begin
          written[q.addr] = 1;
        end else irra = bool_irra(q.addr);
        repeat ($urandom_range(0, 10)) @(negedge clk);
        llc_resp_valid = 1;
        llc_resp.data = llc_val(q.addr);
        llc_resp.to_hrsc = irra;
        if (irra) begin n_flag++; last_flag = q.addr; end
        @(negedge clk);
        llc_resp_valid = 0;
      end
    end
  end

  int e_lhit = 0, e_hhit = 0, e_miss = 0, e_hfill = 0, e_hev = 0, e_move = 0, e_wb = 0,
      e_ref = 0, e_stall = 0;
  always @(posedge clk) if (rst_n) begin
    e_lhit += int'(ev.lrsc_hit); e_hhit += int'(ev.hrsc_hit); e_miss += int'(ev.l2_miss);
    e_hfill += int'(ev.hrsc_fill); e_hev += int'(ev.hrsc_evict); e_move += int'(ev.hrsc_to_lrsc);
    e_wb += int'(ev.writeback); e_ref += int'(ev.refresh); e_stall += int'(ev.refresh_stall);
  end

  // one L1 request; returns latency from acceptance to response
  task automatic l1(input l1_op_e op, input laddr_t a, input line_t d, input bmask_t m,
                    output int lat, output line_t rd);
    int t0;
    @(negedge clk);
    l1_req_valid = 1; l1_req.op = op; l1_req.addr = a; l1_req.data = d; l1_req.mask = m;
    #4;
    while (!l1_req_ready) begin @(negedge clk); #4; end
    @(posedge clk);
    @(negedge clk);
    l1_req_valid = 0;
    t0 = cyc;
    #4;
    while (!l1_resp_valid) begin @(negedge clk); #4; end
    lat = cyc - t0;
    rd  = l1_resp_data;
    @(posedge clk);   // let the event counters see this request's pulses
    #1;
  endtask

  function automatic line_t rand_line();
    line_t l;
    for (int i = 0; i < LINE_BITS / 32; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

  initial begin
    int lat;
    line_t rd;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 1500; it++) begin
      automatic laddr_t a = laddr_t'(($urandom_range(0, 1) == 1) ? $urandom_range(64, 79)
                                                                  : $urandom_range(0, 23));
      automatic int kind = $urandom_range(0, 9);
      if (kind < 6) begin
        automatic int f0 = n_flag;
        l1(L1_READ, a, '0, '0, lat, rd);
        check(rd == gold(a), $sformatf("read data of line %0d", a));
        if (kind < 2) begin
          // immediate re-read must hit in the partition just filled
          automatic int lh = e_lhit, hh = e_hhit;
          automatic bit went_h = (n_flag != f0) && (last_flag == a);
          l1(L1_READ, a, '0, '0, lat, rd);
          check(rd == gold(a), "re-read data");
          check(lat == 5, $sformatf("hit latency %0d", lat));
          check(went_h ? (e_hhit == hh + 1) : (e_lhit == lh + 1 || e_hhit == hh + 1),
                $sformatf("re-read hit partition went_h=%0d l %0d->%0d h %0d->%0d", went_h, lh, e_lhit, hh, e_hhit));
        end
      end else begin
        automatic line_t d = rand_line();
        automatic bmask_t m = {$urandom, $urandom};
        l1(L1_WRITE, a, d, m, lat, rd);
        golden[a] = merge_line(gold(a), d, m);
        check(rd == golden[a], "write merged line");
        if (a >= 64 && a < 80) written[a] = 1;
      end
    end
    check(e_lhit > 0 && e_hhit > 0 && e_miss > 0 && e_hfill > 0 && e_hev > 0 && e_move > 0 &&
          e_wb > 0 && e_ref > 0 && e_stall > 0,
          $sformatf("mechanisms lhit=%0d hhit=%0d miss=%0d hfill=%0d hevict=%0d move=%0d wb=%0d ref=%0d stall=%0d",
                    e_lhit, e_hhit, e_miss, e_hfill, e_hev, e_move, e_wb, e_ref, e_stall));
    $display("events: lhit=%0d hhit=%0d miss=%0d hfill=%0d hevict=%0d move=%0d wb=%0d ref=%0d stall=%0d",
             e_lhit, e_hhit, e_miss, e_hfill, e_hev, e_move, e_wb, e_ref, e_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
