// tb_rrap_top -- end-to-end test of the RRAP hierarchy with eight cores.
//
// Sizes are reduced so that every mechanism happens within a short run:
// each L2 partition has 2 sets x 4 ways, the LLC 48 sets x 4 ways, the IRRA
// read threshold is 4 and the LRSC retention 400 cycles. Each core runs
// its own random stream over
//   * a shared read-only region (lines 1000..1011) read by all cores,
//   * a private region of 16 lines, 8 read-mostly and 8 read/write,
//   * a private stream of lines touched once (read or written), which
//     pushes lines out of the LLC.
// Private data is never touched by another core, so the hierarchy (which
// has no coherence protocol between private L2s) must return the latest
// value of every line. A main-memory model sits behind the LLC.
// Checks: every read returns the latest value, and each mechanism happens:
// LRSC and HRSC hits, L2 misses, HRSC fills and LRU evictions, a write that
// moves a line from HRSC to LRSC, dirty L2 write-backs, LRSC refreshes and
// refresh stalls, LLC hits, misses, IRRA flags, evictions and memory
// write-backs, and bus contention.
module tb_rrap_top;
  import rrap_pkg::*;
  localparam int NC = 8;

  logic clk = 0, rst_n = 0;
  logic [NC-1:0] l1_req_valid, l1_req_ready, l1_resp_valid;
  l1_req_t l1_req [NC];
  line_t l1_resp_data [NC];
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t mem_req;
  line_t mem_resp_data;
  l2_events_t l2_ev [NC];
  logic llc_ev_hit, llc_ev_miss, llc_ev_irra, llc_ev_evict, llc_ev_mem_wb, bus_ev_conflict;
  int n_mem_rd, n_mem_wr;

  rrap_top #(.NCORES(NC), .LRSC_SETS(2), .HRSC_SETS(2), .L2_WAYS(4), .RETENTION_CYCLES(400),
             .LLC_SETS(48), .LLC_WAYS(4), .NR_TH(4)) dut (.*);
  main_memory_model u_mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .resp_valid(mem_resp_valid), .resp_data(mem_resp_data),
    .n_reads(n_mem_rd), .n_writes(n_mem_wr));

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  line_t golden [laddr_t];
  function automatic line_t gold(laddr_t a);
    return golden.exists(a) ? golden[a] : u_mem.init_line(a);
  endfunction

  // event counters
  typedef enum int {E_LHIT, E_HHIT, E_MISS, E_HFILL, E_HEVICT, E_MOVE, E_WB, E_REF, E_STALL,
                    E_LLC_HIT, E_LLC_MISS, E_IRRA, E_LLC_EVICT, E_MEM_WB, E_BUS, E_N} ev_e;
  int cnt [E_N];
  always @(posedge clk) if (rst_n) begin  // outputs are undefined before the first reset edge
    for (int i = 0; i < NC; i++) begin
      cnt[E_LHIT]   += int'(l2_ev[i].lrsc_hit);
      cnt[E_HHIT]   += int'(l2_ev[i].hrsc_hit);
      cnt[E_MISS]   += int'(l2_ev[i].l2_miss);
      cnt[E_HFILL]  += int'(l2_ev[i].hrsc_fill);
      cnt[E_HEVICT] += int'(l2_ev[i].hrsc_evict);
      cnt[E_MOVE]   += int'(l2_ev[i].hrsc_to_lrsc);
      cnt[E_WB]     += int'(l2_ev[i].writeback);
      cnt[E_REF]    += int'(l2_ev[i].refresh);
      cnt[E_STALL]  += int'(l2_ev[i].refresh_stall);
    end
    cnt[E_LLC_HIT]   += int'(llc_ev_hit);
    cnt[E_LLC_MISS]  += int'(llc_ev_miss);
    cnt[E_IRRA]      += int'(llc_ev_irra);
    cnt[E_LLC_EVICT] += int'(llc_ev_evict);
    cnt[E_MEM_WB]    += int'(llc_ev_mem_wb);
    cnt[E_BUS]       += int'(bus_ev_conflict);
  end

  int done_cores = 0;
  for (genvar c = 0; c < NC; c++) begin : g_core
    logic    v = 1'b0;
    l1_req_t q = '0;
    assign l1_req_valid[c] = v;
    assign l1_req[c]       = q;
    initial begin
      wait (rst_n);
      repeat (20) @(negedge clk);
      for (int it = 0; it < 300; it++) begin
        automatic int kind = $urandom_range(0, 7);
        automatic int p = $urandom_range(0, 15);
        automatic laddr_t a = (kind <= 2) ? laddr_t'(1000 + $urandom_range(0, 11))
                            : (kind == 7) ? laddr_t'(10000 + 1000 * c + it)
                            : laddr_t'(2000 + 16 * c + p);
        // private lines 0..7 are read-mostly, 8..15 read/write; stream lines
        // are touched once
        automatic bit wr = (kind == 7) ? ($urandom_range(0, 1) == 1)
                         : (kind > 2) && ((p >= 8) ? ($urandom_range(0, 3) == 0)
                                                   : ($urandom_range(0, 29) == 0));
        automatic line_t d;
        automatic bmask_t m = {$urandom, $urandom};
        for (int i = 0; i < LINE_BITS / 32; i++) d[i*32 +: 32] = $urandom;
        @(negedge clk);
        v = 1; q.op = wr ? L1_WRITE : L1_READ; q.addr = a; q.data = d; q.mask = m;
        #4;
        while (!l1_req_ready[c]) begin @(negedge clk); #4; end
        @(posedge clk);
        @(negedge clk);
        v = 0;
        #4;
        while (!l1_resp_valid[c]) begin @(negedge clk); #4; end
        if (wr) begin
          golden[a] = merge_line(gold(a), d, m);
          check(l1_resp_data[c] == golden[a], $sformatf("core %0d write of line %0d", c, a));
        end else begin
          check(l1_resp_data[c] == gold(a), $sformatf("core %0d read of line %0d", c, a));
        end
      end
      done_cores++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    wait (done_cores == NC);
    repeat (5) @(posedge clk);
    $display("events: lrsc_hit=%0d hrsc_hit=%0d l2_miss=%0d hrsc_fill=%0d hrsc_evict=%0d hrsc_to_lrsc=%0d l2_wb=%0d refresh=%0d refresh_stall=%0d",
             cnt[E_LHIT], cnt[E_HHIT], cnt[E_MISS], cnt[E_HFILL], cnt[E_HEVICT], cnt[E_MOVE],
             cnt[E_WB], cnt[E_REF], cnt[E_STALL]);
    $display("events: llc_hit=%0d llc_miss=%0d irra=%0d llc_evict=%0d mem_wb=%0d bus_conflict=%0d",
             cnt[E_LLC_HIT], cnt[E_LLC_MISS], cnt[E_IRRA], cnt[E_LLC_EVICT], cnt[E_MEM_WB], cnt[E_BUS]);
    for (int e = 0; e < E_N; e++)
      check(cnt[e] > 0, $sformatf("mechanism %s never happened", ev_e'(e)));
    check(cnt[E_IRRA] == cnt[E_HFILL], "every IRRA flag leads to an HRSC fill");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
