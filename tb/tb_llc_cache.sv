// tb_llc_cache -- self-checking test of the shared LLC and its monitor.
//
// A small LLC (6 sets, which exercises the modulo set index, x 4 ways,
// NR_TH = 4) is driven with random reads, reads-for-ownership and
// write-backs over 40 line addresses, behind a main-memory model with
// random latency and back-pressure. A reference model of the LLC (tags,
// dirty bits, RC, WC, last-use times) predicts for each request: the data
// returned (the latest value written anywhere), whether it hits, whether
// it is flagged for the HRSC, and whether a dirty victim goes to memory.
// Hit latency is checked to the cycle. Memory writes must carry the latest
// value of their line. Coverage: IRRA flags, a read of a written line with
// saturated RC that must not be flagged, evictions, memory write-backs.
module tb_llc_cache;
  import rrap_pkg::*;
  localparam int SETS = 6, WAYS = 4, LAT = 30, NRTH = 4, NADDR = 40;

  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, resp_valid;
  llc_req_t req = '0;
  llc_resp_t resp;
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t mem_req;
  line_t mem_resp_data;
  logic ev_hit, ev_miss, ev_irra, ev_evict, ev_mem_wb;
  int n_mem_rd, n_mem_wr;

  llc_cache #(.SETS(SETS), .WAYS(WAYS), .HIT_LAT(LAT), .NR_TH(NRTH)) dut (.*);
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

  // golden latest value of every line
  line_t golden [laddr_t];
  function automatic line_t gold(laddr_t a);
    return golden.exists(a) ? golden[a] : u_mem.init_line(a);
  endfunction

  // model of the LLC
  bit     m_valid [SETS][WAYS];
  bit     m_dirty [SETS][WAYS];
  laddr_t m_addr  [SETS][WAYS];
  int     m_rc    [SETS][WAYS];
  bit     m_wc    [SETS][WAYS];
  int     m_used  [SETS][WAYS];
  int     now = 0;

  function automatic int find(laddr_t a);
    int s = int'(a) % SETS;
    for (int w = 0; w < WAYS; w++) if (m_valid[s][w] && m_addr[s][w] == a) return w;
    return -1;
  endfunction
  function automatic int victim(int s);
    int v = -1, oldest = 0;
    for (int w = 0; w < WAYS; w++) if (!m_valid[s][w]) return w;
    for (int w = 0; w < WAYS; w++)
      if (v < 0 || m_used[s][w] < oldest) begin v = w; oldest = m_used[s][w]; end
    return v;
  endfunction

  // every memory write must carry the latest value of its line
  int mem_wb_seen = 0;
  always @(posedge clk) if (rst_n)
    if (mem_req_valid && mem_req_ready && mem_req.write) begin
      mem_wb_seen++;
      check(mem_req.data == gold(mem_req.addr), "memory write-back data");
    end

  int n_irra = 0, n_wc_block = 0, n_evict = 0, n_hit = 0;

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (SETS + 2) @(posedge clk);
    for (int it = 0; it < 1500; it++) begin
      automatic laddr_t a = laddr_t'(it < 400 ? $urandom_range(0, 7) : $urandom_range(0, NADDR - 1));
      automatic int s = int'(a) % SETS;
      automatic int w = find(a);
      automatic int r = $urandom_range(0, 9);
      automatic llc_op_e op = (r < 7) ? LLC_READ : (r < 8) ? LLC_RFO : LLC_WBACK;
      automatic line_t d;
      automatic bit exp_irra = 0, exp_wb = 0;
      automatic int v, t0, wb0;
      for (int i = 0; i < LINE_BITS / 32; i++) d[i*32 +: 32] = $urandom;
      now++;
      if (w >= 0) begin
        n_hit++;
        if (op == LLC_READ) begin
          exp_irra = !m_wc[s][w] && m_rc[s][w] >= NRTH - 1;
          if (m_wc[s][w] && m_rc[s][w] >= NRTH - 1) n_wc_block++;
          if (m_rc[s][w] < 63) m_rc[s][w]++;
        end else m_wc[s][w] = 1;
        if (op == LLC_WBACK) m_dirty[s][w] = 1;
        m_used[s][w] = now;
      end else begin
        v = victim(s);
        exp_wb = m_valid[s][v] && m_dirty[s][v];
        if (m_valid[s][v]) n_evict++;
        m_valid[s][v] = 1; m_addr[s][v] = a; m_used[s][v] = now;
        m_dirty[s][v] = (op == LLC_WBACK);
        m_rc[s][v] = (op == LLC_READ) ? 1 : 0;
        m_wc[s][v] = (op != LLC_READ);
      end
      if (exp_irra) n_irra++;
      // drive the request
      @(negedge clk);
      req_valid = 1; req.op = op; req.addr = a; req.data = d;
      do @(posedge clk); while (!req_ready);
      @(negedge clk);
      req_valid = 0;
      t0 = cyc; wb0 = mem_wb_seen;
      while (!resp_valid) @(negedge clk);
      if (w >= 0) check(cyc - t0 == LAT, $sformatf("hit latency %0d", cyc - t0));
      else        check(cyc - t0 > LAT, "miss slower than hit");
      if (op != LLC_WBACK) check(resp.data == gold(a), $sformatf("data of line %0d", a));
      check(resp.to_hrsc == exp_irra, $sformatf("to_hrsc of line %0d", a));
      check((mem_wb_seen - wb0 == 1) == exp_wb, "memory write-back happened as predicted");
      if (op == LLC_WBACK) golden[a] = d;
    end
    check(n_irra > 20 && n_wc_block > 5 && n_evict > 20 && n_mem_wr > 10 && n_hit > 100,
          $sformatf("coverage irra=%0d wcblock=%0d evict=%0d memwr=%0d hit=%0d",
                    n_irra, n_wc_block, n_evict, n_mem_wr, n_hit));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
