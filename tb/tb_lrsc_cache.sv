// tb_lrsc_cache -- self-checking test of the low-retention L2 partition.
//
// A small bank (4 sets x 8 ways) is driven with random lookups, write hits
// and fills over 12 line addresses per set, so sets overflow and dirty
// victims appear. A reference model in this file keeps, for every way, its
// tag, data, dirty bit and the time it was last used, and from it predicts
// hits, read data, the LRU victim and whether it must be written back.
// Latencies are checked to the cycle: lookup 4, write and fill 7, refresh
// 4 + 7. Refresh requests are raised at random; while one is pending the
// bank must refuse normal requests and must report the stall.
module tb_lrsc_cache;
  import rrap_pkg::*;
  localparam int SETS = 4, WAYS = 8, RD = 4, WR = 7;

  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, req_dirty = 0;
  logic [1:0] req_op = 0;
  laddr_t req_addr = '0;
  logic [2:0] req_way = '0;
  line_t req_data = '0;
  logic done, hit, victim_valid;
  logic [2:0] way;
  line_t rdata, victim_data;
  laddr_t victim_addr;
  logic ref_valid = 0, ref_ack, refresh_done, refresh_stall;
  logic [4:0] ref_idx = '0;

  lrsc_cache #(.SETS(SETS), .WAYS(WAYS), .RD_LAT(RD), .WR_LAT(WR)) dut (.*);

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  // reference model
  bit     m_valid [SETS][WAYS];
  bit     m_dirty [SETS][WAYS];
  laddr_t m_addr  [SETS][WAYS];
  line_t  m_data  [SETS][WAYS];
  int     m_used  [SETS][WAYS];
  int     now = 0;

  function automatic line_t rand_line();
    line_t l;
    for (int i = 0; i < LINE_BITS / 32; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

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

  // issue one request and wait for done; returns cycles from accept to done
  task automatic issue(input logic [1:0] op, input laddr_t a, input logic [2:0] w,
                       input line_t d, input logic dirty, output int lat);
    int t0;
    @(negedge clk);
    req_valid = 1; req_op = op; req_addr = a; req_way = w; req_data = d; req_dirty = dirty;
    do @(posedge clk); while (!req_ready);
    @(negedge clk);
    t0 = cyc;
    req_valid = 0;
    while (!done) @(negedge clk);
    lat = cyc - t0;
  endtask

  int n_hits = 0, n_wb = 0, n_ref = 0, n_stall = 0;
  always @(posedge clk) if (rst_n) begin
    if (refresh_done) n_ref++;
    if (refresh_stall) n_stall++;
  end

  // random refresh requests
  initial begin
    @(posedge rst_n);
    forever begin
      repeat ($urandom_range(20, 60)) @(posedge clk);
      #1 ref_valid = 1; ref_idx = 5'($urandom_range(0, SETS * WAYS - 1));
      @(posedge clk);
      while (!ref_ack) @(posedge clk);
      begin
        automatic int t0;
        #1 ref_valid = 0;
        t0 = cyc;
        while (!refresh_done) @(posedge clk);
        check(cyc - t0 == RD + WR, $sformatf("refresh latency %0d", cyc - t0));
      end
    end
  end

  initial begin
    int lat;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (SETS + 2) @(posedge clk);
    for (int it = 0; it < 600; it++) begin
      automatic laddr_t a = laddr_t'($urandom_range(0, SETS * 12 - 1));
      automatic int s = int'(a) % SETS;
      automatic int w = find(a);
      automatic int kind = $urandom_range(0, 2);
      now++;
      if (kind == 0 || (kind == 1 && w < 0) || (kind == 2 && w >= 0)) begin
        issue(2'd0, a, '0, '0, 0, lat);
        check(lat == RD, $sformatf("lookup latency %0d", lat));
        check(hit == (w >= 0), "lookup hit");
        if (w >= 0) begin
          n_hits++;
          check(int'(way) == w, "lookup way");
          check(rdata == m_data[s][w], "lookup data");
          m_used[s][w] = now;
        end
      end else if (kind == 1) begin
        automatic line_t d = rand_line();
        issue(2'd1, a, 3'(w), d, 0, lat);
        check(lat == WR, $sformatf("write latency %0d", lat));
        m_data[s][w] = d; m_dirty[s][w] = 1; m_used[s][w] = now;
      end else begin
        automatic line_t d = rand_line();
        automatic logic dirty = 1'($urandom_range(0, 1));
        automatic int v = victim(s);
        automatic bit exp_wb = m_valid[s][v] && m_dirty[s][v];
        issue(2'd2, a, '0, d, dirty, lat);
        check(lat == WR, $sformatf("fill latency %0d", lat));
        check(int'(way) == v, $sformatf("victim way %0d expected %0d", way, v));
        check(victim_valid == exp_wb, "victim write-back flag");
        if (exp_wb) begin
          n_wb++;
          check(victim_addr == m_addr[s][v] && victim_data == m_data[s][v], "victim line");
        end
        m_valid[s][v] = 1; m_addr[s][v] = a; m_data[s][v] = d;
        m_dirty[s][v] = dirty; m_used[s][v] = now;
      end
    end
    check(n_hits > 50 && n_wb > 10 && n_ref > 5 && n_stall > 0,
          $sformatf("coverage hits=%0d wb=%0d ref=%0d stall=%0d", n_hits, n_wb, n_ref, n_stall));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
