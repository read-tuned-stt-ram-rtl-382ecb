// tb_hrsc_cache -- self-checking test of the high-retention L2 partition.
//
// A small bank (4 sets x 8 ways) gets random lookups, fills of lines that
// are not present, and invalidates of present lines, over 12 line
// addresses per set. A reference model with per-way last-use times
// predicts hits, data, the LRU victim and whether a valid line is dropped.
// Latencies are checked to the cycle: lookup 4, fill 31, invalidate 1.
module tb_hrsc_cache;
  import rrap_pkg::*;
  localparam int SETS = 4, WAYS = 8, RD = 4, WR = 31;

  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready;
  logic [1:0] req_op = 0;
  laddr_t req_addr = '0;
  logic [2:0] req_way = '0;
  line_t req_data = '0;
  logic done, hit, evicted;
  logic [2:0] way;
  line_t rdata;

  hrsc_cache #(.SETS(SETS), .WAYS(WAYS), .RD_LAT(RD), .WR_LAT(WR)) dut (.*);

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  bit     m_valid [SETS][WAYS];
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

  task automatic issue(input logic [1:0] op, input laddr_t a, input logic [2:0] w,
                       input line_t d, output int lat);
    int t0;
    @(negedge clk);
    req_valid = 1; req_op = op; req_addr = a; req_way = w; req_data = d;
    do @(posedge clk); while (!req_ready);
    @(negedge clk);
    t0 = cyc;
    req_valid = 0;
    while (!done) @(negedge clk);
    lat = cyc - t0;
  endtask

  int n_hits = 0, n_evict = 0, n_inval = 0;

  initial begin
    int lat;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (SETS + 2) @(posedge clk);
    for (int it = 0; it < 500; it++) begin
      automatic laddr_t a = laddr_t'($urandom_range(0, SETS * 12 - 1));
      automatic int s = int'(a) % SETS;
      automatic int w = find(a);
      automatic int kind = $urandom_range(0, 5);
      now++;
      if (kind <= 2) begin
        issue(2'd0, a, '0, '0, lat);
        check(lat == RD, $sformatf("lookup latency %0d", lat));
        check(hit == (w >= 0), "lookup hit");
        if (w >= 0) begin
          n_hits++;
          check(int'(way) == w && rdata == m_data[s][w], "lookup way/data");
          m_used[s][w] = now;
        end
      end else if (w >= 0 && kind == 5) begin
        issue(2'd3, a, 3'(w), '0, lat);
        check(lat == 1, $sformatf("invalidate latency %0d", lat));
        m_valid[s][w] = 0;
        n_inval++;
      end else if (w < 0) begin
        automatic line_t d = rand_line();
        automatic int v = victim(s);
        automatic bit exp_ev = m_valid[s][v];
        issue(2'd2, a, '0, d, lat);
        check(lat == WR, $sformatf("fill latency %0d", lat));
        check(int'(way) == v, $sformatf("victim way %0d expected %0d", way, v));
        check(evicted == exp_ev, "evicted flag");
        if (exp_ev) n_evict++;
        m_valid[s][v] = 1; m_addr[s][v] = a; m_data[s][v] = d; m_used[s][v] = now;
      end
    end
    check(n_hits > 50 && n_evict > 10 && n_inval > 5,
          $sformatf("coverage hits=%0d evict=%0d inval=%0d", n_hits, n_evict, n_inval));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
