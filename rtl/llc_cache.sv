// llc_cache -- shared last-level cache (L3) with the RRAP read/write monitor.
//
// The LLC is a large eDRAM cache (96 MB, 16-way, write-back) shared by all
// cores. RRAP adds 7 bits to every line, a 6-bit Read Counter and a 1-bit
// Write Counter, kept by rrap_monitor. On a read hit the monitor decides
// whether the line is an IRRA block; the answer travels back with the data
// as `to_hrsc`, and the requesting L2 then keeps the line in its
// high-retention partition.
//
// The hierarchy is non-inclusive: a line fetched by an L2 stays in the LLC
// as a duplicate, and when the LLC later evicts that duplicate it does not
// back-invalidate the L2 copies (there is no path to do so). On a miss the
// line is fetched from main memory and installed in the LLC as well as
// returned. A dirty LRU victim is written to memory first.
//
// Requests (llc_req_t), one at a time:
//   LLC_READ   L2 read miss. Hit: RC counts up, to_hrsc = IRRA. Miss:
//              install with RC = 1, WC = 0.
//   LLC_RFO    L2 write miss. Hit: WC = 1. Miss: install with WC = 1.
//   LLC_WBACK  dirty L2 victim. Hit: data written, dirty, WC = 1. Miss:
//              the full line is installed (no fetch), dirty, WC = 1.
// Every request is answered with one resp_valid pulse. A hit answers
// HIT_LAT cycles after acceptance; a miss adds the memory round trip.
// Memory port: valid/ready request (mem_req_t); writes are posted, reads
// return one mem_resp_valid pulse with the line.
//
// Sets are SETS = 96 MB / 64 B / 16 = 98304, not a power of two, so the set
// is the line address modulo SETS and the tag the quotient. After reset the
// cache clears its valid bits one set per cycle (SETS cycles).
//
// From the paper: capacity, associativity, write-back, non-inclusion and
// no back-invalidation, RC/WC per line and their use. Own choices: the hit
// latency (the paper gives none for the L3), LRU replacement, a single
// blocking port (the paper's 16 banks are not modelled separately), the
// write-back-miss install without fetch, and the eDRAM refresh of the L3
// being left out (the paper does not describe one for its design).
module llc_cache
  import rrap_pkg::*;
#(
  parameter int unsigned SETS    = 98304,
  parameter int unsigned WAYS    = 16,
  parameter int unsigned HIT_LAT = 30,
  parameter int unsigned RC_W    = 6,
  parameter int unsigned NR_TH   = 64,
  localparam int unsigned SET_W  = $clog2(SETS),
  localparam int unsigned WAY_W  = $clog2(WAYS),
  localparam int unsigned TAG_W  = $clog2(((2**LADDR_W) + SETS - 1) / SETS)
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  output logic      req_ready,
  input  llc_req_t  req,
  output logic      resp_valid,
  output llc_resp_t resp,
  output logic      mem_req_valid,
  input  logic      mem_req_ready,
  output mem_req_t  mem_req,
  input  logic      mem_resp_valid,
  input  line_t     mem_resp_data,
  // events
  output logic      ev_hit,
  output logic      ev_miss,
  output logic      ev_irra,      // read hit answered with to_hrsc
  output logic      ev_evict,     // valid line replaced (no back-invalidate)
  output logic      ev_mem_wb     // dirty victim written to memory
);
  localparam int unsigned LAT_W = $clog2(HIT_LAT + 1);

  typedef enum logic [2:0] {S_INIT, S_IDLE, S_TAG, S_MWB, S_MRD_GO, S_MRD_WAIT, S_DONE} state_e;
  state_e state;

  logic [TAG_W-1:0]      tag_q   [SETS*WAYS];
  line_t                 data_q  [SETS*WAYS];
  logic [RC_W-1:0]       rc_q    [SETS*WAYS];
  logic                  wc_q    [SETS*WAYS];
  logic [WAYS-1:0]       valid_q [SETS];
  logic [WAYS-1:0]       dirty_q [SETS];
  logic [WAYS*WAY_W-1:0] age_q   [SETS];

  function automatic int unsigned idx(logic [SET_W-1:0] s, logic [WAY_W-1:0] w);
    return int'(s) * WAYS + int'(w);
  endfunction

  // ---- lookup of the incoming request ----
  logic [SET_W-1:0] set_i;
  logic [TAG_W-1:0] tag_i;
  logic             hit_i;
  logic [WAY_W-1:0] hit_way_i, vic_way_i;
  logic [WAYS-1:0]  vset;
  logic [WAYS*WAY_W-1:0] ages;

  assign set_i = SET_W'(req.addr % LADDR_W'(SETS));
  assign tag_i = TAG_W'(req.addr / LADDR_W'(SETS));
  assign vset  = valid_q[set_i];
  assign ages  = age_q[set_i];

  always_comb begin
    logic found_inv;
    logic [WAY_W-1:0] oldest;
    hit_i     = 1'b0;
    hit_way_i = '0;
    for (int w = 0; w < WAYS; w++)
      if (vset[w] && tag_q[idx(set_i, WAY_W'(w))] == tag_i) begin
        hit_i     = 1'b1;
        hit_way_i = WAY_W'(w);
      end
    found_inv = 1'b0;
    vic_way_i = '0;
    oldest    = '0;
    for (int w = 0; w < WAYS; w++)
      if (!vset[w] && !found_inv) begin
        found_inv = 1'b1;
        vic_way_i = WAY_W'(w);
      end
    if (!found_inv)
      for (int w = 0; w < WAYS; w++)
        if (ages[w*WAY_W +: WAY_W] >= oldest) begin
          oldest    = ages[w*WAY_W +: WAY_W];
          vic_way_i = WAY_W'(w);
        end
  end

  function automatic logic [WAYS*WAY_W-1:0] touch(logic [WAYS*WAY_W-1:0] a,
                                                  logic [WAY_W-1:0] t);
    logic [WAYS*WAY_W-1:0] res;
    logic [WAY_W-1:0] at;
    res  = a;
    at = a[t*WAY_W +: WAY_W];
    for (int w = 0; w < WAYS; w++)
      if (a[w*WAY_W +: WAY_W] < at) res[w*WAY_W +: WAY_W] = a[w*WAY_W +: WAY_W] + 1'b1;
    res[t*WAY_W +: WAY_W] = '0;
    return res;
  endfunction

  function automatic logic [WAYS*WAY_W-1:0] init_ages();
    logic [WAYS*WAY_W-1:0] res;
    for (int w = 0; w < WAYS; w++) res[w*WAY_W +: WAY_W] = WAY_W'(w);
    return res;
  endfunction

  // ---- request state ----
  llc_req_t         r;
  logic [SET_W-1:0] set_q;
  logic [TAG_W-1:0] tag_q_r;
  logic             hit_q;
  logic [WAY_W-1:0] way_q;
  logic [LAT_W-1:0] cnt;
  logic [SET_W-1:0] init_set;
  line_t            fill_data;

  // ---- monitor ----
  logic [1:0]      mon_kind;
  logic [RC_W-1:0] mon_rc, mon_rc_next;
  logic            mon_wc, mon_wc_next, mon_irra;

  assign mon_rc = rc_q[idx(set_q, way_q)];
  assign mon_wc = wc_q[idx(set_q, way_q)];
  always_comb begin
    if (hit_q) mon_kind = (r.op == LLC_READ) ? 2'd2 : 2'd3;
    else       mon_kind = (r.op == LLC_READ) ? 2'd0 : 2'd1;
  end

  rrap_monitor #(.RC_W(RC_W), .NR_TH(NR_TH)) u_mon (
    .kind(mon_kind), .rc(mon_rc), .wc(mon_wc),
    .rc_next(mon_rc_next), .wc_next(mon_wc_next), .irra(mon_irra));

  assign req_ready = (state == S_IDLE);

  // ---- memory requests ----
  logic vic_dirty;
  assign vic_dirty = valid_q[set_q][way_q] && dirty_q[set_q][way_q];
  assign mem_req_valid = (state == S_MWB) || (state == S_MRD_GO);
  always_comb begin
    mem_req.write = (state == S_MWB);
    mem_req.addr  = (state == S_MWB)
                  ? LADDR_W'(tag_q[idx(set_q, way_q)]) * LADDR_W'(SETS) + LADDR_W'(set_q)
                  : r.addr;
    mem_req.data  = data_q[idx(set_q, way_q)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_INIT;
      init_set   <= '0;
      r          <= '0;
      set_q      <= '0;
      tag_q_r    <= '0;
      hit_q      <= 1'b0;
      way_q      <= '0;
      cnt        <= '0;
      fill_data  <= '0;
      resp_valid <= 1'b0;
      resp       <= '0;
      ev_hit     <= 1'b0;
      ev_miss    <= 1'b0;
      ev_irra    <= 1'b0;
      ev_evict   <= 1'b0;
      ev_mem_wb  <= 1'b0;
    end else begin
      resp_valid <= 1'b0;
      ev_hit     <= 1'b0;
      ev_miss    <= 1'b0;
      ev_irra    <= 1'b0;
      ev_evict   <= 1'b0;
      ev_mem_wb  <= 1'b0;
      unique case (state)
        S_INIT: begin
          valid_q[init_set] <= '0;
          dirty_q[init_set] <= '0;
          age_q[init_set]   <= init_ages();
          init_set          <= init_set + 1'b1;
          if (init_set == SET_W'(SETS - 1)) state <= S_IDLE;
        end
        S_IDLE: if (req_valid) begin
          r       <= req;
          set_q   <= set_i;
          tag_q_r <= tag_i;
          hit_q   <= hit_i;
          way_q   <= hit_i ? hit_way_i : vic_way_i;
          cnt     <= LAT_W'(HIT_LAT - 1);
          state   <= S_TAG;
        end
        S_TAG: if (cnt != '0) cnt <= cnt - 1'b1;
        else if (hit_q) begin
          ev_hit <= 1'b1;
          rc_q[idx(set_q, way_q)] <= mon_rc_next;
          wc_q[idx(set_q, way_q)] <= mon_wc_next;
          age_q[set_q]            <= touch(age_q[set_q], way_q);
          if (r.op == LLC_WBACK) begin
            data_q[idx(set_q, way_q)] <= r.data;
            dirty_q[set_q][way_q]     <= 1'b1;
          end
          resp_valid   <= 1'b1;
          resp.data    <= data_q[idx(set_q, way_q)];
          resp.to_hrsc <= mon_irra;
          ev_irra      <= mon_irra;
          state        <= S_IDLE;
        end else begin
          ev_miss  <= 1'b1;
          ev_evict <= valid_q[set_q][way_q];
          if (vic_dirty) state <= S_MWB;
          else if (r.op == LLC_WBACK) begin
            fill_data <= r.data;
            state     <= S_DONE;
          end else state <= S_MRD_GO;
        end
        S_MWB: if (mem_req_ready) begin
          ev_mem_wb <= 1'b1;
          if (r.op == LLC_WBACK) begin
            fill_data <= r.data;
            state     <= S_DONE;
          end else state <= S_MRD_GO;
        end
        S_MRD_GO: if (mem_req_ready) state <= S_MRD_WAIT;
        S_MRD_WAIT: if (mem_resp_valid) begin
          fill_data <= mem_resp_data;
          state     <= S_DONE;
        end
        default: begin // S_DONE: install the missing line
          tag_q[idx(set_q, way_q)]  <= tag_q_r;
          data_q[idx(set_q, way_q)] <= fill_data;
          rc_q[idx(set_q, way_q)]   <= mon_rc_next;
          wc_q[idx(set_q, way_q)]   <= mon_wc_next;
          valid_q[set_q][way_q]     <= 1'b1;
          dirty_q[set_q][way_q]     <= (r.op == LLC_WBACK);
          age_q[set_q]              <= touch(age_q[set_q], way_q);
          resp_valid   <= 1'b1;
          resp.data    <= fill_data;
          resp.to_hrsc <= 1'b0;
          state        <= S_IDLE;
        end
      endcase
    end
  end

  // Only read hits may send a line to the HRSC.
  assert property (@(posedge clk) disable iff (!rst_n)
    resp_valid && resp.to_hrsc |-> r.op == LLC_READ);
endmodule
