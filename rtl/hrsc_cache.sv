// hrsc_cache -- High-Retention STT-RAM Cache (HRSC) partition of a private L2.
//
// The HRSC holds copies of Immense Read Reused Access (IRRA) lines: LLC
// lines read at least 64 times and never written while resident. Such a line
// is written into the HRSC once and afterwards only read, so the slow,
// energy-hungry write of a 10-year-retention STT-RAM cell (10.153 ns, 31
// cycles at 3 GHz) is paid once, and the array needs no refresh. Its lines
// are always clean copies (the LLC keeps its own copy), so an evicted line
// is dropped without a write-back.
//
// Organisation: SETS x WAYS lines of 64 bytes (512 KB, 8-way), true LRU per
// set as the paper states for the HRSC. Blocking, one operation at a time:
//   OP_LOOKUP  tag search; returns hit, way and the line   (RD_LAT cycles)
//   OP_FILL    insert an IRRA line, LRU victim dropped     (WR_LAT cycles)
//   OP_INVAL   drop a hitting way (used when the core writes the line,
//              which then moves to the LRSC)              (1 cycle)
// The array is updated when an operation is accepted; `done` pulses with the
// registered results once its latency has passed. After reset the bank
// spends SETS cycles clearing its valid bits.
//
// From the paper: capacity, associativity, LRU, read-only use, Table 1
// latencies. Own choices: the invalidate on a core write, the handshake.
module hrsc_cache
  import rrap_pkg::*;
#(
  parameter int unsigned SETS   = 1024,
  parameter int unsigned WAYS   = 8,
  parameter int unsigned RD_LAT = 4,
  parameter int unsigned WR_LAT = 31,
  localparam int unsigned SET_W = $clog2(SETS),
  localparam int unsigned WAY_W = $clog2(WAYS),
  localparam int unsigned TAG_W = LADDR_W - SET_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid,
  output logic             req_ready,
  input  logic [1:0]       req_op,      // 0 lookup, 2 fill, 3 invalidate
  input  laddr_t           req_addr,
  input  logic [WAY_W-1:0] req_way,     // invalidate: way from a lookup
  input  line_t            req_data,
  output logic             done,
  output logic             hit,
  output logic [WAY_W-1:0] way,
  output line_t            rdata,
  output logic             evicted       // fill replaced a valid line
);
  localparam logic [1:0] OP_FILL = 2'd2, OP_INVAL = 2'd3;  // 0: lookup
  localparam int unsigned LAT_W = $clog2(WR_LAT + RD_LAT + 1);

  typedef enum logic [1:0] {S_INIT, S_IDLE, S_BUSY} state_e;
  state_e state;

  logic [TAG_W-1:0]      tag_q   [SETS*WAYS];
  line_t                 data_q  [SETS*WAYS];
  logic [WAYS-1:0]       valid_q [SETS];
  logic [WAYS*WAY_W-1:0] age_q   [SETS];

  logic [SET_W-1:0] init_set;
  logic [LAT_W-1:0] busy_cnt;

  logic [SET_W-1:0] set_i;
  logic [TAG_W-1:0] tag_i;
  logic             hit_i;
  logic [WAY_W-1:0] hit_way_i, vic_way_i;
  logic [WAYS-1:0]  vset;
  logic [WAYS*WAY_W-1:0] ages;

  assign set_i = req_addr[SET_W-1:0];
  assign tag_i = req_addr[LADDR_W-1:SET_W];
  assign vset  = valid_q[set_i];
  assign ages  = age_q[set_i];

  always_comb begin
    logic found_inv;
    logic [WAY_W-1:0] oldest;
    hit_i     = 1'b0;
    hit_way_i = '0;
    for (int w = 0; w < WAYS; w++)
      if (vset[w] && tag_q[{set_i, WAY_W'(w)}] == tag_i) begin
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

  assign req_ready = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_INIT;
      init_set <= '0;
      busy_cnt <= '0;
      done     <= 1'b0;
      hit      <= 1'b0;
      way      <= '0;
      rdata    <= '0;
      evicted  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_INIT: begin
          valid_q[init_set] <= '0;
          age_q[init_set]   <= init_ages();
          init_set          <= init_set + 1'b1;
          if (init_set == SET_W'(SETS - 1)) state <= S_IDLE;
        end
        S_IDLE: if (req_valid) begin
          evicted <= 1'b0;
          unique case (req_op)
            OP_FILL: begin
              evicted <= vset[vic_way_i];
              tag_q[{set_i, vic_way_i}]  <= tag_i;
              data_q[{set_i, vic_way_i}] <= req_data;
              valid_q[set_i][vic_way_i]      <= 1'b1;
              age_q[set_i]                   <= touch(ages, vic_way_i);
              hit      <= 1'b0;
              way      <= vic_way_i;
              busy_cnt <= LAT_W'(WR_LAT - 1);
            end
            OP_INVAL: begin
              valid_q[set_i][req_way] <= 1'b0;
              hit      <= 1'b0;
              way      <= req_way;
              busy_cnt <= '0;
            end
            default: begin // OP_LOOKUP
              hit      <= hit_i;
              way      <= hit_way_i;
              rdata    <= data_q[{set_i, hit_way_i}];
              if (hit_i) age_q[set_i] <= touch(ages, hit_way_i);
              busy_cnt <= LAT_W'(RD_LAT - 1);
            end
          endcase
          state <= S_BUSY;
        end
        default: begin
          if (busy_cnt == '0) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            busy_cnt <= busy_cnt - 1'b1;
          end
        end
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && req_valid && req_op == OP_FILL) |-> !hit_i);
endmodule
