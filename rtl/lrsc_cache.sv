// lrsc_cache -- Low-Retention STT-RAM Cache (LRSC) partition of a private L2.
//
// The LRSC takes all regular L2 traffic: lines fetched from the LLC on a
// miss, lines fetched for a write, and stores from L1. Its cells are tuned
// for a short 10 ms retention (the paper's "Design 2"), which buys a 7-cycle
// write at 3 GHz instead of the ~31 cycles of a 10-year cell, at the price
// of a refresh: each line is re-written once per retention period, and the
// line (here the whole bank) cannot serve a request while it is refreshed.
//
// Organisation: SETS x WAYS lines of 64 bytes (512 KB, 8-way, write-back,
// as in the paper), tag/valid/dirty per line and true-LRU ages per set. The
// bank is blocking and does one operation at a time:
//   OP_LOOKUP  tag search; returns hit, way and the line   (RD_LAT cycles)
//   OP_WRITE   overwrite a hitting way, mark it dirty      (WR_LAT cycles)
//   OP_FILL    insert a line; returns a dirty victim to be written back
//              to the LLC (WR_LAT cycles)
//   refresh    read and re-write one line chosen by lrsc_refresh
//              (RD_LAT + WR_LAT cycles); refresh wins over a new request.
// The array is updated when an operation is accepted; `done` pulses with the
// registered results once its latency has passed. After reset the bank
// spends SETS cycles clearing its valid bits before it raises req_ready.
//
// From the paper: capacity, associativity, write-back, 10 ms retention,
// 7-cycle write (Table 2) and the 1.260 ns read (Table 1, 4 cycles at 3 GHz),
// sequential refresh. Own choices: LRU replacement (the paper names LRU only
// for the HRSC), one bank, the operation set and handshake.
module lrsc_cache
  import rrap_pkg::*;
#(
  parameter int unsigned SETS   = 1024,
  parameter int unsigned WAYS   = 8,
  parameter int unsigned RD_LAT = 4,
  parameter int unsigned WR_LAT = 7,
  localparam int unsigned SET_W = $clog2(SETS),
  localparam int unsigned WAY_W = $clog2(WAYS),
  localparam int unsigned IDX_W = $clog2(SETS * WAYS),
  localparam int unsigned TAG_W = LADDR_W - SET_W
) (
  input  logic             clk,
  input  logic             rst_n,
  // request
  input  logic             req_valid,
  output logic             req_ready,
  input  logic [1:0]       req_op,      // 0 lookup, 1 write, 2 fill
  input  laddr_t           req_addr,
  input  logic [WAY_W-1:0] req_way,     // write: way from a previous lookup
  input  line_t            req_data,
  input  logic             req_dirty,   // fill: insert as dirty
  // completion
  output logic             done,
  output logic             hit,
  output logic [WAY_W-1:0] way,
  output line_t            rdata,
  output logic             victim_valid, // fill evicted a dirty line
  output laddr_t           victim_addr,
  output line_t            victim_data,
  // refresh
  input  logic             ref_valid,
  input  logic [IDX_W-1:0] ref_idx,
  output logic             ref_ack,
  // events
  output logic             refresh_done,
  output logic             refresh_stall  // a request waited for a refresh
);
  localparam logic [1:0] OP_LOOKUP = 2'd0, OP_WRITE = 2'd1, OP_FILL = 2'd2;
  localparam int unsigned LAT_W = $clog2(RD_LAT + WR_LAT + 1);

  typedef enum logic [1:0] {S_INIT, S_IDLE, S_BUSY} state_e;
  state_e state;

  logic [TAG_W-1:0]     tag_q   [SETS*WAYS];
  line_t                data_q  [SETS*WAYS];
  logic [WAYS-1:0]      valid_q [SETS];
  logic [WAYS-1:0]      dirty_q [SETS];
  logic [WAYS*WAY_W-1:0] age_q  [SETS];   // 0 = most recently used

  logic [SET_W-1:0] init_set;
  logic [LAT_W-1:0] busy_cnt;
  logic             busy_ref;

  // ---- combinational lookup / victim choice for the incoming request ----
  logic [SET_W-1:0] set_i;
  logic [TAG_W-1:0] tag_i;
  logic             hit_i;
  logic [WAY_W-1:0] hit_way_i, vic_way_i;
  logic [WAYS-1:0]  vset, dset;
  logic [WAYS*WAY_W-1:0] ages;

  assign set_i = req_addr[SET_W-1:0];
  assign tag_i = req_addr[LADDR_W-1:SET_W];
  assign vset  = valid_q[set_i];
  assign dset  = dirty_q[set_i];
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

  // LRU update: the touched way becomes age 0, younger ways age by one.
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

  assign req_ready = (state == S_IDLE) && !ref_valid;
  assign ref_ack   = (state == S_IDLE) && ref_valid;
  assign refresh_stall = (state == S_IDLE) && ref_valid && req_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_INIT;
      init_set     <= '0;
      busy_cnt     <= '0;
      busy_ref     <= 1'b0;
      done         <= 1'b0;
      hit          <= 1'b0;
      way          <= '0;
      rdata        <= '0;
      victim_valid <= 1'b0;
      victim_addr  <= '0;
      victim_data  <= '0;
      refresh_done <= 1'b0;
    end else begin
      done         <= 1'b0;
      refresh_done <= 1'b0;
      unique case (state)
        S_INIT: begin
          valid_q[init_set] <= '0;
          dirty_q[init_set] <= '0;
          age_q[init_set]   <= init_ages();
          init_set          <= init_set + 1'b1;
          if (init_set == SET_W'(SETS - 1)) state <= S_IDLE;
        end
        S_IDLE: begin
          if (ref_valid) begin
            // Re-write the line in place: its contents are unchanged.
            data_q[ref_idx] <= data_q[ref_idx];
            busy_ref <= 1'b1;
            busy_cnt <= LAT_W'(RD_LAT + WR_LAT - 1);
            state    <= S_BUSY;
          end else if (req_valid) begin
            busy_ref     <= 1'b0;
            victim_valid <= 1'b0;
            unique case (req_op)
              OP_LOOKUP: begin
                hit      <= hit_i;
                way      <= hit_way_i;
                rdata    <= data_q[{set_i, hit_way_i}];
                if (hit_i) age_q[set_i] <= touch(ages, hit_way_i);
                busy_cnt <= LAT_W'(RD_LAT - 1);
              end
              OP_WRITE: begin
                data_q[{set_i, req_way}] <= req_data;
                dirty_q[set_i][req_way]      <= 1'b1;
                age_q[set_i]                 <= touch(ages, req_way);
                hit      <= 1'b1;
                way      <= req_way;
                busy_cnt <= LAT_W'(WR_LAT - 1);
              end
              default: begin // OP_FILL
                victim_valid <= vset[vic_way_i] && dset[vic_way_i];
                victim_addr  <= {tag_q[{set_i, vic_way_i}], set_i};
                victim_data  <= data_q[{set_i, vic_way_i}];
                tag_q[{set_i, vic_way_i}]  <= tag_i;
                data_q[{set_i, vic_way_i}] <= req_data;
                valid_q[set_i][vic_way_i]      <= 1'b1;
                dirty_q[set_i][vic_way_i]      <= req_dirty;
                age_q[set_i]                   <= touch(ages, vic_way_i);
                hit      <= 1'b0;
                way      <= vic_way_i;
                busy_cnt <= LAT_W'(WR_LAT - 1);
              end
            endcase
            state <= S_BUSY;
          end
        end
        default: begin // S_BUSY
          if (busy_cnt == '0) begin
            state <= S_IDLE;
            if (busy_ref) refresh_done <= 1'b1;
            else          done         <= 1'b1;
          end else begin
            busy_cnt <= busy_cnt - 1'b1;
          end
        end
      endcase
    end
  end

  // A fill is only issued for a line that is not already present.
  assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && !ref_valid && req_valid && req_op == OP_FILL) |-> !hit_i);
endmodule
