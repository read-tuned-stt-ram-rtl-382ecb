// rrap_top -- RRAP cache hierarchy below the L1s of an eight-core chip.
//
// Each core owns a private hybrid STT-RAM L2 (rrap_l2): a 512 KB
// low-retention partition for regular traffic and a 512 KB high-retention
// partition for lines the LLC has found to be read very often and never
// written. The L2s reach the shared 96 MB LLC (llc_cache) through a
// round-robin arbiter (llc_arbiter). The LLC counts reads and writes per
// line and marks qualifying read hits for the requesting core's HRSC.
// Main memory is outside this block; its port is brought out.
//
// Interface: per core, the request/response port of its L2 towards L1
// (arrays indexed by core); the LLC's memory port; event pulses of every L2
// and of the LLC for statistics. All latencies are in cycles of one 3 GHz
// clock. The core count and the sizes are the paper's; the wiring, a single
// clock and the absence of coherence traffic between the private L2s are
// this design's choices.
module rrap_top
  import rrap_pkg::*;
#(
  parameter int unsigned NCORES           = 8,
  parameter int unsigned LRSC_SETS        = 1024,
  parameter int unsigned HRSC_SETS        = 1024,
  parameter int unsigned L2_WAYS          = 8,
  parameter int unsigned RETENTION_CYCLES = 30_000_000,
  parameter int unsigned LLC_SETS         = 98304,
  parameter int unsigned LLC_WAYS         = 16,
  parameter int unsigned LLC_HIT_LAT      = 30,
  parameter int unsigned NR_TH            = 64
) (
  input  logic       clk,
  input  logic       rst_n,
  // L1 side, one port per core
  input  logic       [NCORES-1:0] l1_req_valid,
  output logic       [NCORES-1:0] l1_req_ready,
  input  l1_req_t    l1_req        [NCORES],
  output logic       [NCORES-1:0] l1_resp_valid,
  output line_t      l1_resp_data  [NCORES],
  // main memory
  output logic       mem_req_valid,
  input  logic       mem_req_ready,
  output mem_req_t   mem_req,
  input  logic       mem_resp_valid,
  input  line_t      mem_resp_data,
  // events
  output l2_events_t l2_ev         [NCORES],
  output logic       llc_ev_hit,
  output logic       llc_ev_miss,
  output logic       llc_ev_irra,
  output logic       llc_ev_evict,
  output logic       llc_ev_mem_wb,
  output logic       bus_ev_conflict
);
  logic      [NCORES-1:0] a_valid, a_ready, a_resp_valid;
  llc_req_t  a_req [NCORES];
  llc_resp_t a_resp;
  logic      c_valid, c_ready, c_resp_valid;
  llc_req_t  c_req;
  llc_resp_t c_resp;

  for (genvar i = 0; i < NCORES; i++) begin : g_core
    rrap_l2 #(
      .LRSC_SETS(LRSC_SETS), .HRSC_SETS(HRSC_SETS), .WAYS(L2_WAYS),
      .RETENTION_CYCLES(RETENTION_CYCLES)
    ) u_l2 (
      .clk, .rst_n,
      .l1_req_valid(l1_req_valid[i]), .l1_req_ready(l1_req_ready[i]), .l1_req(l1_req[i]),
      .l1_resp_valid(l1_resp_valid[i]), .l1_resp_data(l1_resp_data[i]),
      .llc_req_valid(a_valid[i]), .llc_req_ready(a_ready[i]), .llc_req(a_req[i]),
      .llc_resp_valid(a_resp_valid[i]), .llc_resp(a_resp),
      .ev(l2_ev[i]));
  end

  llc_arbiter #(.N(NCORES)) u_bus (
    .clk, .rst_n,
    .in_valid(a_valid), .in_ready(a_ready), .in_req(a_req),
    .in_resp_valid(a_resp_valid), .in_resp(a_resp),
    .out_valid(c_valid), .out_ready(c_ready), .out_req(c_req),
    .out_resp_valid(c_resp_valid), .out_resp(c_resp),
    .ev_conflict(bus_ev_conflict));

  llc_cache #(.SETS(LLC_SETS), .WAYS(LLC_WAYS), .HIT_LAT(LLC_HIT_LAT), .NR_TH(NR_TH)) u_llc (
    .clk, .rst_n,
    .req_valid(c_valid), .req_ready(c_ready), .req(c_req),
    .resp_valid(c_resp_valid), .resp(c_resp),
    .mem_req_valid, .mem_req_ready, .mem_req,
    .mem_resp_valid, .mem_resp_data,
    .ev_hit(llc_ev_hit), .ev_miss(llc_ev_miss), .ev_irra(llc_ev_irra),
    .ev_evict(llc_ev_evict), .ev_mem_wb(llc_ev_mem_wb));
endmodule
