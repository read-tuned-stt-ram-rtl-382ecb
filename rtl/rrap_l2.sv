// rrap_l2 -- private hybrid STT-RAM L2 of one core (RRAP L2).
//
// The L2 is split into two STT-RAM partitions of equal size that replace
// a 512 KB SRAM L2 in about the same area: the low-retention LRSC takes all
// regular traffic and the high-retention HRSC holds IRRA lines (heavily
// read, never written lines) copied from the shared LLC.
//
// Flow, one request at a time (blocking):
//   * An L1 request probes the tag arrays of the LRSC and the HRSC in
//     parallel (both RD_LAT cycles), as the paper describes.
//   * Read hit in either partition: the line is returned.
//   * Write hit in the LRSC: the line is merged with the store bytes and
//     written back into the same way (dirty).
//   * Write hit in the HRSC: the HRSC copy is invalidated and the merged
//     line is filled into the LRSC as dirty (own choice; the paper only says
//     HRSC lines are written once and then read).
//   * Miss: a read asks the LLC for the line (LLC_READ), a write asks for it
//     with LLC_RFO. The LLC answers with the line and a to_hrsc flag. Read
//     data is returned to L1 as soon as it arrives; the line is then filled
//     into the HRSC if flagged, otherwise into the LRSC (clean for a read,
//     merged and dirty for a write).
//   * An LRSC fill that evicts a dirty line sends it to the LLC (LLC_WBACK)
//     before the next request is taken. HRSC victims are clean and dropped.
//   * lrsc_refresh walks the LRSC lines; a refresh holds off new requests.
//
// Interface: valid/ready request from L1 (l1_req_t), a one-cycle response
// pulse carrying the line (write requests get the pulse as acknowledgement);
// valid/ready request to the LLC (llc_req_t) and a one-cycle response pulse
// (llc_resp_t; write-backs are acknowledged the same way). `ev` carries
// one-cycle event pulses.
module rrap_l2
  import rrap_pkg::*;
#(
  parameter int unsigned LRSC_SETS        = 1024,       // 512 KB, 8-way
  parameter int unsigned HRSC_SETS        = 1024,       // 512 KB, 8-way
  parameter int unsigned WAYS             = 8,
  parameter int unsigned LRSC_RD_LAT      = 4,          // 1.260 ns @ 3 GHz
  parameter int unsigned LRSC_WR_LAT      = 7,          // Design 2
  parameter int unsigned HRSC_RD_LAT      = 4,          // 1.261 ns
  parameter int unsigned HRSC_WR_LAT      = 31,         // 10.153 ns
  parameter int unsigned RETENTION_CYCLES = 30_000_000  // 10 ms @ 3 GHz
) (
  input  logic       clk,
  input  logic       rst_n,
  // L1 side
  input  logic       l1_req_valid,
  output logic       l1_req_ready,
  input  l1_req_t    l1_req,
  output logic       l1_resp_valid,
  output line_t      l1_resp_data,
  // LLC side
  output logic       llc_req_valid,
  input  logic       llc_req_ready,
  output llc_req_t   llc_req,
  input  logic       llc_resp_valid,
  input  llc_resp_t  llc_resp,
  // events
  output l2_events_t ev
);
  localparam int unsigned WAY_W  = $clog2(WAYS);
  localparam int unsigned LIDX_W = $clog2(LRSC_SETS * WAYS);
  localparam logic [1:0] OP_LOOKUP = 2'd0, OP_WRITE = 2'd1, OP_FILL = 2'd2, OP_INVAL = 2'd3;

  typedef enum logic [3:0] {
    S_IDLE, S_LOOK, S_LWRITE_GO, S_LWRITE, S_HINV_GO, S_HINV, S_LFILL_GO, S_LFILL_WAIT,
    S_HFILL_GO, S_HFILL_WAIT, S_LLC_GO, S_LLC_WAIT, S_WB_GO, S_WB_WAIT
  } state_e;
  state_e state;

  l1_req_t r;              // request being served
  line_t   line_q;         // line to be written or filled
  logic    fill_dirty;
  logic    l_done_seen, h_done_seen;
  logic    lhit_q, hhit_q;
  logic [WAY_W-1:0] lway_q, hway_q;
  line_t   lline_q, hline_q;
  laddr_t  vaddr_q;
  line_t   vdata_q;

  // ---- partitions and refresh ----
  logic             l_valid, l_ready, l_done, l_hit, l_vic;
  logic [1:0]       l_op;
  logic [WAY_W-1:0] l_way;
  line_t            l_rdata, l_vdata, l_wdata;
  laddr_t           l_vaddr;
  logic             h_valid, h_ready, h_done, h_hit, h_evicted;
  logic [1:0]       h_op;
  logic [WAY_W-1:0] h_way;
  line_t            h_rdata;
  logic             ref_valid, ref_ack, ref_done, ref_stall, ref_overrun;
  logic [LIDX_W-1:0] ref_idx;
  logic             look_fire;

  lrsc_cache #(.SETS(LRSC_SETS), .WAYS(WAYS), .RD_LAT(LRSC_RD_LAT), .WR_LAT(LRSC_WR_LAT)) u_lrsc (
    .clk, .rst_n,
    .req_valid(l_valid), .req_ready(l_ready), .req_op(l_op),
    .req_addr(look_fire ? l1_req.addr : r.addr), .req_way(lway_q),
    .req_data(l_wdata), .req_dirty(fill_dirty),
    .done(l_done), .hit(l_hit), .way(l_way), .rdata(l_rdata),
    .victim_valid(l_vic), .victim_addr(l_vaddr), .victim_data(l_vdata),
    .ref_valid, .ref_idx, .ref_ack,
    .refresh_done(ref_done), .refresh_stall(ref_stall));

  hrsc_cache #(.SETS(HRSC_SETS), .WAYS(WAYS), .RD_LAT(HRSC_RD_LAT), .WR_LAT(HRSC_WR_LAT)) u_hrsc (
    .clk, .rst_n,
    .req_valid(h_valid), .req_ready(h_ready), .req_op(h_op),
    .req_addr(look_fire ? l1_req.addr : r.addr), .req_way(hway_q), .req_data(line_q),
    .done(h_done), .hit(h_hit), .way(h_way), .rdata(h_rdata), .evicted(h_evicted));

  lrsc_refresh #(.LINES(LRSC_SETS * WAYS), .RETENTION_CYCLES(RETENTION_CYCLES)) u_refresh (
    .clk, .rst_n, .enable(1'b1),
    .ref_valid, .ref_idx, .ref_ack, .overrun(ref_overrun));

  // ---- request steering ----
  assign look_fire    = (state == S_IDLE) && l1_req_valid && l_ready && h_ready;
  assign l1_req_ready = look_fire;

  always_comb begin
    l_valid = 1'b0; l_op = OP_LOOKUP; l_wdata = line_q;
    h_valid = 1'b0; h_op = OP_LOOKUP;
    unique case (state)
      S_IDLE:      begin l_valid = look_fire; h_valid = look_fire; end
      S_LWRITE_GO: begin l_valid = 1'b1; l_op = OP_WRITE; end
      S_HINV_GO:   begin h_valid = 1'b1; h_op = OP_INVAL; end
      S_LFILL_GO:  begin l_valid = 1'b1; l_op = OP_FILL; end
      S_HFILL_GO:  begin h_valid = 1'b1; h_op = OP_FILL; end
      default: ;
    endcase
  end

  assign llc_req_valid = (state == S_LLC_GO) || (state == S_WB_GO);
  always_comb begin
    llc_req.addr = r.addr;
    llc_req.data = '0;
    llc_req.op   = (r.op == L1_WRITE) ? LLC_RFO : LLC_READ;
    if (state == S_WB_GO) begin
      llc_req.op   = LLC_WBACK;
      llc_req.addr = vaddr_q;
      llc_req.data = vdata_q;
    end
  end

  // Results of the parallel lookup: taken straight from the banks in the
  // cycle their `done` arrives, or from the registers if one bank finished
  // earlier (only possible when the two read latencies differ).
  logic             lk_done, lk_lhit, lk_hhit;
  logic [WAY_W-1:0] lk_lway, lk_hway;
  line_t            lk_lline, lk_hline;
  assign lk_done  = (l_done || l_done_seen) && (h_done || h_done_seen);
  assign lk_lhit  = l_done ? l_hit   : lhit_q;
  assign lk_lway  = l_done ? l_way   : lway_q;
  assign lk_lline = l_done ? l_rdata : lline_q;
  assign lk_hhit  = h_done ? h_hit   : hhit_q;
  assign lk_hway  = h_done ? h_way   : hway_q;
  assign lk_hline = h_done ? h_rdata : hline_q;

  // ---- control ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      r             <= '0;
      line_q        <= '0;
      fill_dirty    <= 1'b0;
      l_done_seen   <= 1'b0;
      h_done_seen   <= 1'b0;
      lhit_q        <= 1'b0;
      hhit_q        <= 1'b0;
      lway_q        <= '0;
      hway_q        <= '0;
      lline_q       <= '0;
      hline_q       <= '0;
      vaddr_q       <= '0;
      vdata_q       <= '0;
      l1_resp_valid <= 1'b0;
      l1_resp_data  <= '0;
      ev            <= '0;
    end else begin
      l1_resp_valid <= 1'b0;
      ev            <= '0;
      ev.refresh       <= ref_done;
      ev.refresh_stall <= ref_stall;
      unique case (state)
        S_IDLE: if (look_fire) begin
          r           <= l1_req;
          l_done_seen <= 1'b0;
          h_done_seen <= 1'b0;
          state       <= S_LOOK;
        end
        S_LOOK: begin
          if (l_done) begin
            l_done_seen <= 1'b1; lhit_q <= l_hit; lway_q <= l_way; lline_q <= l_rdata;
          end
          if (h_done) begin
            h_done_seen <= 1'b1; hhit_q <= h_hit; hway_q <= h_way; hline_q <= h_rdata;
          end
          if (lk_done) begin
            if (lk_lhit) begin
              ev.lrsc_hit <= 1'b1;
              if (r.op == L1_READ) begin
                l1_resp_valid <= 1'b1;
                l1_resp_data  <= lk_lline;
                state         <= S_IDLE;
              end else begin
                line_q <= merge_line(lk_lline, r.data, r.mask);
                lway_q <= lk_lway;
                state  <= S_LWRITE_GO;
              end
            end else if (lk_hhit) begin
              ev.hrsc_hit <= 1'b1;
              if (r.op == L1_READ) begin
                l1_resp_valid <= 1'b1;
                l1_resp_data  <= lk_hline;
                state         <= S_IDLE;
              end else begin
                ev.hrsc_to_lrsc <= 1'b1;
                line_q      <= merge_line(lk_hline, r.data, r.mask);
                hway_q      <= lk_hway;
                fill_dirty  <= 1'b1;
                state       <= S_HINV_GO;
              end
            end else begin
              ev.l2_miss <= 1'b1;
              state      <= S_LLC_GO;
            end
          end
        end
        S_LWRITE_GO: if (l_ready) state <= S_LWRITE;
        S_LWRITE: if (l_done) begin
          l1_resp_valid <= 1'b1;
          l1_resp_data  <= line_q;
          state         <= S_IDLE;
        end
        S_HINV_GO: if (h_ready) state <= S_HINV;
        S_HINV: if (h_done) state <= S_LFILL_GO;
        S_LLC_GO: if (llc_req_ready) state <= S_LLC_WAIT;
        S_LLC_WAIT: if (llc_resp_valid) begin
          if (r.op == L1_READ) begin
            l1_resp_valid <= 1'b1;
            l1_resp_data  <= llc_resp.data;
            line_q        <= llc_resp.data;
            fill_dirty    <= 1'b0;
            state         <= llc_resp.to_hrsc ? S_HFILL_GO : S_LFILL_GO;
          end else begin
            line_q     <= merge_line(llc_resp.data, r.data, r.mask);
            fill_dirty <= 1'b1;
            state      <= S_LFILL_GO;
          end
        end
        S_LFILL_GO: if (l_ready) state <= S_LFILL_WAIT;
        S_LFILL_WAIT: if (l_done) begin
          if (r.op == L1_WRITE) begin
            l1_resp_valid <= 1'b1;
            l1_resp_data  <= line_q;
          end
          if (l_vic) begin
            vaddr_q <= l_vaddr;
            vdata_q <= l_vdata;
            state   <= S_WB_GO;
          end else begin
            state   <= S_IDLE;
          end
        end
        S_HFILL_GO: if (h_ready) begin
          ev.hrsc_fill <= 1'b1;
          state        <= S_HFILL_WAIT;
        end
        S_HFILL_WAIT: if (h_done) begin
          ev.hrsc_evict <= h_evicted;
          state         <= S_IDLE;
        end
        S_WB_GO: if (llc_req_ready) begin
          ev.writeback <= 1'b1;
          state        <= S_WB_WAIT;
        end
        default: if (llc_resp_valid) state <= S_IDLE; // S_WB_WAIT
      endcase
    end
  end

  // The refresh schedule leaves far more time than a refresh takes.
  assert property (@(posedge clk) disable iff (!rst_n) !ref_overrun);
  // The LLC only marks read requests for the HRSC.
  assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_LLC_WAIT && llc_resp_valid && r.op == L1_WRITE) |-> !llc_resp.to_hrsc);
endmodule
