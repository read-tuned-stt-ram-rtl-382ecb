// lrsc_refresh -- sequential refresh scheduler of the low-retention L2 array.
//
// The LRSC cells keep data for only RETENTION_CYCLES (10 ms at 3 GHz in the
// paper's chosen "Design 2"), so every line must be re-written once per
// retention period. As in the paper, lines are refreshed one after another
// in a fixed order: every INTERVAL = RETENTION_CYCLES / LINES cycles the
// scheduler asks the array to refresh the next line index (set*WAYS+way),
// wrapping after the last one, so each line is refreshed once per period.
//
// Interface: ref_valid/ref_idx form a request that stays up until ref_ack
// (one-cycle pulse from the array when it has accepted the line). If the
// next slot arrives while a request is still waiting, the waiting request
// is kept and `overrun` pulses; the array should never let that happen.
// Refreshing every slot, valid or not, and the pulse-per-slot timing are
// this design's choices; the paper only says lines are refreshed in turn.
module lrsc_refresh #(
  parameter int unsigned LINES            = 8192,       // 512 KB / 64 B
  parameter int unsigned RETENTION_CYCLES = 30_000_000, // 10 ms @ 3 GHz
  localparam int unsigned IDX_W    = $clog2(LINES),
  localparam int unsigned INTERVAL = RETENTION_CYCLES / LINES
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             enable,
  output logic             ref_valid,
  output logic [IDX_W-1:0] ref_idx,
  input  logic             ref_ack,
  output logic             overrun
);
  localparam int unsigned CNT_W = $clog2(INTERVAL + 1);

  initial assert (INTERVAL >= 1) else $error("RETENTION_CYCLES must be >= LINES");

  logic [CNT_W-1:0] timer;
  logic             tick;

  assign tick = enable && (timer == CNT_W'(INTERVAL - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      timer     <= '0;
      ref_valid <= 1'b0;
      ref_idx   <= '0;
      overrun   <= 1'b0;
    end else begin
      overrun <= 1'b0;
      if (enable) timer <= tick ? '0 : timer + 1'b1;
      if (ref_valid && ref_ack) begin
        ref_valid <= 1'b0;
        ref_idx   <= (ref_idx == IDX_W'(LINES - 1)) ? '0 : ref_idx + 1'b1;
      end
      if (tick) begin
        if (ref_valid && !ref_ack) overrun   <= 1'b1;
        else                       ref_valid <= 1'b1;
      end
    end
  end

  // A request, once raised, holds its index until accepted.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (ref_valid && !ref_ack) |=> (ref_valid && $stable(ref_idx));
  endproperty
  assert property (p_hold);
endmodule
