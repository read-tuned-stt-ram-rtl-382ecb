// rrap_monitor -- in-situ read/write monitor of one LLC line.
//
// Every LLC line carries a 6-bit saturating Read Counter (RC) and a 1-bit
// Write Counter (WC), 7 bits per 64-byte line. This combinational block
// computes the next RC/WC of the line an access touches and whether a read
// hit has found an Immense Read Reused Access (IRRA) block, which the
// requesting L2 then keeps in its high-retention partition (HRSC).
//
// Rule (following the paper): a line that has seen any write while resident
// (WC = 1) always goes to the low-retention partition (LRSC), even if RC is
// saturated. A line with WC = 0 becomes IRRA when it has been read NR_TH
// times. The paper gives a 6-bit RC and NR_TH = 64; a 6-bit counter tops out
// at 63, so this design counts the read that inserts the line and every
// later read hit, and flags the read that finds RC already at NR_TH-1 (the
// 64th read or later). That reading of the two numbers is this design's own.
//
// Interface (purely combinational, no clock):
//   kind     what happened to the line: insert on read miss, insert on
//            write (RFO or write-back miss), read hit, write hit
//   rc, wc   current counters of the line (ignored for inserts)
//   rc_next, wc_next  counters to store back
//   irra     the access is a read hit on an IRRA block
module rrap_monitor #(
  parameter int unsigned RC_W  = 6,
  parameter int unsigned NR_TH = 64
) (
  input  logic [1:0]      kind,      // 0 ins-read, 1 ins-write, 2 read hit, 3 write hit
  input  logic [RC_W-1:0] rc,
  input  logic            wc,
  output logic [RC_W-1:0] rc_next,
  output logic            wc_next,
  output logic            irra
);
  localparam logic [RC_W-1:0] RC_MAX = {RC_W{1'b1}};
  localparam logic [RC_W-1:0] RC_TH  = RC_W'(NR_TH - 1);

  initial assert (NR_TH >= 1 && NR_TH - 1 <= (1 << RC_W) - 1)
    else $error("NR_TH-1 must fit in RC_W bits");

  always_comb begin
    rc_next = rc;
    wc_next = wc;
    irra    = 1'b0;
    unique case (kind)
      2'd0: begin rc_next = RC_W'(1); wc_next = 1'b0; end  // inserted by a read
      2'd1: begin rc_next = '0;       wc_next = 1'b1; end  // inserted by a write
      2'd2: begin                                          // read hit
        irra    = !wc && (rc >= RC_TH);
        rc_next = (rc == RC_MAX) ? rc : rc + 1'b1;
      end
      default: wc_next = 1'b1;                             // write hit
    endcase
  end
endmodule
