// tb_rrap_monitor -- exhaustive check of the LLC read/write monitor.
//
// Every (kind, RC, WC) combination is applied and the outputs are compared
// with the counter rules written out here: inserts reset the counters, a
// read hit counts up to 63 and stays there, any write sets WC, and a read
// hit is IRRA when WC = 0 and RC already holds 63 (the 64th read).
module tb_rrap_monitor;
  logic [1:0] kind;
  logic [5:0] rc, rc_next;
  logic       wc, wc_next, irra;
  int checks = 0, failures = 0;

  rrap_monitor #(.RC_W(6), .NR_TH(64)) dut (.*);

  initial begin
    for (int k = 0; k < 4; k++)
      for (int c = 0; c < 64; c++)
        for (int w = 0; w < 2; w++) begin
          int exp_rc, exp_wc, exp_irra;
          kind = 2'(k); rc = 6'(c); wc = w[0];
          #1;
          case (k)
            0: begin exp_rc = 1; exp_wc = 0; exp_irra = 0; end
            1: begin exp_rc = 0; exp_wc = 1; exp_irra = 0; end
            2: begin exp_rc = (c == 63) ? 63 : c + 1; exp_wc = w;
                     exp_irra = (w == 0 && c == 63) ? 1 : 0; end
            default: begin exp_rc = c; exp_wc = 1; exp_irra = 0; end
          endcase
          checks++;
          if (int'(rc_next) != exp_rc || int'(wc_next) != exp_wc || int'(irra) != exp_irra) begin
            failures++;
            $display("FAIL kind=%0d rc=%0d wc=%0d -> rc=%0d wc=%0d irra=%0d", k, c, w,
                     rc_next, wc_next, irra);
          end
        end
    // A line read 64 times from insertion becomes IRRA exactly on the 64th.
    begin
      logic [5:0] r; logic first_irra_seen; int at;
      kind = 2'd0; rc = '0; wc = 1'b0; #1; r = rc_next; at = 0; first_irra_seen = 0;
      for (int n = 2; n <= 70; n++) begin
        kind = 2'd2; rc = r; wc = 1'b0; #1;
        if (irra && !first_irra_seen) begin first_irra_seen = 1; at = n; end
        r = rc_next;
      end
      checks++;
      if (at != 64) begin failures++; $display("FAIL first IRRA on read %0d", at); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
