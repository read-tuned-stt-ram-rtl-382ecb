// tb_rrap_top_full -- the hierarchy at its full size on one complete
// IRRA promotion.
//
// rrap_top is used with its default parameters: eight cores, 512 KB LRSC
// and 512 KB HRSC per core (1024 sets x 8 ways each), a 96 MB 16-way LLC
// (98304 sets) and an IRRA threshold of 64 reads. Every core reads a shared
// line X, then eight other lines that fall in the same LRSC set (line
// addresses X + k*1024), which pushes X out of its LRSC, and repeats this
// eight times. X is thus read 8 x 8 = 64 times at the LLC with no write,
// so the 64th read is flagged and X lands in that core's HRSC; every core
// then reads X once more. Each core also writes and re-reads a private
// line. Checks: all data, IRRA flags raised, an HRSC fill, and an HRSC hit
// among the final reads of X.
module tb_rrap_top_full;
  import rrap_pkg::*;
  localparam int NC = 8;
  localparam laddr_t X = laddr_t'(37);

  logic clk = 0, rst_n = 0;
  logic [NC-1:0] l1_req_valid, l1_req_ready, l1_resp_valid;
  l1_req_t l1_req [NC];
  line_t l1_resp_data [NC];
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t mem_req;
  line_t mem_resp_data;
  l2_events_t l2_ev [NC];
  logic llc_ev_hit, llc_ev_miss, llc_ev_irra, llc_ev_evict, llc_ev_mem_wb, bus_ev_conflict;
  int n_mem_rd, n_mem_wr;

  rrap_top dut (.*);
  main_memory_model u_mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .resp_valid(mem_resp_valid), .resp_data(mem_resp_data),
    .n_reads(n_mem_rd), .n_writes(n_mem_wr));

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  line_t golden [laddr_t];
  function automatic line_t gold(laddr_t a);
    return golden.exists(a) ? golden[a] : u_mem.init_line(a);
  endfunction

  int n_irra = 0, n_hfill [NC], n_hhit [NC];
  always @(posedge clk) if (rst_n) begin
    n_irra += int'(llc_ev_irra);
    for (int i = 0; i < NC; i++) begin
      n_hfill[i] += int'(l2_ev[i].hrsc_fill);
      n_hhit[i]  += int'(l2_ev[i].hrsc_hit);
    end
  end

  int phase_done = 0, final_done = 0;
  bit go_final = 0;
  for (genvar c = 0; c < NC; c++) begin : g_core
    logic    v = 1'b0;
    l1_req_t q = '0;
    assign l1_req_valid[c] = v;
    assign l1_req[c]       = q;

    task automatic access(input l1_op_e op, input laddr_t a, input line_t d, input bmask_t m);
      @(negedge clk);
      v = 1; q.op = op; q.addr = a; q.data = d; q.mask = m;
      #4;
      while (!l1_req_ready[c]) begin @(negedge clk); #4; end
      @(posedge clk);
      @(negedge clk);
      v = 0;
      #4;
      while (!l1_resp_valid[c]) begin @(negedge clk); #4; end
      if (op == L1_WRITE) golden[a] = merge_line(gold(a), d, m);
      check(l1_resp_data[c] == gold(a), $sformatf("core %0d line %0d", c, a));
    endtask

    initial begin
      automatic laddr_t priv = laddr_t'(5_000_000 + c);
      wait (rst_n);
      access(L1_WRITE, priv, {LINE_BITS/32{32'hc0de_0000 + 32'(c)}}, '1);
      for (int round = 0; round < 8; round++) begin
        access(L1_READ, X, '0, '0);
        for (int k = 1; k <= 8; k++) access(L1_READ, X + laddr_t'(k * 1024), '0, '0);
      end
      access(L1_READ, priv, '0, '0);
      phase_done++;
      wait (go_final);
      access(L1_READ, X, '0, '0);
      final_done++;
    end
  end

  initial begin
    int owner;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    wait (phase_done == NC);
    repeat (50) @(posedge clk);
    owner = -1;
    for (int i = 0; i < NC; i++) if (n_hfill[i] > 0 && owner < 0) owner = i;
    // X and the eight conflict lines are each read 64 times at the LLC.
    check(n_irra >= 1, $sformatf("IRRA flags %0d", n_irra));
    check(owner >= 0, "some core placed a line in its HRSC");
    begin
      automatic int h0 = 0, h1 = 0;
      for (int i = 0; i < NC; i++) h0 += n_hhit[i];
      go_final = 1;
      wait (final_done == NC);
      repeat (5) @(posedge clk);
      for (int i = 0; i < NC; i++) h1 += n_hhit[i];
      $display("IRRA flags %0d, HRSC fills per core %p, HRSC hits in the final reads %0d",
               n_irra, n_hfill, h1 - h0);
      check(h1 - h0 >= 1, "a final read of X hits in an HRSC");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
