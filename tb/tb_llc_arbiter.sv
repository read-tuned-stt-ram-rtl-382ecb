// tb_llc_arbiter -- self-checking test of the L2-to-LLC arbiter.
//
// Four requesters each raise requests at random and hold them until
// accepted. A stand-in LLC in this file accepts a request, answers after a
// random delay with a line derived from the request's address, and checks
// that it never has two requests outstanding. Checks: each requester gets
// exactly its own answer, no requester is passed over more than N-1 times
// while waiting, and the L2s really contend (ev_conflict seen).
module tb_llc_arbiter;
  import rrap_pkg::*;
  localparam int N = 4;

  logic clk = 0, rst_n = 0;
  logic [N-1:0] in_valid, in_ready, in_resp_valid;
  llc_req_t in_req [N];
  llc_resp_t in_resp;
  logic out_valid, out_ready = 0, out_resp_valid = 0, ev_conflict;
  llc_req_t out_req;
  llc_resp_t out_resp = '0;

  llc_arbiter #(.N(N)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic line_t answer(laddr_t a);
    return {LINE_BITS/32{32'(a) ^ 32'h5a5a_0f0f}};
  endfunction

  // stand-in LLC
  bit outstanding = 0;
  initial begin
    forever begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 2) != 0) && !outstanding;
      #4;
      if (out_valid && out_ready) begin
        automatic laddr_t a = out_req.addr;
        @(posedge clk);
        check(!outstanding, "one request at a time");
        outstanding = 1;
        @(negedge clk); out_ready = 0;
        repeat ($urandom_range(0, 6)) @(negedge clk);
        out_resp_valid = 1; out_resp.data = answer(a); out_resp.to_hrsc = a[0];
        @(negedge clk); out_resp_valid = 0; outstanding = 0;
      end
    end
  end

  int served [N];
  int passed [N];

  for (genvar i = 0; i < N; i++) begin : g_req
    logic     v = 1'b0;
    llc_req_t q = '0;
    assign in_valid[i] = v;
    assign in_req[i]   = q;
    initial begin
      wait (rst_n);
      repeat (2) @(negedge clk);
      for (int k = 0; k < 40; k++) begin
        automatic laddr_t a = laddr_t'($urandom_range(0, 1 << 20)) ;
        a[1:0] = 2'(i);
        repeat ($urandom_range(0, 8)) @(negedge clk);
        @(negedge clk);
        v = 1; q.op = LLC_READ; q.addr = a;
        #4;
        while (!in_ready[i]) begin @(negedge clk); #4; end
        @(posedge clk);
        @(negedge clk);
        v = 0;
        #4;
        while (!in_resp_valid[i]) begin @(negedge clk); #4; end
        check(in_resp.data == answer(a), $sformatf("requester %0d got its own line", i));
        served[i]++;
      end
    end
  end

  // starvation bound and exclusivity of response pulses
  always @(posedge clk) begin
    check($countones(in_resp_valid) <= 1, "one response at a time");
    for (int i = 0; i < N; i++) begin
      if (in_ready != '0 && !in_ready[i] && in_valid[i]) passed[i]++;
      if (in_ready[i]) passed[i] = 0;
      if (passed[i] > N - 1) begin
        failures++; checks++; $display("FAIL requester %0d starved", i); passed[i] = 0;
      end
    end
  end

  int n_conflict = 0;
  always @(posedge clk) if (rst_n && ev_conflict) n_conflict++;

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    wait (served[0] + served[1] + served[2] + served[3] == 4 * 40);
    check(n_conflict > 10, $sformatf("contention seen %0d", n_conflict));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog: served %0d %0d %0d %0d state=%0d v=%b", served[0], served[1], served[2], served[3], dut.state, in_valid);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
