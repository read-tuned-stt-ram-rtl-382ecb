// main_memory_model -- behavioural model of the off-chip main memory.
//
// Not synthesizable and not part of the design: it stands in for the DRAM
// behind the LLC in testbenches. A line never written reads as a fixed
// function of its address (init_line below); written lines are kept in an
// associative array. Reads are answered after a random delay of
// MIN_LAT..MAX_LAT cycles; writes are accepted at once. `ready` is dropped
// at random to exercise back-pressure.
module main_memory_model
  import rrap_pkg::*;
#(
  parameter int MIN_LAT = 5,
  parameter int MAX_LAT = 20
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     resp_valid,
  output line_t    resp_data,
  output int       n_reads,
  output int       n_writes
);
  line_t mem [laddr_t];

  function automatic line_t init_line(laddr_t a);
    line_t l;
    for (int i = 0; i < LINE_BITS / 32; i++) l[i*32 +: 32] = {a[15:0], 16'(i * 40503 + 7)};
    return l;
  endfunction

  function automatic line_t peek(laddr_t a);
    return mem.exists(a) ? mem[a] : init_line(a);
  endfunction

  logic   busy;
  int     wait_cnt;
  laddr_t rd_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_reads    <= 0;
      n_writes   <= 0;
      req_ready  <= 1'b0;
      resp_valid <= 1'b0;
      resp_data  <= '0;
      busy       <= 1'b0;
      wait_cnt   <= 0;
      rd_addr    <= '0;
    end else begin
      resp_valid <= 1'b0;
      req_ready  <= !busy && ($urandom_range(0, 3) != 0);
      if (req_valid && req_ready && !busy) begin
        req_ready <= 1'b0;
        if (req.write) begin
          mem[req.addr] = req.data;
          n_writes     <= n_writes + 1;
        end else begin
          busy     <= 1'b1;
          rd_addr  <= req.addr;
          wait_cnt <= $urandom_range(MIN_LAT, MAX_LAT);
          n_reads  <= n_reads + 1;
        end
      end
      if (busy) begin
        if (wait_cnt == 0) begin
          resp_valid <= 1'b1;
          resp_data  <= peek(rd_addr);
          busy       <= 1'b0;
        end else wait_cnt <= wait_cnt - 1;
      end
    end
  end
endmodule
