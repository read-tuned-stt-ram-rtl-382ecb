// llc_arbiter -- shared path from the private L2s to the LLC.
//
// Each core's L2 sends at most one request to the LLC at a time and waits
// for its answer. The arbiter picks one of the waiting L2s in round-robin
// order, starting after the last one served, forwards its request to the
// LLC, and holds the grant until the LLC's one-cycle response comes back,
// which it then steers to that L2 only. The LLC therefore sees one request
// at a time, and a core is passed over at most N-1 times.
//
// Interface: per-core valid/ready request and response-valid pulse; the
// response payload is shared (only the granted core's valid is raised).
// `ev_conflict` pulses when a grant is made while another L2 was also
// waiting.
//
// The paper's figure draws a shared connection between the L2s and the L3
// and the paper has eight cores share the L3; the round-robin policy and the
// single outstanding request are this design's own choices.
module llc_arbiter
  import rrap_pkg::*;
#(
  parameter int unsigned N = 8,
  localparam int unsigned ID_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      [N-1:0] in_valid,
  output logic      [N-1:0] in_ready,
  input  llc_req_t  in_req [N],
  output logic      [N-1:0] in_resp_valid,
  output llc_resp_t in_resp,
  output logic      out_valid,
  input  logic      out_ready,
  output llc_req_t  out_req,
  input  logic      out_resp_valid,
  input  llc_resp_t out_resp,
  output logic      ev_conflict
);
  typedef enum logic [1:0] {S_FREE, S_SEND, S_WAIT} state_e;
  state_e state;

  logic [ID_W-1:0] grant, last;
  logic [ID_W-1:0] pick;
  logic            any;

  // Round-robin choice: first requester after `last`.
  always_comb begin
    pick = last;
    any  = 1'b0;
    for (int k = 1; k <= N; k++) begin
      int unsigned c;
      c = (int'(last) + k) % N;
      if (!any && in_valid[c]) begin
        any  = 1'b1;
        pick = ID_W'(c);
      end
    end
  end

  assign out_valid = (state == S_SEND);
  assign out_req   = in_req[grant];
  assign in_resp   = out_resp;

  always_comb begin
    in_ready      = '0;
    in_resp_valid = '0;
    if (state == S_SEND && out_ready) in_ready[grant] = 1'b1;
    if (state == S_WAIT && out_resp_valid) in_resp_valid[grant] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_FREE;
      grant       <= '0;
      last        <= ID_W'(N - 1);
      ev_conflict <= 1'b0;
    end else begin
      ev_conflict <= 1'b0;
      unique case (state)
        S_FREE: if (any) begin
          grant       <= pick;
          last        <= pick;
          ev_conflict <= ($countones(in_valid) > 1);
          state       <= S_SEND;
        end
        S_SEND: if (out_ready) state <= S_WAIT;
        default: if (out_resp_valid) state <= S_FREE;
      endcase
    end
  end

  // A granted L2 keeps its request up until it is accepted.
  assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_SEND) |-> in_valid[grant]);
endmodule
