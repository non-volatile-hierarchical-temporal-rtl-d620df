// rr_arbiter: round-robin request/grant arbiter shared by Charb and Camharb.
//
// Picks one of N requesters each cycle in which `advance` is high, starting
// the search one past the last winner so that every requester is served in
// turn. The grant is one-hot and combinational from req and the pointer; the
// pointer moves in the clock cycle a grant is taken (advance & |req).
// Reset is synchronous and active low, as everywhere in this design.
// The round-robin policy is this implementation's choice: the design only
// says that one value at a time is selected by a request-grant handshake.
module rr_arbiter #(
  parameter int N = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 advance,   // grant may be taken this cycle
  output logic [N-1:0]         gnt,       // one-hot, zero if no request
  output logic [$clog2(N)-1:0] gnt_id     // index of the granted requester
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] last_q;

  always_comb begin
    logic [IW-1:0] cand;
    gnt    = '0;
    gnt_id = '0;
    for (int k = N; k >= 1; k--) begin
      cand = IW'((int'(last_q) + k) % N);
      if (advance && req[cand]) begin
        gnt    = '0;
        gnt[cand] = 1'b1;
        gnt_id = cand;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)                last_q <= IW'(N - 1);
    else if (advance && |req)  last_q <= gnt_id;
  end

  // At most one grant at a time.
  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
endmodule
