// rr_arbiter: round-robin arbiter used by the stack switching network and the
// pseudo-channel port mux.
//
// gnt is one-hot (or zero) and combinational in req. The requester searched
// first is the one after the last accepted grant, so every requester that keeps
// asking is served within N grants. The pointer moves only when `advance` is
// high (the granted transfer actually happened), so a stalled grant is held.
// Round-robin is this design's choice; no arbitration policy is specified for
// the AIA network.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] gnt
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] last_q;    // index granted most recently
  logic [N-1:0]  above;     // requesters after last_q in round-robin order
  logic [N-1:0]  masked, pick;

  always_comb begin
    for (int unsigned k = 0; k < N; k++) above[k] = (k > last_q);
    masked = req & above;
    pick   = (masked != '0) ? masked : req;
    gnt    = pick & (~pick + N'(1));   // lowest set bit
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      last_q <= IW'(N - 1);
    end else if (advance && gnt != '0) begin
      for (int unsigned k = 0; k < N; k++)
        if (gnt[k]) last_q <= IW'(k);
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
endmodule
