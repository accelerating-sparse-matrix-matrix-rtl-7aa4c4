// pc_port_mux: shares one pseudo-channel port between the GPU's ordinary
// memory traffic and the AIA switching network.
//
// In the stack each pseudo channel is reached both by the normal GPU path
// through the HBM controller and by an AIA engine; how the two are merged is
// not described, so this block is this design's own, minimal answer. Two
// requesters, host (h_*) and AIA (a_*), compete round-robin for the port; the
// winner is forwarded combinationally. The source is carried in the most
// significant tag bit (0 = host, 1 = AIA), which the memory returns unchanged,
// so each read response is steered back to the side that issued it and the
// AIA side gets its original tag bits back. Host tags must therefore keep
// their top bit at 0 (checked by an assertion).
module pc_port_mux
  import aia_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  // ordinary GPU traffic
  input  logic     h_req_valid,
  output logic     h_req_ready,
  input  mem_req_t h_req,
  output logic     h_rsp_valid,
  output mem_rsp_t h_rsp,
  // AIA switching network
  input  logic     a_req_valid,
  output logic     a_req_ready,
  input  mem_req_t a_req,
  output logic     a_rsp_valid,
  output mem_rsp_t a_rsp,
  // pseudo channel
  output logic     p_req_valid,
  input  logic     p_req_ready,
  output mem_req_t p_req,
  input  logic     p_rsp_valid,
  input  mem_rsp_t p_rsp
);
  logic [1:0] gnt;   // [0] host, [1] AIA

  rr_arbiter #(.N(2)) u_arb (
    .clk, .rst_n, .req({a_req_valid, h_req_valid}), .advance(p_req_ready), .gnt);

  always_comb begin
    p_req_valid = |gnt;
    p_req       = gnt[1] ? a_req : h_req;
    p_req.tag[TAG_W-1] = gnt[1];
  end

  assign h_req_ready = gnt[0] && p_req_ready;
  assign a_req_ready = gnt[1] && p_req_ready;

  always_comb begin
    h_rsp = p_rsp;
    a_rsp = p_rsp;
    h_rsp.tag[TAG_W-1] = 1'b0;
    a_rsp.tag[TAG_W-1] = 1'b0;
  end
  assign h_rsp_valid = p_rsp_valid && !p_rsp.tag[TAG_W-1];
  assign a_rsp_valid = p_rsp_valid &&  p_rsp.tag[TAG_W-1];

  a_host_tag: assert property (@(posedge clk) disable iff (!rst_n)
    h_req_valid |-> !h_req.tag[TAG_W-1]);
  a_aia_tag: assert property (@(posedge clk) disable iff (!rst_n)
    a_req_valid |-> !a_req.tag[TAG_W-1]);
endmodule
