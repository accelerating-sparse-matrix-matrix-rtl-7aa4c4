// aia_hbm_top: the AIA near-memory logic of the whole GPU memory system.
//
// The H200 has NUM_STACKS = 6 HBM stacks, each with its own AIA logic
// (aia_stack: one engine per pseudo channel plus the in-stack switching
// network). Stacks are independent: an engine gathers only from its own stack,
// so the GPU places the tables of one AIA_range command in one stack. All
// port arrays are indexed [stack][pseudo channel]. The GPU side (commands,
// response streams, ordinary traffic) and the memory side (pseudo-channel
// ports to the HBM controller and DRAM, outside this design) are brought out
// as plain struct arrays.
//
// Timing: purely structural, so every path has the timing of aia_stack. The six
// stacks and per-pseudo-channel engines follow the published organisation; the
// flat [stack][pseudo channel] port arrays are this design's choice.
module aia_hbm_top
  import aia_pkg::*;
#(
  parameter int unsigned NST = NUM_STACKS,
  parameter int unsigned NPC = NUM_CH * PC_PER_CH
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     cmd_valid   [NST][NPC],
  output logic     cmd_ready   [NST][NPC],
  input  aia_cmd_t cmd         [NST][NPC],
  output logic     out_valid   [NST][NPC],
  input  logic     out_ready   [NST][NPC],
  output aia_out_t out         [NST][NPC],
  output logic     eng_busy    [NST][NPC],
  input  logic     h_req_valid [NST][NPC],
  output logic     h_req_ready [NST][NPC],
  input  mem_req_t h_req       [NST][NPC],
  output logic     h_rsp_valid [NST][NPC],
  output mem_rsp_t h_rsp       [NST][NPC],
  output logic     p_req_valid [NST][NPC],
  input  logic     p_req_ready [NST][NPC],
  output mem_req_t p_req       [NST][NPC],
  input  logic     p_rsp_valid [NST][NPC],
  input  mem_rsp_t p_rsp       [NST][NPC]
);
  for (genvar s = 0; s < NST; s++) begin : g_stack
    aia_stack #(.NPC(NPC)) u_stack (
      .clk, .rst_n,
      .cmd_valid(cmd_valid[s]), .cmd_ready(cmd_ready[s]), .cmd(cmd[s]),
      .out_valid(out_valid[s]), .out_ready(out_ready[s]), .out(out[s]),
      .eng_busy(eng_busy[s]),
      .h_req_valid(h_req_valid[s]), .h_req_ready(h_req_ready[s]), .h_req(h_req[s]),
      .h_rsp_valid(h_rsp_valid[s]), .h_rsp(h_rsp[s]),
      .p_req_valid(p_req_valid[s]), .p_req_ready(p_req_ready[s]), .p_req(p_req[s]),
      .p_rsp_valid(p_rsp_valid[s]), .p_rsp(p_rsp[s]));
  end
endmodule
