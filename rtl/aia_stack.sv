// aia_stack: the AIA logic in the base die of one HBM stack.
//
// The stack has NUM_CH channels of PC_PER_CH pseudo channels (16 x 2 on the
// H200). As placed in the published design, every pseudo channel has its own
// AIA engine, so NPC engines work in parallel. Each engine takes AIA_range
// commands from the GPU and returns its bulk response stream on its own port.
// The engines reach all pseudo channels of the stack through the switching
// network (aia_switch); each pseudo channel's port is shared between the
// network and the GPU's ordinary traffic by a pc_port_mux. The pseudo-channel
// ports (p_*) go to the HBM controller and DRAM, which are not part of this
// design.
//
// Port arrays are indexed by pseudo channel, channel c / pseudo channel p at
// index c*PC_PER_CH + p. Engine k has two switch ports (index lane 2k, range
// lane 2k+1), so the switch is 2*NPC x NPC. A command may name any word of the
// stack in a and b; each read goes to the channel given by the low address
// bits.
module aia_stack
  import aia_pkg::*;
#(
  parameter int unsigned NPC = NUM_CH * PC_PER_CH
) (
  input  logic     clk,
  input  logic     rst_n,
  // AIA commands and response streams, one engine per pseudo channel
  input  logic     cmd_valid  [NPC],
  output logic     cmd_ready  [NPC],
  input  aia_cmd_t cmd        [NPC],
  output logic     out_valid  [NPC],
  input  logic     out_ready  [NPC],
  output aia_out_t out        [NPC],
  output logic     eng_busy   [NPC],
  // ordinary GPU traffic per pseudo channel
  input  logic     h_req_valid [NPC],
  output logic     h_req_ready [NPC],
  input  mem_req_t h_req       [NPC],
  output logic     h_rsp_valid [NPC],
  output mem_rsp_t h_rsp       [NPC],
  // pseudo-channel ports towards the HBM controller
  output logic     p_req_valid [NPC],
  input  logic     p_req_ready [NPC],
  output mem_req_t p_req       [NPC],
  input  logic     p_rsp_valid [NPC],
  input  mem_rsp_t p_rsp       [NPC]
);
  localparam int unsigned NM = 2 * NPC;   // two switch ports per engine

  // engine lanes <-> switch: port 2k is engine k's index lane, 2k+1 its range lane
  logic     e_req_valid [NM];
  logic     e_req_ready [NM];
  mem_req_t e_req       [NM];
  logic     e_rsp_valid [NM];
  mem_rsp_t e_rsp       [NM];
  // switch <-> port mux
  logic     x_req_valid [NPC];
  logic     x_req_ready [NPC];
  mem_req_t x_req       [NPC];
  logic     x_rsp_valid [NPC];
  mem_rsp_t x_rsp       [NPC];

  for (genvar k = 0; k < NPC; k++) begin : g_pc
    aia_engine #(.ENG_ID(k)) u_eng (
      .clk, .rst_n,
      .cmd_valid (cmd_valid[k]),  .cmd_ready (cmd_ready[k]),  .cmd (cmd[k]),
      .out_valid (out_valid[k]),  .out_ready (out_ready[k]),  .out (out[k]),
      .ireq_valid(e_req_valid[2*k]),   .ireq_ready(e_req_ready[2*k]),   .ireq(e_req[2*k]),
      .irsp_valid(e_rsp_valid[2*k]),   .irsp(e_rsp[2*k]),
      .rreq_valid(e_req_valid[2*k+1]), .rreq_ready(e_req_ready[2*k+1]), .rreq(e_req[2*k+1]),
      .rrsp_valid(e_rsp_valid[2*k+1]), .rrsp(e_rsp[2*k+1]),
      .busy      (eng_busy[k]));

    pc_port_mux u_mux (
      .clk, .rst_n,
      .h_req_valid(h_req_valid[k]), .h_req_ready(h_req_ready[k]), .h_req(h_req[k]),
      .h_rsp_valid(h_rsp_valid[k]), .h_rsp(h_rsp[k]),
      .a_req_valid(x_req_valid[k]), .a_req_ready(x_req_ready[k]), .a_req(x_req[k]),
      .a_rsp_valid(x_rsp_valid[k]), .a_rsp(x_rsp[k]),
      .p_req_valid(p_req_valid[k]), .p_req_ready(p_req_ready[k]), .p_req(p_req[k]),
      .p_rsp_valid(p_rsp_valid[k]), .p_rsp(p_rsp[k]));
  end

  aia_switch #(.NM(NM), .NS(NPC)) u_sw (
    .clk, .rst_n,
    .m_req_valid(e_req_valid), .m_req_ready(e_req_ready), .m_req(e_req),
    .m_rsp_valid(e_rsp_valid), .m_rsp(e_rsp),
    .s_req_valid(x_req_valid), .s_req_ready(x_req_ready), .s_req(x_req),
    .s_rsp_valid(x_rsp_valid), .s_rsp(x_rsp));
endmodule
