// aia_switch: the switching network inside one HBM stack that lets every AIA
// engine read from every pseudo channel of the stack.
//
// An AIA engine's index table b and data table a may lie anywhere in the stack,
// so each engine must reach all pseudo channels, and the channels must be
// shared. The published design shows this as a many-to-many network between
// the engines and the memory; its structure is not given. This implementation
// is the simplest one that does the job: a full crossbar of NM request ports
// (engine lanes; a stack uses two per engine) onto NS memory ports (pseudo
// channels).
//
// Routing: words are interleaved over the pseudo channels, so the channel of a
// request is addr[log2(NS)-1:0] (this design's address map). Each memory port
// has a round-robin arbiter over the request ports that address it; the
// winner's request goes out with its tag replaced by its port number. Reads
// come back tagged, and the tag steers the response to its port. Requests
// pass through combinationally (no added latency); a port that loses
// arbitration or meets a busy channel sees m_req_ready low and holds its request.
//
// Rule on the request ports: each has at most one read in flight, so no two
// memory ports answer the same request port in one cycle (checked by an
// assertion).
module aia_switch
  import aia_pkg::*;
#(
  parameter int unsigned NM = 2 * NUM_CH * PC_PER_CH,  // request ports (two lanes per engine)
  parameter int unsigned NS = NUM_CH * PC_PER_CH   // pseudo-channel ports
) (
  input  logic     clk,
  input  logic     rst_n,
  // engine side
  input  logic     m_req_valid [NM],
  output logic     m_req_ready [NM],
  input  mem_req_t m_req       [NM],
  output logic     m_rsp_valid [NM],
  output mem_rsp_t m_rsp       [NM],
  // pseudo-channel side
  output logic     s_req_valid [NS],
  input  logic     s_req_ready [NS],
  output mem_req_t s_req       [NS],
  input  logic     s_rsp_valid [NS],
  input  mem_rsp_t s_rsp       [NS]
);
  localparam int unsigned SB = (NS > 1) ? $clog2(NS) : 1;

  logic [NM-1:0] want [NS];   // want[s][m]: engine m addresses channel s
  logic [NM-1:0] gnt  [NS];

  function automatic int unsigned target(addr_t a);
    return (NS > 1) ? int'(a[SB-1:0]) : 0;
  endfunction

  always_comb begin
    for (int unsigned s = 0; s < NS; s++) begin
      want[s] = '0;
      for (int unsigned m = 0; m < NM; m++)
        want[s][m] = m_req_valid[m] && (target(m_req[m].addr) == s);
    end
  end

  for (genvar s = 0; s < NS; s++) begin : g_port
    rr_arbiter #(.N(NM)) u_arb (
      .clk, .rst_n, .req(want[s]), .advance(s_req_ready[s]), .gnt(gnt[s]));

    // One-hot AND-OR selection of the granted engine's request.
    always_comb begin
      mem_req_t sel;
      tag_t     src;
      sel = '0;
      src = '0;
      for (int unsigned m = 0; m < NM; m++) begin
        sel |= {$bits(mem_req_t){gnt[s][m]}} & m_req[m];
        src |= {TAG_W{gnt[s][m]}} & tag_t'(m);
      end
      s_req_valid[s] = |gnt[s];
      s_req[s]       = sel;
      s_req[s].tag   = src;
    end
  end

  always_comb begin
    for (int unsigned m = 0; m < NM; m++) begin
      m_req_ready[m] = 1'b0;
      for (int unsigned s = 0; s < NS; s++)
        if (gnt[s][m] && s_req_ready[s]) m_req_ready[m] = 1'b1;
    end
  end

  // Response steering: one-hot AND-OR over the channels answering engine m.
  always_comb begin
    for (int unsigned m = 0; m < NM; m++) begin
      m_rsp_valid[m] = 1'b0;
      m_rsp[m]       = '0;
      for (int unsigned s = 0; s < NS; s++) begin
        logic hit;
        hit = s_rsp_valid[s] && s_rsp[s].tag == tag_t'(m);
        m_rsp_valid[m] |= hit;
        m_rsp[m]       |= {$bits(mem_rsp_t){hit}} & s_rsp[s];
      end
    end
  end

  // At most one response per engine per cycle.
  for (genvar m = 0; m < NM; m++) begin : g_chk
    logic [NS-1:0] hits;
    always_comb
      for (int unsigned s = 0; s < NS; s++)
        hits[s] = s_rsp_valid[s] && s_rsp[s].tag == tag_t'(m);
    a_one_rsp: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(hits));
  end

  initial assert (NM <= 2**(TAG_W-1)) else $error("aia_switch: NM exceeds the tag space");
endmodule
