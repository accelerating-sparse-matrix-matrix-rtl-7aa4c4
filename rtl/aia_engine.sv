// aia_engine: one AIA engine, executing ranged indirect accesses near memory.
//
// A GPU thread sends one command AIA_range(dst, N, R, a, b). The engine then
// does, inside the stack, the 2N dependent reads a processor would otherwise
// make over the memory bus:
//   for i in 0..N-1:   idx = b[i]
//     for r in 0..R-1: out(dst + R*i + r) = a[idx + r]
// and returns the N*R words to the GPU as one response stream whose last beat
// is flagged. In the SpGEMM kernel R = 2: with b = row map and a = rpt_A the
// stream is each row's [start, end) pair of A; with b = col_A and a = rpt_B it
// is the [start, end) pair of every B row that the A row selects.
//
// The command, the output order dst + R*i + r (aia_1[2i], aia_1[2i+1] of the
// SpGEMM kernel) and one engine per pseudo channel follow the published
// description, which also credits the engine with prefetching. The
// microarchitecture is this design's own:
//   - an index lane reads b[0], b[1], ... ahead of use into an IDXQ-entry
//     index FIFO (the prefetch);
//   - a range lane takes the FIFO head and reads a[idx + r] for r = 0..R-1,
//     pushing each word with its last flag into an OUTQ-entry output FIFO;
//   - the output FIFO drives the response stream; a counter from dst gives
//     each beat's destination address.
// Each lane has its own memory port with at most one read in flight, so no
// port can receive two responses in one cycle and no reordering is needed.
// Words are 32 bits and addresses are word addresses; a + idx + r is computed
// with idx zero-extended.
//
// Interfaces (valid/ready; a transfer happens when both are high):
//   cmd        : AIA_range command in; accepted only while idle.
//   ireq/irsp  : index-lane reads (b + i); rreq/rrsp: range-lane reads.
//                Responses have no ready: each lane has room reserved for
//                the one read it has in flight.
//   out        : response stream to the GPU.
// Timing: if a read presented in cycle c returns in cycle c + L, a command
// accepted in cycle 0 with no back-pressure shows its last beat in cycle
// L + 2 + N*R*(L + 1): one range word every L + 1 cycles, the index fetches
// hidden behind them. A command with N = 0 or R = 0 is accepted and completes
// without any output beat.
module aia_engine
  import aia_pkg::*;
#(
  parameter int unsigned ENG_ID = 0,   // engine number; lanes use tags 2*ENG_ID, 2*ENG_ID+1
  parameter int unsigned IDXQ   = 4,   // index prefetch depth
  parameter int unsigned OUTQ   = 2    // output FIFO depth
) (
  input  logic     clk,
  input  logic     rst_n,
  // command from the GPU
  input  logic     cmd_valid,
  output logic     cmd_ready,
  input  aia_cmd_t cmd,
  // response stream to the GPU
  output logic     out_valid,
  input  logic     out_ready,
  output aia_out_t out,
  // index lane memory port
  output logic     ireq_valid,
  input  logic     ireq_ready,
  output mem_req_t ireq,
  input  logic     irsp_valid,
  input  mem_rsp_t irsp,
  // range lane memory port
  output logic     rreq_valid,
  input  logic     rreq_ready,
  output mem_req_t rreq,
  input  logic     rrsp_valid,
  input  mem_rsp_t rrsp,
  output logic     busy
);
  localparam int unsigned IQW = $clog2(IDXQ + 1);
  localparam int unsigned OQW = $clog2(OUTQ + 1);

  typedef struct packed {
    data_t data;
    logic  last;
  } oent_t;

  logic           active_q;
  addr_t          a_q, b_q, dst_q;
  logic [N_W-1:0] n_q;
  logic [R_W-1:0] rlen_q;

  // index lane
  logic [N_W-1:0] ii_q;          // next index to fetch
  logic           ipend_q;       // index read in flight
  data_t          iq_q [IDXQ];
  logic [IQW-1:0] icnt_q;
  logic [$clog2(IDXQ)-1:0] ihead_q, itail_q;

  // range lane
  logic [N_W-1:0] ri_q;          // index being expanded
  logic [R_W-1:0] r_q;           // offset within the range
  logic           rpend_q;       // range read in flight
  logic           rlast_q;       // the word in flight is the command's last

  // output FIFO
  oent_t          oq_q [OUTQ];
  logic [OQW-1:0] ocnt_q;
  logic [$clog2(OUTQ)-1:0] ohead_q, otail_q;

  logic i_issue, r_issue, i_push, r_push, i_pop, o_pop, r_end;

  assign cmd_ready = !active_q;
  assign busy      = active_q;

  // Index lane: fetch ahead while the FIFO has room.
  assign ireq_valid = active_q && !ipend_q && (ii_q != n_q) && (icnt_q != IQW'(IDXQ));
  always_comb begin
    ireq      = '0;
    ireq.addr = b_q + addr_t'(ii_q);
    ireq.tag  = tag_t'(2 * ENG_ID);
  end
  assign i_issue = ireq_valid && ireq_ready;
  assign i_push  = irsp_valid;

  // Range lane: read a[idx + r] while the output FIFO has room.
  assign rreq_valid = active_q && !rpend_q && (icnt_q != '0) && (ocnt_q != OQW'(OUTQ));
  always_comb begin
    rreq      = '0;
    rreq.addr = a_q + addr_t'(iq_q[ihead_q]) + addr_t'(r_q);
    rreq.tag  = tag_t'(2 * ENG_ID + 1);
  end
  assign r_issue = rreq_valid && rreq_ready;
  assign r_end   = (r_q == rlen_q - R_W'(1));
  assign i_pop   = r_issue && r_end;
  assign r_push  = rrsp_valid;

  // Output.
  assign out_valid = (ocnt_q != '0);
  assign out.addr  = dst_q;
  assign out.data  = oq_q[ohead_q].data;
  assign out.last  = oq_q[ohead_q].last;
  assign o_pop     = out_valid && out_ready;

  function automatic logic [$clog2(IDXQ)-1:0] inext(logic [$clog2(IDXQ)-1:0] p);
    return (int'(p) == IDXQ - 1) ? '0 : p + 1'b1;
  endfunction
  function automatic logic [$clog2(OUTQ)-1:0] onext(logic [$clog2(OUTQ)-1:0] p);
    return (int'(p) == OUTQ - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active_q <= 1'b0;
      a_q <= '0; b_q <= '0; dst_q <= '0; n_q <= '0; rlen_q <= '0;
      ii_q <= '0; ipend_q <= 1'b0; icnt_q <= '0; ihead_q <= '0; itail_q <= '0;
      ri_q <= '0; r_q <= '0; rpend_q <= 1'b0; rlast_q <= 1'b0;
      ocnt_q <= '0; ohead_q <= '0; otail_q <= '0;
      for (int k = 0; k < int'(IDXQ); k++) iq_q[k] <= '0;
      for (int k = 0; k < int'(OUTQ); k++) oq_q[k] <= '0;
    end else begin
      if (!active_q) begin
        if (cmd_valid) begin
          a_q    <= cmd.a;
          b_q    <= cmd.b;
          dst_q  <= cmd.dst;
          n_q    <= cmd.n;
          rlen_q <= cmd.r;
          ii_q   <= '0;
          ri_q   <= '0;
          r_q    <= '0;
          active_q <= (cmd.n != '0) && (cmd.r != '0);
        end
      end else begin
        // index lane
        if (i_issue) begin
          ii_q    <= ii_q + N_W'(1);
          ipend_q <= 1'b1;
        end
        if (i_push) begin
          ipend_q        <= 1'b0;
          iq_q[itail_q]  <= irsp.rdata;
          itail_q        <= inext(itail_q);
        end
        if (i_pop) ihead_q <= inext(ihead_q);
        icnt_q <= icnt_q + IQW'(i_push) - IQW'(i_pop);

        // range lane
        if (r_issue) begin
          rpend_q <= 1'b1;
          rlast_q <= r_end && (ri_q == n_q - N_W'(1));
          if (r_end) begin
            r_q  <= '0;
            ri_q <= ri_q + N_W'(1);
          end else begin
            r_q  <= r_q + R_W'(1);
          end
        end
        if (r_push) begin
          rpend_q       <= 1'b0;
          oq_q[otail_q] <= '{data: rrsp.rdata, last: rlast_q};
          otail_q       <= onext(otail_q);
        end

        // output
        if (o_pop) begin
          ohead_q <= onext(ohead_q);
          dst_q   <= dst_q + addr_t'(1);
          if (out.last) active_q <= 1'b0;
        end
        ocnt_q <= ocnt_q + OQW'(r_push) - OQW'(o_pop);
      end
    end
  end

  // Responses only for reads in flight, with this lane's tag.
  a_irsp: assert property (@(posedge clk) disable iff (!rst_n)
    irsp_valid |-> ipend_q && irsp.tag == tag_t'(2 * ENG_ID));
  a_rrsp: assert property (@(posedge clk) disable iff (!rst_n)
    rrsp_valid |-> rpend_q && rrsp.tag == tag_t'(2 * ENG_ID + 1));
  a_iq_room: assert property (@(posedge clk) disable iff (!rst_n)
    i_push |-> icnt_q != IQW'(IDXQ));
  a_oq_room: assert property (@(posedge clk) disable iff (!rst_n)
    r_push |-> ocnt_q != OQW'(OUTQ));
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out));
endmodule
