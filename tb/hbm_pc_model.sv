// hbm_pc_model: behavioural model of one HBM pseudo channel, for testbenches
// only (the DRAM itself is not part of the design).
//
// A request is accepted when req_valid && req_ready. A read presented in
// cycle c returns its word and tag on rsp_valid in cycle c + LAT, in request
// order; a write updates the array and returns nothing. With
// STALL_PCT > 0 req_ready drops at random on that share of cycles, to exercise
// back-pressure. The array holds 2**DEPTH_W words; a word address selects entry
// (addr >> ADDR_SHIFT) modulo the depth, so that with ADDR_SHIFT = log2(number
// of pseudo channels) consecutive words of one channel are adjacent entries.
//
// The real pseudo channel (controller and DRAM) is not part of this design;
// this fixed-latency model, its in-order responses and its stall option are
// the testbenches' own stand-in, not a timing model of HBM.
module hbm_pc_model
  import aia_pkg::*;
#(
  parameter int unsigned LAT       = 4,
  parameter int unsigned DEPTH_W   = 10,
  parameter int unsigned ADDR_SHIFT = 0,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     rsp_valid,
  output mem_rsp_t rsp
);
  data_t    mem [2**DEPTH_W];
  logic     v_q [LAT];
  mem_rsp_t d_q [LAT];
  logic     stall_q;

  function automatic logic [DEPTH_W-1:0] index(addr_t a);
    return DEPTH_W'(a >> ADDR_SHIFT);
  endfunction

  initial for (int k = 0; k < 2**DEPTH_W; k++) mem[k] = '0;

  assign req_ready = !stall_q;
  assign rsp_valid = v_q[LAT-1];
  assign rsp       = d_q[LAT-1];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(LAT); k++) begin
        v_q[k] <= 1'b0;
        d_q[k] <= '0;
      end
      stall_q <= 1'b0;
    end else begin
      stall_q <= (STALL_PCT != 0) && (($urandom % 100) < STALL_PCT);
      v_q[0]  <= req_valid && req_ready && !req.we;
      d_q[0]  <= '{rdata: mem[index(req.addr)], tag: req.tag};
      for (int k = 1; k < int'(LAT); k++) begin
        v_q[k] <= v_q[k-1];
        d_q[k] <= d_q[k-1];
      end
      if (req_valid && req_ready && req.we) mem[index(req.addr)] <= req.wdata;
    end
  end
endmodule
