// tb_pc_port_mux: self-checking test of the pseudo-channel port mux.
//
// A host requester and an AIA-side requester issue random reads and writes,
// several in flight each, into one pseudo-channel memory model with random
// stalls. A scoreboard mirrors the memory: every read response must arrive on
// the side that issued it, in order, with the issuing tag and the data last
// written to that address by either side. With both sides always requesting,
// grants must alternate (round-robin), and a lone request must pass straight
// through in the cycle it is made.
//
// Sharing a pseudo channel between AIA and ordinary traffic is implied by
// the published placement but not described; the checks follow this design's
// own round-robin and tag-bit scheme.
module tb_pc_port_mux;
  import aia_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     h_req_valid, h_req_ready, h_rsp_valid;
  logic     a_req_valid, a_req_ready, a_rsp_valid;
  logic     p_req_valid, p_req_ready, p_rsp_valid;
  mem_req_t h_req, a_req, p_req;
  mem_rsp_t h_rsp, a_rsp, p_rsp;

  pc_port_mux dut (.*);

  bit stall_en = 1;
  hbm_pc_model #(.LAT(4), .DEPTH_W(6), .STALL_PCT(20)) u_mem (
    .clk, .rst_n, .req_valid(p_req_valid), .req_ready(p_req_ready), .req(p_req),
    .rsp_valid(p_rsp_valid), .rsp(p_rsp));

  int checks = 0, failures = 0;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  data_t    shadow [64];
  mem_rsp_t exp_h [$], exp_a [$];
  bit       run_h = 0, run_a = 0, always_req = 0;
  int unsigned h_done = 0, a_done = 0;

  initial foreach (shadow[k]) shadow[k] = '0;

  function automatic mem_req_t rand_req();
    mem_req_t r;
    r.we    = ($urandom % 3 == 0);
    r.addr  = addr_t'($urandom % 64);
    r.wdata = $urandom;
    r.tag   = tag_t'($urandom % 128);
    return r;
  endfunction

  // Drive and score. Accepted requests update the shadow in acceptance order,
  // which is the order the memory applies them.
  always @(posedge clk) if (rst_n) begin
    if (h_rsp_valid) begin
      check(exp_h.size() > 0, "host: unexpected response");
      if (exp_h.size() > 0) begin
        check(h_rsp == exp_h[0], $sformatf("host rsp %h exp %h", h_rsp, exp_h[0]));
        void'(exp_h.pop_front());
      end
      h_done++;
    end
    if (a_rsp_valid) begin
      check(exp_a.size() > 0, "aia: unexpected response");
      if (exp_a.size() > 0) begin
        check(a_rsp == exp_a[0], $sformatf("aia rsp %h exp %h", a_rsp, exp_a[0]));
        void'(exp_a.pop_front());
      end
      a_done++;
    end
    if (h_req_valid && h_req_ready) begin
      if (h_req.we) shadow[h_req.addr[5:0]] = h_req.wdata;
      else exp_h.push_back('{rdata: shadow[h_req.addr[5:0]], tag: h_req.tag});
    end
    if (a_req_valid && a_req_ready) begin
      if (a_req.we) shadow[a_req.addr[5:0]] = a_req.wdata;
      else exp_a.push_back('{rdata: shadow[a_req.addr[5:0]], tag: a_req.tag});
    end
    check(!(h_req_ready && a_req_ready), "both sides granted");
    if (!h_req_valid || h_req_ready) begin
      h_req_valid <= run_h && (always_req || $urandom % 2 == 0);
      h_req       <= rand_req();
    end
    if (!a_req_valid || a_req_ready) begin
      a_req_valid <= run_a && (always_req || $urandom % 2 == 0);
      a_req       <= rand_req();
    end
  end

  initial begin
    int unsigned alternations, grants;
    logic last_side;
    h_req_valid = 0; a_req_valid = 0; h_req = '0; a_req = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;

    // Mixed random traffic.
    run_h = 1; run_a = 1;
    repeat (3000) @(posedge clk);
    run_h = 0; run_a = 0;
    repeat (30) @(posedge clk);
    check(exp_h.size() == 0 && exp_a.size() == 0, "all reads answered");
    check(h_done > 100 && a_done > 100, "both sides served");

    // Alternation under constant demand from both sides.
    always_req = 1; run_h = 1; run_a = 1;
    alternations = 0; grants = 0; last_side = 0;
    repeat (5) @(posedge clk);
    repeat (400) begin
      @(posedge clk);
      if (h_req_ready || a_req_ready) begin
        if (grants > 0 && a_req_ready != last_side) alternations++;
        last_side = a_req_ready;
        grants++;
      end
    end
    check(grants > 100 && alternations == grants - 1,
          $sformatf("alternation %0d of %0d grants", alternations, grants));
    run_h = 0; run_a = 0; always_req = 0;
    repeat (30) @(posedge clk);

    // Lone host read passes straight through.
    @(negedge clk);
    h_req_valid = 1; h_req = '{we: 0, addr: 5, wdata: 0, tag: 3};
    #1 check(p_req_valid && p_req.addr == 5 && p_req.tag == 3, "lone host request forwarded");
    @(posedge clk); #1;
    h_req_valid = 0;
    repeat (10) @(posedge clk);
    check(exp_h.size() == 0 && exp_a.size() == 0, "all reads answered at end");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
