// tb_aia_switch: self-checking test of the in-stack switching network with
// 4 engine ports and 4 pseudo channels (each a memory model whose word at
// address x holds 7x + 1).
//
// Each engine port runs a requester with at most one read in flight, as an AIA
// engine does, to random word addresses. Every response must come back to the
// port that asked, with the right data and the port's own tag. Checked too:
// the request reaching the channel is exactly the engine's request with the
// tag replaced; a lone request passes with no added latency (response in the
// LAT-th cycle after the request); and when all four ports hammer one channel,
// round-robin arbitration serves each port equally (within one).
//
// The published design only names the in-stack switching network; what is
// checked here (routing, zero added latency, round-robin fairness) is the
// behaviour this design chose for it.
module tb_aia_switch;
  import aia_pkg::*;

  localparam int unsigned NM = 4, NS = 4, LAT = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     m_req_valid [NM], m_req_ready [NM], m_rsp_valid [NM];
  mem_req_t m_req [NM];
  mem_rsp_t m_rsp [NM];
  logic     s_req_valid [NS], s_req_ready [NS], s_rsp_valid [NS];
  mem_req_t s_req [NS];
  mem_rsp_t s_rsp [NS];

  aia_switch #(.NM(NM), .NS(NS)) dut (.*);

  for (genvar s = 0; s < NS; s++) begin : g_mem
    hbm_pc_model #(.LAT(LAT), .DEPTH_W(8), .ADDR_SHIFT(2)) u_mem (
      .clk, .rst_n, .req_valid(s_req_valid[s]), .req_ready(s_req_ready[s]), .req(s_req[s]),
      .rsp_valid(s_rsp_valid[s]), .rsp(s_rsp[s]));
    initial #1 for (int j = 0; j < 256; j++) u_mem.mem[j] = data_t'(7 * (j * NS + s) + 1);
  end

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Requesters.
  int    mode = 0;              // 0: random addresses, 1: all to channel 2
  bit    run_q [NM];
  bit    wait_q [NM];
  addr_t last_addr [NM];
  int unsigned done_cnt [NM];

  for (genvar m = 0; m < NM; m++) begin : g_req
    initial begin
      m_req_valid[m] = 0; m_req[m] = '0; wait_q[m] = 0; done_cnt[m] = 0;
    end
    always @(posedge clk) if (rst_n) begin
      if (m_rsp_valid[m]) begin
        check(wait_q[m], $sformatf("port %0d: unexpected response", m));
        check(m_rsp[m].rdata == data_t'(7 * last_addr[m] + 1), $sformatf("port %0d data", m));
        check(m_rsp[m].tag == tag_t'(m), $sformatf("port %0d tag", m));
        wait_q[m] <= 0;
        done_cnt[m] <= done_cnt[m] + 1;
      end
      if (m_req_valid[m] && m_req_ready[m]) begin
        m_req_valid[m] <= 0;
        wait_q[m] <= 1;
        last_addr[m] <= m_req[m].addr;
      end else if (!m_req_valid[m] && !wait_q[m] && run_q[m] && ($urandom % 4 != 0 || mode == 1)) begin
        m_req_valid[m] <= 1;
        m_req[m].we    <= 0;
        m_req[m].tag   <= tag_t'($urandom % 64);
        m_req[m].addr  <= (mode == 1) ? addr_t'((($urandom % 200) * NS) + 2) : addr_t'($urandom % 1000);
      end
    end
  end

  // The request seen at a channel is the granted engine's, tag replaced.
  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < int'(NS); s++) if (s_req_valid[s]) begin
      int m;
      m = int'(s_req[s].tag);
      check(m < int'(NM) && m_req_valid[m] && m_req[m].addr == s_req[s].addr,
            $sformatf("channel %0d forwards a request nobody made", s));
      check(int'(s_req[s].addr % NS) == s, "request routed to wrong channel");
    end
  end

  initial begin
    int unsigned t0, base[NM];
    foreach (run_q[m]) run_q[m] = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;

    // Lone request latency: port 1 reads word 9.
    @(negedge clk);
    m_req[1] = '{we: 0, addr: 9, wdata: 0, tag: 0};
    m_req_valid[1] = 1;
    t0 = cyc;
    @(posedge clk);
    check(m_req_ready[1], "lone request accepted at once");
    while (!m_rsp_valid[1]) @(posedge clk);
    check(cyc - t0 == LAT, $sformatf("lone request latency %0d", cyc - t0));
    @(posedge clk);

    // Random traffic from all ports.
    foreach (run_q[m]) run_q[m] = 1;
    repeat (3000) @(posedge clk);
    foreach (run_q[m]) run_q[m] = 0;
    repeat (20) @(posedge clk);
    foreach (done_cnt[m]) check(done_cnt[m] > 100, $sformatf("port %0d made progress", m));

    // Fairness: everyone on channel 2.
    mode = 1;
    foreach (base[m]) base[m] = done_cnt[m];
    foreach (run_q[m]) run_q[m] = 1;
    repeat (2000) @(posedge clk);
    foreach (run_q[m]) run_q[m] = 0;
    repeat (20) @(posedge clk);
    for (int m = 1; m < int'(NM); m++) begin
      int d;
      d = int'(done_cnt[m] - base[m]) - int'(done_cnt[0] - base[0]);
      check(d >= -1 && d <= 1, $sformatf("fair share: port %0d differs by %0d", m, d));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
