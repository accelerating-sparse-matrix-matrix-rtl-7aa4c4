// tb_aia_hbm_top: end-to-end test of the whole AIA memory system at its
// default size (6 stacks x 32 pseudo channels, 192 AIA engines).
//
// Every pseudo channel is a memory model whose contents follow a formula
// mem_word(stack, address): an index table in words 0..4095 (entries below
// 3000), a data table in words 4096..8191 and filler above. All engines of
// all stacks then run AIA_range commands at the same time (random N 1..6,
// R 1..3, random index positions, data table at 4096), some of them two in a
// row and one with N = 0, while the GPU side keeps issuing ordinary reads and
// writes on every pseudo channel, memories stall at random and the GPU
// side of each response stream applies random back-pressure. Each output beat
// is checked against mem_word(stack, 4096 + mem_word(stack, b + i) + r),
// including its destination address and last flag; each ordinary read is
// checked against a scoreboard of the formula and the writes made so far.
//
// The mechanisms of the design are counted and each must occur: several
// engines busy at once, engines stalled in the switching network by
// another engine, GPU traffic and AIA traffic meeting at a pseudo-channel port,
// memory back-pressure, response-stream back-pressure, an empty command.
//
// The organisation tested (6 stacks, 32 pseudo channels each, one engine
// per pseudo channel) is the published one; the traffic mix, memory model and
// mechanism list are this testbench's own.
module tb_aia_hbm_top;
  import aia_pkg::*;

  localparam int unsigned NST = NUM_STACKS;
  localparam int unsigned NPC = NUM_CH * PC_PER_CH;
  localparam int unsigned PB  = $clog2(NPC);
  localparam int unsigned LAT = 4;
  localparam int unsigned DEPTH_W = 14 - PB;   // 16384 words per stack

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     cmd_valid [NST][NPC], cmd_ready [NST][NPC];
  aia_cmd_t cmd [NST][NPC];
  logic     out_valid [NST][NPC], out_ready [NST][NPC], eng_busy [NST][NPC];
  aia_out_t out [NST][NPC];
  logic     h_req_valid [NST][NPC], h_req_ready [NST][NPC], h_rsp_valid [NST][NPC];
  mem_req_t h_req [NST][NPC];
  mem_rsp_t h_rsp [NST][NPC];
  logic     p_req_valid [NST][NPC], p_req_ready [NST][NPC], p_rsp_valid [NST][NPC];
  mem_req_t p_req [NST][NPC];
  mem_rsp_t p_rsp [NST][NPC];

  aia_hbm_top dut (.*);

  function automatic data_t mem_word(int unsigned s, int unsigned x);
    if (x < 4096)      return data_t'(((x * 32'd2654435761) + s * 97) >> 7) % 3000;
    else if (x < 8192) return data_t'(x * 3 + s * 100000 + 5);
    else               return data_t'(x ^ 32'h5a5a);
  endfunction

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Memory side: one model per pseudo channel, loaded from the formula.
  for (genvar s = 0; s < NST; s++) begin : g_s
    for (genvar p = 0; p < NPC; p++) begin : g_p
      hbm_pc_model #(.LAT(LAT), .DEPTH_W(DEPTH_W), .ADDR_SHIFT(PB), .STALL_PCT(10)) u_mem (
        .clk, .rst_n,
        .req_valid(p_req_valid[s][p]), .req_ready(p_req_ready[s][p]), .req(p_req[s][p]),
        .rsp_valid(p_rsp_valid[s][p]), .rsp(p_rsp[s][p]));
      initial #1 for (int j = 0; j < 2**DEPTH_W; j++) u_mem.mem[j] = mem_word(s, j * NPC + p);
    end
  end

  // Probes inside the stacks, for the mechanism counters.
  logic eng_req_valid [NST][NPC], eng_req_ready [NST][NPC], aia_req_valid [NST][NPC];
  for (genvar s = 0; s < NST; s++) begin : g_probe
    for (genvar p = 0; p < NPC; p++) begin : g_pc
      assign eng_req_valid[s][p] = dut.g_stack[s].u_stack.e_req_valid[2*p+1];
      assign eng_req_ready[s][p] = dut.g_stack[s].u_stack.e_req_ready[2*p+1];
      assign aia_req_valid[s][p] = dut.g_stack[s].u_stack.x_req_valid[p];
    end
  end

  // ---------------------------------------------------------------- GPU side
  bit          host_run = 0;
  data_t       shadow [NST][int unsigned];   // words written by the host
  mem_rsp_t    exp_h  [NST][NPC][$];
  data_t       exp_o  [NST][NPC][$];
  addr_t       exp_a  [NST][NPC][$];
  int unsigned beats = 0, host_reads = 0;
  // mechanism counters
  int unsigned n_parallel = 0, n_sw_stall = 0, n_port_meet = 0, n_mem_stall = 0;
  int unsigned n_out_bp = 0, n_empty = 0, max_busy = 0;

  function automatic data_t host_view(int unsigned s, int unsigned x);
    if (shadow[s].exists(x)) return shadow[s][x];
    return mem_word(s, x);
  endfunction

  always @(posedge clk) if (rst_n) begin
    int unsigned busy_now;
    busy_now = 0;
    for (int s = 0; s < int'(NST); s++) begin
      for (int p = 0; p < int'(NPC); p++) begin
        // response streams
        if (out_valid[s][p] && out_ready[s][p]) begin
          beats++;
          check(exp_o[s][p].size() > 0, $sformatf("s%0d e%0d: unexpected beat", s, p));
          if (exp_o[s][p].size() > 0) begin
            check(out[s][p].data == exp_o[s][p][0],
                  $sformatf("s%0d e%0d data %0d exp %0d", s, p, out[s][p].data, exp_o[s][p][0]));
            check(out[s][p].addr == exp_a[s][p][0], $sformatf("s%0d e%0d dst", s, p));
            void'(exp_o[s][p].pop_front());
            void'(exp_a[s][p].pop_front());
            check(out[s][p].last == (exp_o[s][p].size() == 0 || exp_a[s][p][0] == '1),
                  $sformatf("s%0d e%0d last", s, p));
            if (exp_a[s][p].size() > 0 && exp_a[s][p][0] == '1) begin
              void'(exp_o[s][p].pop_front());   // command separator
              void'(exp_a[s][p].pop_front());
            end
          end
        end
        if (out_valid[s][p] && !out_ready[s][p]) n_out_bp++;
        if (eng_busy[s][p]) busy_now++;
        // ordinary traffic
        if (h_rsp_valid[s][p]) begin
          host_reads++;
          check(exp_h[s][p].size() > 0, "host: unexpected response");
          if (exp_h[s][p].size() > 0) begin
            check(h_rsp[s][p] == exp_h[s][p][0], $sformatf("s%0d pc%0d host read %h exp %h", s, p, h_rsp[s][p], exp_h[s][p][0]));
            void'(exp_h[s][p].pop_front());
          end
        end
        if (h_req_valid[s][p] && h_req_ready[s][p]) begin
          int unsigned x;
          x = int'(h_req[s][p].addr);
          if (h_req[s][p].we) shadow[s][x] = h_req[s][p].wdata;
          else exp_h[s][p].push_back('{rdata: host_view(s, x), tag: h_req[s][p].tag});
        end
        if (!h_req_valid[s][p] || h_req_ready[s][p]) begin
          mem_req_t r;
          int unsigned x;
          // the controller sends a word to the pseudo channel of its address
          x = (($urandom % 2**DEPTH_W) << PB) | p;
          r.we    = (x >= 8192) && ($urandom % 2 == 0);
          r.addr  = addr_t'(x);
          r.wdata = $urandom;
          r.tag   = tag_t'($urandom % 128);
          h_req_valid[s][p] <= host_run && ($urandom % 4 == 0);
          h_req[s][p]       <= r;
        end
        if (h_req_valid[s][p] && aia_req_valid[s][p]) n_port_meet++;
        if (p_req_valid[s][p] && !p_req_ready[s][p]) n_mem_stall++;
        if (eng_req_valid[s][p] && !eng_req_ready[s][p]) n_sw_stall++;
        out_ready[s][p] <= ($urandom % 4 != 0);
      end
    end
    if (busy_now > 1) n_parallel++;
    if (busy_now > max_busy) max_busy = busy_now;
  end

  // Queue the expected stream of one command; addr '1 marks the end of a
  // command inside the queue so that back-to-back commands can be checked.
  task automatic expect_cmd(int unsigned s, int unsigned p, aia_cmd_t c);
    for (int unsigned i = 0; i < c.n; i++)
      for (int unsigned r = 0; r < c.r; r++) begin
        exp_o[s][p].push_back(mem_word(s, int'(c.a) + mem_word(s, int'(c.b) + i) + r));
        exp_a[s][p].push_back(c.dst + addr_t'(i * c.r + r));
      end
    if (c.n != 0 && c.r != 0) begin
      exp_o[s][p].push_back('0);
      exp_a[s][p].push_back('1);
    end
  endtask

  task automatic issue(int unsigned s, int unsigned p, aia_cmd_t c);
    @(negedge clk);
    cmd[s][p] = c; cmd_valid[s][p] = 1'b1;
    @(posedge clk); while (!cmd_ready[s][p]) @(posedge clk);
    expect_cmd(s, p, c);
    @(negedge clk) cmd_valid[s][p] = 1'b0;
  endtask

  function automatic aia_cmd_t rand_cmd(int unsigned s, int unsigned p);
    aia_cmd_t c;
    c.n   = N_W'(1 + $urandom % 6);
    c.r   = R_W'(1 + $urandom % 3);
    c.b   = addr_t'($urandom % 4000);
    c.a   = addr_t'(4096);
    c.dst = addr_t'(((s * NPC + p) << 12) + ($urandom % 1024));
    return c;
  endfunction

  initial begin
    for (int s = 0; s < int'(NST); s++)
      for (int p = 0; p < int'(NPC); p++) begin
        cmd_valid[s][p] = 0; cmd[s][p] = '0; out_ready[s][p] = 1;
        h_req_valid[s][p] = 0; h_req[s][p] = '0;
      end
    repeat (4) @(posedge clk);
    rst_n = 1;
    host_run = 1;
    repeat (3) @(posedge clk);

    // One complete operation: every engine of every stack at once.
    for (int s = 0; s < int'(NST); s++)
      for (int p = 0; p < int'(NPC); p++) begin
        automatic int unsigned ss = s, pp = p;
        fork
          begin
            if (ss == 0 && pp == NPC - 1) begin
              aia_cmd_t c0;
              c0 = rand_cmd(ss, pp);
              c0.n = 0;
              issue(ss, pp, c0);
              n_empty++;
            end
            issue(ss, pp, rand_cmd(ss, pp));
            if (pp % 4 == 0) issue(ss, pp, rand_cmd(ss, pp));   // back to back
          end
        join_none
      end
    wait fork;

    // Let all streams drain.
    for (int t = 0; t < 20000; t++) begin
      bit idle;
      @(posedge clk);
      idle = 1;
      for (int s = 0; s < int'(NST); s++)
        for (int p = 0; p < int'(NPC); p++)
          if (eng_busy[s][p] || exp_o[s][p].size() != 0) idle = 0;
      if (idle) break;
    end
    host_run = 0;
    repeat (20) @(posedge clk);

    for (int s = 0; s < int'(NST); s++)
      for (int p = 0; p < int'(NPC); p++) begin
        check(exp_o[s][p].size() == 0, $sformatf("s%0d e%0d stream incomplete", s, p));
        check(exp_h[s][p].size() == 0, $sformatf("s%0d pc%0d host reads unanswered", s, p));
      end

    $display("beats=%0d host_reads=%0d max_busy_engines=%0d", beats, host_reads, max_busy);
    $display("parallel=%0d switch_stall=%0d port_meet=%0d mem_stall=%0d out_backpressure=%0d empty_cmd=%0d",
             n_parallel, n_sw_stall, n_port_meet, n_mem_stall, n_out_bp, n_empty);
    check(n_parallel  > 0, "several engines busy at once");
    check(n_sw_stall  > 0, "switch contention occurred");
    check(n_port_meet > 0, "GPU and AIA traffic met at a port");
    check(n_mem_stall > 0, "memory back-pressure occurred");
    check(n_out_bp    > 0, "response-stream back-pressure occurred");
    check(n_empty     > 0, "empty command issued");
    check(max_busy == NST * NPC, $sformatf("all engines ran together (%0d)", max_busy));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
