// tb_aia_engine: self-checking test of one AIA engine on a single
// pseudo-channel memory model.
//
// The engine's two lanes (index prefetch, range reads) each get a copy of
// the memory model.
// 1. The toy SpGEMM example: A and B are 4x4 in CSR form, the row map sends
//    balanced row 3 to original row 0. AIA_1 (b = map + 3, a = rpt_A, N = 1,
//    R = 2) must return {0, 3}; AIA_2 (b = col_A of row 0, a = rpt_B, N = 3,
//    R = 2) must return {0, 2, 3, 5, 5, 8}.
// 2. A command with N = 0 completes with no output.
// 3. Random commands (N 1..8, R 1..4) over random tables, with random
//    back-pressure on the output, checked word by word against a reference
//    computed here from the same tables, including destination addresses and
//    the last flag.
// 4. Cycle count: with no back-pressure and memory latency LAT, a command
//    shows its last beat LAT + 2 + N*R*(LAT+1) cycles after acceptance.
//
// Test 1 uses the published toy example (with column 3 where its printed
// col_A array has a 4); the random tests, LAT and the cycle formula belong to
// this design's engine, not to the published text, which gives no latency.
module tb_aia_engine;
  import aia_pkg::*;

  localparam int unsigned LAT = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     cmd_valid, cmd_ready, out_valid, out_ready, busy;
  logic     ireq_valid, ireq_ready, irsp_valid, rreq_valid, rreq_ready, rrsp_valid;
  aia_cmd_t cmd;
  aia_out_t out;
  mem_req_t ireq, rreq;
  mem_rsp_t irsp, rrsp;

  aia_engine #(.ENG_ID(5)) dut (.*);

  // The two lanes read the same data through two copies of the memory.
  hbm_pc_model #(.LAT(LAT), .DEPTH_W(10)) u_mem (
    .clk, .rst_n, .req_valid(ireq_valid), .req_ready(ireq_ready), .req(ireq),
    .rsp_valid(irsp_valid), .rsp(irsp));
  hbm_pc_model #(.LAT(LAT), .DEPTH_W(10)) u_mem_r (
    .clk, .rst_n, .req_valid(rreq_valid), .req_ready(rreq_ready), .req(rreq),
    .rsp_valid(rrsp_valid), .rsp(rrsp));
  always @(posedge clk) if (rst_n) u_mem_r.mem = u_mem.mem;

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  bit bp_en = 0;   // random output back-pressure
  always @(negedge clk) out_ready <= bp_en ? ($urandom % 3 != 0) : 1'b1;

  // Run one command; compare every beat with exp[] and return the cycle count.
  task automatic run(aia_cmd_t c, data_t exp[$], output int unsigned cycles);
    int unsigned t0, k;
    k = 0;
    @(negedge clk);
    cmd = c; cmd_valid = 1'b1;
    @(posedge clk); while (!cmd_ready) @(posedge clk);
    t0 = cyc;
    @(negedge clk) cmd_valid = 1'b0;
    if (exp.size() == 0) begin
      repeat (20) begin
        @(posedge clk);
        if (out_valid) begin check(0, "output from empty command"); break; end
      end
      check(!busy, "engine idle after empty command");
      cycles = 0;
      return;
    end
    forever begin
      @(posedge clk);
      if (out_valid && out_ready) begin
        check(out.data == exp[k], $sformatf("beat %0d data %0d exp %0d", k, out.data, exp[k]));
        check(out.addr == c.dst + addr_t'(k), $sformatf("beat %0d addr", k));
        check(out.last == (k == exp.size() - 1), $sformatf("beat %0d last", k));
        k++;
        if (out.last || k == exp.size()) break;
      end
    end
    cycles = cyc - t0;
  endtask

  initial begin
    aia_cmd_t c;
    data_t exp[$];
    int unsigned cycles;
    data_t map_t[4]   = '{1, 2, 3, 0};
    data_t rpt_a[5]   = '{0, 3, 4, 5, 7};
    data_t col_a[7]   = '{0, 2, 3, 3, 1, 1, 2};
    data_t rpt_b[5]   = '{0, 2, 3, 5, 8};
    cmd_valid = 0; cmd = '0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    foreach (map_t[k]) u_mem.mem[16 + k] = map_t[k];
    foreach (rpt_a[k]) u_mem.mem[32 + k] = rpt_a[k];
    foreach (col_a[k]) u_mem.mem[48 + k] = col_a[k];
    foreach (rpt_b[k]) u_mem.mem[64 + k] = rpt_b[k];

    // AIA_1: rpt_A[Map[3]], rpt_A[Map[3]+1]
    c = '{dst: 'h100, n: 1, r: 2, a: 32, b: 16 + 3};
    exp = '{0, 3};
    run(c, exp, cycles);
    check(cycles == LAT + 2 + 1*2*(LAT+1), $sformatf("AIA_1 cycles %0d", cycles));
    // AIA_2: rpt_B[col_A[j]], rpt_B[col_A[j]+1] for j in row 0 of A
    c = '{dst: 'h200, n: 3, r: 2, a: 64, b: 48};
    exp = '{0, 2, 3, 5, 5, 8};
    run(c, exp, cycles);
    check(cycles == LAT + 2 + 3*2*(LAT+1), $sformatf("AIA_2 cycles %0d", cycles));
    // N = 0
    c = '{dst: 'h300, n: 0, r: 2, a: 64, b: 48};
    exp = {};
    run(c, exp, cycles);

    // Random commands over random tables.
    for (int k = 0; k < 256; k++) u_mem.mem[256 + k] = $urandom % 200;   // index table b
    for (int k = 0; k < 512; k++) u_mem.mem[512 + k] = $urandom;         // data table a
    for (int t = 0; t < 60; t++) begin
      int unsigned n, r, boff;
      bp_en = (t % 2 == 1);
      n = 1 + $urandom % 8; r = 1 + $urandom % 4; boff = $urandom % 200;
      c = '{dst: addr_t'($urandom), n: N_W'(n), r: R_W'(r), a: 512, b: addr_t'(256 + boff)};
      exp = {};
      for (int i = 0; i < int'(n); i++)
        for (int j = 0; j < int'(r); j++)
          exp.push_back(u_mem.mem[512 + u_mem.mem[256 + boff + i] + j]);
      run(c, exp, cycles);
      if (!bp_en)
        check(cycles == LAT + 2 + n*r*(LAT+1), $sformatf("random cycles %0d", cycles));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
