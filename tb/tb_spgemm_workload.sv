// tb_spgemm_workload: matrix self-product C = A x A, the workload of the
// SpGEMM evaluation, run through one full-size stack (32 pseudo channels,
// 32 AIA engines) at reduced matrix sizes.
//
// Three synthetic matrices mimic the shape of evaluated inputs, scaled down so
// that they simulate in seconds: a road-network-like matrix (about 3 non-zeros
// per row), an economics-like one (about 6) and a dense-row, protein-like one
// (about 40). For each, the testbench does on the GPU's behalf what the kernel
// does in software: counts the intermediate products per row, bins rows into
// the four groups of the row-grouping phase (IP ranges 0-31, 32-511,
// 512-8191, >= 8192) and builds the row map in group order. It then stores
// map, rpt and col in the stack and, for every balanced row i, has engine
// i mod 32 run AIA_1 (N = 1, R = 2 on map/rpt) and AIA_2 (N = nnz, R = 2 on
// col/rpt), 32 rows at a time. From the returned ranges it counts the
// distinct output columns of the row (the allocation phase's uniqueCount)
// and compares them with a reference computed directly from the matrix. It
// also checks every returned pointer and reports words delivered per cycle.
//
// The row-grouping bins and the AIA_1/AIA_2 use follow the published
// kernel; the matrix sizes are reduced, synthetic stand-ins, not the
// evaluated inputs.
module tb_spgemm_workload;
  import aia_pkg::*;

  localparam int unsigned NPC = NUM_CH * PC_PER_CH;
  localparam int unsigned PB = $clog2(NPC), LAT = 4, DEPTH_W = 9;
  localparam int unsigned MAP = 0, RPT = 1024, COL = 2048;   // word addresses
  localparam int unsigned MAXN = 128, MAXNNZ = 6000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     cmd_valid [NPC], cmd_ready [NPC], out_valid [NPC], out_ready [NPC], eng_busy [NPC];
  aia_cmd_t cmd [NPC];
  aia_out_t out [NPC];
  logic     h_req_valid [NPC], h_req_ready [NPC], h_rsp_valid [NPC];
  mem_req_t h_req [NPC];
  mem_rsp_t h_rsp [NPC];
  logic     p_req_valid [NPC], p_req_ready [NPC], p_rsp_valid [NPC];
  mem_req_t p_req [NPC];
  mem_rsp_t p_rsp [NPC];

  aia_stack dut (.*);

  data_t image [2**(DEPTH_W + PB)];
  event  load;
  for (genvar p = 0; p < NPC; p++) begin : g_p
    hbm_pc_model #(.LAT(LAT), .DEPTH_W(DEPTH_W), .ADDR_SHIFT(PB)) u_mem (
      .clk, .rst_n, .req_valid(p_req_valid[p]), .req_ready(p_req_ready[p]), .req(p_req[p]),
      .rsp_valid(p_rsp_valid[p]), .rsp(p_rsp[p]));
    always @(load) for (int j = 0; j < 2**DEPTH_W; j++) u_mem.mem[j] = image[j * NPC + p];
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // The matrix under test (square, n x n, CSR).
  int unsigned n, nnz;
  int unsigned rpt [MAXN + 1];
  int unsigned col [MAXNNZ];
  int unsigned row_map [MAXN];

  task automatic make_matrix(int unsigned rows, int unsigned avg, int unsigned maxd);
    bit used [MAXN];
    n = rows; nnz = 0;
    for (int unsigned i = 0; i < n; i++) begin
      int unsigned d;
      d = 1 + $urandom % (2 * avg - 1);
      if (i == 0) d = maxd;                   // one long row, as in the real inputs
      if (d > n) d = n;
      foreach (used[j]) used[j] = 0;
      rpt[i] = nnz;
      for (int unsigned k = 0; k < d; k++) begin
        int unsigned c;
        do c = $urandom % n; while (used[c]);
        used[c] = 1;
        col[nnz++] = c;
      end
    end
    rpt[n] = nnz;
  endtask

  function automatic int unsigned group_of(int unsigned ip);
    if (ip < 32) return 0;
    if (ip < 512) return 1;
    if (ip < 8192) return 2;
    return 3;
  endfunction

  // Row grouping (Algorithm 1 and logarithmic binning) done here in software.
  task automatic build_map(output int unsigned grp_cnt [4]);
    int unsigned k;
    k = 0;
    foreach (grp_cnt[g]) grp_cnt[g] = 0;
    for (int unsigned g = 0; g < 4; g++)
      for (int unsigned i = 0; i < n; i++) begin
        int unsigned ip;
        ip = 0;
        for (int unsigned j = rpt[i]; j < rpt[i + 1]; j++) ip += rpt[col[j] + 1] - rpt[col[j]];
        if (group_of(ip) == g) begin row_map[k++] = i; grp_cnt[g]++; end
      end
  endtask

  function automatic int unsigned ref_unique(int unsigned row);
    bit seen [MAXN];
    int unsigned u;
    foreach (seen[j]) seen[j] = 0;
    u = 0;
    for (int unsigned j = rpt[row]; j < rpt[row + 1]; j++)
      for (int unsigned k = rpt[col[j]]; k < rpt[col[j] + 1]; k++)
        if (!seen[col[k]]) begin seen[col[k]] = 1; u++; end
    return u;
  endfunction

  task automatic aia(int unsigned e, aia_cmd_t c, output data_t res_o [$]);
    data_t res [$];
    @(negedge clk);
    cmd[e] = c; cmd_valid[e] = 1;
    @(posedge clk); while (!cmd_ready[e]) @(posedge clk);
    @(negedge clk) cmd_valid[e] = 0;
    forever begin
      @(posedge clk);
      if (out_valid[e] && out_ready[e]) begin
        res.push_back(out[e].data);
        if (out[e].last) break;
      end
    end
    res_o = res;
  endtask

  int unsigned total_words, total_cycles;

  // One balanced row on engine e: AIA_1, AIA_2, then uniqueCount.
  task automatic do_row(int unsigned i, int unsigned e);
    data_t r1 [$], r2 [$];
    int unsigned row, got;
    bit seen [MAXN];
    row = row_map[i];
    aia(e, '{dst: addr_t'(2 * i), n: 1, r: 2, a: RPT, b: addr_t'(MAP + i)}, r1);
    check(r1.size() == 2 && r1[0] == rpt[row] && r1[1] == rpt[row + 1],
          $sformatf("AIA_1 row %0d", row));
    aia(e, '{dst: addr_t'(2 * rpt[row]), n: N_W'(r1[1] - r1[0]), r: 2, a: RPT,
             b: addr_t'(COL + r1[0])}, r2);
    check(r2.size() == 2 * (rpt[row + 1] - rpt[row]), $sformatf("AIA_2 length row %0d", row));
    total_words += 2 + r2.size();
    foreach (seen[j]) seen[j] = 0;
    got = 0;
    for (int q = 0; q < int'(r2.size() / 2); q++) begin
      int unsigned cA;
      cA = col[rpt[row] + q];
      check(r2[2*q] == rpt[cA] && r2[2*q+1] == rpt[cA + 1], $sformatf("AIA_2 row %0d pair %0d", row, q));
      for (int unsigned k = r2[2*q]; k < r2[2*q+1]; k++)
        if (!seen[col[k]]) begin seen[col[k]] = 1; got++; end
    end
    check(got == ref_unique(row), $sformatf("uniqueCount row %0d: %0d exp %0d", row, got, ref_unique(row)));
  endtask

  task automatic run_profile(string name, int unsigned rows, int unsigned avg, int unsigned maxd);
    int unsigned grp [4], t0;
    make_matrix(rows, avg, maxd);
    build_map(grp);
    foreach (image[k]) image[k] = '0;
    for (int unsigned i = 0; i < n; i++) image[MAP + i] = row_map[i];
    for (int unsigned i = 0; i <= n; i++) image[RPT + i] = rpt[i];
    for (int unsigned j = 0; j < nnz; j++) image[COL + j] = col[j];
    ->load;
    @(posedge clk);
    total_words = 0;
    t0 = $time;
    for (int unsigned base = 0; base < n; base += NPC) begin
      for (int unsigned e = 0; e < NPC; e++) begin
        automatic int unsigned ii = base + e, ee = e;
        if (ii < n) fork do_row(ii, ee); join_none
      end
      wait fork;
    end
    total_cycles = ($time - t0) / 10;
    $display("%s: %0d rows, %0d nnz, groups %0d/%0d/%0d/%0d, %0d AIA words in %0d cycles",
             name, n, nnz, grp[0], grp[1], grp[2], grp[3], total_words, total_cycles);
    check(total_words == 2 * n + 2 * nnz, "every row delivered");
  endtask

  initial begin
    for (int p = 0; p < int'(NPC); p++) begin
      cmd_valid[p] = 0; cmd[p] = '0; h_req_valid[p] = 0; h_req[p] = '0; out_ready[p] = 1;
    end
    repeat (4) @(posedge clk);
    rst_n = 1;
    run_profile("road-like",     128,  3, 16);
    run_profile("economics-like", 128, 6, 24);
    run_profile("protein-like",   64, 40, 60);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
