// tb_aia_stack: one HBM stack (reduced to 4 pseudo channels) running the
// allocation and accumulation of a small SpGEMM C = A x B with AIA, as the
// GPU kernel does.
//
// A and B are the 4x4 example matrices used to explain the kernel; they are
// stored in CSR form in the stack, word-interleaved over the four pseudo
// channels: row map (balanced row -> original row), rpt_A, col_A, val_A,
// rpt_B, col_B, val_B. For each balanced row i, engine i runs
//   AIA_1: N = 1, R = 2, b = &map[i], a = rpt_A  -> {rpt_A[row], rpt_A[row+1]}
//   AIA_2: N = nnz, R = 2, b = &col_A[start], a = rpt_B
//          -> {rpt_B[col], rpt_B[col+1]} for each non-zero of the row,
// all four engines at once. The testbench then plays the GPU: it reads
// col_B / val_B / val_A through the ordinary per-channel ports and
// accumulates the row of C. The AIA results, the number of distinct columns
// per row (the allocation phase's uniqueCount) and every value of C are
// compared with a dense product computed here from the same matrices.
//
// The matrices, AIA_1/AIA_2 commands and expected ranges are the published
// toy example; the stack size of 4 pseudo channels only keeps it short.
module tb_aia_stack;
  import aia_pkg::*;

  localparam int unsigned NPC = 4, PB = 2, LAT = 3;

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

  aia_stack #(.NPC(NPC)) dut (.*);

  data_t image [1024];
  bit    load = 0;
  for (genvar p = 0; p < NPC; p++) begin : g_p
    hbm_pc_model #(.LAT(LAT), .DEPTH_W(8), .ADDR_SHIFT(PB), .STALL_PCT(15)) u_mem (
      .clk, .rst_n, .req_valid(p_req_valid[p]), .req_ready(p_req_ready[p]), .req(p_req[p]),
      .rsp_valid(p_rsp_valid[p]), .rsp(p_rsp[p]));
    always @(posedge load) for (int j = 0; j < 256; j++) u_mem.mem[j] = image[j * NPC + p];
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // The example matrices (dense), A entries 1..7 = A..G, B entries 1..8 = a..h.
  int unsigned dA [4][4] = '{'{1, 0, 2, 3}, '{0, 0, 0, 4}, '{0, 5, 0, 0}, '{0, 6, 7, 0}};
  int unsigned dB [4][4] = '{'{1, 0, 0, 2}, '{0, 0, 3, 0}, '{4, 0, 5, 0}, '{6, 7, 0, 8}};
  int unsigned row_map [4] = '{1, 2, 3, 0};
  localparam int unsigned MAP = 16, RPTA = 32, COLA = 48, VALA = 64;
  localparam int unsigned RPTB = 80, COLB = 96, VALB = 112;

  // CSR encoding of a dense 4x4 matrix into the image.
  task automatic put_csr(int unsigned d [4][4], int unsigned rpt, int unsigned col, int unsigned val);
    int unsigned k;
    k = 0;
    for (int i = 0; i < 4; i++) begin
      image[rpt + i] = k;
      for (int j = 0; j < 4; j++)
        if (d[i][j] != 0) begin
          image[col + k] = j; image[val + k] = d[i][j]; k++;
        end
    end
    image[rpt + 4] = k;
  endtask

  // Run one AIA command on engine e and collect its stream.
  task automatic aia(int unsigned e, aia_cmd_t c, output data_t res_o [$]);
    data_t res [$];
    res = {};
    @(negedge clk);
    cmd[e] = c; cmd_valid[e] = 1;
    @(posedge clk); while (!cmd_ready[e]) @(posedge clk);
    @(negedge clk) cmd_valid[e] = 0;
    forever begin
      @(posedge clk);
      if (out_valid[e] && out_ready[e]) begin
        check(out[e].addr == c.dst + addr_t'(res.size()), "stream destination");
        res.push_back(out[e].data);
        if (out[e].last) break;
      end
    end
    check(res.size() == c.n * c.r, "stream length");
    res_o = res;
  endtask

  // Ordinary read of word x through the port of its pseudo channel.
  task automatic host_read(int unsigned x, output data_t d);
    int unsigned p;
    p = x % NPC;
    @(negedge clk);
    h_req[p] = '{we: 0, addr: addr_t'(x), wdata: 0, tag: tag_t'(x % 128)};
    h_req_valid[p] = 1;
    @(posedge clk); while (!h_req_ready[p]) @(posedge clk);
    @(negedge clk) h_req_valid[p] = 0;
    while (!h_rsp_valid[p]) @(posedge clk);
    check(h_rsp[p].tag == tag_t'(x % 128), "host tag");
    d = h_rsp[p].rdata;
  endtask

  data_t r1 [4][$], r2 [4][$];

  initial begin
    for (int p = 0; p < int'(NPC); p++) begin
      cmd_valid[p] = 0; cmd[p] = '0; h_req_valid[p] = 0; h_req[p] = '0;
    end
    foreach (image[k]) image[k] = '0;
    for (int i = 0; i < 4; i++) image[MAP + i] = row_map[i];
    put_csr(dA, RPTA, COLA, VALA);
    put_csr(dB, RPTB, COLB, VALB);
    repeat (4) @(posedge clk);
    load = 1;
    rst_n = 1;
    repeat (2) @(posedge clk);

    // AIA phase, all rows (engines) in parallel.
    for (int i = 0; i < 4; i++) begin
      automatic int unsigned ii = i;
      fork begin
        aia_cmd_t c;
        c = '{dst: addr_t'(512 + 2 * ii), n: 1, r: 2, a: RPTA, b: addr_t'(MAP + ii)};
        aia(ii, c, r1[ii]);
        if (r1[ii][1] > r1[ii][0]) begin
          c = '{dst: addr_t'(640 + 16 * ii), n: N_W'(r1[ii][1] - r1[ii][0]), r: 2, a: RPTB,
                b: addr_t'(COLA + r1[ii][0])};
          aia(ii, c, r2[ii]);
        end
      end join_none
    end
    wait fork;

    // GPU side: gather B rows, count distinct columns, accumulate values.
    for (int i = 0; i < 4; i++) begin
      int unsigned row, nnz_ref, nnz_got;
      int unsigned cref [4], cgot [4];
      bit seen [4];
      row = row_map[i];
      check(r1[i][0] == image[RPTA + row] && r1[i][1] == image[RPTA + row + 1],
            $sformatf("AIA_1 row %0d", i));
      foreach (cgot[j]) begin cgot[j] = 0; seen[j] = 0; cref[j] = 0; end
      for (int k = 0; k < 4; k++) for (int j = 0; j < 4; j++) cref[j] += dA[row][k] * dB[k][j];
      nnz_ref = 0;
      foreach (cref[j]) if (cref[j] != 0) nnz_ref++;
      for (int q = 0; q < int'(r2[i].size() / 2); q++) begin
        data_t colA, valA;
        colA = image[COLA + r1[i][0] + q];
        check(r2[i][2*q] == image[RPTB + colA] && r2[i][2*q+1] == image[RPTB + colA + 1],
              $sformatf("AIA_2 row %0d pair %0d", i, q));
        host_read(VALA + r1[i][0] + q, valA);
        for (int k = int'(r2[i][2*q]); k < int'(r2[i][2*q+1]); k++) begin
          data_t cb, vb;
          host_read(COLB + k, cb);
          host_read(VALB + k, vb);
          seen[cb[1:0]] = 1;
          cgot[cb[1:0]] += valA * vb;
        end
      end
      nnz_got = 0;
      foreach (seen[j]) if (seen[j]) nnz_got++;
      check(nnz_got == nnz_ref, $sformatf("row %0d uniqueCount %0d exp %0d", row, nnz_got, nnz_ref));
      foreach (cref[j]) check(cgot[j] == cref[j], $sformatf("C[%0d][%0d]", row, j));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial foreach (out_ready[p]) out_ready[p] = 1;
  always @(negedge clk) foreach (out_ready[p]) out_ready[p] <= ($urandom % 3 != 0);
endmodule
