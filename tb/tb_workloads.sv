// tb_workloads -- runs the whole memory system at its default size under
// synthetic traffic shaped like each benchmark of the evaluation (GUPS,
// SSCA2, canneal, pagerank, listrank, BFS, STREAM, bt, ft, sp, ua,
// ScalePaRC, perM).
//
// Per benchmark, every one of the 16 cores issues 48 requests. The share of
// reads follows the benchmark's read/write ratio, and each request's
// granularity is drawn so that the mean matches the benchmark's average read
// or write granularity. The two granularities next to the mean are mixed, as
// the published averages are all that is used. Addresses are random lines
// of the core's own region for the irregular benchmarks, and consecutive
// lines for the streaming ones (STREAM, bt, ft, sp, ua). Writes and reads of
// one benchmark use opposite halves of the region, which alternate from one
// benchmark to the next, so every read has exactly one correct answer. That
// answer is kept in a shadow copy. Checked: every read's data, every read
// returns, no link/decoder error, no DDR3 timing breach. Printed per
// benchmark: clocks taken, useful bytes moved per clock, and the mean read
// latency in clocks.
module tb_workloads;
  import mims_pkg::*;

  localparam int NCORE  = 16;
  localparam int NUM_BS = 2;
  localparam int NL     = 64;
  localparam int NB_B   = 160;    // phase-B requests per core

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic            core_req_valid [NCORE];
  core_req_t       core_req       [NCORE];
  logic            core_req_ready [NCORE];
  logic            core_resp_valid[NCORE];
  core_resp_t      core_resp      [NCORE];
  ddr_cmd_t        ddr_cmd        [NUM_BS];
  logic [DQ_W-1:0] dq_wdata       [NUM_BS];
  logic [NSUB-1:0] dq_wen         [NUM_BS];
  logic [DQ_W-1:0] dq_rdata       [NUM_BS];
  logic            wq_drain       [NUM_BS];
  logic [12:0]     err            [NUM_BS];

  mims_top dut (.*);

  ddr3_dram_model u_dram0 (.clk, .rst_n, .cmd(ddr_cmd[0]), .dq_wdata(dq_wdata[0]), .dq_wen(dq_wen[0]), .dq_rdata(dq_rdata[0]));
  ddr3_dram_model u_dram1 (.clk, .rst_n, .cmd(ddr_cmd[1]), .dq_wdata(dq_wdata[1]), .dq_wen(dq_wen[1]), .dq_rdata(dq_rdata[1]));

  int unsigned checks = 0, failures = 0;
  longint      cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ---------------- reference: DRAM initial pattern and address map ----
  function automatic logic [WORD_W-1:0] init_word(input logic [35:0] k);
    logic [63:0] x;
    x = {28'h0, k} * 64'h9E37_79B9_7F4A_7C15;
    return x ^ (x >> 29);
  endfunction
  function automatic logic [47:0] addr_of(input int c, input int l, input int w);
    return 48'((c << 20) | (l << 6) | (w << 3));
  endfunction
  function automatic logic [35:0] key_of_addr(input logic [47:0] a);
    return {a[7], a[5:3], a[10:8], a[32:18], a[17:11], 7'd0};
  endfunction

  logic [WORD_W-1:0] shadow [NCORE][NL][8];
  initial begin
    for (int c = 0; c < NCORE; c++)
      for (int l = 0; l < NL; l++)
        for (int w = 0; w < 8; w++) shadow[c][l][w] = init_word(key_of_addr(addr_of(c, l, w)));
  end

  // ---------------- per-core request streams ----------------
  core_req_t plan [NCORE][$];
  int        outstanding = 0;
  int unsigned n_reads = 0, n_resp = 0, n_fine = 0, n_full = 0, n_stall = 0;
  int unsigned reads_bs [NUM_BS];
  longint    issue_seq [NCORE][logic [47:0]];
  longint    seq_ctr [NCORE];
  longint    max_ret_seq [NCORE];
  int unsigned n_ooo = 0;

  function automatic core_req_t mk(input bit we, input int c, input int l);
    core_req_t r;
    int w, g;
    g = 1 + ($urandom % 8);
    w = $urandom % (9 - g);
    r.we = we; r.addr = addr_of(c, l, w); r.gy = GY_W'(g); r.to = 8'($urandom);
    r.wdata = '0;
    for (int k = 0; k < 8; k++) if (k < g) r.wdata[k*64 +: 64] = {$urandom, $urandom};
    return r;
  endfunction

  task automatic shuffle_lines(output int perm[NL]);
    for (int i = 0; i < NL; i++) perm[i] = i;
    for (int i = NL - 1; i > 0; i--) begin
      int j, t;
      j = $urandom % (i + 1); t = perm[i]; perm[i] = perm[j]; perm[j] = t;
    end
  endtask

  // drive
  always @(posedge clk) begin
    if (rst_n) begin
      for (int c = 0; c < NCORE; c++) begin
        if (core_req_valid[c] && core_req_ready[c]) begin
          core_req_t r;
          int l, w0;
          r = core_req[c];
          l = int'(r.addr[11:6]); w0 = int'(r.addr[5:3]);
          if (r.gy == GY_W'(8)) n_full++; else n_fine++;
          if (r.we) begin
            for (int k = 0; k < int'(r.gy); k++) shadow[c][l][w0 + k] = r.wdata[k*64 +: 64];
          end else begin
            outstanding++; n_reads++;
            reads_bs[int'(r.addr[6])]++;
            issue_seq[c][r.addr] = seq_ctr[c];
            seq_ctr[c]++;
          end
          void'(plan[c].pop_front());
        end else if (core_req_valid[c]) n_stall++;
      end
      for (int c = 0; c < NCORE; c++) begin
        core_req_valid[c] <= (plan[c].size() != 0);
        core_req[c]       <= (plan[c].size() != 0) ? plan[c][0] : '0;
      end
    end
  end

  // Drive from the plan immediately when it changes (first element).
  // Responses
  always @(posedge clk) begin
    if (rst_n) begin
      for (int c = 0; c < NCORE; c++) if (core_resp_valid[c]) begin
        core_resp_t p;
        int l, w0, cc;
        logic [DATA_W-1:0] exp_d;
        p = core_resp[c];
        cc = int'(p.addr[23:20]); l = int'(p.addr[11:6]); w0 = int'(p.addr[5:3]);
        exp_d = '0;
        for (int k = 0; k < int'(p.gy); k++) exp_d[k*64 +: 64] = shadow[cc][l][w0 + k];
        checks++;
        if (cc != c || p.data != exp_d) begin
          failures++;
          if (failures < 10) $display("FAIL read core %0d addr %h gy %0d got %h exp %h", c, p.addr, p.gy, p.data[127:0], exp_d[127:0]);
        end
        if (issue_seq[c].exists(p.addr)) begin
          if (issue_seq[c][p.addr] < max_ret_seq[c]) n_ooo++;
          else max_ret_seq[c] = issue_seq[c][p.addr];
          issue_seq[c].delete(p.addr);
        end
        outstanding--; n_resp++;
      end
    end
  end

  // ---------------- mechanism counters ----------------
  int unsigned n_err = 0, n_multi_rd = 0, n_wr_pkt = 0, n_ret_pkt = 0, n_batch4 = 0;
  int unsigned n_drain = 0, n_ref = 0, n_par = 0;
  bit          drain_q [NUM_BS];
  longint      last_col [NUM_BS];
  logic [7:0]  last_mask [NUM_BS];
  longint      last_dram_cmd = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      for (int b = 0; b < NUM_BS; b++) begin
        if (err[b] != 0) begin
          n_err++;
          $display("FAIL error pulse bs %0d bits %b at %0d", b, err[b], cycle);
        end
        if (wq_drain[b] && !drain_q[b]) n_drain++;
        drain_q[b] = wq_drain[b];
        if (ddr_cmd[b].op == DDR_REF) n_ref++;
        if (ddr_cmd[b].op inside {DDR_ACT, DDR_RD, DDR_WR}) last_dram_cmd = cycle;
        if (ddr_cmd[b].op inside {DDR_RD, DDR_WR}) begin
          if (cycle - last_col[b] < BURST_CLK && (ddr_cmd[b].sub_mask & last_mask[b]) == 0) n_par++;
          last_col[b] = cycle; last_mask[b] = ddr_cmd[b].sub_mask;
        end
      end
      if (dut.u_mc.g_bs[0].u_gen.pkt_start && dut.u_mc.g_bs[0].u_gen.pt_q == PT_READ && dut.u_mc.g_bs[0].u_gen.n_q > 1) n_multi_rd++;
      if (dut.u_mc.g_bs[1].u_gen.pkt_start && dut.u_mc.g_bs[1].u_gen.pt_q == PT_READ && dut.u_mc.g_bs[1].u_gen.n_q > 1) n_multi_rd++;
      if (dut.u_mc.g_bs[0].u_gen.pkt_start && dut.u_mc.g_bs[0].u_gen.pt_q == PT_WRITE) n_wr_pkt++;
      if (dut.u_mc.g_bs[1].u_gen.pkt_start && dut.u_mc.g_bs[1].u_gen.pt_q == PT_WRITE) n_wr_pkt++;
      if (dut.g_bs[0].u_bs.u_gen.pkt_start) n_ret_pkt++;
      if (dut.g_bs[1].u_bs.u_gen.pkt_start) n_ret_pkt++;
      if (dut.g_bs[0].u_bs.dec_valid == 4'hF && dut.g_bs[0].u_bs.dec_ready) n_batch4++;
      if (dut.g_bs[1].u_bs.dec_valid == 4'hF && dut.g_bs[1].u_bs.dec_ready) n_batch4++;
    end
  end

  task automatic wait_idle();
    bit busy;
    busy = 1;
    while (busy) begin
      @(posedge clk);
      busy = 0;
      for (int c = 0; c < NCORE; c++) if (plan[c].size() != 0) busy = 1;
      if (outstanding != 0 || cycle - last_dram_cmd < 300) busy = 1;
    end
  endtask

  task automatic expect_seen(input string what, input int unsigned n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never seen: %s", what); end
    else $display("  %-34s %0d", what, n);
  endtask

  typedef struct { string name; real rg, wg, rt; bit seq; } wl_t;
  wl_t wl [13];
  longint t_issue [NCORE][logic [47:0]];
  longint lat_sum = 0;
  int unsigned lat_n = 0;
  longint bytes = 0;

  always @(posedge clk) if (rst_n)
    for (int c = 0; c < NCORE; c++) begin
      if (core_req_valid[c] && core_req_ready[c]) begin
        bytes += 8 * longint'(core_req[c].gy);
        if (!core_req[c].we) t_issue[c][core_req[c].addr] = cycle;
      end
      if (core_resp_valid[c] && t_issue[c].exists(core_resp[c].addr)) begin
        lat_sum += cycle - t_issue[c][core_resp[c].addr];
        lat_n++;
        t_issue[c].delete(core_resp[c].addr);
      end
    end

  function automatic int pick_gy(input real mean);
    int lo;
    real f;
    lo = int'($floor(mean));
    if (lo >= 8) return 8;
    f = mean - real'(lo);
    return (real'($urandom % 1000) < f * 1000.0) ? lo + 1 : lo;
  endfunction

  initial begin
    for (int c = 0; c < NCORE; c++) begin
      core_req_valid[c] = 1'b0; core_req[c] = '0; seq_ctr[c] = 0; max_ret_seq[c] = -1;
    end
    for (int b = 0; b < NUM_BS; b++) begin
      reads_bs[b] = 0; drain_q[b] = 0; last_col[b] = -100; last_mask[b] = '0;
    end
    // Table of average read granularity, write granularity, read/write ratio
    wl[0]  = '{"GUPS",      1.78, 1.78, 1.00, 0};
    wl[1]  = '{"SSCA2",     1.68, 1.56, 1.02, 0};
    wl[2]  = '{"canneal",   1.64, 1.10, 2.06, 0};
    wl[3]  = '{"pagerank",  2.42, 2.74, 1.59, 0};
    wl[4]  = '{"listrank",  3.56, 3.37, 1.46, 0};
    wl[5]  = '{"BFS",       3.10, 3.49, 9.16, 0};
    wl[6]  = '{"STREAM",    8.00, 8.00, 2.00, 1};
    wl[7]  = '{"bt",        7.98, 7.98, 1.01, 1};
    wl[8]  = '{"ft",        8.00, 8.00, 1.00, 1};
    wl[9]  = '{"sp",        7.98, 7.98, 1.02, 1};
    wl[10] = '{"ua",        7.19, 7.92, 1.16, 1};
    wl[11] = '{"ScalePaRC", 5.65, 5.74, 2.86, 0};
    wl[12] = '{"perM",      6.28, 6.12, 1.09, 0};
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 13; k++) begin
      longint t0, b0, l0, n0;
      int wbase, rbase;
      wbase = (k % 2) * 32; rbase = 32 - wbase;
      t0 = cycle; b0 = bytes; l0 = lat_sum; n0 = lat_n;
      for (int c = 0; c < NCORE; c++) begin
        int wl_used [$];
        for (int i = 0; i < 48; i++) begin
          core_req_t r;
          bit we;
          int l, g, w;
          we = real'($urandom % 1000) >= 1000.0 * wl[k].rt / (1.0 + wl[k].rt);
          g  = pick_gy(we ? wl[k].wg : wl[k].rg);
          w  = $urandom % (9 - g);
          if (we) begin
            // each write line once per benchmark
            if (wl_used.size() >= 32) continue;
            l = wl[k].seq ? wbase + (i % 32) : wbase + ($urandom % 32);
            while (l inside {wl_used}) l = wbase + ($urandom % 32);
            wl_used.push_back(l);
          end else l = wl[k].seq ? rbase + (i % 32) : rbase + ($urandom % 32);
          r = mk(we, c, l);
          r.gy = GY_W'(g);
          r.addr = addr_of(c, l, w);
          r.wdata = '0;
          for (int q = 0; q < g; q++) r.wdata[q*64 +: 64] = {$urandom, $urandom};
          plan[c].push_back(r);
        end
      end
      wait_idle();
      $display("  %-10s %6d clocks  %5.2f B/clock  mean read latency %6.1f clocks",
               wl[k].name, cycle - t0, real'(bytes - b0) / real'(cycle - t0),
               (lat_n > n0) ? real'(lat_sum - l0) / real'(lat_n - n0) : 0.0);
    end
    checks++;
    if (n_resp != n_reads) begin failures++; $display("FAIL %0d reads but %0d responses", n_reads, n_resp); end
    checks++;
    if (n_err != 0) failures++;
    checks++;
    if (u_dram0.violations + u_dram1.violations != 0) begin
      failures++; $display("FAIL DDR3 rule breaches: %0d", u_dram0.violations + u_dram1.violations);
    end
    checks++;
    if (n_fine == 0 || n_full == 0) begin failures++; $display("FAIL granularity mix missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
