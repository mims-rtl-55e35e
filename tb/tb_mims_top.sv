// tb_mims_top -- end-to-end test of the whole memory system at its default
// size (16 cores, 2 buffer schedulers, 64/64 queues), with one behavioural
// DDR3 channel model per buffer scheduler.
//
// Every core owns a 1 MB region of 64 lines (line l at core<<20 | l<<6, so
// lines spread over both channels, both ranks and all banks). Phases:
//   A  every core writes each of its 64 lines once (random granularity and
//      word offset), as fast as it is allowed;
//   B  mixed traffic: reads of lines 0..31 and one write to each of lines
//      32..63, interleaved at random;
//   C  every core reads every line once.
// Between phases the test waits until the channels are idle. Because a line
// is written at most once per phase and never read in the phase that writes
// it, each read has one correct answer, kept in a shadow copy that starts
// from the DRAM model's initial pattern. Checked: every read's data, that
// every read returns, no link/decoder error, no DDR3 timing breach in the
// models. Also counted, each of which must happen at least once: read
// packets with several requests, write packets, read-return packets, full
// 4-message parallel decode batches, write-drain mode, refresh, two column
// commands in flight on disjoint sub-ranks, out-of-order returns, request-id
// reuse, request back-pressure, fine (<64 B) and full-line requests.
module tb_mims_top;
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

  // responses
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

  initial begin
    int perm[NL];
    for (int c = 0; c < NCORE; c++) begin
      core_req_valid[c] = 1'b0; core_req[c] = '0; seq_ctr[c] = 0; max_ret_seq[c] = -1;
    end
    for (int b = 0; b < NUM_BS; b++) begin
      reads_bs[b] = 0; drain_q[b] = 0; last_col[b] = -100; last_mask[b] = '0;
    end
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    // phase A
    for (int c = 0; c < NCORE; c++) begin
      shuffle_lines(perm);
      for (int i = 0; i < NL; i++) plan[c].push_back(mk(1'b1, c, perm[i]));
    end
    wait_idle();
    $display("phase A done at cycle %0d", cycle);
    // phase B
    for (int c = 0; c < NCORE; c++) begin
      int wl[$];
      shuffle_lines(perm);
      for (int i = 0; i < NL; i++) if (perm[i] >= 32) wl.push_back(perm[i]);
      for (int i = 0; i < NB_B; i++) begin
        if (wl.size() != 0 && ($urandom % 3 == 0)) plan[c].push_back(mk(1'b1, c, wl.pop_front()));
        else plan[c].push_back(mk(1'b0, c, $urandom % 32));
      end
    end
    wait_idle();
    $display("phase B done at cycle %0d", cycle);
    // phase C
    for (int c = 0; c < NCORE; c++) begin
      shuffle_lines(perm);
      for (int i = 0; i < NL; i++) plan[c].push_back(mk(1'b0, c, perm[i]));
    end
    wait_idle();
    $display("phase C done at cycle %0d: %0d reads, %0d responses", cycle, n_reads, n_resp);

    checks++;
    if (n_resp != n_reads) begin failures++; $display("FAIL %0d reads but %0d responses", n_reads, n_resp); end
    checks++;
    if (n_err != 0) failures++;
    checks++;
    if (u_dram0.violations + u_dram1.violations != 0) begin
      failures++; $display("FAIL DDR3 rule breaches: %0d", u_dram0.violations + u_dram1.violations);
    end
    $display("mechanisms:");
    expect_seen("read packets with >1 request", n_multi_rd);
    expect_seen("write packets", n_wr_pkt);
    expect_seen("read-return packets", n_ret_pkt);
    expect_seen("4-wide parallel decode batches", n_batch4);
    expect_seen("write-drain mode entries", n_drain);
    expect_seen("refresh commands", n_ref);
    expect_seen("column cmds on disjoint sub-ranks", n_par);
    expect_seen("out-of-order read returns", n_ooo);
    expect_seen("request back-pressure cycles", n_stall);
    expect_seen("fine-granularity requests", n_fine);
    expect_seen("full-line requests", n_full);
    expect_seen("request-id reuse (reads > 1024/bs)", (reads_bs[0] > 1024 && reads_bs[1] > 1024) ? 1 : 0);
    $display("DRAM commands ch0: ACT %0d RD %0d WR %0d REF %0d", u_dram0.n_act, u_dram0.n_rd, u_dram0.n_wr, u_dram0.n_ref);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // progress watchdog: reads outstanding but no response for 20000 clocks
  longint last_resp = 0;
  always @(posedge clk) begin
    for (int c = 0; c < NCORE; c++) if (core_resp_valid[c]) last_resp = cycle;
    if (rst_n && outstanding != 0 && cycle - last_resp > 20000) begin
      failures++;
      $display("FAIL no read response for 20000 clocks with %0d outstanding", outstanding);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
