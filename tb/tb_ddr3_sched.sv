// tb_ddr3_sched -- tests the DDR3 scheduler of a buffer scheduler against the
// behavioural sub-ranked DDR3 channel model.
//
// Phase 1 writes 96 whole 64-byte lines (4-wide batches, as the packet
// decoder delivers them). Phase 2 reads random parts (offset and granularity
// 1..8 words within a line) of those lines and of lines never written; phase
// 3 mixes reads of phase-1 lines with writes of other lines. Read data is
// checked against the test's own copy of what was written, or the model's
// fixed content for lines never written; the request id, address and
// granularity of each returned message are checked too. The model checks
// every DDR3 timing rule; the test fails on any breach, and on a run without
// ACT, RD, WR or REF, or without read returns out of arrival order (FR-FCFS
// reordering), or without a narrow read (one that selects fewer than all 8
// sub-ranks). The return side stalls at random.
module tb_ddr3_sched;
  import mims_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0;

  logic [3:0]      in_valid;
  pkt_type_e       in_pt;
  msg_t            in_msg [4];
  logic            in_ready, ret_valid, ret_ready;
  msg_t            ret_msg;
  ddr_cmd_t        ddr_cmd;
  logic [DQ_W-1:0] dq_wdata, dq_rdata;
  logic [NSUB-1:0] dq_wen;
  logic [7:0]      occupancy;

  ddr3_sched dut (.clk, .rst_n, .in_valid, .in_pt, .in_msg, .in_ready, .ret_valid, .ret_msg,
                  .ret_ready, .ddr_cmd, .dq_wdata, .dq_wen, .dq_rdata, .occupancy);
  ddr3_dram_model u_dram (.clk, .rst_n, .cmd(ddr_cmd), .dq_wdata, .dq_wen, .dq_rdata);

  logic [WORD_W-1:0] shadow [logic [ADDR_W-1:0]];   // word address -> value
  msg_t              rd_wait [int];                  // rid -> read in flight
  int                next_rid = 0, n_ret = 0, n_ooo = 0, n_narrow = 0, last_rid = -1;
  logic [ADDR_W-1:0] lines_a [$], lines_b [$];

  // model content of a word never written (same layout as the scheduler's map)
  function automatic logic [WORD_W-1:0] word_of(input logic [ADDR_W-1:0] wa);
    logic [35:0] k;
    if (shadow.exists(wa)) return shadow[wa];
    k = {wa[7], wa[5:3], wa[10:8], wa[32:18], wa[17:11], 7'd0};
    return u_dram.init_word(k);
  endfunction

  function automatic logic [ADDR_W-1:0] rnd_line();
    return ADDR_W'({$urandom} & 32'hFFFF_FFC0) | (ADDR_W'($urandom % 2) << 32);
  endfunction

  task automatic issue(input pkt_type_e pt, input msg_t ms [$]);
    int i;
    i = 0;
    while (i < ms.size()) begin
      in_pt = pt;
      for (int j = 0; j < 4; j++) begin
        in_valid[j] = (i + j < ms.size());
        in_msg[j]   = (i + j < ms.size()) ? ms[i + j] : '0;
      end
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      i += 4;
      in_valid = '0;
    end
  endtask

  function automatic msg_t mk_write(input logic [ADDR_W-1:0] line);
    msg_t m;
    m = '0; m.addr = line; m.gy = 4'd8; m.rid = RID_W'(next_rid++);
    for (int k = 0; k < 8; k++) begin
      m.data[k*64 +: 64] = {$urandom, $urandom};
      shadow[line + ADDR_W'(8*k)] = m.data[k*64 +: 64];
    end
    return m;
  endfunction

  function automatic msg_t mk_read(input logic [ADDR_W-1:0] line);
    msg_t m;
    int off, g;
    off = $urandom % 8;
    g   = 1 + $urandom % (8 - off);
    m = '0; m.addr = line + ADDR_W'(8*off); m.gy = GY_W'(g); m.rid = RID_W'(next_rid % 1024);
    m.tid = 4'($urandom); m.to = 8'($urandom);
    next_rid++;
    return m;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (in_pt == PT_READ && in_ready)
      for (int j = 0; j < 4; j++) if (in_valid[j]) rd_wait[int'(in_msg[j].rid)] = in_msg[j];
    if (ret_valid && ret_ready) begin
      msg_t e;
      checks++;
      n_ret++;
      if (!rd_wait.exists(int'(ret_msg.rid))) begin failures++; $display("FAIL unknown rid %0d", ret_msg.rid); end
      else begin
        e = rd_wait[int'(ret_msg.rid)];
        rd_wait.delete(int'(ret_msg.rid));
        if (int'(ret_msg.rid) < last_rid) n_ooo++;
        last_rid = int'(ret_msg.rid);
        if (ret_msg.addr != e.addr || ret_msg.gy != e.gy || ret_msg.tid != e.tid) begin
          failures++; $display("FAIL rid %0d returned addr %h gy %0d", ret_msg.rid, ret_msg.addr, ret_msg.gy);
        end
        for (int k = 0; k < int'(e.gy); k++) begin
          logic [WORD_W-1:0] w;
          w = word_of(e.addr + ADDR_W'(8*k));
          checks++;
          if (ret_msg.data[k*64 +: 64] != w) begin
            failures++; $display("FAIL rid %0d word %0d got %h exp %h", ret_msg.rid, k, ret_msg.data[k*64 +: 64], w);
          end
        end
      end
    end
    if (ddr_cmd.op == DDR_RD && ddr_cmd.sub_mask != 8'hFF) n_narrow++;
    ret_ready <= ($urandom % 4) != 0;
  end

  initial begin
    msg_t ms [$];
    in_valid = '0; in_pt = PT_READ; ret_ready = 1'b1;
    for (int j = 0; j < 4; j++) in_msg[j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // phase 1: whole-line writes
    for (int i = 0; i < 96; i++) lines_a.push_back(rnd_line());
    foreach (lines_a[i]) ms.push_back(mk_write(lines_a[i]));
    issue(PT_WRITE, ms);
    while (occupancy != 0) @(posedge clk);
    // phase 2: partial reads of written and unwritten lines
    ms.delete();
    for (int i = 0; i < 160; i++) ms.push_back(mk_read((i % 3 == 2) ? rnd_line() : lines_a[$urandom % 96]));
    issue(PT_READ, ms);
    // phase 3: reads of phase-1 lines mixed with writes of other lines
    for (int r = 0; r < 30; r++) begin
      ms.delete();
      for (int i = 0; i < 8; i++) ms.push_back(mk_read(lines_a[$urandom % 96]));
      issue(PT_READ, ms);
      ms.delete();
      for (int i = 0; i < 4; i++) begin
        logic [ADDR_W-1:0] l;
        l = rnd_line();
        while (shadow.exists(l)) l = rnd_line();
        lines_b.push_back(l);
        ms.push_back(mk_write(l));
      end
      issue(PT_WRITE, ms);
    end
    while (occupancy != 0 || rd_wait.num() != 0) @(posedge clk);
    // read back the phase-3 lines, then idle long enough to see refresh
    ms.delete();
    foreach (lines_b[i]) ms.push_back(mk_read(lines_b[i]));
    issue(PT_READ, ms);
    repeat (6000) @(posedge clk);
    checks++; if (rd_wait.num() != 0) begin failures++; $display("FAIL %0d reads never returned", rd_wait.num()); end
    checks++; if (u_dram.violations != 0) begin failures++; $display("FAIL %0d DRAM rule breaches", u_dram.violations); end
    checks++; if (u_dram.n_act == 0 || u_dram.n_rd == 0 || u_dram.n_wr == 0 || u_dram.n_ref == 0) begin
      failures++; $display("FAIL command missing act %0d rd %0d wr %0d ref %0d", u_dram.n_act, u_dram.n_rd, u_dram.n_wr, u_dram.n_ref);
    end
    checks++; if (n_ooo == 0) begin failures++; $display("FAIL no reordering seen"); end
    checks++; if (n_narrow == 0) begin failures++; $display("FAIL no narrow read"); end
    $display("returns %0d, out of order %0d, narrow reads %0d, ACT %0d RD %0d WR %0d REF %0d",
             n_ret, n_ooo, n_narrow, u_dram.n_act, u_dram.n_rd, u_dram.n_wr, u_dram.n_ref);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
