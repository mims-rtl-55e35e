// tb_buffer_sched -- tests one buffer scheduler (link receiver, packet
// decoder, DDR3 scheduler, return buffer, packet generator, link
// transmitter) from its link bus, with a behavioural DDR3 channel model.
//
// The controller side is built in the test from the same link and packet
// blocks: a packet generator and link transmitter send write and read
// packets down; a link receiver and a packet decoder (accepting read-return
// packets) take the answers. Phase 1 writes 128 whole lines, phase 2 reads
// random parts of them and of lines never written, phase 3 mixes both, and
// one read packet is sent with another scheduler's id (it must be dropped
// with a destination error and nothing else). Checked: every read returns
// once with the right data (test copy or the model's fixed content), no
// other link or decoder error on either side, no DDR3 timing breach; seen at
// least once: read-return packets with several messages, full 4-wide
// read decode batches inside the scheduler, refresh.
module tb_buffer_sched;
  import mims_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0;

  // ---- controller side: down link ----
  flit_if g2t (.clk(clk), .rst_n(rst_n));
  logic [DBSID_W-1:0] dbsid;
  logic [7:0] src_cnt;
  pkt_type_e  src_pt;
  msg_t       src_head;
  logic       src_pop, gbusy, gstart;
  link_flit_t dn, up;
  logic       dn_ready, up_ready;
  pkt_gen u_gen (.clk, .rst_n, .dbsid, .src_cnt, .src_pt, .src_head, .src_pop, .busy(gbusy),
                 .pkt_start(gstart), .out(g2t));
  link_tx u_tx (.clk, .rst_n, .in(g2t), .tx(dn), .tx_ready(dn_ready));

  // ---- device under test ----
  ddr_cmd_t        ddr_cmd;
  logic [DQ_W-1:0] dq_wdata, dq_rdata;
  logic [NSUB-1:0] dq_wen;
  logic [5:0]      err;
  logic [7:0]      occupancy;
  buffer_sched #(.BS_ID(1)) dut (.clk, .rst_n, .dn_rx(dn), .dn_rx_ready(dn_ready), .up_tx(up),
    .up_tx_ready(up_ready), .ddr_cmd, .dq_wdata, .dq_wen, .dq_rdata, .err, .occupancy);
  ddr3_dram_model u_dram (.clk, .rst_n, .cmd(ddr_cmd), .dq_wdata, .dq_wen, .dq_rdata);

  // ---- controller side: up link ----
  flit_if r2d (.clk(clk), .rst_n(rst_n));
  logic       e_seq, e_crc, e_frame, e_dest, e_type, e_len;
  logic [3:0] rv;
  pkt_type_e  rpt;
  msg_t       rmsg [4];
  link_rx u_rx (.clk, .rst_n, .rx(up), .rx_ready(up_ready), .out(r2d),
                .err_seq(e_seq), .err_crc(e_crc), .err_frame(e_frame));
  pkt_dec #(.ACCEPT_MASK(4'b0100)) u_dec (.clk, .rst_n, .my_id(4'd1), .in(r2d), .out_valid(rv),
    .out_pt(rpt), .out_msg(rmsg), .out_ready(1'b1), .err_dest(e_dest), .err_type(e_type), .err_len(e_len));

  // ---- message source for the generator ----
  msg_t q [$];
  initial begin src_cnt = '0; src_head = '0; end
  always @(posedge clk) begin
    if (rst_n && src_pop) void'(q.pop_front());
    src_cnt  <= 8'(q.size());
    src_head <= (q.size() != 0) ? q[0] : '0;
  end

  logic [WORD_W-1:0] shadow [logic [ADDR_W-1:0]];
  msg_t              rd_wait [int];
  int                next_rid = 0, n_ret = 0, n_dest = 0, n_multi = 0, n_b4 = 0, n_ref = 0;
  logic [ADDR_W-1:0] lines_a [$];

  function automatic logic [WORD_W-1:0] word_of(input logic [ADDR_W-1:0] wa);
    if (shadow.exists(wa)) return shadow[wa];
    return u_dram.init_word({wa[7], wa[5:3], wa[10:8], wa[32:18], wa[17:11], 7'd0});
  endfunction
  function automatic logic [ADDR_W-1:0] rnd_line();
    return ADDR_W'({$urandom} & 32'hFFFF_FFC0) | (ADDR_W'($urandom % 2) << 32);
  endfunction
  function automatic msg_t mk_write(input logic [ADDR_W-1:0] line);
    msg_t m;
    m = '0; m.addr = line; m.gy = 4'd8;
    for (int k = 0; k < 8; k++) begin
      m.data[k*64 +: 64] = {$urandom, $urandom};
      shadow[line + ADDR_W'(8*k)] = m.data[k*64 +: 64];
    end
    return m;
  endfunction
  function automatic msg_t mk_read(input logic [ADDR_W-1:0] line);
    msg_t m;
    int off, g;
    off = $urandom % 8; g = 1 + $urandom % (8 - off);
    m = '0; m.addr = line + ADDR_W'(8*off); m.gy = GY_W'(g); m.tid = 4'($urandom);
    m.rid = RID_W'(next_rid % 1024);
    next_rid++;
    return m;
  endfunction

  // send one packet's worth of messages of one type and wait until it left
  task automatic send(input pkt_type_e pt, input msg_t ms [$], input logic [3:0] id = 4'd1);
    while (gbusy || q.size() != 0) @(posedge clk);
    @(posedge clk);
    src_pt = pt; dbsid = id;
    if (pt == PT_READ && id == 4'd1) foreach (ms[i]) rd_wait[int'(ms[i].rid)] = ms[i];
    foreach (ms[i]) q.push_back(ms[i]);
    while (gbusy || q.size() != 0) @(posedge clk);
  endtask

  always @(posedge clk) if (rst_n) begin
    if (dut.dec_valid == 4'hF && dut.dec_ready) n_b4++;
    for (int j = 0; j < 4; j++) if (rv[j]) begin
      msg_t e;
      checks++;
      n_ret++;
      if (rpt != PT_RRET || !rd_wait.exists(int'(rmsg[j].rid))) begin
        failures++; $display("FAIL unexpected message pt %0d rid %0d", rpt, rmsg[j].rid);
      end else begin
        e = rd_wait[int'(rmsg[j].rid)];
        rd_wait.delete(int'(rmsg[j].rid));
        if (rmsg[j].gy != e.gy) begin failures++; $display("FAIL rid %0d gy %0d exp %0d", rmsg[j].rid, rmsg[j].gy, e.gy); end
        for (int k = 0; k < int'(e.gy); k++) begin
          checks++;
          if (rmsg[j].data[k*64 +: 64] != word_of(e.addr + ADDR_W'(8*k))) begin
            failures++; $display("FAIL rid %0d word %0d", rmsg[j].rid, k);
          end
        end
      end
    end
    if (dut.u_gen.pkt_start && dut.u_gen.n_q > 1) n_multi++;
    if (ddr_cmd.op == DDR_REF) n_ref++;
    if (err[2]) n_dest++;
    if ((err & 6'b111011) != 0 || e_seq || e_crc || e_frame || e_dest || e_type || e_len) begin
      failures++; $display("FAIL error pulse bs %b ctl %b", err, {e_seq, e_crc, e_frame, e_dest, e_type, e_len});
    end
  end

  initial begin
    msg_t ms [$];
    dbsid = 4'd1; src_pt = PT_WRITE;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 128; i++) lines_a.push_back(rnd_line());
    for (int p = 0; p < 8; p++) begin
      ms.delete();
      for (int i = 0; i < 16; i++) ms.push_back(mk_write(lines_a[p*16 + i]));
      send(PT_WRITE, ms);
    end
    while (occupancy != 0) @(posedge clk);
    for (int p = 0; p < 8; p++) begin
      ms.delete();
      for (int i = 0; i < 1 + $urandom % 40; i++) ms.push_back(mk_read((i % 4 == 3) ? rnd_line() : lines_a[$urandom % 128]));
      send(PT_READ, ms);
    end
    ms.delete();
    for (int i = 0; i < 5; i++) ms.push_back(mk_read(lines_a[i]));
    send(PT_READ, ms, 4'd0);     // another scheduler's packet
    for (int p = 0; p < 10; p++) begin
      ms.delete();
      for (int i = 0; i < 12; i++) ms.push_back(mk_read(lines_a[$urandom % 64]));
      send(PT_READ, ms);
      ms.delete();
      for (int i = 0; i < 4; i++) begin
        logic [ADDR_W-1:0] l;
        l = rnd_line();
        while (shadow.exists(l)) l = rnd_line();
        ms.push_back(mk_write(l));
      end
      send(PT_WRITE, ms);
    end
    repeat (6000) @(posedge clk);
    checks++; if (rd_wait.num() != 0) begin failures++; $display("FAIL %0d reads never returned", rd_wait.num()); end
    checks++; if (u_dram.violations != 0) begin failures++; $display("FAIL %0d DRAM rule breaches", u_dram.violations); end
    checks++; if (n_dest != 1) begin failures++; $display("FAIL destination errors %0d, expected 1", n_dest); end
    checks++; if (n_multi == 0) begin failures++; $display("FAIL no multi-message read-return packet"); end
    checks++; if (n_b4 == 0) begin failures++; $display("FAIL no 4-wide read decode batch"); end
    checks++; if (n_ref == 0) begin failures++; $display("FAIL no refresh"); end
    $display("returns %0d, multi-message return packets %0d, refreshes %0d", n_ret, n_multi, n_ref);
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
