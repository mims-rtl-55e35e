// tb_pkt_codec -- tests the packet generator and the packet decoder
// back to back. A flit-level gate between them stalls the stream at random.
//
// Read, write and read-return messages are queued in the test; the generator
// (MAX_REQ = 6) must split them into packets of at most 6. Every flit on the
// wire is compared with a flit stream the test builds itself from the packet
// layout (head, 5-flit RTMSG, 1-flit read-return message, GY*4 data flits).
// Every message the decoder emits is compared with the one sent. Also
// checked: read packets come out in full batches of 4, a packet addressed
// to another buffer scheduler is dropped with an err_dest pulse.
module tb_pkt_codec;
  import mims_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0;

  flit_if f1 (.clk(clk), .rst_n(rst_n));
  flit_if f2 (.clk(clk), .rst_n(rst_n));

  logic [DBSID_W-1:0] dbsid;
  logic [7:0] src_cnt;
  pkt_type_e  src_pt;
  msg_t       src_head;
  logic       src_pop, busy, pkt_start;

  pkt_gen #(.MAX_REQ(6)) u_gen (.clk, .rst_n, .dbsid, .src_cnt, .src_pt, .src_head, .src_pop,
                                .busy, .pkt_start, .out(f1));

  // random stall gate, which only changes while no flit is waiting
  logic go;
  always_ff @(posedge clk) if (!(f2.valid && !f2.ready)) go <= ($urandom % 4) != 0;
  assign f2.valid = f1.valid && go;
  assign f2.data  = f1.data;
  assign f2.last  = f1.last;
  assign f1.ready = f2.ready && go;

  logic [3:0] dv;
  pkt_type_e  dpt;
  msg_t       dmsg [4];
  logic       ed, et, el;
  pkt_dec #(.BATCH(4), .ACCEPT_MASK(4'b0111)) u_dec (
    .clk, .rst_n, .my_id(4'd3), .in(f2), .out_valid(dv), .out_pt(dpt), .out_msg(dmsg),
    .out_ready(1'b1), .err_dest(ed), .err_type(et), .err_len(el));

  msg_t       q [$];        // messages waiting in the source
  msg_t       sent [$];     // messages expected out of the decoder
  logic [15:0] exp_flits [$];
  logic       exp_last  [$];
  int unsigned n_batch4 = 0, n_dest = 0, n_out = 0;

  initial begin src_cnt = '0; src_head = '0; end
  always @(posedge clk) begin
    if (rst_n && src_pop) void'(q.pop_front());
    src_cnt  <= 8'(q.size());
    src_head <= (q.size() != 0) ? q[0] : '0;
  end

  function automatic msg_t rnd_msg(input pkt_type_e pt);
    msg_t m;
    int g;
    g = 1 + ($urandom % 8);
    m = '0;
    m.addr = {$urandom, $urandom};
    m.gy = GY_W'(g);
    if (pt != PT_RRET) begin m.to = 8'($urandom); m.tid = 4'($urandom); end
    m.rid = 10'($urandom);
    if (pt == PT_RRET) m.addr = '0;
    if (pt != PT_READ)
      for (int k = 0; k < g; k++) m.data[k*64 +: 64] = {$urandom, $urandom};
    return m;
  endfunction

  // Expected flits of one packet, built from the documented layout.
  task automatic expect_packet(input pkt_type_e pt, input logic [3:0] id, input msg_t ms [$]);
    exp_flits.push_back({id, 2'(pt), 7'(ms.size()), 3'b000}); exp_last.push_back(ms.size() == 0);
    foreach (ms[i]) begin
      logic [15:0] fl [$];
      if (pt == PT_RRET) fl.push_back({ms[i].rid, ms[i].gy, 2'b00});
      else begin
        logic [79:0] r;
        r = {ms[i].addr, ms[i].gy, ms[i].to, ms[i].tid, ms[i].rid, 6'b0};
        for (int k = 0; k < 5; k++) fl.push_back(r[79 - 16*k -: 16]);
      end
      if (pt != PT_READ)
        for (int k = 0; k < 4 * int'(ms[i].gy); k++) fl.push_back(ms[i].data[16*k +: 16]);
      foreach (fl[k]) begin
        exp_flits.push_back(fl[k]);
        exp_last.push_back(i == ms.size() - 1 && k == fl.size() - 1);
      end
    end
  endtask

  // wire monitor
  always @(posedge clk) if (rst_n && f1.valid && f1.ready) begin
    checks++;
    if (exp_flits.size() == 0) begin failures++; $display("FAIL unexpected flit %h", f1.data); end
    else begin
      logic [15:0] e; logic el_;
      e = exp_flits.pop_front(); el_ = exp_last.pop_front();
      if (e != f1.data || el_ != f1.last) begin
        failures++;
        $display("FAIL flit got %h/%0d exp %h/%0d", f1.data, f1.last, e, el_);
      end
    end
  end

  // decoder monitor
  always @(posedge clk) if (rst_n) begin
    if (ed) n_dest++;
    if (et || el) begin failures++; $display("FAIL decoder error type=%0d len=%0d", et, el); end
    if (dv == 4'hF) n_batch4++;
    for (int j = 0; j < 4; j++) if (dv[j]) begin
      msg_t e, g;
      n_out++;
      checks++;
      g = dmsg[j];
      if (sent.size() == 0) begin failures++; $display("FAIL extra message"); end
      else begin
        e = sent.pop_front();
        if (dpt == PT_READ) begin e.data = '0; g.data = '0; end
        if (dpt == PT_RRET) begin e.addr = '0; e.to = '0; e.tid = '0; end
        if (g != e) begin
          failures++;
          $display("FAIL message pt %0d lane %0d got addr %h gy %0d rid %0d exp addr %h gy %0d rid %0d",
                   dpt, j, g.addr, g.gy, g.rid, e.addr, e.gy, e.rid);
        end
      end
    end
  end

  task automatic run_type(input pkt_type_e pt, input int n, input logic [3:0] id);
    msg_t all [$];
    dbsid  = id;
    src_pt = pt;
    for (int i = 0; i < n; i++) all.push_back(rnd_msg(pt));
    for (int i = 0; i < n; i += 6) begin
      msg_t chunk [$];
      for (int k = i; k < n && k < i + 6; k++) chunk.push_back(all[k]);
      expect_packet(pt, id, chunk);
    end
    if (id == 4'd3) foreach (all[i]) sent.push_back(all[i]);
    foreach (all[i]) q.push_back(all[i]);
    while (q.size() != 0 || busy) @(posedge clk);
    repeat (30) @(posedge clk);
  endtask

  initial begin
    dbsid = 4'd3; src_pt = PT_READ;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_type(PT_READ, 14, 4'd3);
    run_type(PT_WRITE, 9, 4'd3);
    run_type(PT_RRET, 7, 4'd3);
    run_type(PT_READ, 4, 4'd9);    // wrong destination: dropped
    run_type(PT_READ, 8, 4'd3);
    checks++; if (exp_flits.size() != 0) begin failures++; $display("FAIL %0d flits never sent", exp_flits.size()); end
    checks++; if (sent.size() != 0)      begin failures++; $display("FAIL %0d messages never decoded", sent.size()); end
    checks++; if (n_batch4 == 0)         begin failures++; $display("FAIL no 4-wide batch"); end
    checks++; if (n_dest != 1)           begin failures++; $display("FAIL err_dest pulses %0d, expected 1", n_dest); end
    $display("messages decoded %0d, 4-wide batches %0d", n_out, n_batch4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
