// tb_rw_queue -- tests the read/write queue pair of one buffer scheduler
// port, with the write-drain water marks.
//
// A random producer pushes read and write messages; a consumer that behaves
// like the packet generator (looks at src_cnt/src_pt while idle, then holds
// busy while it pops up to 4 messages with random gaps) takes them out. The
// test keeps its own FIFOs and its own copy of the drain rule (drain starts
// above WQ_HI, stops below WQ_LO) and checks: every popped message is the
// oldest of its type, the type chosen while idle is write when draining or
// when only writes wait and read otherwise, the type stays fixed while busy,
// full flags and counts match, and drain mode is entered and left.
module tb_rw_queue;
  import mims_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0;

  logic       rd_push, wr_push, rd_full, wr_full, gen_busy, src_pop, drain;
  msg_t       rd_in, wr_in, src_head;
  logic [7:0] src_cnt, rd_count, wr_count;
  pkt_type_e  src_pt;

  rw_queue dut (.clk, .rst_n, .rd_push, .rd_in, .rd_full, .wr_push, .wr_in, .wr_full,
                .gen_busy, .src_pop, .src_cnt, .src_pt, .src_head, .drain, .rd_count, .wr_count);

  msg_t rq [$], wq [$];
  bit   m_drain = 0;
  int   n_drain_on = 0, n_drain_off = 0, n_rpop = 0, n_wpop = 0;
  int   wr_pct = 70, pop_pct = 30;
  bit   push_on = 1;
  bit   rfull, wfull;

  // consumer (packet generator stand-in)
  int        left = 0;
  pkt_type_e pt_q;
  initial begin gen_busy = 0; src_pop = 0; end

  function automatic msg_t rnd();
    msg_t m;
    m = '0;
    m.addr = {$urandom, $urandom};
    m.gy = GY_W'(1 + $urandom % 8);
    m.rid = 10'($urandom);
    m.data[63:0] = {$urandom, $urandom};
    return m;
  endfunction

  always @(posedge clk) if (rst_n) begin
    bit d0;
    d0 = m_drain;
    // type choice while idle
    if (!gen_busy && src_cnt != 0) begin
      pkt_type_e ept;
      ept = (d0 || rq.size() == 0) ? PT_WRITE : PT_READ;
      checks++;
      if (src_pt != ept) begin failures++; $display("FAIL type %0d exp %0d (drain %0d)", src_pt, ept, d0); end
    end
    checks++;
    if (rd_count != 8'(rq.size()) || wr_count != 8'(wq.size()) || drain != d0 ||
        rd_full != (rq.size() == 64) || wr_full != (wq.size() == 64)) begin
      failures++; $display("FAIL counts %0d/%0d exp %0d/%0d drain %0d exp %0d",
                           rd_count, wr_count, rq.size(), wq.size(), drain, d0);
    end
    // drain rule on the count before this clock's update
    if (wq.size() > 48 && !m_drain) begin m_drain = 1; n_drain_on++; end
    else if (wq.size() < 16 && m_drain) begin m_drain = 0; n_drain_off++; end
    rfull = (rq.size() == 64); wfull = (wq.size() == 64);
    // check the pop of this clock
    if (src_pop) begin
      msg_t e;
      checks++;
      if (src_pt != pt_q) begin failures++; $display("FAIL type changed while busy"); end
      if (src_pt == PT_WRITE) begin e = wq.pop_front(); n_wpop++; end
      else                    begin e = rq.pop_front(); n_rpop++; end
      if (e != src_head) begin failures++; $display("FAIL popped %h exp %h", src_head.addr, e.addr); end
    end
    if (rd_push && !rfull) rq.push_back(rd_in);
    if (wr_push && !wfull) wq.push_back(wr_in);

    // next stimulus
    rd_push <= push_on && ($urandom % 100) >= wr_pct && ($urandom % 2 == 0);
    wr_push <= push_on && ($urandom % 100) <  wr_pct;
    rd_in   <= rnd();
    wr_in   <= rnd();
    src_pop <= 1'b0;
    if (!gen_busy) begin
      if (src_cnt != 0 && ($urandom % 100) < pop_pct) begin
        gen_busy <= 1'b1;
        pt_q     <= src_pt;
        left     <= (src_cnt > 4) ? 4 : int'(src_cnt);
      end
    end else if (left == 0) gen_busy <= 1'b0;
    else if ($urandom % 2 == 0 && !src_pop) begin src_pop <= 1'b1; left <= left - 1; end
  end

  initial begin
    rd_push = 0; wr_push = 0; rd_in = '0; wr_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3000) @(posedge clk);
    wr_pct = 20; pop_pct = 90;
    repeat (2000) @(posedge clk);
    push_on = 0;
    repeat (1500) @(posedge clk);
    checks++; if (n_drain_on == 0 || n_drain_off == 0) begin failures++; $display("FAIL drain on %0d off %0d", n_drain_on, n_drain_off); end
    checks++; if (rq.size() != 0 || wq.size() != 0) begin failures++; $display("FAIL not emptied"); end
    $display("read pops %0d, write pops %0d, drain periods %0d", n_rpop, n_wpop, n_drain_on);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
