// tb_data_buf -- tests the Data Buf of the memory controller: request-id
// allocation and the turning of read-return messages into core responses.
//
// Reads with a random core id, address and granularity take ids while
// alloc_ok is high; the test keeps a table of the ids in flight and returns
// them in random order with random data. Checked: an id is never given out
// twice while in flight, all 1024 ids can be in flight at once (alloc_ok then
// low), freed ids are reused, each response carries the core id, address,
// granularity of its read and the returned data, the outstanding count, and
// one return with a wrong granularity raises err_gy once.
module tb_data_buf;
  import mims_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0;

  logic              alloc_ok, alloc, ret_valid, ret_ready, resp_valid, resp_ready, err_gy;
  logic [RID_W-1:0]  alloc_rid;
  logic [TID_W-1:0]  alloc_tid, resp_tid;
  logic [ADDR_W-1:0] alloc_addr;
  logic [GY_W-1:0]   alloc_gy;
  msg_t              ret_msg;
  core_resp_t        resp;
  logic [RID_W:0]    outstanding;

  data_buf dut (.clk, .rst_n, .alloc_ok, .alloc_rid, .alloc, .alloc_tid, .alloc_addr, .alloc_gy,
                .ret_valid, .ret_msg, .ret_ready, .resp_valid, .resp_tid, .resp, .resp_ready,
                .outstanding, .err_gy);

  typedef struct { logic [TID_W-1:0] tid; logic [ADDR_W-1:0] addr; logic [GY_W-1:0] gy; } ent_t;
  ent_t inflight [int];
  int   ids [$];
  typedef struct { logic [TID_W-1:0] tid; core_resp_t r; bit bad; } exp_t;
  exp_t exp_q [$];
  int   alloc_pct = 80, ret_pct = 40, n_alloc = 0, n_ret = 0, n_exhaust = 0, n_err = 0;
  bit   bad_next = 0, bad_sent = 0;

  always @(posedge clk) if (rst_n) begin
    // allocation of this clock
    if (alloc && alloc_ok) begin
      checks++;
      if (inflight.exists(int'(alloc_rid))) begin failures++; $display("FAIL id %0d given twice", alloc_rid); end
      inflight[int'(alloc_rid)] = '{alloc_tid, alloc_addr, alloc_gy};
      ids.push_back(int'(alloc_rid));
      n_alloc++;
    end
    if (!alloc_ok) begin
      n_exhaust++;
      checks++;
      if (inflight.num() != 1024) begin failures++; $display("FAIL alloc_ok low with %0d in flight", inflight.num()); end
    end
    // return of this clock
    if (ret_valid && ret_ready) begin
      ent_t e;
      e = inflight[int'(ret_msg.rid)];
      exp_q.push_back('{e.tid, '{addr: e.addr, gy: e.gy, data: ret_msg.data}, ret_msg.gy != e.gy});
      inflight.delete(int'(ret_msg.rid));
      n_ret++;
    end
    // response of this clock
    if (resp_valid && resp_ready) begin
      exp_t x;
      checks++;
      x = exp_q.pop_front();
      if (resp_tid != x.tid || resp != x.r) begin
        failures++; $display("FAIL response tid %0d addr %h exp tid %0d addr %h", resp_tid, resp.addr, x.tid, x.r.addr);
      end
    end
    if (err_gy) n_err++;
    // next stimulus
    alloc      <= ($urandom % 100) < alloc_pct;
    alloc_tid  <= 4'($urandom);
    alloc_addr <= {$urandom, $urandom};
    alloc_gy   <= GY_W'(1 + $urandom % 8);
    resp_ready <= ($urandom % 4) != 0;
    if (!(ret_valid && !ret_ready)) begin
      ret_valid <= 1'b0;
      if (ids.size() != 0 && ($urandom % 100) < ret_pct) begin
        int k, id;
        msg_t m;
        k  = $urandom % ids.size();
        id = ids[k];
        ids.delete(k);
        m = '0;
        m.rid  = RID_W'(id);
        m.gy   = inflight[id].gy ^ GY_W'(bad_next);
        m.data = {16{$urandom}};
        if (bad_next) begin bad_next = 0; bad_sent = 1; end
        ret_valid <= 1'b1;
        ret_msg   <= m;
      end
    end
  end

  // the outstanding count lags the bookkeeping by one clock
  always @(posedge clk) if (rst_n) begin
    checks++;
    if (int'(outstanding) != inflight.num()) begin
      failures++; $display("FAIL outstanding %0d exp %0d", outstanding, inflight.num());
    end
  end

  initial begin
    alloc = 0; ret_valid = 0; ret_msg = '0; resp_ready = 1;
    alloc_tid = '0; alloc_addr = '0; alloc_gy = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    ret_pct = 0;                       // fill all ids
    repeat (1400) @(posedge clk);
    ret_pct = 60; alloc_pct = 50;
    repeat (3000) @(posedge clk);
    bad_next = 1;
    repeat (2000) @(posedge clk);
    alloc_pct = 0; ret_pct = 100;
    repeat (3000) @(posedge clk);
    checks++; if (n_exhaust == 0) begin failures++; $display("FAIL ids never exhausted"); end
    checks++; if (n_alloc <= 1024) begin failures++; $display("FAIL ids never reused"); end
    checks++; if (n_err != 1 || !bad_sent) begin failures++; $display("FAIL err_gy pulses %0d", n_err); end
    checks++; if (exp_q.size() != 0 || outstanding != 0) begin failures++; $display("FAIL responses left %0d", exp_q.size()); end
    $display("allocations %0d, returns %0d", n_alloc, n_ret);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
