// tb_mc_crossbar -- tests the crossbar of the memory controller between 16
// cores and 2 buffer-scheduler ports.
//
// Every core issues random requests and holds each one until it is taken.
// The scheduler side takes requests with a random ready and answers each
// with a response tagged with the core id it was given, after a random
// delay. Checked: a request reaches the port its address selects (bit 6, the
// 64-byte line interleave), unchanged and tagged with its core; each core's
// requests leave in order; every response reaches exactly the core it is
// tagged for, unchanged; no core starves while others are served.
module tb_mc_crossbar;
  import mims_pkg::*;
  localparam int NC = 16, NB = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0;

  logic       core_req_valid [NC], core_req_ready [NC], core_resp_valid [NC];
  core_req_t  core_req [NC];
  core_resp_t core_resp [NC];
  logic       bs_req_valid [NB], bs_req_ready [NB], bs_resp_valid [NB], bs_resp_ready [NB];
  core_req_t  bs_req [NB];
  core_resp_t bs_resp [NB];
  logic [TID_W-1:0] bs_req_tid [NB], bs_resp_tid [NB];

  mc_crossbar dut (.clk, .rst_n, .core_req_valid, .core_req, .core_req_ready,
                   .bs_req_valid, .bs_req, .bs_req_tid, .bs_req_ready,
                   .bs_resp_valid, .bs_resp_tid, .bs_resp, .bs_resp_ready,
                   .core_resp_valid, .core_resp);

  core_req_t  sent_q [NC][$];     // requests of each core, in issue order
  core_resp_t exp_rsp [NC][$];    // responses each core must get
  typedef struct { int tid; core_resp_t r; int due; } pend_t;
  pend_t      pend [NB][$];
  int         served [NC];
  int         cyc = 0, run = 1;

  function automatic core_req_t rnd_req();
    core_req_t q;
    q.we = 1'($urandom); q.addr = {$urandom, $urandom}; q.gy = GY_W'(1 + $urandom % 8);
    q.to = 8'($urandom); q.wdata = {16{$urandom}};
    return q;
  endfunction

  always @(posedge clk) if (rst_n) begin
    cyc++;
    // requests taken this clock
    for (int b = 0; b < NB; b++) if (bs_req_valid[b] && bs_req_ready[b]) begin
      int c;
      core_req_t e;
      c = int'(bs_req_tid[b]);
      checks++;
      if (int'(bs_req[b].addr[6]) != b) begin failures++; $display("FAIL port %0d got address %h", b, bs_req[b].addr); end
      if (sent_q[c].size() == 0) begin failures++; $display("FAIL request of idle core %0d", c); end
      else begin
        e = sent_q[c].pop_front();
        if (e != bs_req[b]) begin failures++; $display("FAIL core %0d request changed", c); end
        if (!core_req_ready[c]) begin failures++; $display("FAIL core %0d not told", c); end
      end
      served[c]++;
      pend[b].push_back('{c, '{addr: bs_req[b].addr, gy: bs_req[b].gy, data: {16{$urandom}}}, cyc + 1 + $urandom % 20});
    end
    // responses delivered this clock
    for (int b = 0; b < NB; b++) if (bs_resp_valid[b] && bs_resp_ready[b]) begin
      void'(pend[b].pop_front());
      exp_rsp[int'(bs_resp_tid[b])].push_back(bs_resp[b]);
    end
    for (int c = 0; c < NC; c++) if (core_resp_valid[c]) begin
      checks++;
      if (exp_rsp[c].size() == 0) begin failures++; $display("FAIL core %0d unexpected response", c); end
      else if (exp_rsp[c].pop_front() != core_resp[c]) begin failures++; $display("FAIL core %0d wrong response", c); end
    end
    // next stimulus: cores
    for (int c = 0; c < NC; c++)
      if (!(core_req_valid[c] && !core_req_ready[c])) begin
        core_req_valid[c] <= 1'b0;
        if (run && $urandom % 3 == 0) begin
          core_req_t q;
          q = rnd_req();
          core_req_valid[c] <= 1'b1;
          core_req[c]       <= q;
          sent_q[c].push_back(q);
        end
      end
    // scheduler side
    for (int b = 0; b < NB; b++) begin
      bs_req_ready[b] <= ($urandom % 3) != 0;
      if (!(bs_resp_valid[b] && !bs_resp_ready[b])) begin
        bs_resp_valid[b] <= 1'b0;
        if (pend[b].size() != 0 && pend[b][0].due <= cyc) begin
          bs_resp_valid[b] <= 1'b1;
          bs_resp_tid[b]   <= TID_W'(pend[b][0].tid);
          bs_resp[b]       <= pend[b][0].r;
        end
      end
    end
  end

  // a response handed to the crossbar must appear at its core in the same clock
  always @(posedge clk) if (rst_n)
    for (int b = 0; b < NB; b++) if (bs_resp_valid[b] && bs_resp_ready[b]) begin
      checks++;
      if (!core_resp_valid[int'(bs_resp_tid[b])] || core_resp[int'(bs_resp_tid[b])] != bs_resp[b]) begin
        failures++; $display("FAIL response of port %0d not at core %0d", b, bs_resp_tid[b]);
      end
    end

  initial begin
    for (int c = 0; c < NC; c++) begin core_req_valid[c] = 0; core_req[c] = '0; served[c] = 0; end
    for (int b = 0; b < NB; b++) begin bs_req_ready[b] = 0; bs_resp_valid[b] = 0; bs_resp_tid[b] = '0; bs_resp[b] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (4000) @(posedge clk);
    run = 0;
    repeat (300) @(posedge clk);
    for (int c = 0; c < NC; c++) begin
      checks++;
      if (served[c] < 100) begin failures++; $display("FAIL core %0d served only %0d times", c, served[c]); end
      if (sent_q[c].size() != 0 || exp_rsp[c].size() != 0) begin failures++; $display("FAIL core %0d left over", c); end
    end
    for (int b = 0; b < NB; b++) begin
      checks++; if (pend[b].size() != 0) begin failures++; $display("FAIL port %0d responses left", b); end
    end
    $display("requests served per core: %0d .. %0d", served[0], served[NC-1]);
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
