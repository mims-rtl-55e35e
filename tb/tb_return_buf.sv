// tb_return_buf -- tests the return buffer of a buffer scheduler: a FIFO of
// finished read messages waiting for the packet generator.
//
// Random pushes and pops (pops only while the buffer holds messages, as the
// generator does) are checked against a reference queue: order and content of
// the head, count, full flag, push ignored while full, and the packet type,
// which is always read-return. The buffer must be seen full and empty.
module tb_return_buf;
  import mims_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0;

  logic       push, full, pop;
  msg_t       din, head;
  logic [7:0] count;
  pkt_type_e  pt;

  return_buf dut (.clk, .rst_n, .push, .din, .full, .pop, .count, .pt, .head);

  msg_t ref_q [$];
  int   push_pct = 60, n_full = 0, n_pop = 0;

  always @(posedge clk) if (rst_n) begin
    bit f0;
    checks++;
    if (count != 8'(ref_q.size()) || full != (ref_q.size() == 16) || pt != PT_RRET) begin
      failures++; $display("FAIL count %0d exp %0d full %0d pt %0d", count, ref_q.size(), full, pt);
    end
    if (ref_q.size() != 0) begin
      checks++;
      if (head != ref_q[0]) begin failures++; $display("FAIL head rid %0d exp %0d", head.rid, ref_q[0].rid); end
    end
    if (full) n_full++;
    f0 = (ref_q.size() == 16);
    if (pop && ref_q.size() != 0) begin void'(ref_q.pop_front()); n_pop++; end
    if (push && !f0) ref_q.push_back(din);
    push <= ($urandom % 100) < push_pct;
    din  <= '{addr: {$urandom, $urandom}, gy: GY_W'($urandom), to: 8'($urandom), tid: 4'($urandom),
              rid: 10'($urandom), data: {16{$urandom}}};
    pop  <= (count != 0 || push) && ($urandom % 100) < (100 - push_pct);
  end

  initial begin
    push = 0; pop = 0; din = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (1000) @(posedge clk);
    push_pct = 85;
    repeat (1000) @(posedge clk);
    push_pct = 20;
    repeat (1000) @(posedge clk);
    push_pct = 0;
    repeat (100) @(posedge clk);
    checks++; if (n_full == 0) begin failures++; $display("FAIL never full"); end
    checks++; if (count != 0)  begin failures++; $display("FAIL not empty at the end"); end
    $display("pops %0d, clocks full %0d", n_pop, n_full);
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
