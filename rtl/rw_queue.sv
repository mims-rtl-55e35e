// rw_queue -- the Read Queue and Write Queue the memory controller keeps for
// one buffer scheduler, with the write-drain policy that decides which queue
// the packet generator packs from.
//
// Reads are preferred. When the write queue holds more than WQ_HI entries the
// queue pair enters drain mode and offers writes until the write queue falls
// below WQ_LO (high/low water marks, as the paper describes). Outside drain
// mode writes are offered only when there is no read. The choice is frozen
// while the packet generator is busy (gen_busy) so one packet holds one type.
// Both queues are FIFOs built from register arrays with a combinational head.
// Depths 64/64 are the paper's; the water-mark values are this design's.
module rw_queue
  import mims_pkg::*;
#(
  parameter int RQ_DEPTH = 64,
  parameter int WQ_DEPTH = 64,
  parameter int WQ_HI    = 48,
  parameter int WQ_LO    = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  // push side
  input  logic       rd_push,
  input  msg_t       rd_in,
  output logic       rd_full,
  input  logic       wr_push,
  input  msg_t       wr_in,
  output logic       wr_full,
  // packet generator side
  input  logic       gen_busy,
  input  logic       src_pop,
  output logic [7:0] src_cnt,
  output pkt_type_e  src_pt,
  output msg_t       src_head,
  // status
  output logic       drain,
  output logic [7:0] rd_count,
  output logic [7:0] wr_count
);
  localparam int RA = $clog2(RQ_DEPTH);
  localparam int WA = $clog2(WQ_DEPTH);

  msg_t rq [RQ_DEPTH];
  msg_t wq [WQ_DEPTH];
  logic [RA-1:0] rq_rd, rq_wr;
  logic [WA-1:0] wq_rd, wq_wr;
  logic sel_w, sel_w_q;

  assign rd_full = (rd_count == 8'(RQ_DEPTH));
  assign wr_full = (wr_count == 8'(WQ_DEPTH));

  always_comb begin
    if (gen_busy) sel_w = sel_w_q;
    else          sel_w = drain || (rd_count == 0 && wr_count != 0);
    src_pt   = sel_w ? PT_WRITE : PT_READ;
    src_cnt  = sel_w ? wr_count : rd_count;
    src_head = sel_w ? wq[wq_rd] : rq[rq_rd];
  end

  logic rpop, wpop;
  assign rpop = src_pop && !sel_w;
  assign wpop = src_pop &&  sel_w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rq_rd <= '0; rq_wr <= '0; wq_rd <= '0; wq_wr <= '0;
      rd_count <= '0; wr_count <= '0;
      drain <= 1'b0; sel_w_q <= 1'b0;
    end else begin
      sel_w_q <= sel_w;
      if (rd_push && !rd_full) begin
        rq[rq_wr] <= rd_in;
        rq_wr <= RA'((int'(rq_wr) + 1) % RQ_DEPTH);
      end
      if (rpop) rq_rd <= RA'((int'(rq_rd) + 1) % RQ_DEPTH);
      rd_count <= rd_count + 8'(rd_push && !rd_full) - 8'(rpop);
      if (wr_push && !wr_full) begin
        wq[wq_wr] <= wr_in;
        wq_wr <= WA'((int'(wq_wr) + 1) % WQ_DEPTH);
      end
      if (wpop) wq_rd <= WA'((int'(wq_rd) + 1) % WQ_DEPTH);
      wr_count <= wr_count + 8'(wr_push && !wr_full) - 8'(wpop);
      if (wr_count > 8'(WQ_HI))      drain <= 1'b1;
      else if (wr_count < 8'(WQ_LO)) drain <= 1'b0;
    end
  end

  a_pop_nonempty: assert property (@(posedge clk) disable iff (!rst_n)
                                   src_pop |-> src_cnt != 0)
    else $error("rw_queue: pop from empty queue");
endmodule
