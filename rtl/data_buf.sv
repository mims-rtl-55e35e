// data_buf -- the memory controller's Data Buf for one buffer scheduler.
// Gives every read a request id and turns read-return messages back into
// responses for the core that asked.
//
// Because the buffer scheduler returns reads out of order and a read-return
// message carries only a 10-bit request id (not the address), the controller
// must remember, per id, the core (tid), address and granularity. Ids come
// from a free list: after reset ids 0..NRID-1 are handed out in order, and
// later ids freed by returns are reused in the order they came back. A read
// may enter the read queue only while alloc_ok is high; alloc takes the id
// shown on alloc_rid. A returned message is looked up, its id freed, and the
// response is held in an output register until resp_ready. A granularity
// that differs from the one recorded raises err_gy. The request id and its
// 1024-entry range follow the paper; the free-list structure is this
// design's choice.
module data_buf
  import mims_pkg::*;
#(
  parameter int NRID = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  // allocation at read-queue entry
  output logic              alloc_ok,
  output logic [RID_W-1:0]  alloc_rid,
  input  logic              alloc,
  input  logic [TID_W-1:0]  alloc_tid,
  input  logic [ADDR_W-1:0] alloc_addr,
  input  logic [GY_W-1:0]   alloc_gy,
  // read-return messages from the packet decoder
  input  logic              ret_valid,
  input  msg_t              ret_msg,
  output logic              ret_ready,
  // responses to the crossbar
  output logic              resp_valid,
  output logic [TID_W-1:0]  resp_tid,
  output core_resp_t        resp,
  input  logic              resp_ready,
  output logic [RID_W:0]    outstanding,
  output logic              err_gy
);
  localparam int AW = $clog2(NRID);
  typedef struct packed {
    logic [TID_W-1:0]  tid;
    logic [ADDR_W-1:0] addr;
    logic [GY_W-1:0]   gy;
  } ent_t;

  ent_t             tab  [NRID];
  logic [RID_W-1:0] free [NRID];
  logic [AW:0]      init_q;       // ids not yet handed out since reset
  logic [AW-1:0]    fr_rp, fr_wp;
  logic [AW:0]      fr_cnt;       // ids in the free list

  assign alloc_ok  = (init_q != (AW+1)'(NRID)) || (fr_cnt != 0);
  assign alloc_rid = (init_q != (AW+1)'(NRID)) ? RID_W'(init_q) : free[fr_rp];
  assign ret_ready = !resp_valid || resp_ready;

  logic take_ret, use_free;
  assign take_ret = ret_valid && ret_ready;
  assign use_free = alloc && alloc_ok && (init_q == (AW+1)'(NRID));

  always_ff @(posedge clk) begin
    if (alloc && alloc_ok) tab[alloc_rid[AW-1:0]] <= '{tid: alloc_tid, addr: alloc_addr, gy: alloc_gy};
    if (take_ret) free[fr_wp] <= ret_msg.rid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_q <= '0; fr_rp <= '0; fr_wp <= '0; fr_cnt <= '0;
      resp_valid <= 1'b0; resp_tid <= '0; resp <= '0; outstanding <= '0; err_gy <= 1'b0;
    end else begin
      err_gy <= 1'b0;
      if (alloc && alloc_ok && init_q != (AW+1)'(NRID)) init_q <= init_q + 1'b1;
      if (use_free) fr_rp <= AW'((int'(fr_rp) + 1) % NRID);
      if (take_ret) fr_wp <= AW'((int'(fr_wp) + 1) % NRID);
      fr_cnt <= fr_cnt + (AW+1)'(take_ret) - (AW+1)'(use_free);
      outstanding <= outstanding + (RID_W+1)'(alloc && alloc_ok) - (RID_W+1)'(take_ret);
      if (resp_valid && resp_ready) resp_valid <= 1'b0;
      if (take_ret) begin
        ent_t e;
        e = tab[ret_msg.rid[AW-1:0]];
        resp_valid <= 1'b1;
        resp_tid   <= e.tid;
        resp       <= '{addr: e.addr, gy: e.gy, data: ret_msg.data};
        if (e.gy != ret_msg.gy) err_gy <= 1'b1;
      end
    end
  end
endmodule
