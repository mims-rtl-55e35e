// mem_ctrl -- the on-chip memory controller of MIMS. It does no DRAM
// scheduling itself: it sorts core requests per buffer scheduler, packs them
// into message packets and matches returned data to the cores.
//
// A crossbar sends each core request to the queues of the buffer scheduler
// its address maps to (64 B channel interleave). Per buffer scheduler:
// reads get a request id from the Data Buf and enter the Read Queue, writes
// enter the Write Queue; the packet generator packs up to MAX_REQ requests of
// one type per packet (reads first, writes when above the high water mark or
// when no read waits); the link transmitter frames the packet onto the
// downstream link bus. On the upstream link bus the link receiver and a
// packet decoder (read-return packets only) recover {request id, data}; the
// Data Buf looks up the core and address and the crossbar hands the data to
// that core. A read is accepted only while the read queue has room and a
// request id is free; a write only while the write queue has room.
// err bits per buffer scheduler: {seq, crc, frame, dest, type, len, gy}.
module mem_ctrl
  import mims_pkg::*;
#(
  parameter int NCORE    = 16,
  parameter int NUM_BS   = 2,
  parameter int RQ_DEPTH = 64,
  parameter int WQ_DEPTH = 64,
  parameter int WQ_HI    = 48,
  parameter int WQ_LO    = 16,
  parameter int MAX_REQ  = 64,
  parameter int NRID     = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        core_req_valid [NCORE],
  input  core_req_t   core_req       [NCORE],
  output logic        core_req_ready [NCORE],
  output logic        core_resp_valid[NCORE],
  output core_resp_t  core_resp      [NCORE],
  output link_flit_t  dn_tx          [NUM_BS],
  input  logic        dn_tx_ready    [NUM_BS],
  input  link_flit_t  up_rx          [NUM_BS],
  output logic        up_rx_ready    [NUM_BS],
  output logic        drain          [NUM_BS],
  output logic [6:0]  err            [NUM_BS]
);
  logic        bs_req_valid [NUM_BS];
  core_req_t   bs_req       [NUM_BS];
  logic [TID_W-1:0] bs_req_tid [NUM_BS];
  logic        bs_req_ready [NUM_BS];
  logic        bs_resp_valid[NUM_BS];
  logic [TID_W-1:0] bs_resp_tid [NUM_BS];
  core_resp_t  bs_resp      [NUM_BS];
  logic        bs_resp_ready[NUM_BS];

  mc_crossbar #(.NCORE(NCORE), .NUM_BS(NUM_BS)) u_xbar (
    .clk, .rst_n, .core_req_valid, .core_req, .core_req_ready,
    .bs_req_valid, .bs_req, .bs_req_tid, .bs_req_ready,
    .bs_resp_valid, .bs_resp_tid, .bs_resp, .bs_resp_ready,
    .core_resp_valid, .core_resp);

  for (genvar b = 0; b < NUM_BS; b++) begin : g_bs
    logic rd_full, wr_full, alloc_ok, rd_push, wr_push;
    logic [RID_W-1:0] alloc_rid;
    logic [7:0] src_cnt, rd_count, wr_count;
    pkt_type_e src_pt;
    msg_t src_head, rd_in, wr_in;
    logic src_pop, gen_busy, gen_start;
    logic e_seq, e_crc, e_frame, e_dest, e_type, e_len, e_gy;
    logic [3:0] dec_valid;
    pkt_type_e  dec_pt;
    msg_t       dec_msg [4];
    logic       dec_ready;
    logic [RID_W:0] outstanding;

    flit_if dn_pay (.clk(clk), .rst_n(rst_n));
    flit_if up_pay (.clk(clk), .rst_n(rst_n));

    assign bs_req_ready[b] = bs_req[b].we ? !wr_full : (!rd_full && alloc_ok);
    assign rd_push = bs_req_valid[b] && !bs_req[b].we && !rd_full && alloc_ok;
    assign wr_push = bs_req_valid[b] &&  bs_req[b].we && !wr_full;
    assign rd_in = '{addr: bs_req[b].addr, gy: bs_req[b].gy, to: bs_req[b].to,
                     tid: bs_req_tid[b], rid: alloc_rid, data: '0};
    assign wr_in = '{addr: bs_req[b].addr, gy: bs_req[b].gy, to: bs_req[b].to,
                     tid: bs_req_tid[b], rid: '0, data: bs_req[b].wdata};

    rw_queue #(.RQ_DEPTH(RQ_DEPTH), .WQ_DEPTH(WQ_DEPTH), .WQ_HI(WQ_HI), .WQ_LO(WQ_LO)) u_q (
      .clk, .rst_n, .rd_push, .rd_in, .rd_full, .wr_push, .wr_in, .wr_full,
      .gen_busy, .src_pop, .src_cnt, .src_pt, .src_head,
      .drain(drain[b]), .rd_count, .wr_count);

    pkt_gen #(.MAX_REQ(MAX_REQ)) u_gen (
      .clk, .rst_n, .dbsid(DBSID_W'(b)), .src_cnt, .src_pt, .src_head, .src_pop,
      .busy(gen_busy), .pkt_start(gen_start), .out(dn_pay));

    link_tx u_tx (.clk, .rst_n, .in(dn_pay), .tx(dn_tx[b]), .tx_ready(dn_tx_ready[b]));

    link_rx u_rx (.clk, .rst_n, .rx(up_rx[b]), .rx_ready(up_rx_ready[b]), .out(up_pay),
                  .err_seq(e_seq), .err_crc(e_crc), .err_frame(e_frame));

    pkt_dec #(.BATCH(4), .ACCEPT_MASK(4'b0100)) u_dec (
      .clk, .rst_n, .my_id(DBSID_W'(b)), .in(up_pay),
      .out_valid(dec_valid), .out_pt(dec_pt), .out_msg(dec_msg), .out_ready(dec_ready),
      .err_dest(e_dest), .err_type(e_type), .err_len(e_len));

    data_buf #(.NRID(NRID)) u_db (
      .clk, .rst_n, .alloc_ok, .alloc_rid, .alloc(rd_push),
      .alloc_tid(bs_req_tid[b]), .alloc_addr(bs_req[b].addr), .alloc_gy(bs_req[b].gy),
      .ret_valid(dec_valid[0]), .ret_msg(dec_msg[0]), .ret_ready(dec_ready),
      .resp_valid(bs_resp_valid[b]), .resp_tid(bs_resp_tid[b]), .resp(bs_resp[b]),
      .resp_ready(bs_resp_ready[b]), .outstanding, .err_gy(e_gy));

    assign err[b] = {e_seq, e_crc, e_frame, e_dest, e_type, e_len, e_gy};
  end
endmodule
