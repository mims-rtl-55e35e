// buffer_sched -- one buffer scheduler: the logic that sits between the
// message link bus and one DDR3 channel.
//
// Downstream flits from the link bus pass the link receiver (overhead and CRC
// check), then the packet decoder, which writes read requests (up to 4 per
// clock) and write requests into the scheduler's request buffer. The DDR3
// scheduler issues the DRAM commands and moves the data. Finished reads wait
// in the return buffer, from which the packet generator builds read-return
// packets (packet head with DBSID = BS_ID) that the link transmitter frames
// and sends upstream. Packets whose DBSID is not BS_ID are dropped and
// flagged. The composition follows the paper's list of parts of a buffer
// scheduler (packet decoder, request buffer, scheduler, return buffer,
// packet generator, link bus); err bits: {seq, crc, frame, dest, type, len}.
module buffer_sched
  import mims_pkg::*;
#(
  parameter int BS_ID   = 0,
  parameter int NSLOT   = 32,
  parameter int RET_DEPTH = 16,
  parameter int MAX_REQ = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  input  link_flit_t      dn_rx,
  output logic            dn_rx_ready,
  output link_flit_t      up_tx,
  input  logic            up_tx_ready,
  output ddr_cmd_t        ddr_cmd,
  output logic [DQ_W-1:0] dq_wdata,
  output logic [NSUB-1:0] dq_wen,
  input  logic [DQ_W-1:0] dq_rdata,
  output logic [5:0]      err,
  output logic [7:0]      occupancy
);
  localparam int BATCH = 4;

  flit_if dn_pay (.clk(clk), .rst_n(rst_n));
  flit_if up_pay (.clk(clk), .rst_n(rst_n));

  logic e_seq, e_crc, e_frame, e_dest, e_type, e_len;
  assign err = {e_seq, e_crc, e_frame, e_dest, e_type, e_len};

  link_rx u_rx (.clk, .rst_n, .rx(dn_rx), .rx_ready(dn_rx_ready), .out(dn_pay),
                .err_seq(e_seq), .err_crc(e_crc), .err_frame(e_frame));

  logic [BATCH-1:0] dec_valid;
  pkt_type_e        dec_pt;
  msg_t             dec_msg [BATCH];
  logic             dec_ready;

  pkt_dec #(.BATCH(BATCH), .ACCEPT_MASK(4'b0011)) u_dec (
    .clk, .rst_n, .my_id(DBSID_W'(BS_ID)), .in(dn_pay),
    .out_valid(dec_valid), .out_pt(dec_pt), .out_msg(dec_msg), .out_ready(dec_ready),
    .err_dest(e_dest), .err_type(e_type), .err_len(e_len));

  logic ret_valid, ret_ready, rb_full, rb_pop;
  msg_t ret_msg, rb_head;
  logic [7:0] rb_cnt;
  pkt_type_e  rb_pt;

  ddr3_sched #(.NSLOT(NSLOT), .BATCH(BATCH)) u_sched (
    .clk, .rst_n, .in_valid(dec_valid), .in_pt(dec_pt), .in_msg(dec_msg), .in_ready(dec_ready),
    .ret_valid, .ret_msg, .ret_ready, .ddr_cmd, .dq_wdata, .dq_wen, .dq_rdata, .occupancy);

  assign ret_ready = !rb_full;

  return_buf #(.DEPTH(RET_DEPTH)) u_ret (
    .clk, .rst_n, .push(ret_valid), .din(ret_msg), .full(rb_full),
    .pop(rb_pop), .count(rb_cnt), .pt(rb_pt), .head(rb_head));

  logic gen_busy, gen_start;
  pkt_gen #(.MAX_REQ(MAX_REQ)) u_gen (
    .clk, .rst_n, .dbsid(DBSID_W'(BS_ID)), .src_cnt(rb_cnt), .src_pt(rb_pt), .src_head(rb_head),
    .src_pop(rb_pop), .busy(gen_busy), .pkt_start(gen_start), .out(up_pay));

  link_tx u_tx (.clk, .rst_n, .in(up_pay), .tx(up_tx), .tx_ready(up_tx_ready));
endmodule
