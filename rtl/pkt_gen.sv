// pkt_gen -- packet generator. Packs several queued messages of one type into
// one variable-length message packet and sends it as 16-bit flits.
//
// When the link side is free and the selected source holds messages, the
// generator fixes the packet type (src_pt) and the count n = min(src_cnt,
// MAX_REQ), sends the packet head (DBSID, PT, CNT, RV), then the n messages.
// Read packets carry one 5-flit RTMSG per request; write packets carry the
// RTMSG followed by GY*4 data flits (WTDA); read-return packets carry a 1-flit
// RRMSG (request id, granularity) followed by GY*4 data flits. The next
// message is popped from the source when the last flit of the current one is
// taken, so back-to-back messages leave no gap. busy is high from the packet
// head to the last flit; the source must keep src_pt steady while busy and
// must hold at least the announced count. Flow control is the valid/ready of
// the flit stream. The head/message layout follows the paper's packet
// format; field widths, MAX_REQ and the pop-ahead scheme are this design's.
module pkt_gen
  import mims_pkg::*;
#(
  parameter int MAX_REQ = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [DBSID_W-1:0]   dbsid,
  input  logic [7:0]           src_cnt,
  input  pkt_type_e            src_pt,
  input  msg_t                 src_head,
  output logic                 src_pop,
  output logic                 busy,
  output logic                 pkt_start,   // pulse: a packet head was sent
  flit_if.src                  out
);
  typedef enum logic [1:0] {S_IDLE, S_HEAD, S_MSG} state_e;
  state_e             st;
  pkt_type_e          pt_q;
  logic [CNT_W-1:0]   n_q;
  logic [CNT_W-1:0]   left_q;   // messages after the current one
  msg_t               cur_q;
  logic [7:0]         idx_q;    // flit index inside the current message
  logic [7:0]         msg_flits;

  logic [CNT_W-1:0] n_now;
  assign n_now = (src_cnt > 8'(MAX_REQ)) ? CNT_W'(MAX_REQ) : src_cnt[CNT_W-1:0];

  always_comb begin
    unique case (pt_q)
      PT_READ:  msg_flits = 8'(RTMSG_FLITS);
      PT_WRITE: msg_flits = 8'(RTMSG_FLITS + data_flits(cur_q.gy));
      default:  msg_flits = 8'(1 + data_flits(cur_q.gy));
    endcase
  end

  rtmsg_t rt;
  rrmsg_t rr;
  always_comb begin
    rt = '{addr: cur_q.addr, gy: cur_q.gy, to: cur_q.to, tid: cur_q.tid, rid: cur_q.rid, rsv: '0};
    rr = '{rid: cur_q.rid, gy: cur_q.gy, rsv: '0};
  end

  logic [LINK_W-1:0] msg_flit;
  always_comb begin
    logic [RTMSG_W-1:0] rtv;
    rtv = rt;
    if (pt_q == PT_RRET) begin
      if (idx_q == 0) msg_flit = rr;
      else            msg_flit = LINK_W'(cur_q.data >> (LINK_W * (int'(idx_q) - 1)));
    end else begin
      if (int'(idx_q) < RTMSG_FLITS) msg_flit = rtv[RTMSG_W-1 - LINK_W*int'(idx_q) -: LINK_W];
      else                     msg_flit = LINK_W'(cur_q.data >> (LINK_W * (int'(idx_q) - RTMSG_FLITS)));
    end
  end

  logic msg_end;
  assign msg_end = (idx_q == msg_flits - 8'd1);

  always_comb begin
    out.valid = (st == S_HEAD) || (st == S_MSG);
    out.last  = (st == S_MSG) && msg_end && (left_q == 0);
    out.data  = (st == S_HEAD) ? LINK_W'(pkhd_t'{dbsid: dbsid, pt: pt_q, cnt: n_q, rv: '0}) : msg_flit;
    src_pop   = out.ready && ((st == S_HEAD) || (st == S_MSG && msg_end && left_q != 0));
    busy      = (st != S_IDLE);
    pkt_start = (st == S_HEAD) && out.ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= S_IDLE;
      pt_q   <= PT_READ;
      n_q    <= '0;
      left_q <= '0;
      idx_q  <= '0;
      cur_q  <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (src_cnt != 0) begin
          st   <= S_HEAD;
          pt_q <= src_pt;
          n_q  <= n_now;
        end
        S_HEAD: if (out.ready) begin
          cur_q  <= src_head;
          left_q <= n_q - 1'b1;
          idx_q  <= '0;
          st     <= S_MSG;
        end
        S_MSG: if (out.ready) begin
          if (!msg_end) idx_q <= idx_q + 8'd1;
          else if (left_q != 0) begin
            cur_q  <= src_head;
            left_q <= left_q - 1'b1;
            idx_q  <= '0;
          end else st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
