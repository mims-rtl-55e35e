// pkt_dec -- packet decoder. Unpacks a message packet arriving from the link
// receiver into individual messages.
//
// The packet head is read first: a DBSID that differs from my_id, or a packet
// type this decoder does not take (ACCEPT_MASK, bit per pkt_type_e), drops
// the packet (err_dest / err_type pulse) up to its last flit. The count says
// how many messages follow.
//  * Read packets: RTMSGs have fixed length, so BATCH of them are gathered and
//    decoded in parallel; each field is cut out of each RTMSG with the same
//    field mask (AND then shift), and up to BATCH requests leave together on
//    out_valid[BATCH-1:0]. This is the paper's parallel decoding (4 per batch).
//  * Write and read-return packets: messages have a variable data length set
//    by their GY, so they are decoded serially: message, then GY*4 data
//    flits, one message out on lane 0.
// A packet whose last flit comes early or late is discarded (err_len).
// out_ready must accept the whole batch at once. Input flits are taken one
// per clock; decoding a batch costs one extra clock.
module pkt_dec
  import mims_pkg::*;
#(
  parameter int         BATCH       = 4,
  parameter logic [3:0] ACCEPT_MASK = 4'b0011
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [DBSID_W-1:0]   my_id,
  flit_if.snk                  in,
  output logic [BATCH-1:0]     out_valid,
  output pkt_type_e            out_pt,
  output msg_t                 out_msg [BATCH],
  input  logic                 out_ready,
  output logic                 err_dest,
  output logic                 err_type,
  output logic                 err_len
);
  typedef enum logic [2:0] {S_HEAD, S_RCOL, S_ROUT, S_WMSG, S_WDATA, S_WOUT, S_DROP} state_e;
  state_e st;
  pkt_type_e          pt_q;
  logic [CNT_W-1:0]   left_q;                 // messages not yet sent out
  logic [RTMSG_W-1:0] bbuf [BATCH];           // batch of raw RTMSGs
  logic [$clog2(BATCH+1)-1:0] nb_q;           // RTMSGs in this batch
  logic [$clog2(BATCH+1)-1:0] bi_q;           // RTMSG being filled
  logic [2:0]         fi_q;                   // flit inside an RTMSG
  logic [RTMSG_W-1:0] wmsg_q;
  logic [DATA_W-1:0]  wdata_q;
  logic [7:0]         di_q;                   // data flit index
  logic [7:0]         dn_q;                   // data flits expected

  // Field masks of an RTMSG (Fig. 4: one MASK for all RTMSGs of a batch).
  localparam logic [RTMSG_W-1:0] M_ADDR = {{ADDR_W{1'b1}}, 32'h0};
  localparam logic [RTMSG_W-1:0] M_GY   = 80'h0000_0000_0000_F000_0000;
  localparam logic [RTMSG_W-1:0] M_TO   = 80'h0000_0000_0000_0FF0_0000;
  localparam logic [RTMSG_W-1:0] M_TID  = 80'h0000_0000_0000_000F_0000;
  localparam logic [RTMSG_W-1:0] M_RID  = 80'h0000_0000_0000_0000_FFC0;

  function automatic msg_t unmask(input logic [RTMSG_W-1:0] r, input logic [DATA_W-1:0] d);
    msg_t m;
    m.addr = ADDR_W'((r & M_ADDR) >> 32);
    m.gy   = GY_W'((r & M_GY) >> 28);
    m.to   = TO_W'((r & M_TO) >> 20);
    m.tid  = TID_W'((r & M_TID) >> 16);
    m.rid  = RID_W'((r & M_RID) >> 6);
    m.data = d;
    return m;
  endfunction

  pkhd_t hd;
  assign hd = pkhd_t'(in.data);

  logic [CNT_W-1:0] batch_n;
  assign batch_n = (left_q > CNT_W'(BATCH)) ? CNT_W'(BATCH) : left_q;

  rrmsg_t rr;
  assign rr = rrmsg_t'(wmsg_q[LINK_W-1:0]);
  assign in.ready = (st == S_HEAD) || (st == S_RCOL) || (st == S_WMSG) || (st == S_WDATA) || (st == S_DROP);

  always_comb begin
    out_pt = pt_q;
    for (int j = 0; j < BATCH; j++) begin
      out_valid[j] = 1'b0;
      out_msg[j]   = unmask(bbuf[j], '0);
      if (st == S_ROUT) out_valid[j] = (j < int'(nb_q));
    end
    if (pt_q == PT_RRET) begin
      out_msg[0] = '{addr: '0, gy: rr.gy, to: '0, tid: '0, rid: rr.rid, data: wdata_q};
    end else if (st != S_ROUT) begin
      out_msg[0] = unmask(wmsg_q, wdata_q);
    end
    if (st == S_WOUT) out_valid[0] = 1'b1;
  end

  logic [GY_W-1:0] gy_now;
  rrmsg_t          rr_in;
  assign rr_in = rrmsg_t'(in.data);
  always_comb begin
    if (pt_q == PT_RRET) gy_now = rr_in.gy;
    else                 gy_now = wmsg_q[15:12];  // GY sits in the 4th RTMSG flit
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_HEAD; pt_q <= PT_READ; left_q <= '0; nb_q <= '0; bi_q <= '0; fi_q <= '0;
      wmsg_q <= '0; wdata_q <= '0; di_q <= '0; dn_q <= '0;
      err_dest <= 1'b0; err_type <= 1'b0; err_len <= 1'b0;
      for (int j = 0; j < BATCH; j++) bbuf[j] <= '0;
    end else begin
      err_dest <= 1'b0; err_type <= 1'b0; err_len <= 1'b0;
      unique case (st)
        S_HEAD: if (in.valid) begin
          pt_q   <= hd.pt;
          left_q <= hd.cnt;
          fi_q   <= '0; bi_q <= '0; di_q <= '0;
          if (hd.dbsid != my_id) begin
            err_dest <= 1'b1;
            if (!in.last) st <= S_DROP;
          end else if (!ACCEPT_MASK[hd.pt] || hd.cnt == 0) begin
            err_type <= 1'b1;
            if (!in.last) st <= S_DROP;
          end else if (in.last) begin
            err_len <= 1'b1;
          end else if (hd.pt == PT_READ) begin
            st <= S_RCOL;
          end else begin
            st <= S_WMSG;
          end
        end
        S_RCOL: if (in.valid) begin
          bbuf[$clog2(BATCH)'(bi_q)] <= {bbuf[$clog2(BATCH)'(bi_q)][RTMSG_W-LINK_W-1:0], in.data};
          if (fi_q == 3'(RTMSG_FLITS - 1)) begin
            fi_q <= '0;
            if (CNT_W'(bi_q) + 1'b1 == batch_n) begin
              nb_q <= batch_n[$clog2(BATCH+1)-1:0];
              bi_q <= '0;
              if (in.last != (left_q == batch_n)) begin
                err_len <= 1'b1;
                st <= in.last ? S_HEAD : S_DROP;
              end else st <= S_ROUT;
            end else begin
              bi_q <= bi_q + 1'b1;
              if (in.last) begin err_len <= 1'b1; st <= S_HEAD; end
            end
          end else begin
            fi_q <= fi_q + 3'd1;
            if (in.last) begin err_len <= 1'b1; st <= S_HEAD; end
          end
        end
        S_ROUT: if (out_ready) begin
          left_q <= left_q - CNT_W'(nb_q);
          st     <= (left_q == CNT_W'(nb_q)) ? S_HEAD : S_RCOL;
        end
        S_WMSG: if (in.valid) begin
          wmsg_q <= {wmsg_q[RTMSG_W-LINK_W-1:0], in.data};
          if (pt_q == PT_RRET || fi_q == 3'(RTMSG_FLITS - 1)) begin
            fi_q    <= '0;
            di_q    <= '0;
            dn_q    <= 8'(data_flits(gy_now));
            wdata_q <= '0;
            if (in.last || gy_now == 0 || gy_now > GY_W'(LINE_WORDS)) begin
              err_len <= 1'b1;
              st <= in.last ? S_HEAD : S_DROP;
            end else st <= S_WDATA;
          end else begin
            fi_q <= fi_q + 3'd1;
            if (in.last) begin err_len <= 1'b1; st <= S_HEAD; end
          end
        end
        S_WDATA: if (in.valid) begin
          wdata_q[LINK_W*int'(di_q) +: LINK_W] <= in.data;
          di_q <= di_q + 8'd1;
          if (di_q == dn_q - 8'd1) begin
            if (in.last != (left_q == 1)) begin
              err_len <= 1'b1;
              st <= in.last ? S_HEAD : S_DROP;
            end else st <= S_WOUT;
          end else if (in.last) begin
            err_len <= 1'b1; st <= S_HEAD;
          end
        end
        S_WOUT: if (out_ready) begin
          left_q <= left_q - 1'b1;
          st     <= (left_q == 1) ? S_HEAD : S_WMSG;
        end
        S_DROP: if (in.valid && in.last) st <= S_HEAD;
        default: st <= S_HEAD;
      endcase
    end
  end
endmodule
