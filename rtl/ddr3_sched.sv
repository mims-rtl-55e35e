// ddr3_sched -- the scheduler of a buffer scheduler: request buffer plus a
// DDR3 command scheduler for one sub-ranked channel.
//
// Organisation (from the paper's configuration): 2 ranks, each split into 8
// sub-ranks of one x8 device, 8 banks per device, BL8, so one device burst is
// 8 B, the minimum granularity. A request of GY words at word offset w (address
// bits [5:3]) uses sub-ranks w..w+GY-1; all its commands carry that sub-rank
// mask, so fine requests to different sub-ranks proceed in parallel.
//
// Request buffer: NSLOT entries; up to BATCH requests of one packet type are
// written per clock (in_ready needs BATCH free entries). An age matrix keeps
// arrival order.
// Per clock at most one command is issued on the command bus, chosen in this
// order: REF for a rank whose refresh is due and whose banks are all idle;
// the oldest request whose column command (RD/WR with auto-precharge) may
// issue; the oldest request whose ACT may issue. Column-before-activate,
// oldest first, is FR-FCFS; auto-precharge after every access is the closed
// page policy (both named by the paper). The scheduler tracks per device:
// bank open flag and ACT-to-ACT/precharge counters (tRC, tRTP+tRP,
// tWR+tRP), tRRD and a four-activate window (tFAW); per 8-bit data lane:
// read/write turnaround (tCCD, tWTR, read-to-write); per rank: refresh every
// tREFI, blocked for tRFC. Timings are DDR3-1333 values of a 2 Gb x8 device.
//
// Data timing: a command is valid in the clock it is shown on ddr_cmd. Read
// data beat j (16 bits per lane, two DDR beats) is expected on dq_rdata in
// clock t+T_CL+j; write data beat j is driven on dq_wdata/dq_wen in clock
// t+T_CWL+j. A finished read leaves through ret_* to the return buffer;
// writes finish silently. The paper gives the policy names, the organisation
// and the job; the rest (buffer size, priority order, tracking structure) is
// this design's own.
module ddr3_sched
  import mims_pkg::*;
#(
  parameter int NSLOT = 32,
  parameter int BATCH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [BATCH-1:0]  in_valid,
  input  pkt_type_e         in_pt,
  input  msg_t              in_msg [BATCH],
  output logic              in_ready,
  output logic              ret_valid,
  output msg_t              ret_msg,
  input  logic              ret_ready,
  output ddr_cmd_t          ddr_cmd,
  output logic [DQ_W-1:0]   dq_wdata,
  output logic [NSUB-1:0]   dq_wen,
  input  logic [DQ_W-1:0]   dq_rdata,
  output logic [7:0]        occupancy
);
  localparam int SW = $clog2(NSLOT);
  typedef enum logic [1:0] {W_ACT, W_COL, W_DATA, DONE} sst_e;

  typedef struct packed {
    logic              we;
    sst_e              st;
    logic [5:0]        cnt;
    logic              rank;
    logic [2:0]        bank;
    logic [ROW_W-1:0]  row;
    logic [6:0]        line;
    logic [2:0]        woff;
    logic [NSUB-1:0]   mask;
    logic [ADDR_W-1:0] addr;
    logic [GY_W-1:0]   gy;
    logic [TO_W-1:0]   to;
    logic [TID_W-1:0]  tid;
    logic [RID_W-1:0]  rid;
  } slot_t;

  typedef struct packed {
    logic             v;
    logic [SW-1:0]    slot;
    logic [NSUB-1:0]  mask;
  } pipe_t;

  logic              sv    [NSLOT];
  slot_t             sl    [NSLOT];
  logic [DATA_W-1:0] sdat  [NSLOT];   // lane-ordered: word s = sub-rank s
  logic [NSLOT-1:0]  older [NSLOT];   // older[i][j]: i arrived before j

  logic              bopen  [NRANK][NSUB][NBANK];
  logic [5:0]        actok  [NRANK][NSUB][NBANK];
  logic [2:0]        rrd    [NRANK][NSUB];
  logic [4:0]        faw    [NRANK][NSUB][4];
  logic [4:0]        lrd    [NSUB];
  logic [4:0]        lwr    [NSUB];
  logic [12:0]       refc   [NRANK];
  logic              refp   [NRANK];
  logic [6:0]        rfc    [NRANK];

  pipe_t rdp [T_CL + 3];
  pipe_t wrp [T_CWL + 3];

  // ---------------- candidate selection ----------------
  logic [NSLOT-1:0] c_col, c_act, c_done;
  logic [NRANK-1:0] ref_ok;

  always_comb begin
    for (int r = 0; r < NRANK; r++) begin
      ref_ok[r] = refp[r] && (rfc[r] == 0);
      for (int s = 0; s < NSUB; s++)
        for (int b = 0; b < NBANK; b++)
          if (bopen[r][s][b] || actok[r][s][b] != 0) ref_ok[r] = 1'b0;
    end
    for (int i = 0; i < NSLOT; i++) begin
      c_col[i]  = sv[i] && sl[i].st == W_COL && sl[i].cnt == 0;
      c_act[i]  = sv[i] && sl[i].st == W_ACT && !refp[sl[i].rank] && rfc[sl[i].rank] == 0;
      c_done[i] = sv[i] && sl[i].st == DONE;
      for (int s = 0; s < NSUB; s++) begin
        if (sl[i].mask[s]) begin
          if (sl[i].we ? (lwr[s] != 0) : (lrd[s] != 0)) c_col[i] = 1'b0;
          if (bopen[sl[i].rank][s][sl[i].bank] || actok[sl[i].rank][s][sl[i].bank] != 0 ||
              rrd[sl[i].rank][s] != 0 ||
              (faw[sl[i].rank][s][0] != 0 && faw[sl[i].rank][s][1] != 0 &&
               faw[sl[i].rank][s][2] != 0 && faw[sl[i].rank][s][3] != 0))
            c_act[i] = 1'b0;
        end
      end
    end
  end

  function automatic int oldest(input logic [NSLOT-1:0] c);
    int w;
    w = -1;
    for (int i = 0; i < NSLOT; i++) begin
      logic beaten;
      beaten = 1'b0;
      for (int j = 0; j < NSLOT; j++) if (c[j] && older[j][i]) beaten = 1'b1;
      if (c[i] && !beaten && w < 0) w = i;
    end
    return w;
  endfunction

  int  w_col, w_act, w_done, w_ref;
  logic do_ref, do_col, do_act;
  always_comb begin
    w_col  = oldest(c_col);
    w_act  = oldest(c_act);
    w_done = oldest(c_done);
    w_ref  = -1;
    for (int r = NRANK - 1; r >= 0; r--) if (ref_ok[r]) w_ref = r;
    do_ref = (w_ref >= 0);
    do_col = !do_ref && (w_col >= 0);
    do_act = !do_ref && !do_col && (w_act >= 0);
  end

  always_comb begin
    ddr_cmd = '0;
    ddr_cmd.op = DDR_NOP;
    if (do_ref) begin
      ddr_cmd.op = DDR_REF;
      ddr_cmd.rank = w_ref[0];
      ddr_cmd.sub_mask = '1;
    end else if (do_col) begin
      ddr_cmd.op       = sl[w_col].we ? DDR_WR : DDR_RD;
      ddr_cmd.rank     = sl[w_col].rank;
      ddr_cmd.sub_mask = sl[w_col].mask;
      ddr_cmd.bank     = sl[w_col].bank;
      ddr_cmd.row      = sl[w_col].row;
      ddr_cmd.col      = {sl[w_col].line, 3'b000};
      ddr_cmd.ap       = 1'b1;
    end else if (do_act) begin
      ddr_cmd.op       = DDR_ACT;
      ddr_cmd.rank     = sl[w_act].rank;
      ddr_cmd.sub_mask = sl[w_act].mask;
      ddr_cmd.bank     = sl[w_act].bank;
      ddr_cmd.row      = sl[w_act].row;
    end
  end

  // ---------------- return path ----------------
  logic [DATA_W-1:0] keep;
  always_comb begin
    ret_valid = (w_done >= 0);
    ret_msg   = '0;
    keep      = '1;
    if (w_done >= 0) begin
      keep = (DATA_W'(1) << (WORD_W * int'(sl[w_done].gy))) - 1'b1;
      if (sl[w_done].gy >= GY_W'(LINE_WORDS)) keep = '1;
      ret_msg.addr = sl[w_done].addr;
      ret_msg.gy   = sl[w_done].gy;
      ret_msg.to   = sl[w_done].to;
      ret_msg.tid  = sl[w_done].tid;
      ret_msg.rid  = sl[w_done].rid;
      ret_msg.data = (sdat[w_done] >> (WORD_W * int'(sl[w_done].woff))) & keep;
    end
  end

  // ---------------- write data drive ----------------
  always_comb begin
    dq_wdata = '0;
    dq_wen   = '0;
    for (int j = 0; j < BURST_CLK; j++) begin
      pipe_t p;
      p = wrp[T_CWL - 1 + j];
      if (p.v)
        for (int s = 0; s < NSUB; s++)
          if (p.mask[s]) begin
            dq_wen[s] = 1'b1;
            dq_wdata[s*8 +: 8]      = sdat[p.slot][s*WORD_W + (2*j)*8 +: 8];
            dq_wdata[64 + s*8 +: 8] = sdat[p.slot][s*WORD_W + (2*j+1)*8 +: 8];
          end
    end
  end

  // ---------------- insertion ----------------
  int   nfree;
  int   ins_slot [BATCH];
  always_comb begin
    int k;
    nfree = 0;
    for (int i = 0; i < NSLOT; i++) if (!sv[i]) nfree++;
    k = 0;
    for (int j = 0; j < BATCH; j++) ins_slot[j] = -1;
    for (int i = 0; i < NSLOT; i++)
      if (!sv[i] && k < BATCH) begin
        ins_slot[k] = i;
        k++;
      end
    in_ready  = (nfree >= BATCH);
    occupancy = 8'(NSLOT - nfree);
  end

  function automatic logic [5:0] dec6(input logic [5:0] x);
    return (x != 0) ? x - 6'd1 : 6'd0;
  endfunction
  function automatic logic [4:0] dec5(input logic [4:0] x);
    return (x != 0) ? x - 5'd1 : 5'd0;
  endfunction
  function automatic logic [4:0] max5(input logic [4:0] a, input int b);
    return (int'(a) > b) ? a : 5'(b);
  endfunction

  // ---------------- slot data: written by insertion and read capture -----
  always_ff @(posedge clk) begin
    for (int j = 0; j < BATCH; j++)
      if (in_valid[j] && in_ready && ins_slot[j] >= 0)
        sdat[ins_slot[j]] <= in_msg[j].data << (WORD_W * int'(in_msg[j].addr[5:3]));
    for (int j = 0; j < BURST_CLK; j++) begin
      pipe_t p;
      p = rdp[T_CL - 1 + j];
      if (p.v)
        for (int s = 0; s < NSUB; s++)
          if (p.mask[s])
            sdat[p.slot][s*WORD_W + j*16 +: 16] <= {dq_rdata[64 + s*8 +: 8], dq_rdata[s*8 +: 8]};
    end
  end

  // ---------------- state update ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NSLOT; i++) begin
        sv[i] <= 1'b0; sl[i] <= '0; older[i] <= '0;
      end
      for (int r = 0; r < NRANK; r++) begin
        refc[r] <= 13'(r * (T_REFI / NRANK));
        refp[r] <= 1'b0;
        rfc[r]  <= '0;
        for (int s = 0; s < NSUB; s++) begin
          rrd[r][s] <= '0;
          for (int f = 0; f < 4; f++) faw[r][s][f] <= '0;
          for (int b = 0; b < NBANK; b++) begin
            bopen[r][s][b] <= 1'b0; actok[r][s][b] <= '0;
          end
        end
      end
      for (int s = 0; s < NSUB; s++) begin lrd[s] <= '0; lwr[s] <= '0; end
      for (int d = 0; d < T_CL + 3; d++)  rdp[d] <= '0;
      for (int d = 0; d < T_CWL + 3; d++) wrp[d] <= '0;
    end else begin
      // timers
      for (int r = 0; r < NRANK; r++) begin
        if (rfc[r] != 0) rfc[r] <= rfc[r] - 7'd1;
        if (refc[r] == 13'(T_REFI - 1)) begin
          refc[r] <= '0;
          refp[r] <= 1'b1;
        end else refc[r] <= refc[r] + 13'd1;
        for (int s = 0; s < NSUB; s++) begin
          if (rrd[r][s] != 0) rrd[r][s] <= rrd[r][s] - 3'd1;
          for (int f = 0; f < 4; f++) faw[r][s][f] <= dec5(faw[r][s][f]);
          for (int b = 0; b < NBANK; b++) actok[r][s][b] <= dec6(actok[r][s][b]);
        end
      end
      for (int s = 0; s < NSUB; s++) begin lrd[s] <= dec5(lrd[s]); lwr[s] <= dec5(lwr[s]); end
      for (int i = 0; i < NSLOT; i++)
        if (sv[i] && sl[i].cnt != 0 && sl[i].st != W_ACT) sl[i].cnt <= sl[i].cnt - 6'd1;

      // data pipelines
      rdp[0] <= '0;
      wrp[0] <= '0;
      for (int d = 1; d < T_CL + 3; d++)  rdp[d] <= rdp[d-1];
      for (int d = 1; d < T_CWL + 3; d++) wrp[d] <= wrp[d-1];


      // data phase completion
      for (int i = 0; i < NSLOT; i++)
        if (sv[i] && sl[i].st == W_DATA && sl[i].cnt == 6'd1) begin
          if (sl[i].we) sv[i] <= 1'b0;
          else          sl[i].st <= DONE;
        end

      // commands
      if (do_ref) begin
        refp[w_ref] <= 1'b0;
        rfc[w_ref]  <= 7'(T_RFC);
      end
      if (do_act) begin
        sl[w_act].st  <= W_COL;
        sl[w_act].cnt <= 6'(T_RCD - 1);
        for (int s = 0; s < NSUB; s++)
          if (sl[w_act].mask[s]) begin
            logic placed;
            bopen[sl[w_act].rank][s][sl[w_act].bank] <= 1'b1;
            actok[sl[w_act].rank][s][sl[w_act].bank] <= 6'(T_RC - 1);
            rrd[sl[w_act].rank][s] <= 3'(T_RRD - 1);
            placed = 1'b0;
            for (int f = 0; f < 4; f++)
              if (!placed && faw[sl[w_act].rank][s][f] == 0) begin
                faw[sl[w_act].rank][s][f] <= 5'(T_FAW - 1);
                placed = 1'b1;
              end
          end
      end
      if (do_col) begin
        sl[w_col].st  <= W_DATA;
        sl[w_col].cnt <= 6'((sl[w_col].we ? T_CWL : T_CL) + BURST_CLK);
        for (int s = 0; s < NSUB; s++)
          if (sl[w_col].mask[s]) begin
            bopen[sl[w_col].rank][s][sl[w_col].bank] <= 1'b0;
            if (sl[w_col].we) begin
              actok[sl[w_col].rank][s][sl[w_col].bank] <=
                6'(T_CWL + BURST_CLK + T_WR + T_RP - 1);
              lwr[s] <= max5(dec5(lwr[s]), T_CCD + T_RTRS - 1);
              lrd[s] <= max5(dec5(lrd[s]), T_CWL + BURST_CLK + T_WTR - 1);
            end else begin
              if (actok[sl[w_col].rank][s][sl[w_col].bank] < 6'(T_RTP + T_RP))
                actok[sl[w_col].rank][s][sl[w_col].bank] <= 6'(T_RTP + T_RP - 1);
              lrd[s] <= max5(dec5(lrd[s]), T_CCD + T_RTRS - 1);
              lwr[s] <= max5(dec5(lwr[s]), T_CL + T_CCD + 2 - T_CWL - 1);
            end
          end
        if (sl[w_col].we) wrp[0] <= '{v: 1'b1, slot: SW'(w_col), mask: sl[w_col].mask};
        else              rdp[0] <= '{v: 1'b1, slot: SW'(w_col), mask: sl[w_col].mask};
      end

      // hand a finished read to the return buffer
      if (ret_valid && ret_ready) sv[w_done] <= 1'b0;

      // insertion of up to BATCH new requests
      for (int j = 0; j < BATCH; j++) begin
        if (in_valid[j] && in_ready && ins_slot[j] >= 0) begin
          logic [SW-1:0] n;
          n = SW'(ins_slot[j]);
          sv[n] <= 1'b1;
          sl[n] <= '{we: (in_pt == PT_WRITE), st: W_ACT, cnt: '0,
                     rank: in_msg[j].addr[7], bank: in_msg[j].addr[10:8],
                     row: in_msg[j].addr[32:18], line: in_msg[j].addr[17:11],
                     woff: in_msg[j].addr[5:3],
                     mask: sub_mask_of(in_msg[j].addr[5:3], in_msg[j].gy),
                     addr: in_msg[j].addr, gy: in_msg[j].gy, to: in_msg[j].to,
                     tid: in_msg[j].tid, rid: in_msg[j].rid};
          for (int i = 0; i < NSLOT; i++) begin
            logic earlier_new;
            earlier_new = 1'b0;
            for (int k = 0; k < j; k++) if (in_valid[k] && ins_slot[k] == i) earlier_new = 1'b1;
            older[i][n] <= sv[i] || earlier_new;
            older[n][i] <= 1'b0;
          end
        end
      end
    end
  end

  a_one_cmd_lane: assert property (@(posedge clk) disable iff (!rst_n)
      (ddr_cmd.op == DDR_RD || ddr_cmd.op == DDR_WR) |-> ddr_cmd.sub_mask != 0)
    else $error("ddr3_sched: column command without sub-rank");
endmodule
