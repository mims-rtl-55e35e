// ddr3_dram_model -- behavioural model (testbench only) of one sub-ranked
// DDR3 channel as seen from the controller side of the PHY: 2 ranks x 8
// sub-ranks (one x8 device each) x 8 banks, BL8, two data beats per clock.
//
// Commands are taken in the clock they are shown. Read data beat j of a RD
// issued in clock t is driven in clock t+T_CL+j on the lanes of the selected
// sub-ranks; write data beat j of a WR is sampled in clock t+T_CWL+j. Storage
// is sparse (associative array of 8-byte device bursts); a burst never
// written reads as init_word() of its location. The model checks the DDR3
// rules the scheduler must meet and counts every breach in `violations`:
// ACT to an open bank, ACT before tRC / before the precharge that follows an
// auto-precharged RD/WR has finished (tRTP, tWR, tRP, tRAS), ACT within tRRD
// or tFAW on a device, ACT during tRFC, RD/WR to a closed bank or other row
// or before tRCD, REF with a bank open or precharging, write beats missing
// or unexpected. It also counts commands by type.
module ddr3_dram_model
  import mims_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  ddr_cmd_t        cmd,
  input  logic [DQ_W-1:0] dq_wdata,
  input  logic [NSUB-1:0] dq_wen,
  output logic [DQ_W-1:0] dq_rdata
);
  localparam int RING = 64;

  int unsigned violations;
  int unsigned n_act, n_rd, n_wr, n_ref;
  longint      cyc;

  logic [WORD_W-1:0] mem [logic [35:0]];

  bit          open_b   [NRANK][NSUB][NBANK];
  logic [ROW_W-1:0] row_b [NRANK][NSUB][NBANK];
  longint      act_t    [NRANK][NSUB][NBANK];
  longint      free_t   [NRANK][NSUB][NBANK];  // earliest next ACT
  longint      last_act [NRANK][NSUB];
  longint      faw_t    [NRANK][NSUB][4];
  longint      rfc_t    [NRANK];

  logic [DQ_W-1:0]   rd_ring  [RING];
  logic [NSUB-1:0]   wr_exp   [RING];
  logic [35:0]       wr_key   [RING][NSUB];
  int                wr_beat  [RING][NSUB];

  function automatic logic [35:0] key_of(input logic r, input int s, input logic [2:0] b,
                                         input logic [ROW_W-1:0] row, input logic [COL_W-1:0] col);
    return {r, 3'(s), b, row, col[9:3], 7'd0};
  endfunction

  // Content of a burst that was never written: a fixed mix of its location.
  function automatic logic [WORD_W-1:0] init_word(input logic [35:0] k);
    logic [63:0] x;
    x = {28'h0, k} * 64'h9E37_79B9_7F4A_7C15;
    return x ^ (x >> 29);
  endfunction

  function automatic logic [WORD_W-1:0] read_word(input logic [35:0] k);
    if (mem.exists(k)) return mem[k];
    return init_word(k);
  endfunction

  assign dq_rdata = rd_ring[int'(cyc % RING)];

  initial begin
    violations = 0; n_act = 0; n_rd = 0; n_wr = 0; n_ref = 0; cyc = 0;
    for (int i = 0; i < RING; i++) begin rd_ring[i] = '0; wr_exp[i] = '0; for (int s = 0; s < NSUB; s++) wr_beat[i][s] = 0; end
    for (int r = 0; r < NRANK; r++) begin
      rfc_t[r] = 0;
      for (int s = 0; s < NSUB; s++) begin
        last_act[r][s] = -100;
        for (int f = 0; f < 4; f++) faw_t[r][s][f] = -100;
        for (int b = 0; b < NBANK; b++) begin
          open_b[r][s][b] = 0; row_b[r][s][b] = '0; act_t[r][s][b] = -100; free_t[r][s][b] = 0;
        end
      end
    end
  end

  always @(posedge clk) begin
    if (rst_n) begin
      int now;
      now = int'(cyc % RING);
      // write data of this clock
      for (int s = 0; s < NSUB; s++) begin
        if (wr_exp[now][s]) begin
          if (!dq_wen[s]) begin
            violations++;
            $display("DRAM: missing write beat lane %0d at %0d", s, cyc);
          end else begin
            logic [WORD_W-1:0] w;
            w = read_word(wr_key[now][s]);
            w[wr_beat[now][s]*16 +: 16] = {dq_wdata[64 + s*8 +: 8], dq_wdata[s*8 +: 8]};
            mem[wr_key[now][s]] = w;
          end
        end else if (dq_wen[s]) begin
          violations++;
          $display("DRAM: unexpected write beat lane %0d at %0d", s, cyc);
        end
      end
      wr_exp[now] = '0;
      rd_ring[(now + RING - 1) % RING] = '0;  // the clock before is no longer read

      unique case (cmd.op)
        DDR_ACT: begin
          n_act++;
          for (int s = 0; s < NSUB; s++) if (cmd.sub_mask[s]) begin
            int oldest;
            if (open_b[cmd.rank][s][cmd.bank]) begin violations++; $display("DRAM: ACT to open bank at %0d", cyc); end
            if (cyc < free_t[cmd.rank][s][cmd.bank]) begin violations++; $display("DRAM: ACT before precharge done at %0d", cyc); end
            if (cyc - act_t[cmd.rank][s][cmd.bank] < T_RC) begin violations++; $display("DRAM: tRC at %0d", cyc); end
            if (cyc - last_act[cmd.rank][s] < T_RRD) begin violations++; $display("DRAM: tRRD at %0d", cyc); end
            if (cyc < rfc_t[cmd.rank]) begin violations++; $display("DRAM: ACT during tRFC at %0d", cyc); end
            oldest = 0;
            for (int f = 1; f < 4; f++) if (faw_t[cmd.rank][s][f] < faw_t[cmd.rank][s][oldest]) oldest = f;
            if (cyc - faw_t[cmd.rank][s][oldest] < T_FAW) begin violations++; $display("DRAM: tFAW at %0d", cyc); end
            faw_t[cmd.rank][s][oldest] = cyc;
            open_b[cmd.rank][s][cmd.bank] = 1;
            row_b[cmd.rank][s][cmd.bank]  = cmd.row;
            act_t[cmd.rank][s][cmd.bank]  = cyc;
            last_act[cmd.rank][s] = cyc;
          end
        end
        DDR_RD, DDR_WR: begin
          if (cmd.op == DDR_RD) n_rd++; else n_wr++;
          for (int s = 0; s < NSUB; s++) if (cmd.sub_mask[s]) begin
            logic [35:0] k;
            if (!open_b[cmd.rank][s][cmd.bank] || row_b[cmd.rank][s][cmd.bank] != cmd.row) begin
              violations++; $display("DRAM: column command to closed bank/other row at %0d", cyc);
            end
            if (cyc - act_t[cmd.rank][s][cmd.bank] < T_RCD) begin violations++; $display("DRAM: tRCD at %0d", cyc); end
            k = key_of(cmd.rank, s, cmd.bank, cmd.row, cmd.col);
            if (cmd.op == DDR_RD) begin
              logic [WORD_W-1:0] w;
              w = read_word(k);
              for (int j = 0; j < BURST_CLK; j++) begin
                int slot;
                slot = int'((cyc + T_CL + j) % RING);
                rd_ring[slot][s*8 +: 8]      = w[(2*j)*8 +: 8];
                rd_ring[slot][64 + s*8 +: 8] = w[(2*j+1)*8 +: 8];
              end
              if (cmd.ap) begin
                longint pre;
                pre = cyc + T_RTP;
                if (act_t[cmd.rank][s][cmd.bank] + T_RAS > pre) pre = act_t[cmd.rank][s][cmd.bank] + T_RAS;
                free_t[cmd.rank][s][cmd.bank] = pre + T_RP;
              end
            end else begin
              for (int j = 0; j < BURST_CLK; j++) begin
                int slot;
                slot = int'((cyc + T_CWL + j) % RING);
                if (wr_exp[slot][s]) begin violations++; $display("DRAM: write data overlap at %0d", cyc); end
                wr_exp[slot][s] = 1'b1;
                wr_key[slot][s] = k;
                wr_beat[slot][s] = j;
              end
              if (cmd.ap) begin
                longint pre;
                pre = cyc + T_CWL + BURST_CLK + T_WR;
                if (act_t[cmd.rank][s][cmd.bank] + T_RAS > pre) pre = act_t[cmd.rank][s][cmd.bank] + T_RAS;
                free_t[cmd.rank][s][cmd.bank] = pre + T_RP;
              end
            end
            if (cmd.ap) open_b[cmd.rank][s][cmd.bank] = 0;
          end
        end
        DDR_REF: begin
          n_ref++;
          for (int s = 0; s < NSUB; s++)
            for (int b = 0; b < NBANK; b++)
              if (open_b[cmd.rank][s][b] || cyc < free_t[cmd.rank][s][b]) begin
                violations++; $display("DRAM: REF with bank not precharged at %0d", cyc);
              end
          rfc_t[cmd.rank] = cyc + T_RFC;
        end
        default: ;
      endcase
    end
    cyc <= cyc + 1;
  end
endmodule
