// mc_crossbar -- the memory controller's crossbar between NCORE cores and the
// request buffers of NUM_BS buffer schedulers, in both directions.
//
// Request direction: each request goes to buffer scheduler
// (addr >> 6) % NUM_BS, i.e. channels are interleaved on 64 B lines
// (channel-interleaved mapping). Each buffer scheduler port has a
// round-robin arbiter over the cores that target it; the winner's request
// and core id (tid) are passed on and core_req_ready goes back to it in the
// same cycle. Response direction: each Data Buf offers a response with the
// id of its core; each core port takes one response per clock, round-robin
// among buffer schedulers; cores always accept. Fully combinational apart
// from the round-robin pointers. The paper names the crossbar and the
// channel-interleave mapping; arbitration and the interleave bit are this
// design's choices.
module mc_crossbar
  import mims_pkg::*;
#(
  parameter int NCORE  = 16,
  parameter int NUM_BS = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 core_req_valid [NCORE],
  input  core_req_t            core_req       [NCORE],
  output logic                 core_req_ready [NCORE],
  output logic                 bs_req_valid   [NUM_BS],
  output core_req_t            bs_req         [NUM_BS],
  output logic [TID_W-1:0]     bs_req_tid     [NUM_BS],
  input  logic                 bs_req_ready   [NUM_BS],
  input  logic                 bs_resp_valid  [NUM_BS],
  input  logic [TID_W-1:0]     bs_resp_tid    [NUM_BS],
  input  core_resp_t           bs_resp        [NUM_BS],
  output logic                 bs_resp_ready  [NUM_BS],
  output logic                 core_resp_valid[NCORE],
  output core_resp_t           core_resp      [NCORE]
);
  localparam int CW = $clog2(NCORE);
  localparam int BW = (NUM_BS > 1) ? $clog2(NUM_BS) : 1;

  function automatic int bs_of(input logic [ADDR_W-1:0] a);
    return int'((a >> 6) % ADDR_W'(NUM_BS));
  endfunction

  logic [CW-1:0] rr_req [NUM_BS];
  logic [BW-1:0] rr_rsp [NCORE];
  int            win_req [NUM_BS];
  int            win_rsp [NCORE];

  always_comb begin
    for (int b = 0; b < NUM_BS; b++) begin
      win_req[b] = -1;
      for (int k = 0; k < NCORE; k++)
        if (win_req[b] < 0 && core_req_valid[(int'(rr_req[b]) + k) % NCORE] &&
            bs_of(core_req[(int'(rr_req[b]) + k) % NCORE].addr) == b)
          win_req[b] = (int'(rr_req[b]) + k) % NCORE;
      bs_req_valid[b] = (win_req[b] >= 0);
      bs_req[b]       = (win_req[b] >= 0) ? core_req[win_req[b]] : '0;
      bs_req_tid[b]   = (win_req[b] >= 0) ? TID_W'(win_req[b]) : '0;
    end
  end

  always_comb begin
    for (int c = 0; c < NCORE; c++) begin
      core_req_ready[c] = 1'b0;
      for (int b = 0; b < NUM_BS; b++)
        if (win_req[b] == c && bs_req_ready[b]) core_req_ready[c] = 1'b1;
    end
  end

  always_comb begin
    for (int c = 0; c < NCORE; c++) begin
      win_rsp[c] = -1;
      for (int k = 0; k < NUM_BS; k++)
        if (win_rsp[c] < 0 && bs_resp_valid[(int'(rr_rsp[c]) + k) % NUM_BS] &&
            int'(bs_resp_tid[(int'(rr_rsp[c]) + k) % NUM_BS]) == c)
          win_rsp[c] = (int'(rr_rsp[c]) + k) % NUM_BS;
      core_resp_valid[c] = (win_rsp[c] >= 0);
      core_resp[c]       = (win_rsp[c] >= 0) ? bs_resp[win_rsp[c]] : '0;
    end
  end

  always_comb begin
    for (int b = 0; b < NUM_BS; b++) begin
      bs_resp_ready[b] = 1'b0;
      for (int c = 0; c < NCORE; c++)
        if (win_rsp[c] == b) bs_resp_ready[b] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NUM_BS; b++) rr_req[b] <= '0;
      for (int c = 0; c < NCORE; c++)  rr_rsp[c] <= '0;
    end else begin
      for (int b = 0; b < NUM_BS; b++)
        if (bs_req_valid[b] && bs_req_ready[b]) rr_req[b] <= CW'((win_req[b] + 1) % NCORE);
      for (int c = 0; c < NCORE; c++)
        if (win_rsp[c] >= 0) rr_rsp[c] <= BW'((win_rsp[c] + 1) % NUM_BS);
    end
  end
endmodule
