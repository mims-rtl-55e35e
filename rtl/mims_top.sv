// mims_top -- a message interface based memory system (MIMS): one on-chip
// memory controller and NUM_BS buffer schedulers joined by point-to-point
// 16-bit message link buses, each buffer scheduler driving one sub-ranked
// DDR3 channel.
//
// Cores issue variable-granularity requests (1..8 words of 8 B inside one
// 64 B line) on core_req_*; read data comes back on core_resp_* in any
// order, tagged with its address. Each channel's DDR3 command and data
// signals (controller side of the PHY) are ports; the DRAM devices, the
// PHYs, the link SerDes and the cores are outside this RTL. The link buses
// are wired straight through (the serial PHY is not modelled). Everything
// runs on one clock. err collects one-cycle error pulses: for each buffer
// scheduler the controller's 7 bits {seq, crc, frame, dest, type, len, gy}
// (upstream link) then the buffer scheduler's 6 bits (downstream link).
module mims_top
  import mims_pkg::*;
#(
  parameter int NCORE  = 16,
  parameter int NUM_BS = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            core_req_valid [NCORE],
  input  core_req_t       core_req       [NCORE],
  output logic            core_req_ready [NCORE],
  output logic            core_resp_valid[NCORE],
  output core_resp_t      core_resp      [NCORE],
  output ddr_cmd_t        ddr_cmd        [NUM_BS],
  output logic [DQ_W-1:0] dq_wdata       [NUM_BS],
  output logic [NSUB-1:0] dq_wen         [NUM_BS],
  input  logic [DQ_W-1:0] dq_rdata       [NUM_BS],
  output logic            wq_drain       [NUM_BS],
  output logic [12:0]     err            [NUM_BS]
);
  link_flit_t dn [NUM_BS];
  link_flit_t up [NUM_BS];
  logic       dn_ready [NUM_BS];
  logic       up_ready [NUM_BS];
  logic [6:0] mc_err [NUM_BS];

  mem_ctrl #(.NCORE(NCORE), .NUM_BS(NUM_BS)) u_mc (
    .clk, .rst_n, .core_req_valid, .core_req, .core_req_ready, .core_resp_valid, .core_resp,
    .dn_tx(dn), .dn_tx_ready(dn_ready), .up_rx(up), .up_rx_ready(up_ready),
    .drain(wq_drain), .err(mc_err));

  for (genvar b = 0; b < NUM_BS; b++) begin : g_bs
    logic [5:0] bs_err;
    logic [7:0] occ;
    buffer_sched #(.BS_ID(b)) u_bs (
      .clk, .rst_n, .dn_rx(dn[b]), .dn_rx_ready(dn_ready[b]), .up_tx(up[b]), .up_tx_ready(up_ready[b]),
      .ddr_cmd(ddr_cmd[b]), .dq_wdata(dq_wdata[b]), .dq_wen(dq_wen[b]), .dq_rdata(dq_rdata[b]),
      .err(bs_err), .occupancy(occ));
    assign err[b] = {mc_err[b], bs_err};
  end
endmodule
