// mims_pkg -- types, field layouts and constants shared by the MIMS
// (message interface based memory system) RTL.
//
// A memory request travels from a core to the on-chip memory controller, is
// packed with others of its kind into a message packet, crosses a 16-bit
// point-to-point link bus to a buffer scheduler, and is turned there into
// DDR3 commands for a sub-ranked channel. Read data comes back the same way
// in read-return packets. This package holds the message formats used on the
// link and the DDR3 timing used by the scheduler.
//
// Packet layout on the link (payload, between the link overhead flits):
//   PKHD   (1 flit)  : DBSID[15:12] PT[11:10] CNT[9:3] RV[2:0]
//   RTMSG  (5 flits) : ADDR[79:32] GY[31:28] TO[27:20] TID[19:16] RID[15:6] RSV[5:0]
//                      (read and write packets; most significant flit first)
//   RRMSG  (1 flit)  : RID[15:6] GY[5:2] RSV[1:0]   (read-return packets)
//   WTDA   (GY*4 flits) after each RTMSG of a write packet and each RRMSG
//                      of a read-return packet, least significant flit first.
// The field names (DBSID, PT, CNT, RV, ADDR, GY, TO, TID, WTDA) and the three
// packet types follow the paper; the widths, the flit alignment and the
// 1-flit read-return message are this design's choices.
//
// Address mapping inside one 8 GB system (2 channels x 2 ranks x 8 x 2 Gb):
//   [2:0] byte, [5:3] 8-byte word = sub-rank, [6] channel (buffer scheduler),
//   [7] rank, [10:8] bank, [17:11] 64 B line within the row, [32:18] row.
package mims_pkg;

  // ---------------- message fields ----------------
  localparam int ADDR_W    = 48;   // byte address, 48 bits as printed in the address example
  localparam int GY_W      = 4;    // granularity in 8 B units, 1..8
  localparam int TO_W      = 8;    // timeout (semantic message, carried but not used)
  localparam int TID_W     = 4;    // thread / core id, 16 cores
  localparam int RID_W     = 10;   // read request id, 1024 outstanding reads
  localparam int DBSID_W   = 4;
  localparam int CNT_W     = 7;
  localparam int LINK_W    = 16;   // link bus width
  localparam int WORD_W    = 64;   // 8 B, the minimum granularity
  localparam int LINE_WORDS = 8;   // 64 B cache line
  localparam int DATA_W    = WORD_W * LINE_WORDS;
  localparam int RTMSG_W   = 80;
  localparam int RTMSG_FLITS = RTMSG_W / LINK_W;
  localparam int WORD_FLITS  = WORD_W / LINK_W;

  typedef enum logic [1:0] {
    PT_READ  = 2'd0,
    PT_WRITE = 2'd1,
    PT_RRET  = 2'd2,
    PT_RSV   = 2'd3
  } pkt_type_e;

  typedef struct packed {
    logic [DBSID_W-1:0] dbsid;
    pkt_type_e          pt;
    logic [CNT_W-1:0]   cnt;
    logic [2:0]         rv;
  } pkhd_t;

  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic [GY_W-1:0]   gy;
    logic [TO_W-1:0]   to;
    logic [TID_W-1:0]  tid;
    logic [RID_W-1:0]  rid;
    logic [5:0]        rsv;
  } rtmsg_t;

  typedef struct packed {
    logic [RID_W-1:0] rid;
    logic [GY_W-1:0]  gy;
    logic [1:0]       rsv;
  } rrmsg_t;

  // One request or return as it moves through the queues. data holds GY
  // words packed from bit 0 (word 0 is the word at the request address).
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic [GY_W-1:0]   gy;
    logic [TO_W-1:0]   to;
    logic [TID_W-1:0]  tid;
    logic [RID_W-1:0]  rid;
    logic [DATA_W-1:0] data;
  } msg_t;

  typedef struct packed {
    logic              we;
    logic [ADDR_W-1:0] addr;
    logic [GY_W-1:0]   gy;
    logic [TO_W-1:0]   to;
    logic [DATA_W-1:0] wdata;
  } core_req_t;

  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic [GY_W-1:0]   gy;
    logic [DATA_W-1:0] data;
  } core_resp_t;

  // A link bus symbol: k=1 marks a control (link overhead) flit.
  typedef struct packed {
    logic              valid;
    logic              k;
    logic [LINK_W-1:0] data;
  } link_flit_t;

  localparam logic [LINK_W-1:0] K_START = 16'hFB50;
  localparam logic [LINK_W-1:0] K_END   = 16'hFD50;

  // ---------------- DDR3 side ----------------
  localparam int NRANK = 2;
  localparam int NSUB  = 8;   // sub-ranks per rank, one x8 device each
  localparam int NBANK = 8;
  localparam int ROW_W = 15;  // 32768 rows
  localparam int COL_W = 10;  // 1024 columns
  localparam int DQ_W  = 128; // 64-bit channel, two beats per controller clock

  typedef enum logic [2:0] {
    DDR_NOP = 3'd0,
    DDR_ACT = 3'd1,
    DDR_RD  = 3'd2,
    DDR_WR  = 3'd3,
    DDR_PRE = 3'd4,
    DDR_REF = 3'd5
  } ddr_op_e;

  typedef struct packed {
    ddr_op_e          op;
    logic             rank;
    logic [NSUB-1:0]  sub_mask;  // sub-ranks (devices) selected
    logic [2:0]       bank;
    logic [ROW_W-1:0] row;
    logic [COL_W-1:0] col;
    logic             ap;        // auto-precharge
  } ddr_cmd_t;

  // DDR3-1333 (-15E, 2 Gb x8) timing in clocks of tCK = 1.5 ns.
  localparam int T_CL   = 10;
  localparam int T_CWL  = 7;
  localparam int T_RCD  = 10;
  localparam int T_RP   = 10;
  localparam int T_RAS  = 24;
  localparam int T_RC   = 34;
  localparam int T_RRD  = 4;
  localparam int T_RTP  = 5;
  localparam int T_WR   = 10;
  localparam int T_WTR  = 5;
  localparam int T_CCD  = 4;
  localparam int T_RFC  = 107;
  localparam int T_REFI = 5200;
  localparam int T_FAW  = 20;
  localparam int T_RTRS = 1;
  localparam int BURST_CLK = 4;  // BL8 at two beats per clock

  // ---------------- helpers ----------------
  // Flits taken by the data of a message of granularity gy.
  function automatic int unsigned data_flits(input logic [GY_W-1:0] gy);
    return int'(gy) * WORD_FLITS;
  endfunction

  // Sub-rank mask covered by an access of gy words starting at word w.
  function automatic logic [NSUB-1:0] sub_mask_of(input logic [2:0] w, input logic [GY_W-1:0] gy);
    logic [2*NSUB-1:0] m;
    m = ({{NSUB{1'b0}}, {NSUB{1'b1}}} >> (NSUB - int'(gy))) << w;
    return m[NSUB-1:0];
  endfunction

  // CRC-16-CCITT (x^16+x^12+x^5+1), one 16-bit flit per step, MSB first.
  function automatic logic [15:0] crc16_step(input logic [15:0] crc, input logic [15:0] d);
    logic [15:0] c;
    c = crc;
    for (int i = 15; i >= 0; i--) begin
      if (c[15] ^ d[i]) c = (c << 1) ^ 16'h1021;
      else              c = c << 1;
    end
    return c;
  endfunction

endpackage
