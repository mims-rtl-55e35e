// link_tx -- link-layer transmitter of a message link bus. Wraps each packet
// from the packet generator in the link overhead (LKOH) and drives it on the
// 16-bit link bus.
//
// Frame on the bus: START (control flit), SEQ (16-bit sequence id), the
// payload flits, CRC (control flit carrying CRC-16-CCITT over SEQ and the
// payload), END (control flit). Four 16-bit overhead flits make the 8 B of
// link overhead the paper assumes; it names start, end, sequence id and CRC
// as the contents. The control-flit marker k stands in for the special
// symbols of a serial line code. The bus carries one flit per clock when
// tx_ready is high; a flit is held while tx_ready is low.
module link_tx
  import mims_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  flit_if.snk        in,
  output link_flit_t tx,
  input  logic       tx_ready
);
  typedef enum logic [2:0] {S_IDLE, S_START, S_SEQ, S_PAY, S_CRC, S_END} state_e;
  state_e       st;
  logic [15:0]  seq_q, crc_q;

  always_comb begin
    tx       = '0;
    in.ready = 1'b0;
    unique case (st)
      S_START: tx = '{valid: 1'b1, k: 1'b1, data: K_START};
      S_SEQ:   tx = '{valid: 1'b1, k: 1'b0, data: seq_q};
      S_PAY: begin
        tx       = '{valid: in.valid, k: 1'b0, data: in.data};
        in.ready = tx_ready;
      end
      S_CRC:   tx = '{valid: 1'b1, k: 1'b1, data: crc_q};
      S_END:   tx = '{valid: 1'b1, k: 1'b1, data: K_END};
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; seq_q <= '0; crc_q <= 16'hFFFF;
    end else begin
      unique case (st)
        S_IDLE:  if (in.valid) st <= S_START;
        S_START: if (tx_ready) st <= S_SEQ;
        S_SEQ:   if (tx_ready) begin
          crc_q <= crc16_step(16'hFFFF, seq_q);
          st    <= S_PAY;
        end
        S_PAY:   if (tx_ready && in.valid) begin
          crc_q <= crc16_step(crc_q, in.data);
          if (in.last) st <= S_CRC;
        end
        S_CRC:   if (tx_ready) st <= S_END;
        S_END:   if (tx_ready) begin
          seq_q <= seq_q + 16'd1;
          st    <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
