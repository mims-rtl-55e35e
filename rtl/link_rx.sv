// link_rx -- link-layer receiver of a message link bus. Strips the link
// overhead added by link_tx and hands the payload to the packet decoder.
//
// It waits for a START control flit, takes the sequence id (checked against
// the expected next id), then passes payload flits on. Because the end of
// the payload is only known when the CRC control flit arrives, one payload
// flit is held back; it is released with last=1 together with the CRC. The
// CRC-16-CCITT over SEQ and payload is compared with the received value and
// the END flit is checked. Errors are reported as one-cycle pulses
// (err_seq, err_crc, err_frame); the paper says the overhead carries these
// checks but not what happens on an error, so the packet is still delivered
// and no retry is made. rx_ready back-pressures the link bus.
module link_rx
  import mims_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  link_flit_t rx,
  output logic       rx_ready,
  flit_if.src        out,
  output logic       err_seq,
  output logic       err_crc,
  output logic       err_frame
);
  typedef enum logic [1:0] {S_IDLE, S_SEQ, S_PAY, S_END} state_e;
  state_e       st;
  logic [15:0]  exp_seq, crc_q, hold_q;
  logic         hold_v;

  always_comb begin
    rx_ready  = 1'b1;
    out.valid = 1'b0;
    out.last  = 1'b0;
    out.data  = hold_q;
    if (st == S_PAY && hold_v) begin
      out.valid = rx.valid;
      out.last  = rx.k;
      rx_ready  = out.ready;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; exp_seq <= '0; crc_q <= 16'hFFFF; hold_q <= '0; hold_v <= 1'b0;
      err_seq <= 1'b0; err_crc <= 1'b0; err_frame <= 1'b0;
    end else begin
      err_seq <= 1'b0; err_crc <= 1'b0; err_frame <= 1'b0;
      if (rx.valid && rx_ready) begin
        unique case (st)
          S_IDLE: begin
            if (rx.k && rx.data == K_START) st <= S_SEQ;
            else err_frame <= 1'b1;
          end
          S_SEQ: begin
            if (rx.k) begin err_frame <= 1'b1; st <= S_IDLE; end
            else begin
              if (rx.data != exp_seq) err_seq <= 1'b1;
              exp_seq <= rx.data + 16'd1;
              crc_q   <= crc16_step(16'hFFFF, rx.data);
              hold_v  <= 1'b0;
              st      <= S_PAY;
            end
          end
          S_PAY: begin
            if (!rx.k) begin
              hold_q <= rx.data;
              hold_v <= 1'b1;
              crc_q  <= crc16_step(crc_q, rx.data);
            end else begin
              // CRC flit: closes the payload
              if (rx.data != crc_q) err_crc <= 1'b1;
              if (!hold_v) err_frame <= 1'b1;
              hold_v <= 1'b0;
              st     <= S_END;
            end
          end
          S_END: begin
            if (!(rx.k && rx.data == K_END)) err_frame <= 1'b1;
            st <= S_IDLE;
          end
          default: st <= S_IDLE;
        endcase
      end
    end
  end
endmodule
