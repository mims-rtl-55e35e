// return_buf -- return buffer of a buffer scheduler: a FIFO of completed
// reads (request id, granularity, data) waiting to be packed into
// read-return packets. It presents the source port the packet generator
// expects: entry count, packet type (always read-return) and a combinational
// head, popped by the generator. The paper names the return buffer; its
// depth and FIFO order are this design's choices.
module return_buf
  import mims_pkg::*;
#(
  parameter int DEPTH = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       push,
  input  msg_t       din,
  output logic       full,
  input  logic       pop,
  output logic [7:0] count,
  output pkt_type_e  pt,
  output msg_t       head
);
  localparam int AW = $clog2(DEPTH);
  msg_t mem [DEPTH];
  logic [AW-1:0] rp, wp;

  assign full = (count == 8'(DEPTH));
  assign pt   = PT_RRET;
  assign head = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; count <= '0;
    end else begin
      if (push && !full) begin
        mem[wp] <= din;
        wp <= AW'((int'(wp) + 1) % DEPTH);
      end
      if (pop && count != 0) rp <= AW'((int'(rp) + 1) % DEPTH);
      count <= count + 8'(push && !full) - 8'(pop && count != 0);
    end
  end
endmodule
