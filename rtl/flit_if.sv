// flit_if -- one direction of a 16-bit flit stream with valid/ready flow
// control, used between the packet generator and the link transmitter and
// between the link receiver and the packet decoder.
//
// A flit moves on a clock edge where valid and ready are both high. last
// marks the final flit of a packet. Once valid is raised, valid, data and
// last hold until the flit is taken (checked by the assertion below). The
// handshake is this design's choice; the paper does not define one.
interface flit_if (input logic clk, input logic rst_n);
  import mims_pkg::*;
  logic              valid;
  logic              ready;
  logic              last;
  logic [LINK_W-1:0] data;

  modport src (output valid, last, data, input ready);
  modport snk (input valid, last, data, output ready);

  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (valid && !ready) |=> (valid && $stable(data) && $stable(last));
  endproperty
  a_hold: assert property (p_hold) else $error("flit_if: flit changed before it was taken");
endinterface
