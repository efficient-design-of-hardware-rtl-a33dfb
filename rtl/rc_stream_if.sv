// rc_stream_if: the three-wire word link between the blocks of the reservoir
// computer: a data word plus req and ack (16 + 2 wires for 16-bit words).
//
// The sender raises req with a word on data; the word is taken on the rising
// clock edge at which req and ack are both high. Until then req must stay high
// and data must not change. The receiver may raise ack before req. The
// assertions below state these rules. Blocks keep plain ports; the top level
// uses instances of this interface to bundle and check each link.
interface rc_stream_if #(parameter int unsigned W = 16) (input logic clk, input logic rst_n);
  logic [W-1:0] data;
  logic         req;
  logic         ack;

  modport source (output data, output req, input ack);
  modport sink   (input data, input req, output ack);

  // A pending word is neither withdrawn nor changed before it is taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n) (req && !ack) |=> (req && $stable(data));
  endproperty
  a_hold: assert property (p_hold) else $error("rc_stream_if: word withdrawn or changed before ack");
endinterface
