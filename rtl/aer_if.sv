// aer_if: one point-to-point Address-Event Representation (AER) link.
// The source puts an address on addr and raises req; the destination answers
// with ack. Every link in this design uses the four-phase protocol:
// req rises (addr stable), ack rises, req falls, ack falls. W is the address
// width. The four-phase choice is this design's; the published system only
// says each event uses a Req/Ack handshake.
interface aer_if #(parameter int W = 9);
  logic         req;
  logic         ack;
  logic [W-1:0] addr;

  modport src (output req, output addr, input ack);
  modport dst (input req, input addr, output ack);
endinterface
