// link_rx: receiving end of a four-phase bundled-data link.
//
// Turns the link's request wires (rh/ri/re) and bundled data into a
// valid/ready flit stream. When a request wire is high and the link is not
// yet acknowledged, the flit is offered (valid); once it is taken (ready),
// ack is raised and held until the sender lowers its request, then lowered
// again (return to zero). One flit therefore costs at least three clock
// cycles of this side. The request and data must come from the same clock
// domain or be stable (bundled) before the request rises; both hold inside
// the network, which runs on one clock in this implementation. The paper
// names the rh/ri/re/ack link wires; their exact use and the clocked
// handshake controller are this design's choices.
module link_rx
  import noc_pkg::*;
(
  input  logic      clk,
  input  logic      rst,
  input  link_fwd_t link_i,
  output logic      ack_o,
  output logic      valid_o,
  output flit_t     flit_o,
  input  logic      ready_i
);
  logic req_any;
  assign req_any = link_i.rh | link_i.ri | link_i.re;

  always_ff @(posedge clk) begin
    if (rst)                            ack_o <= 1'b0;
    else if (!ack_o && valid_o && ready_i) ack_o <= 1'b1;
    else if (ack_o && !req_any)         ack_o <= 1'b0;
  end

  assign valid_o     = req_any && !ack_o;
  assign flit_o.kind = link_i.rh ? FL_HEAD : (link_i.re ? FL_TAIL : FL_BODY);
  assign flit_o.data = link_i.data;
endmodule
