// tb_link_src: behavioural sender for one four-phase bundled-data link,
// for testbenches. send() puts a flit on the link, raises the request wire
// of its kind, waits for ack, lowers the request and waits for ack to fall.
// Signals change half a clock period after a rising edge of clk.
module tb_link_src
  import noc_pkg::*;
(
  input  logic      clk,
  output link_fwd_t link,
  input  logic      ack
);
  initial link = '0;

  task automatic send(input flit_kind_e kind, input logic [FLIT_W-1:0] data);
    @(negedge clk);
    link.data = data;
    @(negedge clk);
    link.rh = (kind == FL_HEAD);
    link.ri = (kind == FL_BODY);
    link.re = (kind == FL_TAIL);
    while (!ack) @(negedge clk);
    link.rh = 1'b0;
    link.ri = 1'b0;
    link.re = 1'b0;
    while (ack) @(negedge clk);
  endtask

  // A whole packet: header, inner flits, end flit (n >= 2 flits).
  task automatic send_packet(input logic [FLIT_W-1:0] flits [], input int n);
    for (int i = 0; i < n; i++)
      send(i == 0 ? FL_HEAD : (i == n - 1 ? FL_TAIL : FL_BODY), flits[i]);
  endtask
endmodule
