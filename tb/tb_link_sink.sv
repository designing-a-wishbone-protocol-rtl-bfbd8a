// tb_link_sink: behavioural receiver for one four-phase link, for
// testbenches. It acknowledges every flit after a random delay of 0 to
// MAX_DELAY clock cycles (when enabled) and keeps what it received, in
// order, in a queue: kind in bits 33:32, data in bits 31:0.
module tb_link_sink
  import noc_pkg::*;
#(
  parameter int MAX_DELAY = 2
) (
  input  logic      clk,
  input  link_fwd_t link,
  output logic      ack
);
  logic [33:0] q [$];
  bit          enable = 1'b1;

  initial begin
    ack = 1'b0;
    forever begin
      @(negedge clk);
      if (enable && (link.rh || link.ri || link.re)) begin
        repeat ($urandom_range(MAX_DELAY)) @(negedge clk);
        q.push_back({link.rh ? FL_HEAD : (link.re ? FL_TAIL : FL_BODY), link.data});
        ack = 1'b1;
        while (link.rh || link.ri || link.re) @(negedge clk);
        ack = 1'b0;
      end
    end
  end
endmodule
