// router_output_port: output stage of the router, with its mutex and the
// merge (the output's column of the crossbar).
//
// Every input port may request this output. The mutex grants it to one
// input at a time, and the grant is held for the whole packet (until the
// input lowers its request after the end flit). The merge passes the
// granted input's flits on to the output FIFO and returns that FIFO's
// ready to the granted input only. busy tells the input ports that the
// output is owned, which makes a late header drop its packet. The paper
// lists mutex, crossbar and merge as router parts; combining them per
// output this way is this design's choice.
module router_output_port
  import noc_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic [NPORTS-1:0] req,        // request of each input port
  output logic [NPORTS-1:0] gnt,
  output logic              busy,
  input  logic [NPORTS-1:0] in_valid,
  input  flit_t             in_flit [NPORTS],
  output logic [NPORTS-1:0] in_ready,
  output logic              out_valid,
  output flit_t             out_flit,
  input  logic              out_ready
);
  mutex #(.N(NPORTS)) u_mutex (.clk(clk), .rst(rst), .req(req), .gnt(gnt));

  assign busy = |gnt;

  always_comb begin
    out_valid = 1'b0;
    out_flit  = '0;
    for (int i = 0; i < int'(NPORTS); i++) begin
      if (gnt[i]) begin
        out_valid = in_valid[i];
        out_flit  = in_flit[i];
      end
    end
    in_ready = gnt & {NPORTS{out_ready}};
  end
endmodule
