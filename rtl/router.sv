// router: five-port router of the mesh (ports N, E, S, W and local).
//
// Each port has a link receiver and an input FIFO feeding an input port,
// and an output port (mutex and merge) feeding an output FIFO and a link
// transmitter. Links are four-phase bundled-data channels (rh/ri/re/data
// forward, ack back). Routing is by source route: every router consumes
// the lowest two bits of the header flit, as described for the input
// port. A packet whose output is held by another packet is dropped; the
// router does no other flow control. drop_o pulses once per dropped
// packet, per input port.
//
// Structure (FIFO, input port, crossbar, merge, output port, mutex) and
// routing follow the paper; the clocked handshake logic, the FIFO depth
// and the port numbering are this design's choices. Latency of an idle
// router is about ten clock cycles from a header's request to the same
// header's request on the output link.
module router
  import noc_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic      clk,
  input  logic      rst,
  input  link_fwd_t in_link  [NPORTS],
  output logic      in_ack   [NPORTS],
  output link_fwd_t out_link [NPORTS],
  input  logic      out_ack  [NPORTS],
  output logic [NPORTS-1:0] drop_o
);
  // input side
  logic              rx_valid [NPORTS];
  flit_t             rx_flit  [NPORTS];
  logic              rx_ready [NPORTS];
  logic              ip_valid [NPORTS];
  flit_t             ip_flit  [NPORTS];
  logic              ip_ready [NPORTS];
  logic [NPORTS-1:0] ip_req   [NPORTS];   // [input][output]
  logic              fw_valid [NPORTS];
  flit_t             fw_flit  [NPORTS];
  logic              fw_ready [NPORTS];   // ready of the granted output

  // output side
  logic [NPORTS-1:0] op_req   [NPORTS];   // [output][input]
  logic [NPORTS-1:0] op_gnt   [NPORTS];   // [output][input]
  logic [NPORTS-1:0] op_ready [NPORTS];   // [output][input]
  logic [NPORTS-1:0] op_busy;
  logic [NPORTS-1:0] in_gnt   [NPORTS];   // [input][output]
  logic [NPORTS-1:0] fw_valid_v;
  logic              mo_valid [NPORTS];
  flit_t             mo_flit  [NPORTS];
  logic              mo_ready [NPORTS];
  logic              tx_valid [NPORTS];
  flit_t             tx_flit  [NPORTS];
  logic              tx_ready [NPORTS];

  // crossbar: transpose request and grant matrices, gather readies
  always_comb begin
    for (int o = 0; o < int'(NPORTS); o++)
      for (int i = 0; i < int'(NPORTS); i++) begin
        op_req[o][i] = ip_req[i][o];
        in_gnt[i][o] = op_gnt[o][i];
      end
    for (int i = 0; i < int'(NPORTS); i++) begin
      fw_ready[i]   = 1'b0;
      fw_valid_v[i] = fw_valid[i];
      for (int o = 0; o < int'(NPORTS); o++)
        fw_ready[i] = fw_ready[i] | op_ready[o][i];
    end
  end

  for (genvar p = 0; p < int'(NPORTS); p++) begin : g_port
    link_rx u_rx (
      .clk, .rst, .link_i(in_link[p]), .ack_o(in_ack[p]),
      .valid_o(rx_valid[p]), .flit_o(rx_flit[p]), .ready_i(rx_ready[p]));

    router_fifo #(.DEPTH(FIFO_DEPTH)) u_in_fifo (
      .clk, .rst,
      .in_valid(rx_valid[p]), .in_flit(rx_flit[p]), .in_ready(rx_ready[p]),
      .out_valid(ip_valid[p]), .out_flit(ip_flit[p]), .out_ready(ip_ready[p]));

    router_input_port #(.PORT(p)) u_ip (
      .clk, .rst,
      .in_valid(ip_valid[p]), .in_flit(ip_flit[p]), .in_ready(ip_ready[p]),
      .req(ip_req[p]), .gnt(in_gnt[p]), .busy(op_busy),
      .out_valid(fw_valid[p]), .out_flit(fw_flit[p]), .out_ready(fw_ready[p]),
      .drop_o(drop_o[p]));

    router_output_port u_op (
      .clk, .rst,
      .req(op_req[p]), .gnt(op_gnt[p]), .busy(op_busy[p]),
      .in_valid(fw_valid_v), .in_flit(fw_flit), .in_ready(op_ready[p]),
      .out_valid(mo_valid[p]), .out_flit(mo_flit[p]), .out_ready(mo_ready[p]));

    router_fifo #(.DEPTH(FIFO_DEPTH)) u_out_fifo (
      .clk, .rst,
      .in_valid(mo_valid[p]), .in_flit(mo_flit[p]), .in_ready(mo_ready[p]),
      .out_valid(tx_valid[p]), .out_flit(tx_flit[p]), .out_ready(tx_ready[p]));

    link_tx u_tx (
      .clk, .rst, .valid_i(tx_valid[p]), .flit_i(tx_flit[p]), .ready_o(tx_ready[p]),
      .link_o(out_link[p]), .ack_i(out_ack[p]));
  end
endmodule
