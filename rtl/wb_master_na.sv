// wb_master_na: WISHBONE master network adapter. A master IP core sees it
// as a WISHBONE classic slave; towards the network it sends request
// packets and receives response packets over two four-phase links.
//
// Core interface: wb_master_transfer_unit and wb_master_receive_unit, on
// the core clock clk_i. Network interface: async_transmitter and
// async_receive, on the network clock net_clk. Two synchronizers bring the
// transmitter's tx_ack and the receiver's rx_req into the clk_i domain
// (tx_ack_s, rx_req_s); the other two handshake directions are
// synchronized inside the network-side units. The two units of the core
// interface coordinate a read with read_cmd_req / read_cmd_done.
//
// Timing: a write is acknowledged about 15 clk_i cycles after wb_stb_i
// (store, look-up, packet handed to the link, synchronizer); a read is
// acknowledged when its response has come back through the network.
//
// The partition, the unit names and the pin names follow the paper's
// block diagram. net_clk is this design's addition: the paper's network
// side is self-timed.
module wb_master_na
  import noc_pkg::*;
#(
  parameter route_lut_t ROUTE_LUT = '0
) (
  input  logic              clk_i,
  input  logic              net_clk,
  input  logic              reset_i,
  // WISHBONE slave port (to the master IP core)
  input  logic [ADR_W-1:0]  wb_adr_i,
  input  logic [FLIT_W-1:0] wb_dat_i,
  input  logic              wb_we_i,
  input  logic [SEL_W-1:0]  wb_sel_i,
  input  logic              wb_cyc_i,
  input  logic              wb_stb_i,
  output logic              wb_ack_o,
  output logic              wb_err_o,
  output logic              wb_rty_o,
  output logic [FLIT_W-1:0] wb_dat_o,
  // network link out (requests)
  output logic [FLIT_W-1:0] data_out,
  output logic              rh_out,
  output logic              ri_out,
  output logic              re_out,
  input  logic              ack_out,
  // network link in (responses)
  input  logic [FLIT_W-1:0] data_in,
  input  logic              rh_in,
  input  logic              ri_in,
  input  logic              re_in,
  output logic              ack_in
);
  logic              transmit_req, tx_ack, tx_ack_s;
  pkt_type_e         transmit_packet_type;
  logic [FLIT_W-1:0] transmit_header_flit, transmit_control_flit;
  logic [FLIT_W-1:0] transmit_addr_flit, transmit_data_flit;
  logic              rx_req, rx_req_s, rx_ack;
  logic [FLIT_W-1:0] rcv_header, cmd_response_flit, rcv_addr, data_flit;
  logic              read_cmd_req, read_cmd_done, rsp_err, rsp_rty;

  wb_master_transfer_unit #(.ROUTE_LUT(ROUTE_LUT)) u_transfer (
    .clk_i, .reset_i,
    .wb_adr_i, .wb_dat_i, .wb_we_i, .wb_sel_i, .wb_cyc_i, .wb_stb_i,
    .wb_ack_o, .wb_err_o, .wb_rty_o,
    .transmit_req, .transmit_packet_type, .transmit_header_flit,
    .transmit_control_flit, .transmit_addr_flit, .transmit_data_flit,
    .tx_ack_s, .read_cmd_req, .read_cmd_done, .rsp_err, .rsp_rty);

  wb_master_receive_unit u_receive (
    .clk_i, .reset_i, .rx_req_s, .rx_ack, .cmd_response_flit, .data_flit,
    .read_cmd_req, .read_cmd_done, .rsp_err, .rsp_rty, .wb_dat_o);

  synchronizer u_sync_tx (.clk_in(clk_i), .reset_i, .d_in(tx_ack), .q_out(tx_ack_s));
  synchronizer u_sync_rx (.clk_in(clk_i), .reset_i, .d_in(rx_req), .q_out(rx_req_s));

  async_transmitter u_async_tx (
    .clk(net_clk), .reset_i,
    .transmit_req, .transmit_packet_type, .transmit_header_flit,
    .transmit_control_flit, .transmit_addr_flit, .transmit_data_flit, .tx_ack,
    .data_out, .rh_out, .ri_out, .re_out, .ack_out);

  async_receive u_async_rx (
    .clk(net_clk), .reset_i,
    .data_in, .rh_in, .ri_in, .re_in, .ack_in,
    .rx_req, .rx_ack,
    .receive_header_flit(rcv_header), .receive_control_flit(cmd_response_flit),
    .receive_addr_flit(rcv_addr), .receive_data_flit(data_flit));

  // The master only uses the control and data flits of a response.
  logic unused_rcv;
  assign unused_rcv = ^{rcv_header, rcv_addr};
endmodule
