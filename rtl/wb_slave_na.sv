// wb_slave_na: WISHBONE slave network adapter. It receives request packets
// from the network, runs each as a WISHBONE classic cycle on the slave IP
// core it serves, and for a read sends a response packet back to the
// requesting master.
//
// Core interface: wb_slave_receive_unit (request in, WISHBONE master side)
// and wb_slave_transfer_unit (response out), on the core clock clk_i; the
// receive unit passes the reversed header (route back) to the transfer
// unit and they coordinate a read with read_cmd_req / read_cmd_done.
// Network interface: async_receive and async_transmitter on net_clk, with
// synchronizers for rx_req and tx_ack into the clk_i domain.
//
// Partition and names follow the paper's block diagram; net_clk and the
// controllers of the two core-side units are this design's choices.
module wb_slave_na
  import noc_pkg::*;
(
  input  logic              clk_i,
  input  logic              net_clk,
  input  logic              reset_i,
  // WISHBONE master port (to the slave IP core)
  output logic [ADR_W-1:0]  wb_adr_o,
  output logic [FLIT_W-1:0] wb_dat_o,
  output logic              wb_we_o,
  output logic [SEL_W-1:0]  wb_sel_o,
  output logic              wb_cyc_o,
  output logic              wb_stb_o,
  input  logic              wb_ack_i,
  input  logic              wb_err_i,
  input  logic              wb_rty_i,
  input  logic [FLIT_W-1:0] wb_dat_i,
  // network link in (requests)
  input  logic [FLIT_W-1:0] data_in,
  input  logic              rh_in,
  input  logic              ri_in,
  input  logic              re_in,
  output logic              ack_in,
  // network link out (responses)
  output logic [FLIT_W-1:0] data_out,
  output logic              rh_out,
  output logic              ri_out,
  output logic              re_out,
  input  logic              ack_out
);
  logic              rx_req, rx_req_s, receive_ack;
  logic [FLIT_W-1:0] receive_header_flit, receive_control_flit;
  logic [FLIT_W-1:0] receive_addr_flit, receive_data_flit;
  logic              transmit_req, tx_ack, tx_ack_s;
  logic [FLIT_W-1:0] transmit_header_flit, transmit_control_flit, transmit_data_flit;
  route_t            reversed_header;
  logic              read_cmd_req, read_cmd_done;

  async_receive u_async_rx (
    .clk(net_clk), .reset_i,
    .data_in, .rh_in, .ri_in, .re_in, .ack_in,
    .rx_req, .rx_ack(receive_ack),
    .receive_header_flit, .receive_control_flit, .receive_addr_flit, .receive_data_flit);

  synchronizer u_sync_rx (.clk_in(clk_i), .reset_i, .d_in(rx_req), .q_out(rx_req_s));

  wb_slave_receive_unit u_receive (
    .clk_i, .reset_i, .rx_req_s, .receive_ack,
    .receive_header_flit, .receive_control_flit, .receive_addr_flit, .receive_data_flit,
    .wb_adr_o, .wb_dat_o, .wb_we_o, .wb_sel_o, .wb_cyc_o, .wb_stb_o,
    .wb_ack_i, .wb_err_i, .wb_rty_i,
    .reversed_header, .read_cmd_req, .read_cmd_done);

  wb_slave_transfer_unit u_transfer (
    .clk_i, .reset_i, .wb_ack_i, .wb_err_i, .wb_rty_i, .wb_dat_i,
    .reversed_header, .read_cmd_req, .read_cmd_done,
    .transmit_req, .transmit_header_flit, .transmit_control_flit, .transmit_data_flit,
    .tx_ack_s);

  synchronizer u_sync_tx (.clk_in(clk_i), .reset_i, .d_in(tx_ack), .q_out(tx_ack_s));

  async_transmitter u_async_tx (
    .clk(net_clk), .reset_i,
    .transmit_req, .transmit_packet_type(PKT_RESP), .transmit_header_flit,
    .transmit_control_flit, .transmit_addr_flit('0), .transmit_data_flit, .tx_ack,
    .data_out, .rh_out, .ri_out, .re_out, .ack_out);
endmodule
