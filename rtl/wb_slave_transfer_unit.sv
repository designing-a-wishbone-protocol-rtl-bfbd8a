// wb_slave_transfer_unit: core interface of the slave network adapter,
// transmit direction. Sends the response to a read back to the master.
//
// Whenever the slave IP core ends a cycle (wb_ack_i, wb_err_i or
// wb_rty_i) its read data and the way it ended are registered. Controller:
//   WAIT  until the receive unit raises read_cmd_req
//   REQ   transmit_req high to the asynchronous transmitter with a response
//         packet: header = reversed_header, control = status, data = the
//         registered read data; stay until tx_ack_s
//   DONE  transmit_req low, read_cmd_done high; stay until tx_ack_s and
//         read_cmd_req are both low, then back to WAIT
//
// The paper names the unit, its pins and that wb_ack_i reaches it, but
// gives no chart: the states and the response layout are this design's.
module wb_slave_transfer_unit
  import noc_pkg::*;
(
  input  logic              clk_i,
  input  logic              reset_i,
  // WISHBONE (from the slave IP core)
  input  logic              wb_ack_i,
  input  logic              wb_err_i,
  input  logic              wb_rty_i,
  input  logic [FLIT_W-1:0] wb_dat_i,
  // with the slave receive unit
  input  route_t            reversed_header,
  input  logic              read_cmd_req,
  output logic              read_cmd_done,
  // to the asynchronous transmitter
  output logic              transmit_req,
  output logic [FLIT_W-1:0] transmit_header_flit,
  output logic [FLIT_W-1:0] transmit_control_flit,
  output logic [FLIT_W-1:0] transmit_data_flit,
  input  logic              tx_ack_s
);
  typedef enum logic [1:0] {ST_WAIT, ST_REQ, ST_DONE} st_state_e;
  st_state_e         state;
  logic [FLIT_W-1:0] rdat_q;
  logic              ack_q, err_q, rty_q;
  ctrl_flit_t        ctrl;

  always_ff @(posedge clk_i) begin
    if (reset_i) begin
      state  <= ST_WAIT;
      rdat_q <= '0;
      ack_q  <= 1'b0;
      err_q  <= 1'b0;
      rty_q  <= 1'b0;
    end else begin
      if (wb_ack_i || wb_err_i || wb_rty_i) begin
        rdat_q <= wb_dat_i;
        ack_q  <= wb_ack_i;
        err_q  <= wb_err_i;
        rty_q  <= wb_rty_i && !wb_err_i;
      end
      unique case (state)
        ST_WAIT: if (read_cmd_req) state <= ST_REQ;
        ST_REQ:  if (tx_ack_s)     state <= ST_DONE;
        ST_DONE: if (!tx_ack_s && !read_cmd_req) state <= ST_WAIT;
        default: state <= ST_WAIT;
      endcase
    end
  end

  always_comb begin
    ctrl     = '0;
    ctrl.pkt = PKT_RESP;
    ctrl.ack = ack_q;
    ctrl.err = err_q;
    ctrl.rty = rty_q;
  end

  assign transmit_req          = (state == ST_REQ);
  assign transmit_header_flit  = reversed_header;
  assign transmit_control_flit = ctrl;
  assign transmit_data_flit    = rdat_q;
  assign read_cmd_done         = (state == ST_DONE);
endmodule
