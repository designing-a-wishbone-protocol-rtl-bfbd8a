// wb_slave_receive_unit: core interface of the slave network adapter,
// receive direction. It is the WISHBONE master of the slave IP core.
//
// Controller:
//   WAIT   until the synchronized request of the asynchronous receiver,
//          rx_req_s, is high; header, control, address and data flits are
//          then registered
//   BUS    run one WISHBONE classic cycle (cyc, stb, adr, dat, we, sel) on
//          the slave until it ends it with ack, err or rty
//   RESP   for a read only: read_cmd_req high, with the route back to the
//          requesting master on reversed_header, until the transfer unit
//          has sent the response (read_cmd_done)
//   ACK    receive_ack high to the asynchronous receiver until rx_req_s and
//          read_cmd_done are both low, then back to WAIT
// A write gets no response packet (writes are posted by the master NA).
//
// The paper names this unit, its pins and the reversed header, and says
// its controller differs from the master's, but gives no chart for it: the
// states above are this design's. The reversed header is the received
// header with its 2-bit route fields in reverse order (see noc_pkg).
// wb_err_i and wb_rty_i also end the cycle here (the paper draws only
// wb_ack_i to this unit).
module wb_slave_receive_unit
  import noc_pkg::*;
(
  input  logic              clk_i,
  input  logic              reset_i,
  // from the asynchronous receiver
  input  logic              rx_req_s,
  output logic              receive_ack,
  input  logic [FLIT_W-1:0] receive_header_flit,
  input  logic [FLIT_W-1:0] receive_control_flit,
  input  logic [FLIT_W-1:0] receive_addr_flit,
  input  logic [FLIT_W-1:0] receive_data_flit,
  // WISHBONE (to the slave IP core)
  output logic [ADR_W-1:0]  wb_adr_o,
  output logic [FLIT_W-1:0] wb_dat_o,
  output logic              wb_we_o,
  output logic [SEL_W-1:0]  wb_sel_o,
  output logic              wb_cyc_o,
  output logic              wb_stb_o,
  input  logic              wb_ack_i,
  input  logic              wb_err_i,
  input  logic              wb_rty_i,
  // with the slave transfer unit
  output route_t            reversed_header,
  output logic              read_cmd_req,
  input  logic              read_cmd_done
);
  typedef enum logic [1:0] {SR_WAIT, SR_BUS, SR_RESP, SR_ACK} sr_state_e;
  sr_state_e  state;
  ctrl_flit_t ctrl;

  assign ctrl = ctrl_flit_t'(receive_control_flit);

  always_ff @(posedge clk_i) begin
    if (reset_i) begin
      state           <= SR_WAIT;
      wb_adr_o        <= '0;
      wb_dat_o        <= '0;
      wb_we_o         <= 1'b0;
      wb_sel_o        <= '0;
      reversed_header <= '0;
    end else begin
      unique case (state)
        SR_WAIT: if (rx_req_s) begin
          wb_adr_o        <= receive_addr_flit;
          wb_dat_o        <= receive_data_flit;
          wb_we_o         <= ctrl.we;
          wb_sel_o        <= ctrl.sel;
          reversed_header <= reverse_route(receive_header_flit);
          state           <= SR_BUS;
        end
        SR_BUS: if (wb_ack_i || wb_err_i || wb_rty_i)
          state <= wb_we_o ? SR_ACK : SR_RESP;
        SR_RESP: if (read_cmd_done) state <= SR_ACK;
        SR_ACK:  if (!rx_req_s && !read_cmd_done) state <= SR_WAIT;
        default: state <= SR_WAIT;
      endcase
    end
  end

  assign wb_cyc_o     = (state == SR_BUS);
  assign wb_stb_o     = (state == SR_BUS);
  assign read_cmd_req = (state == SR_RESP);
  assign receive_ack  = (state == SR_ACK);
endmodule
