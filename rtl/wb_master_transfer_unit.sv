// wb_master_transfer_unit: core interface of the master network adapter,
// transmit direction. It is the WISHBONE slave that a master IP core
// talks to.
//
// Controller (states as in the paper's ASM chart):
//   WAIT    until wb_cyc_i and wb_stb_i are both high
//   STORE   register address, data, write enable and byte selects
//   LOOKUP  read the route of the target slave from ROUTE_LUT, indexed by
//           the highest 4 address bits (one full clock cycle)
//   REQ     raise transmit_req to the asynchronous transmitter and stay
//           until its (synchronized) acknowledge tx_ack_s; a write then
//           goes to ACK, a read stays until the receive unit reports the
//           response with read_cmd_done (read_cmd_req is high meanwhile)
//   ACK     transmit_req low; stay while tx_ack_s is high, and for a read
//           also while read_cmd_done is high; then back to WAIT
// The WISHBONE cycle is ended in the first clock of ACK, for one clock:
// wb_ack_o, or for a read answered with an error or retry, wb_err_o or
// wb_rty_o (status from the receive unit). Writes are posted: they are
// acknowledged once the packet has left, with no answer from the slave.
//
// The states, their order and their tests follow the paper. Assumptions:
// one-clock termination pulse; err/rty generated here (the paper draws
// them on the receive unit) so that they replace ack as WISHBONE wants;
// the packet layout; ROUTE_LUT as a parameter (the paper does not say how
// the table is filled).
module wb_master_transfer_unit
  import noc_pkg::*;
#(
  parameter route_lut_t ROUTE_LUT = '0
) (
  input  logic              clk_i,
  input  logic              reset_i,
  // WISHBONE (from the master IP core)
  input  logic [ADR_W-1:0]  wb_adr_i,
  input  logic [FLIT_W-1:0] wb_dat_i,
  input  logic              wb_we_i,
  input  logic [SEL_W-1:0]  wb_sel_i,
  input  logic              wb_cyc_i,
  input  logic              wb_stb_i,
  output logic              wb_ack_o,
  output logic              wb_err_o,
  output logic              wb_rty_o,
  // to the asynchronous transmitter
  output logic              transmit_req,
  output pkt_type_e         transmit_packet_type,
  output logic [FLIT_W-1:0] transmit_header_flit,
  output logic [FLIT_W-1:0] transmit_control_flit,
  output logic [FLIT_W-1:0] transmit_addr_flit,
  output logic [FLIT_W-1:0] transmit_data_flit,
  input  logic              tx_ack_s,
  // with the master receive unit
  output logic              read_cmd_req,
  input  logic              read_cmd_done,
  input  logic              rsp_err,
  input  logic              rsp_rty
);
  typedef enum logic [2:0] {MT_WAIT, MT_STORE, MT_LOOKUP, MT_REQ, MT_ACK} mt_state_e;
  mt_state_e         state;
  logic [ADR_W-1:0]  adr_q;
  logic [FLIT_W-1:0] dat_q;
  logic              we_q;
  logic [SEL_W-1:0]  sel_q;
  logic              term;
  ctrl_flit_t        ctrl;

  always_ff @(posedge clk_i) begin
    if (reset_i) begin
      state                <= MT_WAIT;
      adr_q                <= '0;
      dat_q                <= '0;
      we_q                 <= 1'b0;
      sel_q                <= '0;
      transmit_header_flit <= '0;
      term                 <= 1'b0;
    end else begin
      term <= 1'b0;
      unique case (state)
        MT_WAIT:   if (wb_cyc_i && wb_stb_i) state <= MT_STORE;
        MT_STORE: begin
          adr_q <= wb_adr_i;
          dat_q <= wb_dat_i;
          we_q  <= wb_we_i;
          sel_q <= wb_sel_i;
          state <= MT_LOOKUP;
        end
        MT_LOOKUP: begin
          transmit_header_flit <= ROUTE_LUT[adr_q[ADR_W-1 -: LUT_BITS]];
          state                <= MT_REQ;
        end
        MT_REQ: if (tx_ack_s && (we_q || read_cmd_done)) begin
          state <= MT_ACK;
          term  <= 1'b1;
        end
        MT_ACK: if (!tx_ack_s && (we_q || !read_cmd_done)) state <= MT_WAIT;
        default: state <= MT_WAIT;
      endcase
    end
  end

  always_comb begin
    ctrl      = '0;
    ctrl.pkt  = we_q ? PKT_WRITE : PKT_READ;
    ctrl.we   = we_q;
    ctrl.sel  = sel_q;
  end

  assign transmit_req          = (state == MT_REQ);
  assign transmit_packet_type  = we_q ? PKT_WRITE : PKT_READ;
  assign transmit_control_flit = ctrl;
  assign transmit_addr_flit    = adr_q;
  assign transmit_data_flit    = dat_q;
  assign read_cmd_req          = (state == MT_REQ) && !we_q;

  assign wb_ack_o = term && (we_q || !(rsp_err || rsp_rty));
  assign wb_err_o = term && !we_q && rsp_err;
  assign wb_rty_o = term && !we_q && !rsp_err && rsp_rty;

  a_one_term: assert property (@(posedge clk_i) disable iff (reset_i)
    $onehot0({wb_ack_o, wb_err_o, wb_rty_o}));
endmodule
