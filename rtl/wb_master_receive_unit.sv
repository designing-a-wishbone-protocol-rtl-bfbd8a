// wb_master_receive_unit: core interface of the master network adapter,
// receive direction.
//
// Controller (states as in the paper's ASM chart):
//   WAIT   until the synchronized request of the asynchronous receiver,
//          rx_req_s, is high; the response's command-response and data
//          flits are then registered
//   STORE  read_cmd_done is high; stay while the transfer unit still
//          holds read_cmd_req (it waits for this response)
//   ACK    rx_ack high to the asynchronous receiver; stay while rx_req_s is
//          high (and while read_cmd_done is high), then back to WAIT
// wb_dat_o holds the data of the last response; rsp_err and rsp_rty give
// its status to the transfer unit, which ends the WISHBONE cycle.
//
// States and tests follow the paper; the direction of read_cmd_req and
// read_cmd_done between the two units and the status outputs are this
// design's reading of the block diagram.
module wb_master_receive_unit
  import noc_pkg::*;
(
  input  logic              clk_i,
  input  logic              reset_i,
  // from the asynchronous receiver
  input  logic              rx_req_s,
  output logic              rx_ack,
  input  logic [FLIT_W-1:0] cmd_response_flit,
  input  logic [FLIT_W-1:0] data_flit,
  // with the transfer unit
  input  logic              read_cmd_req,
  output logic              read_cmd_done,
  output logic              rsp_err,
  output logic              rsp_rty,
  // WISHBONE (to the master IP core)
  output logic [FLIT_W-1:0] wb_dat_o
);
  typedef enum logic [1:0] {MR_WAIT, MR_STORE, MR_ACK} mr_state_e;
  mr_state_e  state;
  ctrl_flit_t ctrl;

  assign ctrl = ctrl_flit_t'(cmd_response_flit);

  always_ff @(posedge clk_i) begin
    if (reset_i) begin
      state    <= MR_WAIT;
      wb_dat_o <= '0;
      rsp_err  <= 1'b0;
      rsp_rty  <= 1'b0;
    end else begin
      unique case (state)
        MR_WAIT: if (rx_req_s) begin
          wb_dat_o <= data_flit;
          rsp_err  <= ctrl.err;
          rsp_rty  <= ctrl.rty;
          state    <= MR_STORE;
        end
        MR_STORE: if (!read_cmd_req) state <= MR_ACK;
        MR_ACK:   if (!rx_req_s && !read_cmd_done) state <= MR_WAIT;
        default:  state <= MR_WAIT;
      endcase
    end
  end

  assign read_cmd_done = (state == MR_STORE);
  assign rx_ack        = (state == MR_ACK);
endmodule
