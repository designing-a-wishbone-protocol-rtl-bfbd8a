// async_receive: network-side receiver of a network adapter.
//
// Accepts the flits of one packet from the network link (header on rh,
// inner flits on ri, the end flit on re), acknowledging each, and stores
// them: header, control, third flit (address) and the last flit (data).
// After the end flit it raises rx_req towards the core interface, with the
// stored flits as bundled data, and waits for rx_ack; it then lowers
// rx_req, waits for rx_ack to fall and only then accepts the next packet,
// which meanwhile waits in the router's buffers.
//
// As for the transmitter, the paper's self-timed unit is built here as a
// controller on the network clock clk, and rx_ack from the core clock
// domain passes a synchronizer. The storage layout is this design's
// choice; the unit and its link pins (data_in, rh_in, ri_in, re_in,
// ack_in) are named in the paper.
module async_receive
  import noc_pkg::*;
(
  input  logic              clk,
  input  logic              reset_i,
  // network link
  input  logic [FLIT_W-1:0] data_in,
  input  logic              rh_in,
  input  logic              ri_in,
  input  logic              re_in,
  output logic              ack_in,
  // core side (bundled data)
  output logic              rx_req,
  input  logic              rx_ack,
  output logic [FLIT_W-1:0] receive_header_flit,
  output logic [FLIT_W-1:0] receive_control_flit,
  output logic [FLIT_W-1:0] receive_addr_flit,
  output logic [FLIT_W-1:0] receive_data_flit
);
  typedef enum logic [1:0] {AR_COLLECT, AR_REQ, AR_RTZ} ar_state_e;
  ar_state_e  state;
  logic       ack_s;
  logic [1:0] idx;
  logic       f_valid, f_ready;
  flit_t      f_flit;
  link_fwd_t  link;

  assign link = '{rh: rh_in, ri: ri_in, re: re_in, data: data_in};

  synchronizer u_sync_ack (.clk_in(clk), .reset_i(reset_i), .d_in(rx_ack), .q_out(ack_s));

  link_rx u_link_rx (
    .clk(clk), .rst(reset_i), .link_i(link), .ack_o(ack_in),
    .valid_o(f_valid), .flit_o(f_flit), .ready_i(f_ready));

  assign f_ready = (state == AR_COLLECT);
  assign rx_req  = (state == AR_REQ);

  always_ff @(posedge clk) begin
    if (reset_i) begin
      state                <= AR_COLLECT;
      idx                  <= '0;
      receive_header_flit  <= '0;
      receive_control_flit <= '0;
      receive_addr_flit    <= '0;
      receive_data_flit    <= '0;
    end else begin
      unique case (state)
        AR_COLLECT: if (f_valid) begin
          if (f_flit.kind == FL_HEAD) begin
            receive_header_flit <= f_flit.data;
            idx                 <= 2'd1;
          end else begin
            if (idx == 2'd1) receive_control_flit <= f_flit.data;
            if (idx == 2'd2) receive_addr_flit    <= f_flit.data;
            if (f_flit.kind == FL_TAIL) begin
              receive_data_flit <= f_flit.data;
              state             <= AR_REQ;
            end
            if (idx != 2'd3) idx <= idx + 2'd1;
          end
        end
        AR_REQ: if (ack_s)  state <= AR_RTZ;
        AR_RTZ: if (!ack_s) state <= AR_COLLECT;
        default: state <= AR_COLLECT;
      endcase
    end
  end
endmodule
