// async_transmitter: network-side transmitter of a network adapter.
//
// The core interface hands over a whole packet as bundled data: it sets
// the packet type and the flit words, then raises transmit_req and holds
// everything stable until tx_ack rises; it then lowers transmit_req and
// tx_ack falls (four-phase handshake). The transmitter sends the flits on
// the network link in order: header (rh), then control, address and data
// as needed (ri), the last one as end flit (re):
//   read request   header, control, address
//   write request  header, control, address, data
//   response       header, control, data
// tx_ack rises once the link has acknowledged the end flit.
//
// The paper draws this unit as an asynchronous (self-timed) circuit with
// only a reset. Here it is a controller clocked by the network clock clk;
// transmit_req comes from the core clock domain and passes through a
// synchronizer first. The flit order and the clocked form are this
// design's choices; the unit and its link pins (data_out, rh_out, ri_out,
// re_out, ack_out) are named in the paper.
module async_transmitter
  import noc_pkg::*;
(
  input  logic              clk,
  input  logic              reset_i,
  // core side (bundled data)
  input  logic              transmit_req,
  input  pkt_type_e         transmit_packet_type,
  input  logic [FLIT_W-1:0] transmit_header_flit,
  input  logic [FLIT_W-1:0] transmit_control_flit,
  input  logic [FLIT_W-1:0] transmit_addr_flit,
  input  logic [FLIT_W-1:0] transmit_data_flit,
  output logic              tx_ack,
  // network link
  output logic [FLIT_W-1:0] data_out,
  output logic              rh_out,
  output logic              ri_out,
  output logic              re_out,
  input  logic              ack_out
);
  typedef enum logic [1:0] {AT_IDLE, AT_SEND, AT_FLUSH, AT_ACK} at_state_e;
  at_state_e  state;
  logic       req_s;
  logic [1:0] idx;
  logic [1:0] last_idx;
  logic       f_valid, f_ready;
  flit_t      f_flit;
  link_fwd_t  link;

  synchronizer u_sync_req (.clk_in(clk), .reset_i(reset_i), .d_in(transmit_req), .q_out(req_s));

  assign last_idx = (transmit_packet_type == PKT_WRITE) ? 2'd3 : 2'd2;

  always_comb begin
    f_flit.kind = (idx == 2'd0) ? FL_HEAD : ((idx == last_idx) ? FL_TAIL : FL_BODY);
    unique case (idx)
      2'd0:    f_flit.data = transmit_header_flit;
      2'd1:    f_flit.data = transmit_control_flit;
      2'd2:    f_flit.data = (transmit_packet_type == PKT_RESP) ? transmit_data_flit
                                                                : transmit_addr_flit;
      default: f_flit.data = transmit_data_flit;
    endcase
  end

  assign f_valid = (state == AT_SEND);
  assign tx_ack  = (state == AT_ACK);

  always_ff @(posedge clk) begin
    if (reset_i) begin
      state <= AT_IDLE;
      idx   <= '0;
    end else begin
      unique case (state)
        AT_IDLE: if (req_s) begin
          idx   <= '0;
          state <= AT_SEND;
        end
        AT_SEND: if (f_ready) begin
          if (idx == last_idx) state <= AT_FLUSH;
          else                 idx   <= idx + 2'd1;
        end
        AT_FLUSH: if (f_ready) state <= AT_ACK;   // last flit acknowledged on the link
        AT_ACK: if (!req_s) state <= AT_IDLE;
        default: state <= AT_IDLE;
      endcase
    end
  end

  link_tx u_link_tx (
    .clk(clk), .rst(reset_i), .valid_i(f_valid), .flit_i(f_flit), .ready_o(f_ready),
    .link_o(link), .ack_i(ack_out));

  assign data_out = link.data;
  assign rh_out   = link.rh;
  assign ri_out   = link.ri;
  assign re_out   = link.re;
endmodule
