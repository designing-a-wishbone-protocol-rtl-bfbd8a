// link_tx: sending end of a four-phase bundled-data link.
//
// Accepts one flit at a time from a valid/ready stream (ready while idle),
// registers it on the link data wires, raises the request wire of its kind
// (rh header, ri inner, re end), waits for ack, lowers the request and
// waits for ack to fall before accepting the next flit. All outputs are
// registered, so data is stable a cycle before and while the request is
// high. The clocked controller is this design's choice; the paper names
// only the link wires.
module link_tx
  import noc_pkg::*;
(
  input  logic      clk,
  input  logic      rst,
  input  logic      valid_i,
  input  flit_t     flit_i,
  output logic      ready_o,
  output link_fwd_t link_o,
  input  logic      ack_i
);
  typedef enum logic [1:0] {TX_IDLE, TX_REQ, TX_RTZ} tx_state_e;
  tx_state_e state;

  assign ready_o = (state == TX_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state  <= TX_IDLE;
      link_o <= '0;
    end else begin
      unique case (state)
        TX_IDLE: if (valid_i) begin
          link_o.data <= flit_i.data;
          link_o.rh   <= (flit_i.kind == FL_HEAD);
          link_o.ri   <= (flit_i.kind == FL_BODY);
          link_o.re   <= (flit_i.kind == FL_TAIL);
          state       <= TX_REQ;
        end
        TX_REQ: if (ack_i) begin
          link_o.rh <= 1'b0;
          link_o.ri <= 1'b0;
          link_o.re <= 1'b0;
          state     <= TX_RTZ;
        end
        TX_RTZ: if (!ack_i) state <= TX_IDLE;
        default: state <= TX_IDLE;
      endcase
    end
  end

  // Four-phase rule: at most one request wire high at a time.
  a_onehot_req: assert property (@(posedge clk) disable iff (rst)
    $onehot0({link_o.rh, link_o.ri, link_o.re}));
endmodule
