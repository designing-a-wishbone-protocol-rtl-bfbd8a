// router_input_port: input stage of the source-routing router.
//
// Takes flits from the port's input FIFO. On a header flit it decodes the
// two lowest route bits: for a compass input, the code of its own port
// means "local output", any other code names a compass output; for the
// local input the code names the compass output. The header is passed on
// shifted right by two bits with a return code put into the top two bits
// (the input port's own code, or for the local input the code of the
// output taken), so that at the destination the fields hold the way back.
// The port then requests its output from that output's mutex. If the
// output is already owned by another input (congestion), the whole packet
// is read and discarded (drop_o pulses once): the paper's network leaves
// flow control to the end points and drops congested packets. Otherwise
// the packet's flits are forwarded until the end flit has passed, and the
// request is then released.
//
// Routing and the local-port rule follow the paper; the header rewrite
// for the return route, and dropping whenever the output is held by
// another packet, are this design's reading of it.
module router_input_port
  import noc_pkg::*;
#(
  parameter int unsigned PORT = 0   // 0..3 = N,E,S,W, 4 = local
) (
  input  logic              clk,
  input  logic              rst,
  // from the input FIFO
  input  logic              in_valid,
  input  flit_t             in_flit,
  output logic              in_ready,
  // towards the output ports
  output logic [NPORTS-1:0] req,        // one-hot request of an output
  input  logic [NPORTS-1:0] gnt,        // grant of each output to this port
  input  logic [NPORTS-1:0] busy,       // each output owned by some port
  output logic              out_valid,
  output flit_t             out_flit,
  input  logic              out_ready,  // ready of the granted output
  output logic              drop_o
);
  typedef enum logic [1:0] {IP_IDLE, IP_REQ, IP_FWD, IP_DROP} ip_state_e;
  ip_state_e state;

  logic [2:0]        out_sel;
  logic              first;      // header flit not yet forwarded
  logic [1:0]        dir;
  logic [2:0]        dec_out;
  logic [1:0]        ret_code;
  route_t            new_hdr;

  assign dir = in_flit.data[1:0];

  always_comb begin
    if (PORT == PORT_L) begin
      dec_out  = {1'b0, dir};
      ret_code = dir;
    end else begin
      dec_out  = (dir == 2'(PORT)) ? 3'(PORT_L) : {1'b0, dir};
      ret_code = 2'(PORT);
    end
    new_hdr = {ret_code, in_flit.data[FLIT_W-1:2]};
  end

  always_comb begin
    req = '0;
    if (state == IP_REQ || state == IP_FWD) req[out_sel] = 1'b1;
  end

  assign out_valid     = (state == IP_FWD) && in_valid;
  assign out_flit.kind = in_flit.kind;
  assign out_flit.data = (first && in_flit.kind == FL_HEAD) ? new_hdr : in_flit.data;
  assign in_ready      = (state == IP_FWD) ? out_ready : (state == IP_DROP);

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= IP_IDLE;
      out_sel <= '0;
      first   <= 1'b0;
      drop_o  <= 1'b0;
    end else begin
      drop_o <= 1'b0;
      unique case (state)
        IP_IDLE: if (in_valid) begin
          if (in_flit.kind == FL_HEAD) begin
            out_sel <= dec_out;
            first   <= 1'b1;
            state   <= IP_REQ;
          end else begin
            state   <= IP_DROP;  // stray flit without header: discard
            drop_o  <= 1'b1;
          end
        end
        IP_REQ: begin
          if (gnt[out_sel])       state <= IP_FWD;
          else if (busy[out_sel]) begin
            state  <= IP_DROP;
            drop_o <= 1'b1;
          end
        end
        IP_FWD: if (in_valid && out_ready) begin
          first <= 1'b0;
          if (in_flit.kind == FL_TAIL) state <= IP_IDLE;
        end
        IP_DROP: if (in_valid && in_flit.kind == FL_TAIL) state <= IP_IDLE;
        default: state <= IP_IDLE;
      endcase
    end
  end
endmodule
