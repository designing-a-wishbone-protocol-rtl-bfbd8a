// noc_pkg: types, constants and route helper functions shared by the
// WISHBONE network adapters and the source-routing mesh router.
//
// A flit travels on a link as a bundled-data four-phase channel: a 32-bit
// data word and one of three request wires, rh (header flit), ri (inner
// flit) or re (end flit), answered by one ack wire. A header flit carries
// the source route, two bits per router (N=0, E=1, S=2, W=3); the local
// output of a router is selected by the code of the port the packet came
// in on. The packet layouts below (flit order, control-flit fields, the
// direction codes and the 32-bit flit width) are this design's choices;
// the two-bit-per-hop routing and the local-port rule follow the paper.
package noc_pkg;

  localparam int unsigned FLIT_W   = 32;   // flit and WISHBONE data width
  localparam int unsigned ADR_W    = 32;   // WISHBONE address width (paper: 32-bit address)
  localparam int unsigned SEL_W    = 4;    // WISHBONE byte selects
  localparam int unsigned LUT_BITS = 4;    // paper: route taken from the highest 4 address bits
  localparam int unsigned LUT_SIZE = 1 << LUT_BITS;
  localparam int unsigned MAX_HOPS = FLIT_W / 2;  // 2 route bits per router
  localparam int unsigned NPORTS   = 5;    // N, E, S, W, local
  localparam int unsigned PORT_N   = 0;    // port indices of a router
  localparam int unsigned PORT_E   = 1;
  localparam int unsigned PORT_S   = 2;
  localparam int unsigned PORT_W   = 3;
  localparam int unsigned PORT_L   = 4;    // index of the local port in 5-port arrays

  // Compass direction codes, also the port indices 0..3 of a router.
  typedef enum logic [1:0] {
    DIR_N = 2'd0,
    DIR_E = 2'd1,
    DIR_S = 2'd2,
    DIR_W = 2'd3
  } dir_e;

  // Forward half of a link: bundled data plus the three request wires.
  typedef struct packed {
    logic              rh;    // header flit request
    logic              ri;    // inner flit request
    logic              re;    // end flit request
    logic [FLIT_W-1:0] data;
  } link_fwd_t;

  // A flit inside a router or adapter, after the handshake is resolved.
  typedef enum logic [1:0] {
    FL_HEAD = 2'd0,
    FL_BODY = 2'd1,
    FL_TAIL = 2'd2
  } flit_kind_e;

  typedef struct packed {
    flit_kind_e        kind;
    logic [FLIT_W-1:0] data;
  } flit_t;

  // Packet types. Request packets: header, control, address[, data].
  // Response packets: header, control, data.
  typedef enum logic [1:0] {
    PKT_READ  = 2'd0,
    PKT_WRITE = 2'd1,
    PKT_RESP  = 2'd2
  } pkt_type_e;

  // Control flit layout.
  typedef struct packed {
    logic [21:0] rsvd;
    pkt_type_e   pkt;
    logic        ack;    // response: slave ended the cycle with ack
    logic        err;    // response: slave ended the cycle with err
    logic        rty;    // response: slave ended the cycle with rty
    logic        we;     // request: write enable
    logic [SEL_W-1:0] sel;
  } ctrl_flit_t;

  typedef logic [FLIT_W-1:0] route_t;
  typedef route_t [LUT_SIZE-1:0] route_lut_t;

  // Reverse the order of the 2-bit route fields of a header. A header that
  // has crossed k routers holds, in its top k fields, the codes that lead
  // back to its source (each router shifts its own field out at the bottom
  // and its return code in at the top), so reversing the fields gives the
  // route of the answer.
  function automatic route_t reverse_route(route_t h);
    route_t r;
    for (int i = 0; i < int'(MAX_HOPS); i++)
      r[2*i +: 2] = h[2*(int'(MAX_HOPS)-1-i) +: 2];
    return r;
  endfunction

  // Dimension-ordered (X then Y) source route from node (sr,sc) to node
  // (dr,dc) of a mesh, row 0 on the north side, column 0 on the west side.
  // The last field selects the local port of the destination router: it is
  // the code of the port the packet enters that router by. For sr==dr and
  // sc==dc the result is 0 and is not a usable route.
  function automatic route_t xy_route(int sr, int sc, int dr, int dc);
    route_t r;
    int     n;
    logic [1:0] last;
    r    = '0;
    n    = 0;
    last = DIR_N;
    for (int c = sc; c < dc; c++) begin r[2*n +: 2] = DIR_E; n++; last = DIR_W; end
    for (int c = sc; c > dc; c--) begin r[2*n +: 2] = DIR_W; n++; last = DIR_E; end
    for (int q = sr; q < dr; q++) begin r[2*n +: 2] = DIR_S; n++; last = DIR_N; end
    for (int q = sr; q > dr; q--) begin r[2*n +: 2] = DIR_N; n++; last = DIR_S; end
    if (n > 0) r[2*n +: 2] = last;
    return r;
  endfunction

endpackage
