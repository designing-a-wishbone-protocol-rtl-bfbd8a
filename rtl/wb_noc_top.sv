// wb_noc_top: a ROWS x COLS mesh network-on-chip whose nodes are WISHBONE
// IP cores attached through network adapters.
//
// Every node has one five-port router. Neighbouring routers are joined by
// a pair of four-phase links; router ports on the edge of the mesh get no
// input, and anything a router sends off the edge is acknowledged and
// lost. The local port of each router connects to a WISHBONE master
// network adapter where MASTER_MASK has a 1, and to a WISHBONE slave
// network adapter elsewhere. The IP cores themselves are outside: the
// top brings out, per node, the WISHBONE port of its adapter (arrays
// indexed by node number r*COLS+c, row 0 north, column 0 west; the
// entries of the other adapter kind are unused and tied low).
//
// Address map: the highest 4 address bits choose a slave; slave number s
// is the (s mod NSLAVES)-th slave node in node order. Each master's route
// table is computed at elaboration from the node positions (X then Y
// routing). The routers and the network-side halves of the adapters run on
// net_clk, the core-side halves on clk_i.
//
// The 3 x 3 mesh follows the paper's layout figure; which nodes are
// masters, the address map and the XY routes are this design's choices
// (the paper does not give them). The clock split stands in for the
// paper's self-timed network.
module wb_noc_top
  import noc_pkg::*;
#(
  parameter int unsigned ROWS        = 3,
  parameter int unsigned COLS        = 3,
  parameter logic [ROWS*COLS-1:0] MASTER_MASK = (ROWS*COLS)'(1) | ((ROWS*COLS)'(1) << (ROWS*COLS-1)),
  parameter int unsigned FIFO_DEPTH  = 4
) (
  input  logic              clk_i,
  input  logic              net_clk,
  input  logic              reset_i,
  // WISHBONE slave ports of the master adapters (to master IP cores)
  input  logic [ADR_W-1:0]  m_adr_i [ROWS*COLS],
  input  logic [FLIT_W-1:0] m_dat_i [ROWS*COLS],
  input  logic              m_we_i  [ROWS*COLS],
  input  logic [SEL_W-1:0]  m_sel_i [ROWS*COLS],
  input  logic              m_cyc_i [ROWS*COLS],
  input  logic              m_stb_i [ROWS*COLS],
  output logic              m_ack_o [ROWS*COLS],
  output logic              m_err_o [ROWS*COLS],
  output logic              m_rty_o [ROWS*COLS],
  output logic [FLIT_W-1:0] m_dat_o [ROWS*COLS],
  // WISHBONE master ports of the slave adapters (to slave IP cores)
  output logic [ADR_W-1:0]  s_adr_o [ROWS*COLS],
  output logic [FLIT_W-1:0] s_dat_o [ROWS*COLS],
  output logic              s_we_o  [ROWS*COLS],
  output logic [SEL_W-1:0]  s_sel_o [ROWS*COLS],
  output logic              s_cyc_o [ROWS*COLS],
  output logic              s_stb_o [ROWS*COLS],
  input  logic              s_ack_i [ROWS*COLS],
  input  logic              s_err_i [ROWS*COLS],
  input  logic              s_rty_i [ROWS*COLS],
  input  logic [FLIT_W-1:0] s_dat_i [ROWS*COLS],
  // one pulse per packet dropped by a router input port
  output logic [NPORTS-1:0] drop_o  [ROWS*COLS]
);
  localparam int unsigned NN = ROWS * COLS;

  // Node number of the k-th slave (k counted modulo the number of slaves).
  function automatic int slave_node(int k);
    int ns, cnt;
    ns = 0;
    for (int n = 0; n < int'(NN); n++) if (!MASTER_MASK[n]) ns++;
    if (ns == 0) return 0;
    k   = k % ns;
    cnt = 0;
    for (int n = 0; n < int'(NN); n++)
      if (!MASTER_MASK[n]) begin
        if (cnt == k) return n;
        cnt++;
      end
    return 0;
  endfunction

  function automatic route_lut_t make_lut(int m);
    route_lut_t lut;
    for (int s = 0; s < int'(LUT_SIZE); s++) begin
      int d;
      d      = slave_node(s);
      lut[s] = xy_route(m / int'(COLS), m % int'(COLS), d / int'(COLS), d % int'(COLS));
    end
    return lut;
  endfunction

  link_fwd_t r_in_link  [NN][NPORTS];
  logic      r_in_ack   [NN][NPORTS];
  link_fwd_t r_out_link [NN][NPORTS];
  logic      r_out_ack  [NN][NPORTS];

  for (genvar n = 0; n < int'(NN); n++) begin : g_node
    localparam int R = n / int'(COLS);
    localparam int C = n % int'(COLS);

    router #(.FIFO_DEPTH(FIFO_DEPTH)) u_router (
      .clk(net_clk), .rst(reset_i),
      .in_link(r_in_link[n]), .in_ack(r_in_ack[n]),
      .out_link(r_out_link[n]), .out_ack(r_out_ack[n]),
      .drop_o(drop_o[n]));

    // compass links: input of this router from its neighbour, and the ack
    // of this router's output from the neighbour's input
    if (R > 0) begin : g_n
      assign r_in_link[n][PORT_N] = r_out_link[n-int'(COLS)][PORT_S];
      assign r_out_ack[n][PORT_N] = r_in_ack[n-int'(COLS)][PORT_S];
    end else begin : g_n_edge
      assign r_in_link[n][PORT_N] = '0;
      assign r_out_ack[n][PORT_N] = r_out_link[n][PORT_N].rh | r_out_link[n][PORT_N].ri | r_out_link[n][PORT_N].re;
    end
    if (R < int'(ROWS) - 1) begin : g_s
      assign r_in_link[n][PORT_S] = r_out_link[n+int'(COLS)][PORT_N];
      assign r_out_ack[n][PORT_S] = r_in_ack[n+int'(COLS)][PORT_N];
    end else begin : g_s_edge
      assign r_in_link[n][PORT_S] = '0;
      assign r_out_ack[n][PORT_S] = r_out_link[n][PORT_S].rh | r_out_link[n][PORT_S].ri | r_out_link[n][PORT_S].re;
    end
    if (C > 0) begin : g_w
      assign r_in_link[n][PORT_W] = r_out_link[n-1][PORT_E];
      assign r_out_ack[n][PORT_W] = r_in_ack[n-1][PORT_E];
    end else begin : g_w_edge
      assign r_in_link[n][PORT_W] = '0;
      assign r_out_ack[n][PORT_W] = r_out_link[n][PORT_W].rh | r_out_link[n][PORT_W].ri | r_out_link[n][PORT_W].re;
    end
    if (C < int'(COLS) - 1) begin : g_e
      assign r_in_link[n][PORT_E] = r_out_link[n+1][PORT_W];
      assign r_out_ack[n][PORT_E] = r_in_ack[n+1][PORT_W];
    end else begin : g_e_edge
      assign r_in_link[n][PORT_E] = '0;
      assign r_out_ack[n][PORT_E] = r_out_link[n][PORT_E].rh | r_out_link[n][PORT_E].ri | r_out_link[n][PORT_E].re;
    end

    if (MASTER_MASK[n]) begin : g_master
      localparam route_lut_t LUT = make_lut(n);
      wb_master_na #(.ROUTE_LUT(LUT)) u_na (
        .clk_i, .net_clk, .reset_i,
        .wb_adr_i(m_adr_i[n]), .wb_dat_i(m_dat_i[n]), .wb_we_i(m_we_i[n]),
        .wb_sel_i(m_sel_i[n]), .wb_cyc_i(m_cyc_i[n]), .wb_stb_i(m_stb_i[n]),
        .wb_ack_o(m_ack_o[n]), .wb_err_o(m_err_o[n]), .wb_rty_o(m_rty_o[n]),
        .wb_dat_o(m_dat_o[n]),
        .data_out(r_in_link[n][PORT_L].data), .rh_out(r_in_link[n][PORT_L].rh),
        .ri_out(r_in_link[n][PORT_L].ri), .re_out(r_in_link[n][PORT_L].re),
        .ack_out(r_in_ack[n][PORT_L]),
        .data_in(r_out_link[n][PORT_L].data), .rh_in(r_out_link[n][PORT_L].rh),
        .ri_in(r_out_link[n][PORT_L].ri), .re_in(r_out_link[n][PORT_L].re),
        .ack_in(r_out_ack[n][PORT_L]));
      assign s_adr_o[n] = '0;
      assign s_dat_o[n] = '0;
      assign s_we_o[n]  = 1'b0;
      assign s_sel_o[n] = '0;
      assign s_cyc_o[n] = 1'b0;
      assign s_stb_o[n] = 1'b0;
    end else begin : g_slave
      wb_slave_na u_na (
        .clk_i, .net_clk, .reset_i,
        .wb_adr_o(s_adr_o[n]), .wb_dat_o(s_dat_o[n]), .wb_we_o(s_we_o[n]),
        .wb_sel_o(s_sel_o[n]), .wb_cyc_o(s_cyc_o[n]), .wb_stb_o(s_stb_o[n]),
        .wb_ack_i(s_ack_i[n]), .wb_err_i(s_err_i[n]), .wb_rty_i(s_rty_i[n]),
        .wb_dat_i(s_dat_i[n]),
        .data_in(r_out_link[n][PORT_L].data), .rh_in(r_out_link[n][PORT_L].rh),
        .ri_in(r_out_link[n][PORT_L].ri), .re_in(r_out_link[n][PORT_L].re),
        .ack_in(r_out_ack[n][PORT_L]),
        .data_out(r_in_link[n][PORT_L].data), .rh_out(r_in_link[n][PORT_L].rh),
        .ri_out(r_in_link[n][PORT_L].ri), .re_out(r_in_link[n][PORT_L].re),
        .ack_out(r_in_ack[n][PORT_L]));
      assign m_ack_o[n] = 1'b0;
      assign m_err_o[n] = 1'b0;
      assign m_rty_o[n] = 1'b0;
      assign m_dat_o[n] = '0;
    end
  end
endmodule
