// tb_wb_noc_top: end-to-end test of the 3 x 3 mesh at its default
// parameters: WISHBONE masters at nodes 0 and 8, behavioural memories at
// the seven slave nodes. Core clock 40 ns (25 MHz), network clock 12 ns.
//  1. Each master alone writes and reads every slave (all 16 table
//     entries, so the wrap-around of the address map too), including
//     err and rty answers; read data must match a shadow copy.
//  2. Both masters read at once over disjoint paths.
//  3. Both masters post writes to the centre node at once, so packets
//     meet at its router's local output and some are dropped; the number
//     of writes that did not land must equal the number of drops.
// Counts each mechanism (write, read, err, rty, parallel read, drop,
// wrap-around) and fails if one never happened.
module tb_wb_noc_top;
  import noc_pkg::*;
  localparam int NN = 9;

  logic              clk = 1'b0, nclk = 1'b0, rst = 1'b1;
  logic [ADR_W-1:0]  m_adr_i [NN];
  logic [FLIT_W-1:0] m_dat_i [NN];
  logic              m_we_i  [NN];
  logic [SEL_W-1:0]  m_sel_i [NN];
  logic              m_cyc_i [NN];
  logic              m_stb_i [NN];
  logic              m_ack_o [NN];
  logic              m_err_o [NN];
  logic              m_rty_o [NN];
  logic [FLIT_W-1:0] m_dat_o [NN];
  logic [ADR_W-1:0]  s_adr_o [NN];
  logic [FLIT_W-1:0] s_dat_o [NN];
  logic              s_we_o  [NN];
  logic [SEL_W-1:0]  s_sel_o [NN];
  logic              s_cyc_o [NN];
  logic              s_stb_o [NN];
  logic              s_ack_i [NN];
  logic              s_err_i [NN];
  logic              s_rty_i [NN];
  logic [FLIT_W-1:0] s_dat_i [NN];
  logic [NPORTS-1:0] drop_o  [NN];
  int                checks = 0, failures = 0;

  always #20 clk = ~clk;
  always #6  nclk = ~nclk;

  wb_noc_top dut (.clk_i(clk), .net_clk(nclk), .reset_i(rst), .*);

  logic [31:0] memview [NN][64];   // copy of the slave memories, one clock late
  for (genvar n = 0; n < NN; n++) begin : g_mem
    tb_wb_mem #(.INIT_BASE(32'(n) << 24)) mem (
      .clk, .rst, .adr(s_adr_o[n]), .dat_w(s_dat_o[n]), .we(s_we_o[n]), .sel(s_sel_o[n]),
      .cyc(s_cyc_o[n]), .stb(s_stb_o[n]), .ack(s_ack_i[n]), .err(s_err_i[n]),
      .rty(s_rty_i[n]), .dat_r(s_dat_i[n]));
    always @(posedge clk) for (int w = 0; w < 64; w++) memview[n][w] <= mem.mem[w];
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin : watchdog
    repeat (12000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int drops = 0;
  always @(posedge nclk) if (!rst) for (int n = 0; n < NN; n++) drops += $countones(drop_o[n]);

  // slave number s -> node (default map: slaves are nodes 1..7)
  function automatic int slave_node(int s);
    return 1 + (s % 7);
  endfunction

  // shadow of every slave memory
  logic [31:0] shadow [NN][64];

  logic [2:0]  term  [NN];
  logic [31:0] rdata [NN];
  task automatic wb_cycle(input int m, input logic we, input logic [31:0] adr, input logic [31:0] dat);
    @(negedge clk);
    m_cyc_i[m] = 1'b1; m_stb_i[m] = 1'b1; m_we_i[m] = we; m_adr_i[m] = adr;
    m_dat_i[m] = dat; m_sel_i[m] = 4'hF;
    @(posedge clk);
    while (!(m_ack_o[m] || m_err_o[m] || m_rty_o[m])) @(posedge clk);
    term[m]  = {m_ack_o[m], m_err_o[m], m_rty_o[m]};
    rdata[m] = m_dat_o[m];
    @(negedge clk);
    m_cyc_i[m] = 1'b0; m_stb_i[m] = 1'b0;
  endtask

  int n_wr = 0, n_rd = 0, n_err = 0, n_rty = 0, n_par = 0, n_wrap = 0;

  task automatic wr(input int m, input int s, input int w, input logic [31:0] d);
    wb_cycle(m, 1'b1, {4'(s), 4'h0, 16'h0, 6'(w), 2'b0}, d);
    check(term[m] == 3'b100, "write acknowledged");
    shadow[slave_node(s)][w] = d;
    n_wr++;
    if (s >= 7) n_wrap++;
  endtask

  task automatic rd(input int m, input int s, input int w);
    wb_cycle(m, 1'b0, {4'(s), 4'h0, 16'h0, 6'(w), 2'b0}, 32'h0);
    check(term[m] == 3'b100, "read acknowledged");
    check(rdata[m] == shadow[slave_node(s)][w],
          $sformatf("master %0d slave %0d word %0d: %h want %h", m, s, w, rdata[m], shadow[slave_node(s)][w]));
    n_rd++;
  endtask

  initial begin
    for (int n = 0; n < NN; n++) begin
      m_adr_i[n] = '0; m_dat_i[n] = '0; m_we_i[n] = 1'b0; m_sel_i[n] = '0;
      m_cyc_i[n] = 1'b0; m_stb_i[n] = 1'b0;
      for (int w = 0; w < 64; w++) shadow[n][w] = (32'(n) << 24) + 32'(w);
    end
    repeat (4) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    repeat (4) @(posedge clk);

    // latency of one posted write and one read, master 0 to node 1 (one hop)
    begin
      time t0;
      t0 = $time;
      wr(0, 0, 1, 32'h1234_5678);
      $display("write to a neighbour: %0d clk_i cycles to wb_ack_o", int'(($time - t0) / 40ns));
      repeat (10) @(posedge clk);
      t0 = $time;
      rd(0, 0, 1);
      $display("read from a neighbour: %0d clk_i cycles to wb_ack_o", int'(($time - t0) / 40ns));
      check(int'(($time - t0) / 40ns) < 200, "one-hop read within 200 core clocks");
    end

    // 1. each master alone, every table entry
    for (int mi = 0; mi < 2; mi++) begin
      int m;
      m = (mi == 0) ? 0 : 8;
      for (int s = 0; s < 16; s++) begin
        int w;
        w = (s * 5 + mi * 3) % 64;
        wr(m, s, w, $urandom);
        rd(m, s, w);
      end
      // err and rty from a slave
      wb_cycle(m, 1'b0, {4'h2, 4'hE, 24'h0}, 32'h0);
      check(term[m] == 3'b010, "read answered with err");
      n_err++;
      wb_cycle(m, 1'b0, {4'h5, 4'hD, 24'h0}, 32'h0);
      check(term[m] == 3'b001, "read answered with rty");
      n_rty++;
    end
    $display("phase 1 done at %0t", $time);

    // 2. parallel reads over disjoint paths (node 0 -> node 5, node 8 -> node 3)
    for (int k = 0; k < 6; k++) begin
      fork
        rd(0, 4, k);
        rd(8, 2, k);
      join
      n_par++;
    end
    $display("phase 2 done at %0t", $time);

    // 3. colliding posted writes to the centre node (slave 3 = node 4)
    begin
      int lost, d0;
      d0 = drops;
      fork
        for (int k = 0; k < 12; k++) begin
          wb_cycle(0, 1'b1, {4'h3, 4'h0, 16'h0, 6'(32 + k), 2'b0}, 32'hA0A0_0000 + 32'(k));
          check(term[0] == 3'b100, "posted write acknowledged");
        end
        for (int k = 0; k < 12; k++) begin
          wb_cycle(8, 1'b1, {4'h3, 4'h0, 16'h0, 6'(48 + k), 2'b0}, 32'hB0B0_0000 + 32'(k));
          check(term[8] == 3'b100, "posted write acknowledged");
        end
      join
      repeat (100) @(posedge clk);
      lost = 0;
      for (int k = 0; k < 12; k++) begin
        if (memview[4][32 + k] != 32'hA0A0_0000 + 32'(k)) lost++;
        else shadow[4][32 + k] = 32'hA0A0_0000 + 32'(k);
        if (memview[4][48 + k] != 32'hB0B0_0000 + 32'(k)) lost++;
        else shadow[4][48 + k] = 32'hB0B0_0000 + 32'(k);
      end
      $display("colliding writes: %0d drops, %0d writes lost", drops - d0, lost);
      check(lost == drops - d0, "every lost write was a dropped packet");
      n_wr += 24 - lost;
    end
    // the network still works after the drops
    rd(0, 3, 32);
    rd(8, 3, 48);

    // every slave memory matches its shadow
    for (int n = 1; n < 8; n++)
      for (int w = 0; w < 64; w++)
        if (memview[n][w] != shadow[n][w]) check(0, $sformatf("node %0d word %0d", n, w));
    check(1, "memories compared");

    $display("writes %0d reads %0d err %0d rty %0d parallel %0d drops %0d wrap %0d",
             n_wr, n_rd, n_err, n_rty, n_par, drops, n_wrap);
    check(n_wr > 0,   "mechanism: posted write");
    check(n_rd > 0,   "mechanism: read with response");
    check(n_err > 0,  "mechanism: err response");
    check(n_rty > 0,  "mechanism: rty response");
    check(n_par > 0,  "mechanism: parallel transfers");
    check(drops > 0,  "mechanism: packet dropped on congestion");
    check(n_wrap > 0, "mechanism: address map wrap-around");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
