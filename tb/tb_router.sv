// tb_router: drives the five links of one router with four-phase senders
// and receivers. Checks, for every input and route code, that the packet
// leaves by the right output (a compass input's own code selects the
// local output) with its header shifted and the return code inserted, and
// its other flits unchanged; that packets to different outputs pass at the
// same time; and that of two packets racing for one output one arrives and
// the other is dropped (drop_o). Also measures the header latency.
module tb_router;
  import noc_pkg::*;
  logic      clk = 1'b0, rst = 1'b1;
  link_fwd_t in_link  [NPORTS];
  logic      in_ack   [NPORTS];
  link_fwd_t out_link [NPORTS];
  logic      out_ack  [NPORTS];
  logic [NPORTS-1:0] drop_o;
  int        checks = 0, failures = 0;
  logic [33:0] q [NPORTS][$];
  int        drops = 0;

  always #5 clk = ~clk;

  router dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin : watchdog
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst) drops += $countones(drop_o);

  // receivers: acknowledge after 0..2 clocks, record the flits
  for (genvar o = 0; o < NPORTS; o++) begin : g_sink
    initial begin
      out_ack[o] = 1'b0;
      forever begin
        @(negedge clk);
        if (out_link[o].rh || out_link[o].ri || out_link[o].re) begin
          repeat ($urandom_range(2)) @(negedge clk);
          q[o].push_back({out_link[o].rh ? FL_HEAD : (out_link[o].re ? FL_TAIL : FL_BODY),
                          out_link[o].data});
          out_ack[o] = 1'b1;
          while (out_link[o].rh || out_link[o].ri || out_link[o].re) @(negedge clk);
          out_ack[o] = 1'b0;
        end
      end
    end
  end

  task automatic send_flit(input int p, input flit_kind_e k, input logic [31:0] d);
    @(negedge clk);
    in_link[p].data = d;
    @(negedge clk);
    in_link[p].rh = (k == FL_HEAD);
    in_link[p].ri = (k == FL_BODY);
    in_link[p].re = (k == FL_TAIL);
    while (!in_ack[p]) @(negedge clk);
    in_link[p].rh = 1'b0; in_link[p].ri = 1'b0; in_link[p].re = 1'b0;
    while (in_ack[p]) @(negedge clk);
  endtask

  task automatic send_pkt(input int p, input logic [31:0] hdr, input int n, input logic [31:0] tag);
    send_flit(p, FL_HEAD, hdr);
    for (int i = 1; i < n; i++) send_flit(p, i == n-1 ? FL_TAIL : FL_BODY, tag + 32'(i));
  endtask

  function automatic int expect_out(int p, logic [1:0] code);
    if (p == int'(PORT_L)) return int'(code);
    return (int'(code) == p) ? int'(PORT_L) : int'(code);
  endfunction

  function automatic logic [31:0] expect_hdr(int p, logic [31:0] hdr);
    logic [1:0] rc;
    rc = (p == int'(PORT_L)) ? hdr[1:0] : 2'(p);
    return {rc, hdr[31:2]};
  endfunction

  task automatic check_pkt(input int o, input logic [31:0] hdr, input int n, input logic [31:0] tag, input string what);
    check(q[o].size() >= n, $sformatf("%s: %0d flits at output %0d", what, q[o].size(), o));
    if (q[o].size() >= n) begin
      logic [33:0] f;
      f = q[o].pop_front();
      check(f == {FL_HEAD, hdr}, $sformatf("%s: header %h", what, f[31:0]));
      for (int i = 1; i < n; i++) begin
        f = q[o].pop_front();
        check(f == {(i == n-1) ? FL_TAIL : FL_BODY, tag + 32'(i)}, $sformatf("%s: flit %0d", what, i));
      end
    end
  endtask

  initial begin
    int lat;
    for (int p = 0; p < NPORTS; p++) in_link[p] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    // every input, every code (no U-turn from local: local input never
    // reaches the local output)
    for (int p = 0; p < NPORTS; p++)
      for (int c = 0; c < 4; c++) begin
        logic [31:0] hdr, tag;
        int o;
        hdr = {$urandom} & 32'hFFFF_FFFC | 32'(c);
        tag = {8'(p), 8'(c), 16'h0};
        o   = expect_out(p, 2'(c));
        send_pkt(p, hdr, 3 + (c % 2), tag);
        repeat (30) @(negedge clk);
        check_pkt(o, expect_hdr(p, hdr), 3 + (c % 2), tag, $sformatf("in %0d code %0d", p, c));
      end
    for (int o = 0; o < NPORTS; o++) check(q[o].size() == 0, "no stray flits");
    // latency of a header through an idle router
    fork
      send_pkt(0, 32'h0000_0002, 3, 32'h100);
      begin
        lat = 0;
        @(posedge in_link[0].rh);
        while (!out_link[2].rh) begin @(posedge clk); lat++; end
      end
    join
    $display("header latency %0d clocks", lat);
    check(lat > 0 && lat < 20, "header latency bounded");
    repeat (30) @(negedge clk);
    check_pkt(2, 32'h0000_0000, 3, 32'h100, "latency packet");
    // four packets at once to four different outputs: all pass
    fork
      send_pkt(0, 32'h0000_0001, 4, 32'h200);   // N -> E
      send_pkt(1, 32'h0000_0002, 4, 32'h300);   // E -> S
      send_pkt(2, 32'h0000_0003, 4, 32'h400);   // S -> W
      send_pkt(4, 32'h0000_0000, 4, 32'h500);   // L -> N
    join
    repeat (40) @(negedge clk);
    check_pkt(1, 32'h0000_0000, 4, 32'h200, "parallel N->E");
    check_pkt(2, 32'h4000_0000, 4, 32'h300, "parallel E->S");
    check_pkt(3, 32'h8000_0000, 4, 32'h400, "parallel S->W");
    check_pkt(0, 32'h0000_0000, 4, 32'h500, "parallel L->N");
    check(drops == 0, "no drop without contention");
    // two packets race for the local output: one passes, one is dropped
    fork
      send_pkt(1, 32'h0000_0001, 4, 32'h600);   // E, own code -> local
      send_pkt(3, 32'h0000_0003, 4, 32'h700);   // W, own code -> local
    join
    repeat (40) @(negedge clk);
    check(drops == 1, $sformatf("one packet dropped, got %0d", drops));
    check(q[PORT_L].size() == 4, $sformatf("one whole packet out, %0d flits", q[PORT_L].size()));
    if (q[PORT_L].size() == 4) begin
      if (q[PORT_L][1][31:0] == 32'h601) check_pkt(PORT_L, 32'h4000_0000, 4, 32'h600, "race winner E");
      else                               check_pkt(PORT_L, 32'hC000_0000, 4, 32'h700, "race winner W");
    end
    // after the drop the port works again
    send_pkt(3, 32'h0000_0003, 3, 32'h800);
    repeat (30) @(negedge clk);
    check_pkt(PORT_L, 32'hC000_0000, 3, 32'h800, "after drop");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
