// tb_router_output_port: several inputs compete for one output. Checks
// that one input at a time owns it for a whole packet, that only the
// owner's flits reach the output and only the owner sees ready, that busy
// follows ownership, and that every packet arrives unmixed.
module tb_router_output_port;
  import noc_pkg::*;
  logic              clk = 1'b0, rst = 1'b1;
  logic [NPORTS-1:0] req, gnt, in_valid, in_ready;
  logic              busy, out_valid, out_ready;
  flit_t             in_flit [NPORTS];
  flit_t             out_flit;
  int                checks = 0, failures = 0;

  always #5 clk = ~clk;

  router_output_port dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Each input sends NPKT packets of 3 flits; data = {input, packet, flit}.
  localparam int NPKT = 6;
  int sent_pkts [NPORTS];
  for (genvar i = 0; i < NPORTS; i++) begin : g_src
    initial begin
      req[i] = 1'b0; in_valid[i] = 1'b0; in_flit[i] = '0; sent_pkts[i] = 0;
      wait (!rst);
      for (int p = 0; p < NPKT; p++) begin
        repeat ($urandom_range(6)) @(negedge clk);
        req[i] = 1'b1;
        @(negedge clk);
        while (!gnt[i]) @(negedge clk);
        for (int f = 0; f < 3; f++) begin
          in_valid[i] = 1'b1;
          in_flit[i]  = '{kind: f == 0 ? FL_HEAD : (f == 2 ? FL_TAIL : FL_BODY),
                          data: {8'(i), 8'(p), 16'(f)}};
          @(posedge clk);
          while (!in_ready[i]) @(posedge clk);
          @(negedge clk);
        end
        in_valid[i] = 1'b0;
        req[i]      = 1'b0;
        sent_pkts[i]++;
      end
    end
  end

  // output sink with random readiness; checks packets are unmixed
  int got_pkts [NPORTS];
  int cur_src = -1, cur_flit = 0;
  always @(negedge clk) out_ready <= 1'($urandom_range(3) != 0);
  always @(posedge clk) if (!rst) begin
    check($onehot0(gnt), "one owner");
    check(busy == (gnt != '0), "busy follows ownership");
    check((in_ready & ~gnt) == '0, "ready only to the owner");
    if (out_valid && out_ready) begin
      if (cur_flit == 0) begin
        check(out_flit.kind == FL_HEAD, "packet starts with header");
        cur_src = int'(out_flit.data[31:24]);
      end else
        check(int'(out_flit.data[31:24]) == cur_src, "flits of one packet not mixed");
      check(int'(out_flit.data[15:0]) == cur_flit, "flit order");
      check(gnt[cur_src], "output carries the owner's flit");
      cur_flit++;
      if (cur_flit == 3) begin
        cur_flit = 0;
        got_pkts[cur_src]++;
      end
    end
  end

  initial begin
    out_ready = 1'b1;
    for (int i = 0; i < NPORTS; i++) got_pkts[i] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    wait (sent_pkts[0] == NPKT && sent_pkts[1] == NPKT && sent_pkts[2] == NPKT &&
          sent_pkts[3] == NPKT && sent_pkts[4] == NPKT);
    repeat (5) @(posedge clk);
    for (int i = 0; i < NPORTS; i++)
      check(got_pkts[i] == NPKT, $sformatf("input %0d: %0d packets out", i, got_pkts[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
