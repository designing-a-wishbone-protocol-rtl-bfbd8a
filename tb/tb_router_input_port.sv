// tb_router_input_port: drives packets into two input ports, one compass
// (east, PORT 1) and the local one (PORT 4), and checks the decoded output
// request, the header rewrite (route shifted right by two, return code in
// the top two bits), forwarding of all flits in order once granted, and
// that a packet whose output is owned by another port is dropped whole.
module tb_router_input_port;
  import noc_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // two DUTs, driven alike
  logic              in_valid [2];
  flit_t             in_flit  [2];
  logic              in_ready [2];
  logic [NPORTS-1:0] req [2], gnt [2], busy [2];
  logic              out_valid [2], out_ready [2], drop [2];
  flit_t             out_flit [2];

  router_input_port #(.PORT(1)) dut_e (
    .clk, .rst, .in_valid(in_valid[0]), .in_flit(in_flit[0]), .in_ready(in_ready[0]),
    .req(req[0]), .gnt(gnt[0]), .busy(busy[0]), .out_valid(out_valid[0]),
    .out_flit(out_flit[0]), .out_ready(out_ready[0]), .drop_o(drop[0]));
  router_input_port #(.PORT(4)) dut_l (
    .clk, .rst, .in_valid(in_valid[1]), .in_flit(in_flit[1]), .in_ready(in_ready[1]),
    .req(req[1]), .gnt(gnt[1]), .busy(busy[1]), .out_valid(out_valid[1]),
    .out_flit(out_flit[1]), .out_ready(out_ready[1]), .drop_o(drop[1]));

  // A grant model: grants the requested output one clock after the
  // request unless "blocked", in which case it reports that output busy.
  bit blocked [2];
  for (genvar k = 0; k < 2; k++) begin : g_arb
    always @(posedge clk) begin
      if (rst) begin gnt[k] <= '0; busy[k] <= '0; end
      else if (blocked[k]) begin gnt[k] <= '0; busy[k] <= req[k]; end
      else begin gnt[k] <= req[k]; busy[k] <= req[k]; end
    end
  end

  int   drops [2];
  always @(posedge clk) for (int k = 0; k < 2; k++) if (!rst && drop[k]) drops[k]++;

  // send a packet of n flits to port k and collect what comes out
  task automatic run_packet(input int k, input logic [31:0] hdr, input int n,
                            input int want_out, input logic [31:0] want_hdr,
                            input bit expect_drop);
    flit_t sent [$];
    flit_t got  [$];
    int    req_seen;
    req_seen = -1;
    for (int i = 0; i < n; i++)
      sent.push_back('{kind: (i == 0) ? FL_HEAD : (i == n-1 ? FL_TAIL : FL_BODY),
                       data: (i == 0) ? hdr : $urandom});
    fork
      begin
        foreach (sent[i]) begin
          @(negedge clk);
          in_valid[k] = 1'b1; in_flit[k] = sent[i];
          @(posedge clk);
          while (!in_ready[k]) @(posedge clk);
          #1;
        end
        @(negedge clk) in_valid[k] = 1'b0;
      end
      begin
        repeat (12 * n + 20) begin
          @(posedge clk);
          if (req[k] != '0 && req_seen < 0) req_seen = $clog2(req[k]);
          if (out_valid[k] && out_ready[k]) got.push_back(out_flit[k]);
        end
      end
    join
    if (expect_drop) begin
      check(got.size() == 0, "dropped packet not forwarded");
      check(in_valid[k] == 1'b0, "dropped packet consumed");
    end else begin
      check(req_seen == want_out, $sformatf("port %0d header %h: output %0d, want %0d", k, hdr, req_seen, want_out));
      check(got.size() == n, $sformatf("forwarded %0d of %0d flits", got.size(), n));
      if (got.size() == n) begin
        check(got[0].data == want_hdr && got[0].kind == FL_HEAD,
              $sformatf("header rewrite got %h want %h", got[0].data, want_hdr));
        for (int i = 1; i < n; i++) check(got[i] == sent[i], "flit forwarded unchanged");
      end
      check(req[k] == '0, "request released after end flit");
    end
  endtask

  initial begin
    for (int k = 0; k < 2; k++) begin
      in_valid[k] = 1'b0; in_flit[k] = '0; out_ready[k] = 1'b1; blocked[k] = 1'b0; drops[k] = 0;
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    // east input: code 1 (its own) means local; others are compass outputs
    run_packet(0, 32'h0000_0001, 3, 4, 32'h4000_0000, 0);
    run_packet(0, 32'h0000_00E2, 4, 2, 32'h4000_0038, 0);
    run_packet(0, 32'hC000_0000, 3, 0, 32'h7000_0000, 0);
    run_packet(0, 32'h0000_0003, 3, 3, 32'h4000_0000, 0);
    // local input: the code names the output, return code = that code
    run_packet(1, 32'h0000_0009, 4, 1, 32'h4000_0002, 0);
    run_packet(1, 32'h0000_0002, 3, 2, 32'h8000_0000, 0);
    run_packet(1, 32'h0000_0000, 3, 0, 32'h0000_0000, 0);
    // congestion: output owned by someone else -> whole packet dropped
    blocked[0] = 1'b1;
    run_packet(0, 32'h0000_0002, 4, 2, 32'h0, 1);
    blocked[0] = 1'b0;
    check(drops[0] == 1, $sformatf("one drop counted, got %0d", drops[0]));
    // and the next packet goes through again, with a slow output
    fork
      begin repeat (30) begin @(negedge clk) out_ready[0] = 1'($urandom_range(1)); end out_ready[0] = 1'b1; end
      run_packet(0, 32'h0000_0000, 4, 0, 32'h4000_0000, 0);
    join
    check(drops[1] == 0, "no drop on the local port");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
