// tb_mutex: checks the five-way mutex: at most one grant, grants only to
// requesters, a grant held until its requester lets go, round-robin order
// when everybody keeps asking, and a lone request granted one clock later.
module tb_mutex;
  localparam int N = 5;
  logic         clk = 1'b0, rst = 1'b1;
  logic [N-1:0] req = '0, gnt;
  int           checks = 0, failures = 0;
  int           order [$];

  always #5 clk = ~clk;

  mutex #(.N(N)) dut (.clk, .rst, .req, .gnt);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // rules checked every cycle
  logic [N-1:0] gnt_q;
  // sampled just after each rising edge; req only changes on falling edges
  always @(posedge clk) begin
    #1;
    if (!rst) begin
      check($onehot0(gnt), "at most one grant");
      check((gnt & ~req) == '0, "grant only while requested");
      if ((gnt_q & req) != '0) check(gnt == gnt_q, "grant held while requested");
      if (gnt_q != '0 && (gnt_q & req) == '0) check(gnt == '0, "grant released");
    end
    gnt_q = gnt;
  end

  initial begin
    gnt_q = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    // lone request: granted at the next edge
    req = 5'b00100;
    @(posedge clk); #1 check(gnt == 5'b00100, "lone request granted after one clock");
    @(negedge clk) req = '0;
    @(posedge clk); #1 check(gnt == '0, "released");
    // everybody asks, each lets go two clocks after its grant
    @(negedge clk) req = '1;
    while (order.size() < 10) begin
      @(posedge clk); #1;
      if (gnt != '0) begin
        int w;
        w = $clog2(gnt);
        order.push_back(w);
        repeat (2) @(posedge clk);
        @(negedge clk) req[w] = 1'b0;
        @(negedge clk) req[w] = 1'b1;
      end
    end
    // round robin after the last winner (2): 3,4,0,1,2,3,4,0,1,2
    for (int i = 0; i < 10; i++) check(order[i] == (3 + i) % N, $sformatf("round robin %0d got %0d", i, order[i]));
    @(negedge clk) req = '0;
    // random traffic for the per-cycle rules
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++)
        if ($urandom_range(3) == 0) req[i] = ~req[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
