// tb_router_fifo: random pushes and pops against a queue model; checks
// order, contents, that the FIFO takes exactly DEPTH (4) flits when not
// read, and that a flit written can be read one clock later.
module tb_router_fifo;
  import noc_pkg::*;
  logic  clk = 1'b0, rst = 1'b1;
  logic  in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  flit_t in_flit = '0, out_flit;
  flit_t model [$];
  int    checks = 0, failures = 0;

  always #5 clk = ~clk;

  router_fifo dut (.*);

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

  // scoreboard at each rising edge (inputs change on falling edges)
  always @(posedge clk) if (!rst) begin
    if (out_valid && out_ready) begin
      check(model.size() > 0, "pop from non-empty");
      if (model.size() > 0) begin
        check(out_flit == model[0], $sformatf("order: got %h want %h", out_flit, model[0]));
        void'(model.pop_front());
      end
    end
    if (in_valid && in_ready) model.push_back(in_flit);
  end

  initial begin
    int n;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    // fill without reading: exactly 4 accepted
    n = 0;
    for (int i = 0; i < 8; i++) begin
      @(negedge clk);
      in_valid = 1'b1;
      in_flit  = '{kind: FL_BODY, data: 32'hA000_0000 + 32'(i)};
      #1 if (in_ready) n++;
    end
    @(negedge clk) in_valid = 1'b0;
    check(n == 4, $sformatf("depth 4, accepted %0d", n));
    check(!in_ready && out_valid, "full flags");
    // drain
    out_ready = 1'b1;
    repeat (6) @(negedge clk);
    check(!out_valid && model.size() == 0, "drained");
    // one write, readable next clock
    in_valid = 1'b1; in_flit = '{kind: FL_HEAD, data: 32'h1234_5678};
    @(negedge clk) in_valid = 1'b0;
    check(out_valid && out_flit.data == 32'h1234_5678, "one clock through");
    // random traffic
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      in_valid  = 1'($urandom_range(1));
      out_ready = 1'($urandom_range(1));
      in_flit   = '{kind: flit_kind_e'($urandom_range(2)), data: $urandom};
    end
    @(negedge clk) in_valid = 1'b0; out_ready = 1'b1;
    repeat (8) @(negedge clk);
    check(model.size() == 0, "all flits came out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
