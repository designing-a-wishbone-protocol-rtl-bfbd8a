// tb_synchronizer: checks that the synchronizer output is its input
// delayed by exactly STAGES (2) clock edges, and that reset clears it.
module tb_synchronizer;
  logic clk = 1'b0, rst = 1'b1, d = 1'b0, q;
  int   checks = 0, failures = 0;
  logic hist [4];

  always #5 clk = ~clk;

  synchronizer dut (.clk_in(clk), .reset_i(rst), .d_in(d), .q_out(q));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = 1'b1;
    repeat (3) @(posedge clk);
    #1 check(q == 1'b0, "reset holds output low");
    @(negedge clk) rst = 1'b0;
    for (int i = 0; i < 4; i++) hist[i] = 1'b0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      d = 1'($urandom_range(1));
      @(posedge clk);
      // shift history: hist[0] is the value sampled at this edge
      for (int i = 3; i > 0; i--) hist[i] = hist[i-1];
      hist[0] = d;
      #1 if (t >= 2) check(q == hist[1], $sformatf("two-stage delay at t=%0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
