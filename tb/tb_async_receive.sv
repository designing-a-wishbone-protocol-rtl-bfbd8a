// tb_async_receive: sends packets of 3 and 4 flits on the link and checks
// that the receiver raises rx_req only after the end flit, with header,
// control, third flit and last flit on its outputs; that it holds rx_req
// until rx_ack, lowers it, and accepts no new flit before the handshake
// has returned to zero.
module tb_async_receive;
  import noc_pkg::*;
  logic              clk = 1'b0, rst = 1'b1;
  link_fwd_t         link;
  logic              ack_in, rx_req, rx_ack = 1'b0;
  logic [FLIT_W-1:0] hf, cf, af, df;
  int                checks = 0, failures = 0;

  always #5 clk = ~clk;

  async_receive dut (
    .clk, .reset_i(rst), .data_in(link.data), .rh_in(link.rh), .ri_in(link.ri),
    .re_in(link.re), .ack_in, .rx_req, .rx_ack,
    .receive_header_flit(hf), .receive_control_flit(cf), .receive_addr_flit(af),
    .receive_data_flit(df));

  tb_link_src src (.clk, .link, .ack(ack_in));

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

  initial begin
    logic [FLIT_W-1:0] f [];
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int t = 0; t < 10; t++) begin
      int n;
      n = 3 + (t % 2);
      f = new[n];
      foreach (f[i]) f[i] = $urandom;
      for (int i = 0; i < n; i++) begin
        check(rx_req == 1'b0, "no request before the end flit");
        src.send(i == 0 ? FL_HEAD : (i == n-1 ? FL_TAIL : FL_BODY), f[i]);
      end
      repeat (2) @(negedge clk);
      check(rx_req == 1'b1, "request after the end flit");
      check(hf == f[0] && cf == f[1] && af == f[2] && df == f[n-1],
            $sformatf("stored flits %h %h %h %h", hf, cf, af, df));
      // a second packet must wait until the handshake is complete
      fork
        src.send(FL_HEAD, 32'hDEAD_0000 + 32'(t));
        begin
          repeat (6) @(negedge clk);
          check(hf == f[0], "next header not taken while rx_req is high");
          rx_ack = 1'b1;
          while (rx_req) @(negedge clk);
          rx_ack = 1'b0;
        end
      join
      src.send(FL_BODY, 32'h0);
      src.send(FL_TAIL, 32'h1);
      repeat (3) @(negedge clk);
      check(rx_req && hf == 32'hDEAD_0000 + 32'(t), "second packet after return to zero");
      rx_ack = 1'b1;
      while (rx_req) @(negedge clk);
      rx_ack = 1'b0;
      repeat (3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
